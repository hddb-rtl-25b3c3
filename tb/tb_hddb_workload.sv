// Workload testbench for hddb_top: the two query families of the evaluation,
// pure filter queries and filter + aggregation queries, run on a table whose
// stored cells are corrupted at a 10% rate, and checked against the exact SQL
// answer computed from the true column values (not against a model of the
// search), so the test shows that the search, recall and decode give the right
// result despite the noise.
//
// Reduced size: 2 table cores and 2 dictionary cores (two per H-tree), planes
// of 1024 bit lines (two score windows) and 13 blocks of 64 word lines, 600
// rows per table core.
// The table has three columns, each HV long enough for the noise
// level: `cat` (string, 8 values, 16 groups), `qty` (numeric 0..9999, 4 levels
// of 10 bins, 16 groups per level) and `price` (0..99, projected: its
// dictionary HV of 16 groups bound with a key HV, 10 words of 14 cells).
// Noise: every table cell independently, with probability 1/10, is programmed
// one level up or down from its true level. Dictionaries are stored clean.
//
// Queries (all results decoded by a dictionary core and compared exactly):
//   SELECT price WHERE cat = s;  SELECT COUNT/SUM/AVG/MIN/MAX(price) WHERE cat = s
//   SELECT price WHERE qty op v  for op in =, <>, <, <=, >, >=
//   SELECT SUM/AVG(price) WHERE qty >= v
// The string threshold is 20 of 32 (exact match without noise scores 32, a
// different value about 16).
module tb_hddb_workload;
  import hddb_pkg::*;
  localparam int unsigned NETC = 2, NLUD = 2, NBL = 1024, NWL = 64, NBLK = 13, LAT = 4;
  localparam int unsigned ROWS = 600, ENTRIES = 100, NBINS = 10, NSYM = 8;
  localparam int unsigned SG = 16, NG = 16, DG = 16, PW = 10;
  localparam int unsigned STR_PAGE = 0, NUM_PAGE = 128, PROJ_PAGE = 640;

  logic clk = 0, rst_n = 0;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  flit_t host_in_flit, host_out_flit;
  logic [NETC+NLUD-1:0] core_busy;
  logic [NETC-1:0][15:0] etc_drain_stalls, etc_net_stalls, etc_sp_overflows, etc_selected;
  logic [NLUD-1:0][15:0] lud_decoded, lud_sp_flushes, lud_drain_stalls;
  logic [2:0][15:0] net_conflicts;
  int checks = 0, failures = 0, noisy_cells = 0, all_cells = 0;

  hddb_top #(.NUM_ETC(NETC), .NUM_LUD(NLUD), .CORES_PER_TREE(2), .NUM_BL(NBL), .NUM_WL(NWL),
             .NUM_BLOCKS(NBLK), .SENSE_LAT(LAT), .QBUF_DEPTH(256), .KEY_WORDS(16)) dut (.*);
  always #5 clk = ~clk;

  int dict [ENTRIES][DG*8];
  int sym [NSYM][SG*8];
  int binhv [NBINS][NG*8];
  int price [NETC][ROWS], cat [NETC][ROWS], qty [NETC][ROWS];
  logic [41:0] key [PW];
  flit_t got [$];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  task automatic send(input logic [4:0] dst, input flit_kind_e k, input logic [63:0] d);
    @(negedge clk);
    host_in_valid = 1; host_in_flit = '{dst: dst, src: HOST_ID, kind: k, last: 1'b1, data: d};
    @(posedge clk);
    while (!host_in_ready) @(posedge clk);
    #1 host_in_valid = 0;
  endtask

  task automatic prog(input int core, input int page, input int bl, input int level);
    if (level != 0) send(5'(core), FK_PROG, {1'b0, 15'(page), 16'(bl), 29'd0, 3'(level)});
  endtask

  // a table cell: the true level, moved one level up or down one time in ten
  task automatic prog_noisy(input int core, input int page, input int bl, input int level);
    int v;
    v = level;
    all_cells++;
    if ($urandom_range(0, 9) == 0) begin
      noisy_cells++;
      if (v == 0) v = 1;
      else if (v == 7) v = 6;
      else v = ($urandom_range(0, 1) == 1) ? v + 1 : v - 1;
    end
    prog(core, page, bl, v);
  endtask

  assign host_out_ready = 1'b1;
  always @(posedge clk) if (rst_n && host_out_valid) got.push_back(host_out_flit);

  task automatic wait_idle();
    int t;
    t = 0;
    while (core_busy == '0 && t < 200) begin @(posedge clk); t++; end
    while (core_busy != '0 || host_out_valid) @(posedge clk);
    repeat (20) @(posedge clk);
  endtask

  task automatic lcfg(input int core, input agg_op_e op, input int n_etc);
    lcfg_t c;
    c = '0; c.dict_page = 0; c.dict_groups = DG; c.dict_entries = ENTRIES; c.agg_op = op; c.n_etc = 5'(n_etc);
    send(5'(core), FK_LCFG, 64'(c));
  endtask

  function automatic bit qty_match(input int x, input cmp_op_e op, input int v);
    case (op)
      CMP_EQ: return x == v;
      CMP_NE: return x != v;
      CMP_LT: return x <  v;
      CMP_LE: return x <= v;
      CMP_GT: return x >  v;
      default: return x >= v;
    endcase
  endfunction

  // one query: predicate on cat (is_num = 0, value s) or on qty (op, value v);
  // aggregate op (AGG_NONE returns rows); decoded on dictionary core `lud`
  task automatic run_query(input bit is_num, input int s, input cmp_op_e op, input int v,
                           input agg_op_e agg, input int lud, input string name);
    cfg0_t c0; cfg1_t c1;
    int exp_rows [string];
    longint esum, emin, emax, exp_val;
    int ecnt, nres;
    esum = 0; ecnt = 0; emin = 1 << 30; emax = -1;
    for (int c = 0; c < NETC; c++)
      for (int l = 0; l < ROWS; l++)
        if (is_num ? qty_match(qty[c][l], op, v) : (cat[c][l] == s)) begin
          exp_rows[$sformatf("%0d/%0d", c, l)] = price[c][l];
          esum += price[c][l]; ecnt++;
          if (price[c][l] < emin) emin = price[c][l];
          if (price[c][l] > emax) emax = price[c][l];
        end
    case (agg)
      AGG_COUNT: exp_val = ecnt;
      AGG_SUM:   exp_val = esum;
      AGG_AVG:   exp_val = (ecnt == 0) ? 0 : esum / ecnt;
      AGG_MIN:   exp_val = emin;
      default:   exp_val = emax;
    endcase
    c0 = '0; c0.col_page = is_num ? NUM_PAGE : STR_PAGE;
    c1 = '0; c1.proj_page = PROJ_PAGE; c1.proj_words = PW; c1.lud_dst = 5'(lud); c1.decode = 1;
    if (is_num) begin
      for (int b = 0; b < NBINS; b++)
        for (int g = 0; g < NG; g++) begin
          logic [23:0] qg;
          for (int i = 0; i < 8; i++) qg[i*3 +: 3] = 3'(binhv[b][g*8 + i]);
          send(BCAST_ID, FK_QGROUP, {16'd0, 24'(b*NG + g), qg});
        end
      c0.is_numeric = 1; c0.cmp_op = op; c0.groups = NG; c0.num_bins = NBINS;
      c1.qidx[0] = 7'(v / 1000); c1.qidx[1] = 7'((v / 100) % 10);
      c1.qidx[2] = 7'((v / 10) % 10); c1.qidx[3] = 7'(v % 10);
    end else begin
      for (int g = 0; g < SG; g++) begin
        logic [23:0] qg;
        for (int i = 0; i < 8; i++) qg[i*3 +: 3] = 3'(sym[s][g*8 + i]);
        send(BCAST_ID, FK_QGROUP, {16'd0, 24'(g), qg});
      end
      c0.groups = SG; c0.threshold = 20;
    end
    send(BCAST_ID, FK_CFG0, 64'(c0));
    send(BCAST_ID, FK_CFG1, 64'(c1));
    for (int d = NETC; d < NETC + NLUD; d++) lcfg(d, agg, d == lud ? NETC : 0);
    got.delete();
    send(BCAST_ID, FK_START, 64'(ROWS));
    wait_idle();
    $display("%s: %0d rows selected, %0d result flits, at %0t", name, ecnt, got.size(), $time);
    chk(got.size() > 0 && got[got.size()-1].kind == FK_RES_DONE &&
        int'(got[got.size()-1].data[31:0]) == ecnt, {name, ": selected-row count"});
    if (agg == AGG_NONE) begin
      nres = 0;
      foreach (got[i]) if (got[i].kind == FK_RES_ROW) begin
        string k;
        k = $sformatf("%0d/%0d", got[i].data[63:59], got[i].data[58:43]);
        nres++;
        chk(exp_rows.exists(k) && exp_rows[k] == int'(got[i].data[15:0]),
            $sformatf("%s: row %s price %0d", name, k, got[i].data[15:0]));
        if (exp_rows.exists(k)) exp_rows.delete(k);
      end
      chk(exp_rows.num() == 0, $sformatf("%s: %0d rows missing", name, exp_rows.num()));
      chk(got.size() == nres + 1, {name, ": flit count"});
    end else begin
      chk(got.size() == 2 && got[0].kind == FK_RES_AGG && longint'(got[0].data[39:0]) == exp_val,
          $sformatf("%s: got %0d expected %0d", name, got.size() > 0 ? got[0].data[39:0] : 0, exp_val));
    end
  endtask

  initial begin
    int s, v;
    host_in_valid = 0; host_in_flit = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ---------------------------------------------------------- load
    for (int c = 0; c < NETC + NLUD; c++)
      for (int b = 0; b < (c < NETC ? NBLK : 2); b++) send(5'(c), FK_ERASE, 64'(b));
    for (int x = 0; x < NSYM; x++) for (int i = 0; i < SG*8; i++) sym[x][i] = $urandom_range(0, 7);
    for (int b = 0; b < NBINS; b++) for (int i = 0; i < NG*8; i++) binhv[b][i] = $urandom_range(0, 7);
    for (int e = 0; e < ENTRIES; e++) for (int i = 0; i < DG*8; i++) dict[e][i] = $urandom_range(0, 7);
    for (int w = 0; w < PW; w++) key[w] = {$urandom(), $urandom()};
    for (int d = NETC; d < NETC + NLUD; d++)
      for (int e = 0; e < ENTRIES; e++) for (int i = 0; i < DG*8; i++) prog(d, i, e, dict[e][i]);
    for (int c = 0; c < NETC; c++)
      for (int l = 0; l < ROWS; l++) begin
        int dg [4];
        cat[c][l] = $urandom_range(0, NSYM - 1);
        qty[c][l] = $urandom_range(0, 9999);
        price[c][l] = $urandom_range(0, ENTRIES - 1);
        dg[0] = qty[c][l] / 1000; dg[1] = (qty[c][l] / 100) % 10;
        dg[2] = (qty[c][l] / 10) % 10; dg[3] = qty[c][l] % 10;
        for (int i = 0; i < SG*8; i++) prog_noisy(c, STR_PAGE + i, l, sym[cat[c][l]][i]);
        for (int lv = 0; lv < 4; lv++)
          for (int i = 0; i < NG*8; i++) prog_noisy(c, NUM_PAGE + lv*NG*8 + i, l, binhv[dg[lv]][i]);
        for (int i = 0; i < PW*14; i++) begin
          logic [2:0] b;
          b = (i < DG*8) ? gray_level_to_bits(3'(dict[price[c][l]][i])) : 3'($urandom_range(0, 7));
          b ^= key[i / 14][(i % 14)*3 +: 3];
          prog_noisy(c, PROJ_PAGE + i, l, int'(gray_bits_to_level(b)));
        end
      end
    for (int w = 0; w < PW; w++) send(BCAST_ID, FK_KEY, {16'(w), 6'd0, key[w]});
    $display("table loaded at %0t: %0d of %0d cells corrupted", $time, noisy_cells, all_cells);
    chk(noisy_cells * 100 > all_cells * 8 && noisy_cells * 100 < all_cells * 12, "noise rate near 10%");

    // ---------------------------------------------------------- filter + aggregation on strings
    s = $urandom_range(0, NSYM - 1);
    run_query(0, s, CMP_EQ, 0, AGG_NONE,  2, "string filter");
    run_query(0, s, CMP_EQ, 0, AGG_COUNT, 3, "string COUNT");
    run_query(0, s, CMP_EQ, 0, AGG_SUM,   2, "string SUM");
    s = (s + 1) % NSYM;
    run_query(0, s, CMP_EQ, 0, AGG_AVG,   3, "string AVG");
    run_query(0, s, CMP_EQ, 0, AGG_MIN,   2, "string MIN");
    run_query(0, s, CMP_EQ, 0, AGG_MAX,   3, "string MAX");
    // ---------------------------------------------------------- numeric predicates
    v = qty[1][$urandom_range(0, ROWS - 1)];
    run_query(1, 0, CMP_EQ, v, AGG_NONE, 2, "numeric =");
    v = $urandom_range(500, 9500);
    run_query(1, 0, CMP_LT, v / 8, AGG_NONE, 3, "numeric <");
    run_query(1, 0, CMP_LE, v / 8, AGG_NONE, 2, "numeric <=");
    run_query(1, 0, CMP_GT, 9999 - v / 8, AGG_NONE, 3, "numeric >");
    run_query(1, 0, CMP_GE, 9999 - v / 8, AGG_NONE, 2, "numeric >=");
    run_query(1, 0, CMP_NE, qty[0][0], AGG_COUNT, 3, "numeric <> COUNT");
    run_query(1, 0, CMP_GE, v, AGG_SUM, 2, "numeric >= SUM");
    run_query(1, 0, CMP_GE, v, AGG_AVG, 3, "numeric >= AVG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
