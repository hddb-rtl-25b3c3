// Testbench for etc_nsp with a small fenand_plane (1024 bit lines = two score
// windows, 4 blocks of 32 word lines, short sensing latency).
//
// Loading: erase and program flits write a string column (2 DBAM groups, 8
// symbols, some rows shifted by one level), a numeric column (4 levels x 1
// group, 4 bins per level, bin HVs with random one-level noise), and a
// projected column (2 words = 28 cells) with random levels.
// Query 1, string: rows whose DBAM score reaches the threshold are selected;
// the expected set is computed here from the programmed levels with Eq. 2/3.
// Query 2, numeric: per level the best-scoring bin (ties to the lower bin) is
// recalled, the 4 indices are compared lexicographically with the query.
// For both, every HV_ROW/HV_WORD flit is checked: row ids in order, packet
// tail marks (only the last word of an HV has `last` set), and each
// word = Gray bits of the projected cells XOR the key word. MAX_SLOTS = 8
// forces batch overflows; random output back-pressure exercises net stalls.
module tb_etc_nsp;
  import hddb_pkg::*;
  localparam int unsigned NBL = 1024, NWL = 32, NBLK = 4, LAT = 4, SLOTS = 8;
  localparam int unsigned ROWS_S = 1000, ROWS_N = 700;
  localparam int unsigned STR_PAGE = 0, NUM_PAGE = 32, PROJ_PAGE = 64, PROJ_WORDS = 2;
  localparam int unsigned NBINS = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  flit_t in_flit, out_flit;
  logic pl_cmd_valid, pl_cmd_ready, pl_done, busy;
  logic [1:0] pl_cmd_op;
  logic [PAGE_W-1:0] pl_cmd_page;
  logic [ROW_W-1:0] pl_cmd_bl, pl_pb_bl;
  logic [CELL_BITS-1:0] pl_cmd_level, pl_pb_level;
  logic [GROUP_BITS-1:0] pl_cmd_query;
  logic [3:0] pl_pb_word;
  logic [IO_W-1:0] pl_pb_ubc, pl_pb_lbc;
  logic [15:0] stat_drain_stalls, stat_net_stalls, stat_sp_overflows, stat_selected;
  int checks = 0, failures = 0;

  etc_nsp #(.NUM_BL(NBL), .MAX_SLOTS(SLOTS), .QBUF_DEPTH(64), .KEY_WORDS(8), .MY_ID(5'd2)) dut (.*);
  fenand_plane #(.NUM_BL(NBL), .NUM_WL(NWL), .NUM_BLOCKS(NBLK), .SENSE_LAT(LAT)) u_plane (
    .clk, .rst_n, .cmd_valid(pl_cmd_valid), .cmd_ready(pl_cmd_ready), .cmd_op(pl_cmd_op),
    .cmd_page(pl_cmd_page), .cmd_bl(pl_cmd_bl), .cmd_level(pl_cmd_level),
    .cmd_query(pl_cmd_query), .done(pl_done), .pb_word(pl_pb_word), .pb_ubc(pl_pb_ubc),
    .pb_lbc(pl_pb_lbc), .pb_bl(pl_pb_bl), .pb_level(pl_pb_level));
  always #5 clk = ~clk;

  int cellv [NWL*NBLK][NBL];          // programmed level per page and bit line
  int sym [8][16];                    // string symbol HVs (levels)
  int binhv [NBINS][8];               // numeric bin HVs (levels), shared by all levels
  logic [41:0] key [PROJ_WORDS];
  flit_t got [$];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  task automatic send(input flit_kind_e k, input logic [63:0] d);
    @(negedge clk);
    in_valid = 1; in_flit = '{dst: 5'd2, src: HOST_ID, kind: k, last: 1'b1, data: d};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic prog(input int page, input int bl, input int level);
    cellv[page][bl] = level;
    send(FK_PROG, {1'b0, 15'(page), 16'(bl), 29'd0, 3'(level)});
  endtask

  // output sink with random back-pressure
  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_flit);

  // DBAM score of one group of 8 pages at bit line bl against query levels
  function automatic int group_score(input int page, input int bl, input int q [8]);
    bit all_le, all_lt;
    all_le = 1; all_lt = 1;
    for (int i = 0; i < 8; i++) begin
      if (!(2*cellv[page+i][bl] <= 2*q[i] + 1)) all_le = 0;
      if (!(2*cellv[page+i][bl] <  2*q[i] - 1)) all_lt = 0;
    end
    return int'(all_le) + int'(!all_lt);
  endfunction

  function automatic logic [41:0] proj_word(input int bl, input int w);
    logic [41:0] v;
    for (int c = 0; c < 14; c++) v[c*3 +: 3] = gray_level_to_bits(3'(cellv[PROJ_PAGE + w*14 + c][bl]));
    return v ^ key[w];
  endfunction

  // compare received flits with the expected selected rows
  task automatic check_stream(input int sel [$], input string name);
    int idx;
    idx = 0;
    for (int s = 0; s < sel.size(); s++) begin
      chk(idx < got.size() && got[idx].kind == FK_HV_ROW && !got[idx].last && int'(got[idx].data) == sel[s],
          $sformatf("%s: HV_ROW %0d", name, sel[s]));
      idx++;
      for (int w = 0; w < PROJ_WORDS; w++) begin
        chk(idx < got.size() && got[idx].kind == FK_HV_WORD && got[idx].dst == 5'd20 &&
            int'(got[idx].data[63:52]) == w && got[idx].data[41:0] == proj_word(sel[s], w) &&
            got[idx].last == (w == PROJ_WORDS - 1),
            $sformatf("%s: HV_WORD row %0d w %0d", name, sel[s], w));
        idx++;
      end
    end
    chk(idx < got.size() && got[idx].kind == FK_ETC_DONE && int'(got[idx].data) == sel.size(),
        $sformatf("%s: ETC_DONE count (expected %0d)", name, sel.size()));
    chk(got.size() == idx + 1, $sformatf("%s: flit count", name));
  endtask

  initial begin
    int sel [$];
    int rsym [NBL];
    int ridx [NBL][4];
    int q [8];
    in_valid = 0; in_flit = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NBLK; b++) send(FK_ERASE, 64'(b));
    for (int p = 0; p < NWL*NBLK; p++) for (int l = 0; l < NBL; l++) cellv[p][l] = 0;
    // ---------------- table contents
    for (int s = 0; s < 8; s++) for (int c = 0; c < 16; c++) sym[s][c] = $urandom_range(0, 7);
    for (int b = 0; b < NBINS; b++) for (int c = 0; c < 8; c++) binhv[b][c] = $urandom_range(0, 7);
    for (int l = 0; l < ROWS_S; l++) begin
      rsym[l] = $urandom_range(0, 7);
      for (int c = 0; c < 16; c++) begin
        int v;
        v = sym[rsym[l]][c];
        if ($urandom_range(0, 40) == 0) v = (v == 7) ? 6 : v + 1;   // one-level shift
        if (v != 0) prog(STR_PAGE + c, l, v);
      end
      for (int c = 0; c < PROJ_WORDS*14; c++) begin
        int v;
        v = $urandom_range(0, 7);
        if (v != 0) prog(PROJ_PAGE + c, l, v);
      end
    end
    for (int l = 0; l < ROWS_N; l++)
      for (int lv = 0; lv < 4; lv++) begin
        ridx[l][lv] = $urandom_range(0, NBINS-1);
        for (int c = 0; c < 8; c++) begin
          int v;
          v = binhv[ridx[l][lv]][c];
          if ($urandom_range(0, 10) == 0) v = (v == 0) ? 1 : v - 1;
          if (v != 0) prog(NUM_PAGE + lv*8 + c, l, v);
        end
      end
    for (int w = 0; w < PROJ_WORDS; w++) begin
      key[w] = {$urandom(), $urandom()};
      send(FK_KEY, {16'(w), 6'd0, key[w]});
    end
    // ---------------- query 1: string equality on symbol 3
    for (int g = 0; g < 2; g++) begin
      logic [23:0] qg;
      for (int i = 0; i < 8; i++) qg[i*3 +: 3] = 3'(sym[3][g*8 + i]);
      send(FK_QGROUP, {16'd0, 24'(g), qg});
    end
    begin
      cfg0_t c0; cfg1_t c1;
      c0 = '0; c0.is_numeric = 0; c0.col_page = STR_PAGE; c0.groups = 2; c0.threshold = 4;
      c1 = '0; c1.proj_page = PROJ_PAGE; c1.proj_words = PROJ_WORDS; c1.lud_dst = 5'd20; c1.decode = 1;
      send(FK_CFG0, 64'(c0));
      send(FK_CFG1, 64'(c1));
    end
    for (int l = 0; l < ROWS_S; l++) begin
      int s;
      s = 0;
      for (int g = 0; g < 2; g++) begin
        for (int i = 0; i < 8; i++) q[i] = sym[3][g*8 + i];
        s += group_score(STR_PAGE + g*8, l, q);
      end
      if (s >= 4) sel.push_back(l);
    end
    got.delete();
    send(FK_START, 64'(ROWS_S));
    @(posedge clk);
    while (busy || out_valid) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("string query: %0d rows selected, %0d flits", sel.size(), got.size());
    check_stream(sel, "string");
    chk(sel.size() > 50 && sel.size() < 300, "plausible selection size");
    // ---------------- query 2: numeric, value >= (2,1,x,x) style bound
    for (int b = 0; b < NBINS; b++) begin
      logic [23:0] qg;
      for (int i = 0; i < 8; i++) qg[i*3 +: 3] = 3'(binhv[b][i]);
      send(FK_QGROUP, {16'd0, 24'(b), qg});
    end
    begin
      cfg0_t c0; cfg1_t c1;
      c0 = '0; c0.is_numeric = 1; c0.cmp_op = CMP_GE; c0.col_page = NUM_PAGE; c0.groups = 1;
      c0.num_bins = NBINS;
      c1 = '0; c1.qidx[0] = 2; c1.qidx[1] = 1; c1.qidx[2] = 3; c1.qidx[3] = 0;
      c1.proj_page = PROJ_PAGE; c1.proj_words = PROJ_WORDS; c1.lud_dst = 5'd20; c1.decode = 1;
      send(FK_CFG0, 64'(c0));
      send(FK_CFG1, 64'(c1));
    end
    sel.delete();
    for (int l = 0; l < ROWS_N; l++) begin
      int rec [4];
      longint a, b;
      for (int lv = 0; lv < 4; lv++) begin
        int best, bs;
        best = 0; bs = -1;
        for (int bn = 0; bn < NBINS; bn++) begin
          int s;
          for (int i = 0; i < 8; i++) q[i] = binhv[bn][i];
          s = group_score(NUM_PAGE + lv*8, l, q);
          if (s > bs) begin bs = s; best = bn; end
        end
        rec[lv] = best;
      end
      a = ((rec[0]*128 + rec[1])*128 + rec[2])*128 + rec[3];
      b = ((2*128 + 1)*128 + 3)*128 + 0;
      if (a >= b) sel.push_back(l);
    end
    got.delete();
    send(FK_START, 64'(ROWS_N));
    @(posedge clk);
    while (busy || out_valid) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("numeric query: %0d rows selected, %0d flits", sel.size(), got.size());
    check_stream(sel, "numeric");
    chk(sel.size() > 50, "plausible numeric selection size");
    $display("overflow batches %0d, net stall cycles %0d, drain stalls %0d",
             stat_sp_overflows, stat_net_stalls, stat_drain_stalls);
    chk(stat_sp_overflows > 0, "batch overflow exercised");
    chk(stat_net_stalls > 0, "network stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
