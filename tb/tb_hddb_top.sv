// End-to-end testbench for hddb_top, reduced size: 2 table cores (ids 0, 1)
// and 2 dictionary cores (ids 2, 3), two cores per H-tree, planes of 1024 bit
// lines (two score windows), 160-byte scratchpads so batches overflow and
// result buffers flush.
//
// Table (600 rows per table core): a string column `category` (8 symbols, 16
// cells), a numeric column `qty` (4 levels x 8 cells, 4 bins per level) and a
// projected column `price` whose stored HV is the price's dictionary HV bound
// (XOR) with a key HV, with a few one-level cell shifts. Both dictionary cores
// hold the same 300-entry price dictionary; entry index = price.
// Everything is loaded from the host port with erase / program flits.
//
// Query A: SELECT SUM(price) WHERE category = 'sym3', decoded on core 2.
// Query B: SELECT price WHERE qty >= (2,1,3,0), rows returned by core 3.
// The host broadcasts query groups, key, configuration and start; expected
// results are computed here from the programmed levels with the same DBAM
// scoring, recall and Gray/XOR steps, and compared with what the host port
// receives (row results compared as a set, since two table cores interleave).
// Mechanisms counted, each must occur at least once: broadcast, multi-window
// scan, string predicate, numeric predicate, selection-batch overflow, table
// core network stall, dictionary scratchpad flush, H-tree contention, host
// back-pressure. Score-evaluation (drain) stalls are reported but not
// required: evaluating one bank takes 8 cycles while a pass takes at least
// one search plus 8 accumulate cycles, so the interlock never waits here.
module tb_hddb_top;
  import hddb_pkg::*;
  localparam int unsigned NETC = 2, NLUD = 2, NBL = 1024, NWL = 32, NBLK = 4, LAT = 4;
  localparam int unsigned ROWS = 600, ENTRIES = 300, NBINS = 4, PW = 2;
  localparam int unsigned STR_PAGE = 0, NUM_PAGE = 32, PROJ_PAGE = 64;

  logic clk = 0, rst_n = 0;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  flit_t host_in_flit, host_out_flit;
  logic [NETC+NLUD-1:0] core_busy;
  logic [NETC-1:0][15:0] etc_drain_stalls, etc_net_stalls, etc_sp_overflows, etc_selected;
  logic [NLUD-1:0][15:0] lud_decoded, lud_sp_flushes, lud_drain_stalls;
  logic [2:0][15:0] net_conflicts;
  int checks = 0, failures = 0;

  hddb_top #(.NUM_ETC(NETC), .NUM_LUD(NLUD), .CORES_PER_TREE(2), .NUM_BL(NBL), .NUM_WL(NWL),
             .NUM_BLOCKS(NBLK), .SENSE_LAT(LAT), .SP_BYTES(160), .QBUF_DEPTH(64),
             .KEY_WORDS(8), .MAX_SLOTS(8)) dut (.*);
  always #5 clk = ~clk;

  int cellv [NETC][NWL*NBLK][NBL];
  int dict [ENTRIES][16];
  int sym [8][16];
  int binhv [NBINS][8];
  int price [NETC][ROWS], cat [NETC][ROWS];
  logic [41:0] key [PW];
  flit_t got [$];
  int n_bcast = 0, host_stalls = 0;

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
    if (dst == BCAST_ID) n_bcast++;
  endtask

  task automatic prog(input int core, input int page, input int bl, input int level);
    if (core < NETC) cellv[core][page][bl] = level;
    if (level != 0) send(5'(core), FK_PROG, {1'b0, 15'(page), 16'(bl), 29'd0, 3'(level)});
  endtask

  always @(negedge clk) host_out_ready = ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n) begin
    if (host_out_valid && host_out_ready) got.push_back(host_out_flit);
    if (host_out_valid && !host_out_ready) host_stalls++;
  end

  function automatic int group_score(input int core, input int page, input int bl, input int q [8]);
    bit all_le, all_lt;
    all_le = 1; all_lt = 1;
    for (int i = 0; i < 8; i++) begin
      if (!(2*cellv[core][page+i][bl] <= 2*q[i] + 1)) all_le = 0;
      if (!(2*cellv[core][page+i][bl] <  2*q[i] - 1)) all_lt = 0;
    end
    return int'(all_le) + int'(!all_lt);
  endfunction

  // dictionary decode of the unbound projected HV of one row
  function automatic int decode_row(input int core, input int bl);
    int q [16];
    int best, bs;
    for (int c = 0; c < 16; c++) begin
      logic [2:0] b;
      b = gray_level_to_bits(3'(cellv[core][PROJ_PAGE + c][bl])) ^ key[c / 14][(c % 14)*3 +: 3];
      q[c] = int'(gray_bits_to_level(b));
    end
    best = 0; bs = -1;
    for (int e = 0; e < ENTRIES; e++) begin
      int s;
      s = 0;
      for (int g = 0; g < 2; g++) begin
        bit all_le, all_lt;
        all_le = 1; all_lt = 1;
        for (int i = 0; i < 8; i++) begin
          if (!(2*dict[e][g*8+i] <= 2*q[g*8+i] + 1)) all_le = 0;
          if (!(2*dict[e][g*8+i] <  2*q[g*8+i] - 1)) all_lt = 0;
        end
        s += int'(all_le) + int'(!all_lt);
      end
      if (s > bs) begin bs = s; best = e; end
    end
    return best;
  endfunction

  task automatic wait_idle();
    int t;
    t = 0;
    while (core_busy == '0 && t < 200) begin @(posedge clk); t++; end
    while (core_busy != '0 || host_out_valid) @(posedge clk);
    repeat (20) @(posedge clk);
  endtask

  task automatic lcfg(input int core, input agg_op_e op, input int n_etc);
    lcfg_t c;
    c = '0; c.dict_page = 0; c.dict_groups = 2; c.dict_entries = ENTRIES; c.agg_op = op; c.n_etc = 5'(n_etc);
    send(5'(core), FK_LCFG, 64'(c));
  endtask

  initial begin
    int q [8];
    host_in_valid = 0; host_in_flit = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ---------------------------------------------------------- load
    for (int c = 0; c < NETC + NLUD; c++)
      for (int b = 0; b < (c < NETC ? NBLK : 1); b++) send(5'(c), FK_ERASE, 64'(b));
    for (int c = 0; c < NETC; c++) for (int p = 0; p < NWL*NBLK; p++) for (int l = 0; l < NBL; l++) cellv[c][p][l] = 0;
    for (int s = 0; s < 8; s++) for (int i = 0; i < 16; i++) sym[s][i] = $urandom_range(0, 7);
    for (int b = 0; b < NBINS; b++) for (int i = 0; i < 8; i++) binhv[b][i] = $urandom_range(0, 7);
    for (int e = 0; e < ENTRIES; e++) for (int i = 0; i < 16; i++) dict[e][i] = $urandom_range(0, 7);
    for (int w = 0; w < PW; w++) key[w] = {$urandom(), $urandom()};
    for (int d = NETC; d < NETC + NLUD; d++)
      for (int e = 0; e < ENTRIES; e++) for (int i = 0; i < 16; i++) prog(d, i, e, dict[e][i]);
    for (int c = 0; c < NETC; c++)
      for (int l = 0; l < ROWS; l++) begin
        cat[c][l] = $urandom_range(0, 7);
        price[c][l] = $urandom_range(0, ENTRIES - 1);
        for (int i = 0; i < 16; i++) begin
          int v;
          v = sym[cat[c][l]][i];
          if ($urandom_range(0, 40) == 0) v = (v == 7) ? 6 : v + 1;
          prog(c, STR_PAGE + i, l, v);
        end
        for (int lv = 0; lv < 4; lv++) begin
          int bn;
          bn = $urandom_range(0, NBINS - 1);
          for (int i = 0; i < 8; i++) begin
            int v;
            v = binhv[bn][i];
            if ($urandom_range(0, 10) == 0) v = (v == 0) ? 1 : v - 1;
            prog(c, NUM_PAGE + lv*8 + i, l, v);
          end
        end
        for (int i = 0; i < PW*14; i++) begin
          logic [2:0] b;
          int v;
          b = (i < 16) ? gray_level_to_bits(3'(dict[price[c][l]][i])) : 3'($urandom_range(0, 7));
          b ^= key[i / 14][(i % 14)*3 +: 3];
          v = int'(gray_bits_to_level(b));
          if ($urandom_range(0, 50) == 0) v = (v == 7) ? 6 : v + 1;
          prog(c, PROJ_PAGE + i, l, v);
        end
      end
    for (int w = 0; w < PW; w++) send(BCAST_ID, FK_KEY, {16'(w), 6'd0, key[w]});
    $display("table loaded at %0t", $time);

    // ---------------------------------------------------------- query A
    begin
      cfg0_t c0; cfg1_t c1;
      longint exp_sum; int exp_n;
      exp_sum = 0; exp_n = 0;
      for (int g = 0; g < 2; g++) begin
        logic [23:0] qg;
        for (int i = 0; i < 8; i++) qg[i*3 +: 3] = 3'(sym[3][g*8 + i]);
        send(BCAST_ID, FK_QGROUP, {16'd0, 24'(g), qg});
      end
      c0 = '0; c0.col_page = STR_PAGE; c0.groups = 2; c0.threshold = 4;
      c1 = '0; c1.proj_page = PROJ_PAGE; c1.proj_words = PW; c1.lud_dst = 5'd2; c1.decode = 1;
      send(BCAST_ID, FK_CFG0, 64'(c0));
      send(BCAST_ID, FK_CFG1, 64'(c1));
      lcfg(2, AGG_SUM, NETC);
      lcfg(3, AGG_NONE, 0);
      for (int c = 0; c < NETC; c++)
        for (int l = 0; l < ROWS; l++) begin
          int s;
          s = 0;
          for (int g = 0; g < 2; g++) begin
            for (int i = 0; i < 8; i++) q[i] = sym[3][g*8 + i];
            s += group_score(c, STR_PAGE + g*8, l, q);
          end
          if (s >= 4) begin exp_n++; exp_sum += decode_row(c, l); end
        end
      got.delete();
      send(BCAST_ID, FK_START, 64'(ROWS));
      wait_idle();
      $display("query A: %0d rows, sum %0d, %0d flits at %0t", exp_n, exp_sum, got.size(), $time);
      chk(got.size() == 2, "query A flit count");
      if (got.size() == 2) begin
        chk(got[0].kind == FK_RES_AGG && got[0].src == 5'd2 && longint'(got[0].data[39:0]) == exp_sum,
            $sformatf("query A sum got %0d exp %0d", got[0].data[39:0], exp_sum));
        chk(got[1].kind == FK_RES_DONE && int'(got[1].data[31:0]) == exp_n &&
            int'(got[1].data[63:48]) == exp_n && int'(got[1].data[47:32]) == exp_n, "query A done counts");
      end
      chk(exp_n > 50, "query A selects rows");
    end

    // ---------------------------------------------------------- query B
    begin
      cfg0_t c0; cfg1_t c1;
      int exp_rows [string];
      int nres;
      for (int b = 0; b < NBINS; b++) begin
        logic [23:0] qg;
        for (int i = 0; i < 8; i++) qg[i*3 +: 3] = 3'(binhv[b][i]);
        send(BCAST_ID, FK_QGROUP, {16'd0, 24'(b), qg});
      end
      c0 = '0; c0.is_numeric = 1; c0.cmp_op = CMP_GE; c0.col_page = NUM_PAGE; c0.groups = 1; c0.num_bins = NBINS;
      c1 = '0; c1.qidx[0] = 2; c1.qidx[1] = 1; c1.qidx[2] = 3; c1.qidx[3] = 0;
      c1.proj_page = PROJ_PAGE; c1.proj_words = PW; c1.lud_dst = 5'd3; c1.decode = 1;
      send(BCAST_ID, FK_CFG0, 64'(c0));
      send(BCAST_ID, FK_CFG1, 64'(c1));
      lcfg(2, AGG_NONE, 0);
      lcfg(3, AGG_NONE, NETC);
      for (int c = 0; c < NETC; c++)
        for (int l = 0; l < ROWS; l++) begin
          int rec [4];
          longint a;
          for (int lv = 0; lv < 4; lv++) begin
            int best, bs;
            best = 0; bs = -1;
            for (int bn = 0; bn < NBINS; bn++) begin
              int s;
              for (int i = 0; i < 8; i++) q[i] = binhv[bn][i];
              s = group_score(c, NUM_PAGE + lv*8, l, q);
              if (s > bs) begin bs = s; best = bn; end
            end
            rec[lv] = best;
          end
          a = ((rec[0]*128 + rec[1])*128 + rec[2])*128 + rec[3];
          if (a >= ((2*128 + 1)*128 + 3)*128) exp_rows[$sformatf("%0d/%0d", c, l)] = decode_row(c, l);
        end
      got.delete();
      send(BCAST_ID, FK_START, 64'(ROWS));
      wait_idle();
      $display("query B: %0d rows expected, %0d flits at %0t", exp_rows.num(), got.size(), $time);
      nres = 0;
      foreach (got[i]) if (got[i].kind == FK_RES_ROW) begin
        string k;
        k = $sformatf("%0d/%0d", got[i].data[63:59], got[i].data[58:43]);
        nres++;
        chk(got[i].src == 5'd3 && exp_rows.exists(k) && exp_rows[k] == int'(got[i].data[15:0]),
            $sformatf("query B row %s key %0d", k, got[i].data[15:0]));
        if (exp_rows.exists(k)) exp_rows.delete(k);
      end
      chk(exp_rows.num() == 0, $sformatf("query B: %0d rows missing", exp_rows.num()));
      chk(got.size() == nres + 1 && got[got.size()-1].kind == FK_RES_DONE, "query B ends with RES_DONE");
      chk(nres > 50, "query B selects rows");
    end

    // ---------------------------------------------------------- mechanisms
    begin
      int ovf, nst, fl, cf, ds;
      ovf = 0; nst = 0; fl = 0; cf = 0; ds = 0;
      for (int c = 0; c < NETC; c++) begin
        ovf += etc_sp_overflows[c]; nst += etc_net_stalls[c]; ds += etc_drain_stalls[c];
      end
      for (int d = 0; d < NLUD; d++) begin fl += lud_sp_flushes[d]; ds += lud_drain_stalls[d]; end
      for (int t = 0; t < 3; t++) cf += net_conflicts[t];
      $display("mechanisms: broadcast %0d, batch overflow %0d, ETC net stall %0d, LUD flush %0d, H-tree conflict %0d, host back-pressure %0d, drain stall %0d",
               n_bcast, ovf, nst, fl, cf, host_stalls, ds);
      chk(n_bcast > 0, "mechanism: broadcast");
      chk(ROWS > 512, "mechanism: multi-window scan");
      chk(ovf > 0, "mechanism: selection batch overflow");
      chk(nst > 0, "mechanism: table core network stall");
      chk(fl > 0, "mechanism: dictionary scratchpad flush");
      chk(cf > 0, "mechanism: H-tree contention");
      chk(host_stalls > 0, "mechanism: host back-pressure");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
