// Full-size testbench: hddb_top with its default parameters (12 table cores
// and 4 dictionary cores in four H-trees, planes of 16384 bit lines x 128
// word lines x 128 blocks, 50 000-cycle sensing = 50 us at 1 GHz).
//
// The table is tiny so that loading stays short: every core erases the blocks
// it uses; four rows are programmed, two in table core 0 and two in table core
// 7, with an 8-cell string column (one DBAM group) and a 5-word (70-cell)
// projected column bound with a key HV; dictionary core 12 holds a 16-entry
// price dictionary of random 64-cell (8-group) HVs (entry index = price). Erased rows hold level 0 and score
// 1 against the query (UBC passes, LBC fails since every query level is
// above 0), so only the programmed rows reach the threshold of 2.
// Query: SELECT SUM(price) WHERE category = 'x' over all 16384 rows of every
// table core (32 score windows of 512 rows each, one DBAM search per window).
// Checks: the aggregate, the decoded and selected counts returned by the
// dictionary core, and the per-core selected-row counters.
module tb_hddb_top_full;
  import hddb_pkg::*;
  localparam int unsigned NETC = 12, NLUD = 4, ROWS = 16384, ENTRIES = 16;
  localparam int unsigned DG = 8, HVC = DG * 8, PW = 5;     // groups, cells, 42-bit words per HV
  localparam int unsigned STR_PAGE = 0, PROJ_PAGE = 128;    // blocks 0 and 1

  logic clk = 0, rst_n = 0;
  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready;
  flit_t host_in_flit, host_out_flit;
  logic [NETC+NLUD-1:0] core_busy;
  logic [NETC-1:0][15:0] etc_drain_stalls, etc_net_stalls, etc_sp_overflows, etc_selected;
  logic [NLUD-1:0][15:0] lud_decoded, lud_sp_flushes, lud_drain_stalls;
  logic [4:0][15:0] net_conflicts;
  int checks = 0, failures = 0;

  hddb_top dut (.*);
  always #5 clk = ~clk;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  int dict [ENTRIES][HVC];
  int qlev [8];
  logic [41:0] key [PW];
  flit_t got [$];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
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

  always @(posedge clk) if (rst_n && host_out_valid && host_out_ready) got.push_back(host_out_flit);

  // one table row: category cells = query levels, price HV bound with the key
  task automatic put_row(input int core, input int bl, input int price);
    for (int i = 0; i < 8; i++) prog(core, STR_PAGE + i, bl, qlev[i]);
    for (int i = 0; i < PW*14; i++) begin
      logic [2:0] b;
      b = (i < HVC) ? gray_level_to_bits(3'(dict[price][i])) : 3'(i);
      prog(core, PROJ_PAGE + i, bl, int'(gray_bits_to_level(b ^ key[i / 14][(i % 14)*3 +: 3])));
    end
  endtask

  initial begin
    cfg0_t c0; cfg1_t c1; lcfg_t lc;
    host_in_valid = 0; host_in_flit = '0; host_out_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++) qlev[i] = 1 + (i % 7);
    for (int w = 0; w < PW; w++) key[w] = {$urandom(), $urandom()};
    for (int e = 0; e < ENTRIES; e++) for (int i = 0; i < HVC; i++) dict[e][i] = $urandom_range(0, 7);
    for (int c = 0; c < NETC; c++) begin send(5'(c), FK_ERASE, 64'd0); send(5'(c), FK_ERASE, 64'd1); end
    send(5'd12, FK_ERASE, 64'd0);
    for (int e = 0; e < ENTRIES; e++) for (int i = 0; i < HVC; i++) prog(12, i, e, dict[e][i]);
    put_row(0, 5, 3);
    put_row(0, 300, 9);
    put_row(7, 9000, 14);
    put_row(7, 9100, 6);
    $display("loaded at cycle %0d", cycle);
    begin
      logic [23:0] qg;
      for (int i = 0; i < 8; i++) qg[i*3 +: 3] = 3'(qlev[i]);
      send(BCAST_ID, FK_QGROUP, {16'd0, 24'd0, qg});
    end
    for (int w = 0; w < PW; w++) send(BCAST_ID, FK_KEY, {16'(w), 6'd0, key[w]});
    c0 = '0; c0.col_page = STR_PAGE; c0.groups = 1; c0.threshold = 2;
    c1 = '0; c1.proj_page = PROJ_PAGE; c1.proj_words = PW; c1.lud_dst = 5'd12; c1.decode = 1;
    lc = '0; lc.dict_page = 0; lc.dict_groups = DG; lc.dict_entries = ENTRIES; lc.agg_op = AGG_SUM; lc.n_etc = 5'(NETC);
    send(BCAST_ID, FK_CFG0, 64'(c0));
    send(BCAST_ID, FK_CFG1, 64'(c1));
    send(5'd12, FK_LCFG, 64'(lc));
    lc.n_etc = 0;
    for (int d = 13; d < 16; d++) send(5'(d), FK_LCFG, 64'(lc));
    send(BCAST_ID, FK_START, 64'(ROWS));
    while (got.size() < 2) @(posedge clk);
    $display("query done at cycle %0d", cycle);
    chk(got[0].kind == FK_RES_AGG && got[0].data[39:0] == 40'(3 + 9 + 14 + 6),
        $sformatf("SUM(price) = %0d", got[0].data[39:0]));
    chk(got[1].kind == FK_RES_DONE && got[1].data[63:48] == 16'd4 && got[1].data[47:32] == 16'd4 &&
        got[1].data[31:0] == 32'd4, "decoded / aggregated / selected counts");
    for (int c = 0; c < NETC; c++)
      chk(int'(etc_selected[c]) == ((c == 0 || c == 7) ? 2 : 0), $sformatf("core %0d selected %0d", c, etc_selected[c]));
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
