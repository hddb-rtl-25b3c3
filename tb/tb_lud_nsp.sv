// Testbench for lud_nsp with a small fenand_plane (1024 bit lines, so a
// 600-entry dictionary spans two score windows) and a 160-byte result
// scratchpad (20 entries) so that mid-query flushes happen.
//
// Each dictionary entry is a random 16-cell (2 DBAM groups) HV, programmed
// on one bit line; the entry index is its key. Two simulated table cores send
// unbound HVs of dictionary entries with one-level noise on some cells, as
// HV_ROW + HV_WORD flits (Gray bits, 14 cells per word). The expected key is
// computed here: DBAM score against every entry, highest score wins, ties to
// the lower entry. Query 1 (pure filter) checks every RES_ROW flit
// {source, row, key} and the RES_DONE counters; queries 2 and 3 check SUM and
// MAX of the decoded keys folded by the ALUs across scratchpad flushes.
module tb_lud_nsp;
  import hddb_pkg::*;
  localparam int unsigned NBL = 1024, NWL = 16, NBLK = 1, LAT = 4;
  localparam int unsigned ENTRIES = 600;

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
  logic [15:0] stat_decoded, stat_sp_flushes, stat_drain_stalls;
  int checks = 0, failures = 0;

  lud_nsp #(.NUM_BL(NBL), .SP_BYTES(160), .HV_WORDS_MAX(8), .MY_ID(5'd12)) dut (.*);
  fenand_plane #(.NUM_BL(NBL), .NUM_WL(NWL), .NUM_BLOCKS(NBLK), .SENSE_LAT(LAT)) u_plane (
    .clk, .rst_n, .cmd_valid(pl_cmd_valid), .cmd_ready(pl_cmd_ready), .cmd_op(pl_cmd_op),
    .cmd_page(pl_cmd_page), .cmd_bl(pl_cmd_bl), .cmd_level(pl_cmd_level),
    .cmd_query(pl_cmd_query), .done(pl_done), .pb_word(pl_pb_word), .pb_ubc(pl_pb_ubc),
    .pb_lbc(pl_pb_lbc), .pb_bl(pl_pb_bl), .pb_level(pl_pb_level));
  always #5 clk = ~clk;

  int dict [ENTRIES][16];
  flit_t got [$];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  task automatic send(input logic [4:0] src, input flit_kind_e k, input logic [63:0] d, input logic l = 1'b1);
    @(negedge clk);
    in_valid = 1; in_flit = '{dst: 5'd12, src: src, kind: k, last: l, data: d};
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(out_flit);

  function automatic int decode_ref(input int q [16]);
    int best, bs;
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

  // send one unbound HV (a noisy copy of entry e) for row `row` from core src
  task automatic send_hv(input logic [4:0] src, input int row, input int e, output int key);
    int q [16];
    logic [83:0] bits;
    for (int c = 0; c < 16; c++) begin
      q[c] = dict[e][c];
      if ($urandom_range(0, 7) == 0) q[c] = (q[c] == 7) ? 6 : q[c] + 1;
    end
    key = decode_ref(q);
    bits = '0;
    for (int c = 0; c < 16; c++) bits[c*3 +: 3] = gray_level_to_bits(3'(q[c]));
    send(src, FK_HV_ROW, 64'(row), 1'b0);
    send(src, FK_HV_WORD, {12'd0, 10'd0, bits[41:0]}, 1'b0);
    send(src, FK_HV_WORD, {12'd1, 10'd0, bits[83:42]});
  endtask

  task automatic lcfg(input agg_op_e op);
    lcfg_t c;
    c = '0; c.dict_page = 0; c.dict_groups = 2; c.dict_entries = ENTRIES; c.agg_op = op; c.n_etc = 2;
    send(HOST_ID, FK_LCFG, 64'(c));
  endtask

  task automatic wait_done();
    @(posedge clk);
    while (busy || out_valid) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    int keys [$], rowsrc [$], rowid [$];
    int k, nrows;
    in_valid = 0; in_flit = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    send(HOST_ID, FK_ERASE, 64'd0);
    for (int e = 0; e < ENTRIES; e++)
      for (int c = 0; c < 16; c++) begin
        dict[e][c] = $urandom_range(0, 7);
        if (dict[e][c] != 0)
          send(HOST_ID, FK_PROG, {1'b0, 15'(c), 16'(e), 29'd0, 3'(dict[e][c])});
      end
    // ---------------- query 1: filter, rows returned
    lcfg(AGG_NONE);
    send(HOST_ID, FK_START, 64'd0);
    got.delete();
    nrows = 30;
    for (int r = 0; r < nrows; r++) begin
      logic [4:0] src;
      src = (r % 2) ? 5'd4 : 5'd3;
      send_hv(src, 100 + r, $urandom_range(0, ENTRIES-1), k);
      keys.push_back(k); rowsrc.push_back(int'(src)); rowid.push_back(100 + r);
    end
    send(5'd3, FK_ETC_DONE, 64'd15);
    send(5'd4, FK_ETC_DONE, 64'd15);
    wait_done();
    chk(got.size() == nrows + 1, $sformatf("filter: %0d flits", got.size()));
    for (int r = 0; r < nrows && r < got.size(); r++)
      chk(got[r].kind == FK_RES_ROW && got[r].dst == HOST_ID &&
          int'(got[r].data[63:59]) == rowsrc[r] && int'(got[r].data[58:43]) == rowid[r] &&
          int'(got[r].data[15:0]) == keys[r],
          $sformatf("filter row %0d key exp %0d got %0d", r, keys[r], got[r].data[15:0]));
    if (got.size() > 0)
      chk(got[got.size()-1].kind == FK_RES_DONE && got[got.size()-1].data[63:48] == 16'(nrows) &&
          got[got.size()-1].data[31:0] == 32'd30, "filter RES_DONE");
    chk(stat_sp_flushes > 0, "scratchpad flush exercised");
    // ---------------- queries 2 and 3: SUM and MAX of decoded keys
    for (int qn = 0; qn < 2; qn++) begin
      longint sum; int mx;
      sum = 0; mx = 0;
      lcfg(qn == 0 ? AGG_SUM : AGG_MAX);
      send(HOST_ID, FK_START, 64'd0);
      got.delete();
      nrows = 45;
      for (int r = 0; r < nrows; r++) begin
        send_hv((r % 2) ? 5'd4 : 5'd3, r, $urandom_range(0, ENTRIES-1), k);
        sum += k;
        if (k > mx) mx = k;
      end
      send(5'd3, FK_ETC_DONE, 64'd20);
      send(5'd4, FK_ETC_DONE, 64'd25);
      wait_done();
      chk(got.size() == 2, "aggregate: two flits");
      if (got.size() == 2) begin
        chk(got[0].kind == FK_RES_AGG && longint'(got[0].data[39:0]) == (qn == 0 ? sum : longint'(mx)),
            $sformatf("aggregate value got %0d exp %0d", got[0].data[39:0], qn == 0 ? sum : longint'(mx)));
        chk(got[1].kind == FK_RES_DONE && got[1].data[47:32] == 16'(nrows) && got[1].data[31:0] == 32'd45,
            "aggregate RES_DONE");
      end
    end
    $display("flushes %0d, drain stalls %0d", stat_sp_flushes, stat_drain_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
