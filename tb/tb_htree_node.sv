// Testbench for htree_node: a switch with four children of two core ids each
// (ids 4..11) is driven from every port at once with random destinations,
// including broadcasts from the parent and flits for ids outside the subtree,
// while every output applies random back-pressure. Each flit carries a unique
// tag; a scoreboard checks that it leaves on exactly the expected port(s),
// that nothing is duplicated or lost, and that broadcasts reach all children.
// Non-broadcast flits are sent as packets of 1 to 3 flits (last set on the
// final one); the monitor checks that no output ever interleaves packets.
module tb_htree_node;
  import hddb_pkg::*;
  localparam int unsigned NC = 4, LO = 4, SPAN = 2, NP = NC + 1, NFLITS = 400;
  logic clk = 0, rst_n = 0;
  logic  [NC:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [NC:0] in_flit, out_flit;
  logic [15:0] stat_conflicts;
  int checks = 0, failures = 0;
  int expect_cnt [int];          // tag -> outstanding deliveries
  int expect_port [int][NP];     // tag -> port -> outstanding
  int sent [NP];
  int bcasts = 0, ups = 0;

  htree_node #(.N_CHILD(NC), .LO(LO), .SPAN(SPAN)) dut (.*);
  always #5 clk = ~clk;

  int pkt_left [NP];     // flits still to send in the current packet
  int pkt_dst [NP];
  int open_src [NP];     // per output: input whose packet is open, or -1
  int npackets = 0;

  function automatic flit_t make(input int port, input int tag);
    flit_t f;
    int d;
    if (pkt_left[port] == 0) begin
      if (port == 0) d = ($urandom_range(0, 4) == 0) ? BCAST_ID : $urandom_range(LO, LO + NC*SPAN - 1);
      else           d = ($urandom_range(0, 2) == 0) ? HOST_ID  : $urandom_range(0, 15);
      pkt_dst[port]  = d;
      pkt_left[port] = (d == BCAST_ID) ? 1 : $urandom_range(1, 3);
      if (pkt_left[port] > 1) npackets++;
    end
    pkt_left[port]--;
    f.dst  = NODE_W'(pkt_dst[port]);
    f.src  = NODE_W'(port);
    f.kind = FK_HV_WORD;
    f.last = (pkt_left[port] == 0);
    f.data = 64'(tag);
    return f;
  endfunction

  function automatic void record(input flit_t f, input int port);
    int tag, d;
    tag = int'(f.data);
    d   = int'(f.dst);
    for (int o = 0; o < NP; o++) expect_port[tag][o] = 0;
    if (port == 0 && d == BCAST_ID) begin
      for (int c = 1; c <= NC; c++) expect_port[tag][c] = 1;
      expect_cnt[tag] = NC;
      bcasts++;
    end else if (d >= LO && d < LO + NC*SPAN) begin
      expect_port[tag][(d - LO) / SPAN + 1] = 1;
      expect_cnt[tag] = 1;
    end else begin
      expect_port[tag][0] = 1;
      expect_cnt[tag] = 1;
      ups++;
    end
  endfunction

  // drivers
  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) begin
      if (in_valid[p] && in_ready_q[p]) begin
        in_valid[p] = 1'b0;
      end
      if (!in_valid[p] && (sent[p] < NFLITS || pkt_left[p] > 0) && $urandom_range(0, 3) != 0) begin
        int tag;
        tag = p * 100000 + sent[p];
        in_flit[p] = make(p, tag);
        record(in_flit[p], p);
        in_valid[p] = 1'b1;
        sent[p]++;
      end
    end
    for (int p = 0; p < NP; p++) out_ready[p] = ($urandom_range(0, 2) != 0);
  end

  // sample handshakes at the clock edge
  logic [NC:0] in_ready_q;
  always @(posedge clk) begin
    in_ready_q <= in_valid & in_ready;
    if (rst_n) for (int o = 0; o < NP; o++) if (out_valid[o] && out_ready[o]) begin
      int tag;
      tag = int'(out_flit[o].data);
      checks++;
      if (open_src[o] >= 0 && open_src[o] != int'(out_flit[o].src)) begin
        failures++;
        if (failures < 10) $display("FAIL packets interleaved on port %0d", o);
      end
      open_src[o] = out_flit[o].last ? -1 : int'(out_flit[o].src);
      if (!expect_cnt.exists(tag) || expect_port[tag][o] == 0) begin
        failures++;
        if (failures < 10) $display("FAIL tag %0d unexpected on port %0d", tag, o);
      end else begin
        expect_port[tag][o]--;
        expect_cnt[tag]--;
        if (expect_cnt[tag] == 0) expect_cnt.delete(tag);
      end
    end
  end

  initial begin
    in_valid = '0; in_flit = '0; out_ready = '0;
    for (int p = 0; p < NP; p++) begin sent[p] = 0; pkt_left[p] = 0; open_src[p] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) wait (sent[p] >= NFLITS && pkt_left[p] == 0);
    repeat (200) @(posedge clk);
    checks++;
    if (expect_cnt.num() != 0) begin failures++; $display("FAIL %0d flits never delivered", expect_cnt.num()); end
    checks++;
    if (bcasts == 0 || ups == 0 || stat_conflicts == 0 || npackets == 0) begin failures++; $display("FAIL traffic mix not exercised"); end
    $display("broadcasts %0d, upward %0d, multi-flit packets %0d, conflict cycles %0d",
             bcasts, ups, npackets, stat_conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
