// htree_node: one switch of the H-tree network that connects the storage
// cores of the accelerator with each other and with the host.
//
// The paper connects the cores by an H-tree (4 cores per H-tree) that
// broadcasts queries from the host to the table cores and routes data between
// cores and back to the host; it does not describe the switch. This design's
// switch has one parent port and N_CHILD child ports. Child c serves the core
// ids [LO + c*SPAN, LO + (c+1)*SPAN - 1]. A flit travels:
//   * from the parent: to the child whose range holds dst, or to every child
//     when dst is the broadcast id;
//   * from a child: to the child whose range holds dst, otherwise up to the
//     parent (the host is above the root).
// Every output port has a one-flit register, refilled only once it is empty
// (a port moves one flit every two cycles, and no ready signal passes
// combinationally through a switch). Downward traffic from the parent
// has priority on child outputs; child inputs are served round-robin. A
// broadcast is forwarded only in a cycle in which every child output can take
// it, so all children receive it in the same cycle.
// Packets: a flit with last = 0 locks the output it took to its input until
// the flit with last = 1 of the same packet has passed (wormhole switching),
// so the multi-flit HVs of different table cores never interleave at a
// dictionary core. Single flits have last = 1 and never lock.
//
// Interface: valid/ready per port, hddb_pkg::flit_t payload; a flit is moved
// when valid and ready are both high. stat_conflicts counts cycles in which a
// valid input could not move.
module htree_node
  import hddb_pkg::*;
#(
  parameter int unsigned N_CHILD = 4,
  parameter int unsigned LO      = 0,
  parameter int unsigned SPAN    = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // port 0 = parent, port 1 + c = child c
  input  logic [N_CHILD:0]    in_valid,
  output logic [N_CHILD:0]    in_ready,
  input  flit_t [N_CHILD:0]   in_flit,
  output logic [N_CHILD:0]    out_valid,
  input  logic [N_CHILD:0]    out_ready,
  output flit_t [N_CHILD:0]   out_flit,
  output logic [15:0]         stat_conflicts
);
  localparam int unsigned NP = N_CHILD + 1;
  localparam int unsigned PW = $clog2(NP);

  logic [NP-1:0][NP-1:0] target;   // target[i][o]: input i wants output o
  logic [NP-1:0][PW-1:0] grant;    // grant[o]: input granted output o
  logic [NP-1:0]         gvalid;   // some input holds grant[o]
  logic [NP-1:0]         free;
  logic [NP-1:0]         accept;
  logic [NP-1:0]         load;
  logic [NP-1:0][PW-1:0] rr;       // round-robin pointer per output
  logic [NP-1:0]         locked;   // output held by an unfinished packet
  logic [NP-1:0][PW-1:0] owner;    // input holding it

  always_comb begin
    for (int unsigned i = 0; i < NP; i++) begin
      logic [31:0] d;
      target[i] = '0;
      d = 32'(in_flit[i].dst);
      if (in_valid[i]) begin
        if (i == 0 && in_flit[i].dst == BCAST_ID) begin
          for (int unsigned c = 0; c < N_CHILD; c++) target[i][c+1] = 1'b1;
        end else if (d - LO < N_CHILD * SPAN) begin   // unsigned: also rejects d < LO
          target[i][(d - LO) / SPAN + 1] = 1'b1;
        end else if (i != 0) begin
          target[i][0] = 1'b1;
        end
      end
    end
  end

  always_comb begin
    int unsigned i;
    i      = 0;
    accept = '0;
    for (int unsigned o = 0; o < NP; o++) begin
      free[o]   = !out_valid[o];   // no same-cycle refill: ready paths stay registered
      grant[o]  = '0;
      gvalid[o] = 1'b0;
      if (locked[o]) begin
        grant[o]  = owner[o];
        gvalid[o] = target[owner[o]][o];
      end else if (target[0][o]) begin
        grant[o]  = '0;
        gvalid[o] = 1'b1;
      end else begin
        for (int unsigned k = 0; k < NP; k++) begin
          i = (32'(rr[o]) + k) % NP;
          if (!gvalid[o] && target[i][o]) begin
            grant[o]  = PW'(i);
            gvalid[o] = 1'b1;
          end
        end
      end
    end
    for (int unsigned n = 0; n < NP; n++) begin
      accept[n] = in_valid[n];   // a flit with no route is dropped (see a_routable)
      for (int unsigned o = 0; o < NP; o++)
        if (target[n][o] && !(gvalid[o] && 32'(grant[o]) == n && free[o])) accept[n] = 1'b0;
    end
  end

  always_comb begin
    for (int unsigned o = 0; o < NP; o++)
      load[o] = gvalid[o] && accept[grant[o]];
  end

  assign in_ready = accept;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid      <= '0;
      out_flit       <= '0;
      rr             <= '0;
      locked         <= '0;
      owner          <= '0;
      stat_conflicts <= '0;
    end else begin
      for (int unsigned o = 0; o < NP; o++) begin
        if (load[o]) begin
          out_valid[o] <= 1'b1;
          out_flit[o]  <= in_flit[grant[o]];
          rr[o]        <= PW'((32'(grant[o]) + 1) % NP);
          locked[o]    <= !in_flit[grant[o]].last;
          owner[o]     <= grant[o];
        end else if (out_ready[o]) begin
          out_valid[o] <= 1'b0;
        end
      end
      if ((in_valid & ~accept) != '0) stat_conflicts <= stat_conflicts + 1'b1;
    end
  end

  a_routable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid[0] |-> (target[0] != '0));
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid[0] && !out_ready[0]) |=> (out_valid[0] && $stable(out_flit[0])));
endmodule
