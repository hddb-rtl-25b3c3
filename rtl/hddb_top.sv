// hddb_top: the HDDB in-storage processing (ISP) accelerator: FeNAND storage
// cores with their near-storage processors, connected by an H-tree to the host.
//
// Structure (paper Fig. 3(a)): NUM_ETC encoded-table cores (ETC) hold the
// hypervector-encoded table, NUM_LUD lookup-dictionary cores (LUD) hold the
// dictionaries used for decoding. Each core is one FeNAND plane (fenand_plane)
// plus its NSP (etc_nsp or lud_nsp). Cores are grouped CORES_PER_TREE to a leaf
// H-tree switch (paper: 4 cores per H-tree) and the leaf switches meet at a
// root switch whose parent port is the host interface. Core ids: table cores
// 0 .. NUM_ETC-1, dictionary cores NUM_ETC .. NUM_ETC+NUM_LUD-1; the host is
// id 31 and id 30 broadcasts to every core. The defaults (12 + 4 cores in four
// H-trees) are the arrangement drawn in the paper's overview figure.
//
// A query (paper Fig. 3(b)): the host broadcasts the predicate configuration
// and query HVs to the table cores and starts them; each searches its rows
// with DBAM, selects rows, unbinds the selected HVs and sends them to the
// dictionary core named in the query; that core decodes them, aggregates or
// collects the results, and returns them to the host once every table core
// has reported. Table loading (erase / program cell) goes over the same
// network. See etc_nsp and lud_nsp for the flit formats.
//
// Host ports are plain valid/ready flit streams; the host CPU itself is not
// part of the design. Per-core event counters are brought out for monitoring.
module hddb_top
  import hddb_pkg::*;
#(
  parameter int unsigned NUM_ETC        = 12,
  parameter int unsigned NUM_LUD        = 4,
  parameter int unsigned CORES_PER_TREE = 4,
  parameter int unsigned NUM_BL         = 16384,
  parameter int unsigned NUM_WL         = 128,
  parameter int unsigned NUM_BLOCKS     = 128,
  parameter int unsigned SENSE_LAT      = 50000,
  parameter int unsigned DBUF_BYTES     = 2048,
  parameter int unsigned SP_BYTES       = 20480,
  parameter int unsigned QBUF_DEPTH     = 8192,
  parameter int unsigned KEY_WORDS      = 128,
  parameter int unsigned MAX_SLOTS      = 64,
  localparam int unsigned NUM_CORES     = NUM_ETC + NUM_LUD,
  localparam int unsigned NUM_TREES     = NUM_CORES / CORES_PER_TREE
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        host_in_valid,
  output logic        host_in_ready,
  input  flit_t       host_in_flit,
  output logic        host_out_valid,
  input  logic        host_out_ready,
  output flit_t       host_out_flit,
  output logic [NUM_CORES-1:0]        core_busy,
  output logic [NUM_ETC-1:0][15:0]    etc_drain_stalls,
  output logic [NUM_ETC-1:0][15:0]    etc_net_stalls,
  output logic [NUM_ETC-1:0][15:0]    etc_sp_overflows,
  output logic [NUM_ETC-1:0][15:0]    etc_selected,
  output logic [NUM_LUD-1:0][15:0]    lud_decoded,
  output logic [NUM_LUD-1:0][15:0]    lud_sp_flushes,
  output logic [NUM_LUD-1:0][15:0]    lud_drain_stalls,
  output logic [NUM_TREES:0][15:0]    net_conflicts
);
  // core <-> leaf switch
  logic  [NUM_CORES-1:0] c_in_valid, c_in_ready, c_out_valid, c_out_ready;
  flit_t [NUM_CORES-1:0] c_in_flit, c_out_flit;
  // leaf switch <-> root switch
  logic  [NUM_TREES-1:0] up_valid, up_ready, dn_valid, dn_ready;
  flit_t [NUM_TREES-1:0] up_flit, dn_flit;

  // ------------------------------------------------------------ root switch
  logic  [NUM_TREES:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t [NUM_TREES:0] r_in_flit, r_out_flit;

  always_comb begin
    r_in_valid[0]  = host_in_valid;
    r_in_flit[0]   = host_in_flit;
    host_in_ready  = r_in_ready[0];
    host_out_valid = r_out_valid[0];
    host_out_flit  = r_out_flit[0];
    r_out_ready[0] = host_out_ready;
    for (int unsigned t = 0; t < NUM_TREES; t++) begin
      r_in_valid[t+1]  = up_valid[t];
      r_in_flit[t+1]   = up_flit[t];
      up_ready[t]      = r_in_ready[t+1];
      dn_valid[t]      = r_out_valid[t+1];
      dn_flit[t]       = r_out_flit[t+1];
      r_out_ready[t+1] = dn_ready[t];
    end
  end

  htree_node #(.N_CHILD(NUM_TREES), .LO(0), .SPAN(CORES_PER_TREE)) u_root (
    .clk, .rst_n,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_flit(r_in_flit),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out_flit),
    .stat_conflicts(net_conflicts[0])
  );

  // ------------------------------------------------------------ leaf switches
  for (genvar t = 0; t < NUM_TREES; t++) begin : g_tree
    logic  [CORES_PER_TREE:0] l_in_valid, l_in_ready, l_out_valid, l_out_ready;
    flit_t [CORES_PER_TREE:0] l_in_flit, l_out_flit;
    always_comb begin
      l_in_valid[0]  = dn_valid[t];
      l_in_flit[0]   = dn_flit[t];
      dn_ready[t]    = l_in_ready[0];
      up_valid[t]    = l_out_valid[0];
      up_flit[t]     = l_out_flit[0];
      l_out_ready[0] = up_ready[t];
      for (int unsigned k = 0; k < CORES_PER_TREE; k++) begin
        l_in_valid[k+1]  = c_out_valid[t*CORES_PER_TREE + k];
        l_in_flit[k+1]   = c_out_flit[t*CORES_PER_TREE + k];
        c_out_ready[t*CORES_PER_TREE + k] = l_in_ready[k+1];
        c_in_valid[t*CORES_PER_TREE + k]  = l_out_valid[k+1];
        c_in_flit[t*CORES_PER_TREE + k]   = l_out_flit[k+1];
        l_out_ready[k+1] = c_in_ready[t*CORES_PER_TREE + k];
      end
    end
    htree_node #(.N_CHILD(CORES_PER_TREE), .LO(t*CORES_PER_TREE), .SPAN(1)) u_leaf (
      .clk, .rst_n,
      .in_valid(l_in_valid), .in_ready(l_in_ready), .in_flit(l_in_flit),
      .out_valid(l_out_valid), .out_ready(l_out_ready), .out_flit(l_out_flit),
      .stat_conflicts(net_conflicts[t+1])
    );
  end

  // ------------------------------------------------------------ storage cores
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    logic                    pl_cmd_valid, pl_cmd_ready, pl_done;
    logic [1:0]              pl_cmd_op;
    logic [PAGE_W-1:0]       pl_cmd_page;
    logic [ROW_W-1:0]        pl_cmd_bl, pl_pb_bl;
    logic [CELL_BITS-1:0]    pl_cmd_level, pl_pb_level;
    logic [GROUP_BITS-1:0]   pl_cmd_query;
    logic [$clog2(NUM_BL/IO_W)-1:0] pl_pb_word;
    logic [IO_W-1:0]         pl_pb_ubc, pl_pb_lbc;

    fenand_plane #(
      .NUM_BL(NUM_BL), .NUM_WL(NUM_WL), .NUM_BLOCKS(NUM_BLOCKS), .SENSE_LAT(SENSE_LAT)
    ) u_plane (
      .clk, .rst_n,
      .cmd_valid(pl_cmd_valid), .cmd_ready(pl_cmd_ready), .cmd_op(pl_cmd_op),
      .cmd_page(pl_cmd_page), .cmd_bl(pl_cmd_bl), .cmd_level(pl_cmd_level),
      .cmd_query(pl_cmd_query), .done(pl_done),
      .pb_word(pl_pb_word), .pb_ubc(pl_pb_ubc), .pb_lbc(pl_pb_lbc),
      .pb_bl(pl_pb_bl), .pb_level(pl_pb_level)
    );

    if (c < NUM_ETC) begin : g_etc
      etc_nsp #(
        .NUM_BL(NUM_BL), .DBUF_BYTES(DBUF_BYTES), .SP_BYTES(SP_BYTES),
        .QBUF_DEPTH(QBUF_DEPTH), .KEY_WORDS(KEY_WORDS), .MAX_SLOTS(MAX_SLOTS),
        .MY_ID(NODE_W'(c))
      ) u_nsp (
        .clk, .rst_n,
        .in_valid(c_in_valid[c]), .in_ready(c_in_ready[c]), .in_flit(c_in_flit[c]),
        .out_valid(c_out_valid[c]), .out_ready(c_out_ready[c]), .out_flit(c_out_flit[c]),
        .pl_cmd_valid, .pl_cmd_ready, .pl_cmd_op, .pl_cmd_page, .pl_cmd_bl,
        .pl_cmd_level, .pl_cmd_query, .pl_done, .pl_pb_word, .pl_pb_ubc,
        .pl_pb_lbc, .pl_pb_bl, .pl_pb_level,
        .busy(core_busy[c]),
        .stat_drain_stalls(etc_drain_stalls[c]),
        .stat_net_stalls(etc_net_stalls[c]),
        .stat_sp_overflows(etc_sp_overflows[c]),
        .stat_selected(etc_selected[c])
      );
    end else begin : g_lud
      lud_nsp #(
        .NUM_BL(NUM_BL), .DBUF_BYTES(DBUF_BYTES), .SP_BYTES(SP_BYTES),
        .HV_WORDS_MAX(KEY_WORDS), .MY_ID(NODE_W'(c))
      ) u_nsp (
        .clk, .rst_n,
        .in_valid(c_in_valid[c]), .in_ready(c_in_ready[c]), .in_flit(c_in_flit[c]),
        .out_valid(c_out_valid[c]), .out_ready(c_out_ready[c]), .out_flit(c_out_flit[c]),
        .pl_cmd_valid, .pl_cmd_ready, .pl_cmd_op, .pl_cmd_page, .pl_cmd_bl,
        .pl_cmd_level, .pl_cmd_query, .pl_done, .pl_pb_word, .pl_pb_ubc,
        .pl_pb_lbc, .pl_pb_bl, .pl_pb_level,
        .busy(core_busy[c]),
        .stat_decoded(lud_decoded[c-NUM_ETC]),
        .stat_sp_flushes(lud_sp_flushes[c-NUM_ETC]),
        .stat_drain_stalls(lud_drain_stalls[c-NUM_ETC])
      );
    end
  end

  initial begin
    assert (NUM_CORES % CORES_PER_TREE == 0)
      else $error("core count must fill whole H-trees");
    assert (NUM_CORES <= 30) else $error("core ids 30 and 31 are reserved");
  end
endmodule
