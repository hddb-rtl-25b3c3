// dbuf_mem: the double-buffered score memory of a near-storage processor (NSP).
//
// Two banks of per-row similarity scores. While the accumulator builds the
// scores of the current DBAM pass in the "accumulate" bank, the selection logic
// reads the finished scores of the previous pass from the other ("drain")
// bank; `swap` exchanges the roles. The paper gives the function (accumulation
// and output transfer at the same time) and the size, 2 KB; the organisation
// into LANES-row words of SCORE_W-bit scores is this design's choice: with 64
// lanes of 16-bit scores each bank holds 8 words = 512 rows.
//
// Interface: acc_raddr -> acc_rdata is combinational (read-modify-write in one
// cycle by the accumulator); acc_we writes at the clock edge; dr_raddr ->
// dr_rdata is combinational; swap takes effect at the clock edge. acc_bank
// tells which bank is currently accumulated. Contents are not reset.
module dbuf_mem
  import hddb_pkg::*;
#(
  parameter int unsigned BYTES = 2048,
  parameter int unsigned LANES = 64,
  parameter int unsigned SW    = SCORE_W,
  localparam int unsigned DEPTH = BYTES * 8 / 2 / (LANES * SW),
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 swap,
  output logic                 acc_bank,
  input  logic [AW-1:0]        acc_raddr,
  output logic [LANES*SW-1:0]  acc_rdata,
  input  logic                 acc_we,
  input  logic [AW-1:0]        acc_waddr,
  input  logic [LANES*SW-1:0]  acc_wdata,
  input  logic [AW-1:0]        dr_raddr,
  output logic [LANES*SW-1:0]  dr_rdata
);
  logic [LANES*SW-1:0] bank0 [DEPTH];
  logic [LANES*SW-1:0] bank1 [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) acc_bank <= 1'b0;
    else if (swap) acc_bank <= ~acc_bank;
  end

  always_ff @(posedge clk) begin
    if (acc_we && !acc_bank) bank0[acc_waddr] <= acc_wdata;
    if (acc_we &&  acc_bank) bank1[acc_waddr] <= acc_wdata;
  end

  assign acc_rdata = acc_bank ? bank1[acc_raddr] : bank0[acc_raddr];
  assign dr_rdata  = acc_bank ? bank0[dr_raddr]  : bank1[dr_raddr];
endmodule
