// select_scratchpad: the NSP select scratchpad, a single-port-per-direction
// SRAM of BYTES bytes (paper: 20 KB in both NSPs).
//
// In the encoded-table NSP it buffers the hypervectors of the rows that passed
// the predicate until they are unbound; in the dictionary NSP it holds the
// decoded results until the ALUs aggregate them or they are returned. The word
// width is a parameter: 42 bits (14 TLC cells, one pass of the 42-lane XOR
// array) in the encoded-table NSP and 64 bits in the dictionary NSP; both are
// this design's choices.
//
// One write port with a per-bit write mask and one read port with one cycle of
// latency (rdata is valid the cycle after re_ with raddr). Not reset.
module select_scratchpad #(
  parameter int unsigned BYTES  = 20480,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned DEPTH = BYTES * 8 / WORD_W,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata,
  input  logic [WORD_W-1:0] wmask,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rdata
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
    if (re) rdata <= mem[raddr];
  end
endmodule
