// dbam_accumulator: the NSP accumulator that turns DBAM sense results into
// per-row similarity scores.
//
// One DBAM search over K word lines leaves an upper-bound (UBC) and a
// lower-bound (LBC) check bit per bit line in the page buffer. The paper scores
// a row as Score = sum over groups j of (UBC_j + LBC_j). This unit takes one
// 64-bit word of UBC bits and the matching word of LBC bits (64 bit lines =
// 64 rows) per cycle, reads those rows' running scores from the accumulate
// bank of the double buffer, adds 0, 1 or 2 to each and writes them back in the
// same cycle. `first` marks the first group of a pass: the old score is then
// ignored (the bank needs no separate clear). Scores saturate at all ones.
// The 64-lane width follows the 64-bit NSP I/O in the paper's figure; the
// saturation and the `first` flag are this design's choices.
//
// Interface: in_valid with in_addr (word address in the bank), in_ubc,
// in_lbc, in_first; mem_* connect to dbuf_mem's accumulate port. The read
// and write addresses are in_addr and the write enable is in_valid, passed
// straight through: read and write-back happen in the same cycle.
module dbam_accumulator
  import hddb_pkg::*;
#(
  parameter int unsigned LANES = IO_W,
  parameter int unsigned SW    = SCORE_W,
  parameter int unsigned AW    = 3
) (
  input  logic                in_valid,
  input  logic                in_first,
  input  logic [AW-1:0]       in_addr,
  input  logic [LANES-1:0]    in_ubc,
  input  logic [LANES-1:0]    in_lbc,
  output logic [AW-1:0]       mem_raddr,
  input  logic [LANES*SW-1:0] mem_rdata,
  output logic                mem_we,
  output logic [AW-1:0]       mem_waddr,
  output logic [LANES*SW-1:0] mem_wdata
);
  assign mem_raddr = in_addr;
  assign mem_waddr = in_addr;
  assign mem_we    = in_valid;

  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      logic [SW:0] s;
      s = in_first ? '0 : {1'b0, mem_rdata[l*SW +: SW]};
      s = s + (SW+1)'(in_ubc[l]) + (SW+1)'(in_lbc[l]);
      mem_wdata[l*SW +: SW] = s[SW] ? '1 : s[SW-1:0];
    end
  end
endmodule
