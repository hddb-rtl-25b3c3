// tlc_gray_codec: packs binary hypervector bits into triple-level-cell (TLC)
// levels and back, CELLS cells at a time.
//
// Every three consecutive HV bits map to one of the eight threshold-voltage
// levels of a TLC cell through the binary-reflected Gray code, so two adjacent
// levels always differ in exactly one bit: a retention or sense-margin error
// that moves a cell by one level corrupts at most one HV bit. The paper fixes
// "a fixed bijection Gray code" with that property; the reflected code (level
// L holds bits L ^ (L >> 1)) is this design's pick among such codes.
//
// Interface: bits_in -> levels_out (programming / building a DBAM query) and
// levels_in -> bits_out (reading cells back). Cell c uses bits [3c+2:3c].
// Purely combinational. The top bit of each cell is the same in both codes,
// so it passes straight from input to output in both directions.
module tlc_gray_codec
  import hddb_pkg::*;
#(
  parameter int unsigned CELLS = DBAM_K
) (
  input  logic [CELLS*CELL_BITS-1:0] bits_in,
  output logic [CELLS*CELL_BITS-1:0] levels_out,
  input  logic [CELLS*CELL_BITS-1:0] levels_in,
  output logic [CELLS*CELL_BITS-1:0] bits_out
);
  always_comb begin
    for (int unsigned c = 0; c < CELLS; c++) begin
      levels_out[c*CELL_BITS +: CELL_BITS] = gray_bits_to_level(bits_in[c*CELL_BITS +: CELL_BITS]);
      bits_out[c*CELL_BITS +: CELL_BITS]   = gray_level_to_bits(levels_in[c*CELL_BITS +: CELL_BITS]);
    end
  end
endmodule
