// bin_comparator: the ETC NSP's 7-bit bin-index comparator that finishes a
// numeric predicate.
//
// A numeric cell is encoded with n = 4 recursive levels of m = 100 bins; the
// DBAM search recovers one 7-bit bin index per level for every row. Because
// each level subdivides the bin chosen by the level above, the index sequence
// (level 0 first) orders values exactly like the values themselves, so the
// predicate "value OP constant" is a lexicographic comparison of the row's
// index sequence with the query's. LANES rows are compared per cycle (the
// paper's "5-parallel comparator"); each lane compares all four levels at
// once. The lexicographic formulation and the six operators are this design's
// reading of "comparing the 4-level bin indices".
//
// Combinational: row_idx[lane] and q_idx in, match[lane] out.
module bin_comparator
  import hddb_pkg::*;
#(
  parameter int unsigned LANES = 5
) (
  input  cmp_op_e                                     op,
  input  logic [NUM_LEVELS-1:0][BIN_IDX_W-1:0]        q_idx,
  input  logic [LANES-1:0][NUM_LEVELS-1:0][BIN_IDX_W-1:0] row_idx,
  output logic [LANES-1:0]                            match
);
  always_comb begin
    for (int unsigned l = 0; l < LANES; l++) begin
      logic eq, lt, decided;
      eq = 1'b1;
      lt = 1'b0;
      decided = 1'b0;
      for (int unsigned v = 0; v < NUM_LEVELS; v++) begin
        if (!decided && row_idx[l][v] != q_idx[v]) begin
          decided = 1'b1;
          eq = 1'b0;
          lt = row_idx[l][v] < q_idx[v];
        end
      end
      unique case (op)
        CMP_EQ:  match[l] = eq;
        CMP_NE:  match[l] = !eq;
        CMP_LT:  match[l] = lt;
        CMP_LE:  match[l] = lt || eq;
        CMP_GT:  match[l] = !lt && !eq;
        CMP_GE:  match[l] = !lt;
        default: match[l] = 1'b0;
      endcase
    end
  end
endmodule
