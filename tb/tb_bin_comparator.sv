// Testbench for bin_comparator: random 4-level index sequences (with many
// shared prefixes) are compared for every operator; the reference packs the
// four 7-bit indices into one integer, coarsest level most significant.
module tb_bin_comparator;
  import hddb_pkg::*;
  localparam int unsigned LANES = 5;
  cmp_op_e op;
  logic [NUM_LEVELS-1:0][BIN_IDX_W-1:0] q_idx;
  logic [LANES-1:0][NUM_LEVELS-1:0][BIN_IDX_W-1:0] row_idx;
  logic [LANES-1:0] match;
  int checks = 0, failures = 0;

  bin_comparator #(.LANES(LANES)) dut (.*);

  function automatic int unsigned pack(input logic [NUM_LEVELS-1:0][BIN_IDX_W-1:0] v);
    int unsigned p = 0;
    for (int i = 0; i < NUM_LEVELS; i++) p = p * 128 + v[i];
    return p;
  endfunction

  initial begin
    for (int n = 0; n < 2000; n++) begin
      op = cmp_op_e'($urandom_range(0, 5));
      for (int v = 0; v < NUM_LEVELS; v++) q_idx[v] = 7'($urandom_range(0, 99));
      for (int l = 0; l < LANES; l++)
        for (int v = 0; v < NUM_LEVELS; v++)
          row_idx[l][v] = ($urandom_range(0, 2) != 0) ? q_idx[v] : 7'($urandom_range(0, 99));
      #1;
      for (int l = 0; l < LANES; l++) begin
        int unsigned a, b;
        bit e;
        a = pack(row_idx[l]); b = pack(q_idx);
        case (op)
          CMP_EQ: e = (a == b);
          CMP_NE: e = (a != b);
          CMP_LT: e = (a <  b);
          CMP_LE: e = (a <= b);
          CMP_GT: e = (a >  b);
          default: e = (a >= b);
        endcase
        checks++;
        if (match[l] !== e) begin failures++; if (failures < 10) $display("FAIL op %0d %0d vs %0d", op, a, b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
