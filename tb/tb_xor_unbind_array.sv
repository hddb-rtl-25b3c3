// Testbench for xor_unbind_array: a bound HV word (symbol XOR key) XORed with
// the key again must return the symbol word, one cycle later, with its tag.
module tb_xor_unbind_array;
  localparam int unsigned LANES = 42;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic [LANES-1:0] in_hv, in_key, out_hv;
  logic [15:0] in_tag, out_tag;
  logic [LANES-1:0] sym;
  int checks = 0, failures = 0;

  xor_unbind_array #(.LANES(LANES), .TAG_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    in_valid = 0; in_hv = 0; in_key = 0; in_tag = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      sym    = {$urandom(), $urandom()};
      in_key = {$urandom(), $urandom()};
      in_hv  = sym ^ in_key;
      in_tag = 16'(n);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_hv !== sym || out_tag !== 16'(n)) begin failures++; if (failures < 10) $display("FAIL %0d", n); end
      checks++;
      @(negedge clk);
      if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
