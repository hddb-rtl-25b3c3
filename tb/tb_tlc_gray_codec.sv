// Testbench for tlc_gray_codec: checks the level <-> bits mapping against the
// reflected Gray table, the round trip in both directions, and that levels one
// apart always differ in exactly one bit.
module tb_tlc_gray_codec;
  import hddb_pkg::*;
  localparam int unsigned CELLS = 8;
  logic [CELLS*3-1:0] bits_in, levels_out, levels_in, bits_out;
  int checks = 0, failures = 0;
  // reflected Gray code written out: level -> bits
  localparam logic [2:0] TABLE [8] = '{3'b000, 3'b001, 3'b011, 3'b010, 3'b110, 3'b111, 3'b101, 3'b100};

  tlc_gray_codec #(.CELLS(CELLS)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    // table check, every level in every cell position
    for (int p = 0; p < CELLS; p++)
      for (int l = 0; l < 8; l++) begin
        levels_in = '0; bits_in = '0;
        levels_in[p*3 +: 3] = 3'(l);
        bits_in[p*3 +: 3]   = TABLE[l];
        #1;
        check(bits_out[p*3 +: 3] == TABLE[l], $sformatf("level %0d -> bits", l));
        check(levels_out[p*3 +: 3] == 3'(l), $sformatf("bits -> level %0d", l));
      end
    // adjacent levels differ in one bit
    for (int l = 0; l < 7; l++) begin
      logic [2:0] a, b;
      levels_in = '0; levels_in[2:0] = 3'(l); #1; a = bits_out[2:0];
      levels_in[2:0] = 3'(l + 1); #1; b = bits_out[2:0];
      check($countones(a ^ b) == 1, "adjacent levels one bit apart");
    end
    // random round trips
    for (int n = 0; n < 200; n++) begin
      bits_in = CELLS*3'($urandom());
      #1;
      levels_in = levels_out;
      #1;
      check(bits_out == bits_in, "round trip");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
