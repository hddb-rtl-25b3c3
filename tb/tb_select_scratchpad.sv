// Testbench for select_scratchpad: random masked writes and reads against a
// reference array, checking the one-cycle read latency.
module tb_select_scratchpad;
  localparam int unsigned WORD_W = 42, BYTES = 20480, DEPTH = BYTES * 8 / WORD_W;
  logic clk = 0;
  logic we, re;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  logic [WORD_W-1:0] wdata, wmask, rdata;
  logic [WORD_W-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  select_scratchpad #(.BYTES(BYTES), .WORD_W(WORD_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0; wmask = 0;
    // initialise every word with full-mask writes
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = $clog2(DEPTH)'(a); wmask = '1; wdata = {$urandom(), $urandom()};
      ref_mem[a] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      int a, b;
      @(negedge clk);
      a = $urandom_range(0, DEPTH-1);
      b = $urandom_range(0, DEPTH-1);
      we = 1; waddr = $clog2(DEPTH)'(a); wdata = {$urandom(), $urandom()}; wmask = {$urandom(), $urandom()};
      re = 1; raddr = $clog2(DEPTH)'(b);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[b]) begin failures++; if (failures < 10) $display("FAIL read %0d", b); end
      ref_mem[a] = (ref_mem[a] & ~wmask) | (wdata & wmask);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
