// Testbench for dbuf_mem: fills the accumulate bank, swaps, and checks that
// the drain port sees the finished scores while new writes go to the other
// bank; repeats over several swaps against a two-bank reference model.
module tb_dbuf_mem;
  import hddb_pkg::*;
  localparam int unsigned LANES = 64, SW = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic swap, acc_bank, acc_we;
  logic [2:0] acc_raddr, acc_waddr, dr_raddr;
  logic [LANES*SW-1:0] acc_rdata, acc_wdata, dr_rdata;
  logic [LANES*SW-1:0] ref_mem [2][DEPTH];
  int ref_bank = 0;
  int checks = 0, failures = 0;

  dbuf_mem #(.BYTES(2048), .LANES(LANES), .SW(SW)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [LANES*SW-1:0] rnd();
    logic [LANES*SW-1:0] v;
    for (int i = 0; i < LANES*SW/32; i++) v[i*32 +: 32] = $urandom();
    return v;
  endfunction

  initial begin
    swap = 0; acc_we = 0; acc_raddr = 0; acc_waddr = 0; dr_raddr = 0; acc_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        acc_we = 1; acc_waddr = 3'(a); acc_wdata = rnd();
        ref_mem[ref_bank][a] = acc_wdata;
      end
      @(negedge clk); acc_we = 0;
      for (int a = 0; a < DEPTH; a++) begin
        acc_raddr = 3'(a); #1;
        checks++; if (acc_rdata !== ref_mem[ref_bank][a]) begin failures++; $display("FAIL acc read"); end
      end
      checks++; if (acc_bank !== 1'(ref_bank)) begin failures++; $display("FAIL bank id"); end
      @(negedge clk); swap = 1; @(negedge clk); swap = 0; ref_bank = 1 - ref_bank;
      for (int a = 0; a < DEPTH; a++) begin
        dr_raddr = 3'(a); #1;
        checks++; if (dr_rdata !== ref_mem[1-ref_bank][a]) begin failures++; $display("FAIL drain read r%0d a%0d bank %0d", round, a, acc_bank); end
      end
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
