// Testbench for dbam_accumulator: feeds random UBC/LBC words for several DBAM
// groups into an attached bank and checks every row's score against
// Score = sum_j (UBC_j + LBC_j) computed here, including saturation.
module tb_dbam_accumulator;
  import hddb_pkg::*;
  localparam int unsigned LANES = 64, SW = 4, AW = 3;
  logic clk = 0;
  logic in_valid, in_first, mem_we;
  logic [AW-1:0] in_addr, mem_raddr, mem_waddr;
  logic [LANES-1:0] in_ubc, in_lbc;
  logic [LANES*SW-1:0] mem_rdata, mem_wdata;
  logic [LANES*SW-1:0] mem [8];
  int ref_score [8][LANES];
  int checks = 0, failures = 0;

  dbam_accumulator #(.LANES(LANES), .SW(SW), .AW(AW)) dut (.*);
  always #5 clk = ~clk;
  assign mem_rdata = mem[mem_raddr];
  always_ff @(posedge clk) if (mem_we) mem[mem_waddr] <= mem_wdata;

  initial begin
    in_valid = 0; in_first = 0; in_addr = 0; in_ubc = 0; in_lbc = 0;
    for (int pass = 0; pass < 3; pass++) begin
      int groups;
      groups = (pass == 2) ? 12 : 5;   // pass 2 overflows 4-bit scores
      for (int g = 0; g < groups; g++)
        for (int a = 0; a < 8; a++) begin
          @(negedge clk);
          in_valid = 1; in_first = (g == 0); in_addr = 3'(a);
          in_ubc = {$urandom(), $urandom()};
          in_lbc = (pass == 2) ? '1 : {$urandom(), $urandom()};
          if (pass == 2) in_ubc = '1;
          for (int l = 0; l < LANES; l++) begin
            if (g == 0) ref_score[a][l] = 0;
            ref_score[a][l] += int'(in_ubc[l]) + int'(in_lbc[l]);
          end
        end
      @(negedge clk); in_valid = 0;
      for (int a = 0; a < 8; a++)
        for (int l = 0; l < LANES; l++) begin
          int exp_s;
          exp_s = (ref_score[a][l] > 15) ? 15 : ref_score[a][l];
          checks++;
          if (int'(mem[a][l*SW +: SW]) != exp_s) begin
            failures++;
            if (failures < 10) $display("FAIL pass %0d a %0d l %0d got %0d exp %0d", pass, a, l, mem[a][l*SW +: SW], exp_s);
          end
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
