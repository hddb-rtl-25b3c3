// Testbench for the fenand_plane behavioural model (small plane: 256 bit
// lines, 16 word lines, 2 blocks). Erases a block, programs a K-page group
// with levels that are equal to, one above, one below, or far from a chosen
// query, runs DBAM searches and checks every bit line's UBC/LBC against
// Eq. 2/3 with alpha = 0.5 evaluated on integer levels here, checks the
// search latency of two sensing cycles (plus the command cycle), and checks
// normal page reads.
module tb_fenand_plane;
  import hddb_pkg::*;
  localparam int unsigned NBL = 256, NWL = 16, NBLK = 2, LAT = 12;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done;
  logic [1:0] cmd_op;
  logic [PAGE_W-1:0] cmd_page;
  logic [ROW_W-1:0] cmd_bl, pb_bl;
  logic [CELL_BITS-1:0] cmd_level, pb_level;
  logic [GROUP_BITS-1:0] cmd_query;
  logic [1:0] pb_word;
  logic [IO_W-1:0] pb_ubc, pb_lbc;
  int checks = 0, failures = 0;
  int lv [NWL*NBLK][NBL];

  fenand_plane #(.NUM_BL(NBL), .NUM_WL(NWL), .NUM_BLOCKS(NBLK), .SENSE_LAT(LAT)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  task automatic issue(input int op, input int page, input int bl, input int level, input logic [23:0] q, output int cycles);
    @(negedge clk);
    cmd_valid = 1; cmd_op = 2'(op); cmd_page = PAGE_W'(page); cmd_bl = ROW_W'(bl);
    cmd_level = 3'(level); cmd_query = q;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    logic [23:0] q;
    cmd_valid = 0; cmd_op = 0; cmd_page = 0; cmd_bl = 0; cmd_level = 0; cmd_query = 0;
    pb_word = 0; pb_bl = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      issue(0, b, 0, 0, 0, cyc);
      for (int p = 0; p < NWL; p++) for (int l = 0; l < NBL; l++) lv[b*NWL + p][l] = 0;
    end
    // page read after erase
    issue(2, 21, 0, 0, 0, cyc);
    chk(cyc == LAT + 1, $sformatf("read latency %0d", cyc));
    for (int l = 0; l < NBL; l += 17) begin pb_bl = ROW_W'(l); #1; chk(pb_level == 0, "erased level"); end
    for (int trial = 0; trial < 4; trial++) begin
      int base;
      base = (trial % 2) * NWL + 8 * (trial / 2);   // both blocks, both groups
      for (int i = 0; i < DBAM_K; i++) q[i*3 +: 3] = 3'($urandom_range(0, 7));
      for (int l = 0; l < NBL; l++)
        for (int i = 0; i < DBAM_K; i++) begin
          int qi, r;
          qi = int'(q[i*3 +: 3]);
          case (l % 4)
            0: r = qi;
            1: r = (qi < 7 && $urandom_range(0, 7) == 0) ? qi + 1 : qi;
            2: r = (qi > 0 && $urandom_range(0, 7) == 0) ? qi - 1 : qi;
            default: r = $urandom_range(0, 7);
          endcase
          lv[base + i][l] = r;
          issue(1, base + i, l, r, 0, cyc);
        end
      issue(3, base, 0, 0, q, cyc);
      chk(cyc == 2*LAT + 1, $sformatf("search latency %0d", cyc));
      for (int w = 0; w < NBL/64; w++) begin
        pb_word = 2'(w); #1;
        for (int b = 0; b < 64; b++) begin
          bit all_le, all_lt;
          int l;
          l = w*64 + b;
          all_le = 1; all_lt = 1;
          for (int i = 0; i < DBAM_K; i++) begin
            int qi;
            qi = int'(q[i*3 +: 3]);
            if (!(2*lv[base+i][l] <= 2*qi + 1)) all_le = 0;   // r <= q + 0.5
            if (!(2*lv[base+i][l] < 2*qi - 1))  all_lt = 0;   // r <  q - 0.5
          end
          chk(pb_ubc[b] == all_le, $sformatf("UBC bl %0d", l));
          chk(pb_lbc[b] == !all_lt, $sformatf("LBC bl %0d", l));
        end
      end
      issue(2, base + 3, 0, 0, 0, cyc);
      for (int l = 0; l < NBL; l++) begin pb_bl = ROW_W'(l); #1; chk(int'(pb_level) == lv[base+3][l], "page read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
