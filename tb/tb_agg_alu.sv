// Testbench for agg_alu: random value streams, one or two values per cycle,
// folded and compared with COUNT, SUM, AVG, MIN and MAX computed here.
module tb_agg_alu;
  import hddb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid;
  logic [1:0] in_mask;
  logic [1:0][15:0] in_val;
  agg_op_e op;
  logic [39:0] result;
  logic [23:0] count;
  int checks = 0, failures = 0;

  agg_alu #(.UNITS(2), .VAL_W(16), .SUM_W(40), .CNT_W(24)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    clear = 0; in_valid = 0; in_mask = 0; in_val = 0; op = AGG_SUM;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      longint sum; int cnt, mn, mx, len;
      sum = 0; cnt = 0; mn = 65535; mx = 0;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      len = $urandom_range(1, 60);
      for (int n = 0; n < len; n++) begin
        in_valid = 1;
        in_mask = 2'($urandom_range(0, 3));
        in_val[0] = 16'($urandom()); in_val[1] = 16'($urandom());
        for (int u = 0; u < 2; u++) if (in_mask[u]) begin
          sum += in_val[u]; cnt++;
          if (in_val[u] < mn) mn = in_val[u];
          if (in_val[u] > mx) mx = in_val[u];
        end
        @(negedge clk);
      end
      in_valid = 0;
      #1;
      for (int o = 1; o <= 5; o++) begin
        longint e;
        op = agg_op_e'(o); #1;
        case (op)
          AGG_COUNT: e = cnt;
          AGG_SUM:   e = sum;
          AGG_AVG:   e = (cnt == 0) ? 0 : sum / cnt;
          AGG_MIN:   e = mn;
          default:   e = mx;
        endcase
        if (cnt == 0 && (op == AGG_MIN || op == AGG_MAX)) continue;
        checks++;
        if (longint'(result) != e) begin failures++; $display("FAIL op %0d got %0d exp %0d", o, result, e); end
      end
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
