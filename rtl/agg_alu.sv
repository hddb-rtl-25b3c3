// agg_alu: the LU dictionary NSP's aggregation ALUs (paper: 2 units supporting
// SUM/AVG/MIN/MAX; COUNT is listed among the supported aggregates too).
//
// Decoded key values of the selected rows are folded into a running state
// (count, sum, minimum, maximum), UNITS values per cycle: each unit adds its
// value and compares it with the current extremes, and the unit results are
// combined in the same cycle. `clear` starts a new aggregate. `result` is the
// aggregate for `op` and is combinational from the state; AVG is the integer
// quotient sum / count (0 when nothing was counted). The integer semantics,
// state widths and the combined two-lane fold are this design's choices.
//
// Interface: in_valid with in_mask (which lanes carry a value) and in_val per
// lane; the state updates at the clock edge.
module agg_alu
  import hddb_pkg::*;
#(
  parameter int unsigned UNITS = 2,
  parameter int unsigned VAL_W = 16,
  parameter int unsigned SUM_W = 40,
  parameter int unsigned CNT_W = 24
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        in_valid,
  input  logic [UNITS-1:0]            in_mask,
  input  logic [UNITS-1:0][VAL_W-1:0] in_val,
  input  agg_op_e                     op,
  output logic [SUM_W-1:0]            result,
  output logic [CNT_W-1:0]            count
);
  logic [SUM_W-1:0] sum_q;
  logic [VAL_W-1:0] min_q, max_q;
  logic [SUM_W-1:0] sum_n;
  logic [CNT_W-1:0] cnt_n;
  logic [VAL_W-1:0] min_n, max_n;

  always_comb begin
    sum_n = sum_q;
    cnt_n = count;
    min_n = min_q;
    max_n = max_q;
    for (int unsigned u = 0; u < UNITS; u++) begin
      if (in_mask[u]) begin
        sum_n = sum_n + SUM_W'(in_val[u]);
        cnt_n = cnt_n + 1'b1;
        if (in_val[u] < min_n) min_n = in_val[u];
        if (in_val[u] > max_n) max_n = in_val[u];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      sum_q <= '0;
      count <= '0;
      min_q <= '1;
      max_q <= '0;
    end else if (in_valid) begin
      sum_q <= sum_n;
      count <= cnt_n;
      min_q <= min_n;
      max_q <= max_n;
    end
  end

  always_comb begin
    unique case (op)
      AGG_COUNT: result = SUM_W'(count);
      AGG_SUM:   result = sum_q;
      AGG_AVG:   result = (count == 0) ? '0 : sum_q / SUM_W'(count);
      AGG_MIN:   result = SUM_W'(min_q);
      AGG_MAX:   result = SUM_W'(max_q);
      default:   result = SUM_W'(count);
    endcase
  end
endmodule
