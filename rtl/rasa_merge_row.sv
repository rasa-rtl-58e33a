// rasa_merge_row: the row of adders below the double-multiplier array.
//
// Each column of a double-multiplier array carries two partial sums (even-K
// and odd-K products). This row adds them, s0 + s1, with one FP32 adder per
// column and registers the merged value: one cycle of latency, a new result
// per column every cycle. The adder row is the paper's; the output register
// is this design's choice.
module rasa_merge_row
  import rasa_pkg::*;
#(
  parameter int unsigned COLS = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  psum_t ps_in [COLS],
  output fp32_t c_out [COLS]
);
  for (genvar c = 0; c < COLS; c++) begin : g_col
    fp32_t sum;
    fp32_add u_add (.a(ps_in[c].s0), .b(ps_in[c].s1), .s(sum));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) c_out[c] <= '0;
      else        c_out[c] <= sum;
    end
  end
endmodule
