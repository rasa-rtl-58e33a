// rasa_pe: double-multiplier, double-buffered (DMDB) processing element.
//
// Weight-stationary PE of the RASA array. It holds two weight buffers, each
// a pair of BF16 weights (the even and odd K element of one B-tile pair row).
// Every cycle it multiplies the A pair arriving from the west with the pair in
// the buffer chosen by the select bit that travels with A, adds product 0 to
// partial sum 0 and product 1 to partial sum 1 (both from the north), and
// registers the two new partial sums towards the south. The A pair is
// registered towards the east unchanged. Because each A element carries its
// own buffer select, the switch from one instruction's weights to the next
// moves through the array together with the data wavefront.
//
// Weights arrive over a dedicated weight link: items travel south one row per
// cycle; an item is written into buffer `sel` of the PE whose row index
// matches the item's `row` field, at the end of the cycle in which it passes.
// The link therefore never disturbs the buffer that is being computed with,
// which is what lets the next instruction's weight load overlap the current
// instruction's feed (weight-load skip, WLS).
//
// Timing: one-cycle latency from a_in/ps_in/w_in to a_out/ps_out/w_out.
// Follows the paper: two multipliers and two adders per PE, two weight
// buffers with extra links. Own choices: the select bit carried with A, the
// row-addressed weight link. Parameter ROW is the PE's row in the array.
module rasa_pe
  import rasa_pkg::*;
#(
  parameter int unsigned ROW = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  a_lane_t a_in,
  output a_lane_t a_out,
  input  psum_t   ps_in,
  output psum_t   ps_out,
  input  w_link_t w_in,
  output w_link_t w_out
);
  bf16_t w0_q [2];
  bf16_t w1_q [2];
  bf16_t w0, w1;
  fp32_t p0, p1, s0, s1;

  always_comb begin
    w0 = w0_q[a_in.sel];
    w1 = w1_q[a_in.sel];
  end

  bf16_mul u_mul0 (.a(a_in.a0), .b(w0), .p(p0));
  bf16_mul u_mul1 (.a(a_in.a1), .b(w1), .p(p1));
  fp32_add u_add0 (.a(ps_in.s0), .b(p0), .s(s0));
  fp32_add u_add1 (.a(ps_in.s1), .b(p1), .s(s1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out  <= '0;
      ps_out <= '0;
      w_out  <= '0;
      w0_q   <= '{default: '0};
      w1_q   <= '{default: '0};
    end else begin
      a_out  <= a_in;
      ps_out <= '{s1: s1, s0: s0};
      w_out  <= w_in;
      if (w_in.valid && (w_in.row == ROW_AW'(ROW))) begin
        w0_q[w_in.sel] <= w_in.w0;
        w1_q[w_in.sel] <= w_in.w1;
      end
    end
  end
endmodule
