// bf16_mul: BF16 x BF16 -> FP32 multiplier of a RASA processing element.
//
// The PEs compute in mixed precision: BF16 operands, FP32 accumulation. Both
// formats share the 8-bit exponent with bias 127, and the product of two 8-bit
// significands (with hidden bit) has at most 16 bits, which fits the 24-bit
// FP32 significand. The product is therefore exact and needs no rounding:
// only exponent overflow (-> Inf) and underflow (-> signed zero) are handled.
// Denormal inputs are treated as zero (flush-to-zero), NaN and Inf follow
// IEEE 754 (NaN * x = NaN, Inf * 0 = NaN, Inf * x = Inf). Purely
// combinational. The mixed-precision format is the paper's; the handling of
// special values is this design's choice.
module bf16_mul
  import rasa_pkg::*;
(
  input  bf16_t a,
  input  bf16_t b,
  output fp32_t p
);
  logic        sa, sb, sp;
  logic [7:0]  ea, eb;
  logic [6:0]  ma, mb;
  logic [15:0] prod;
  logic [9:0]  ep;       // signed biased exponent, room for under/overflow
  logic [22:0] mp;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    {sa, ea, ma} = a;
    {sb, eb, mb} = b;
    sp     = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hff) && (ma == 7'd0);
    b_inf  = (eb == 8'hff) && (mb == 7'd0);
    a_nan  = (ea == 8'hff) && (ma != 7'd0);
    b_nan  = (eb == 8'hff) && (mb != 7'd0);
    prod   = {8'd0, 1'b1, ma} * {8'd0, 1'b1, mb};
    ep     = {2'b00, ea} + {2'b00, eb} - 10'd127;
    if (prod[15]) begin
      ep = ep + 10'd1;
      mp = {prod[14:0], 8'd0};
    end else begin
      mp = {prod[13:0], 9'd0};
    end
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      p = 32'h7fc0_0000;
    end else if (a_inf || b_inf) begin
      p = {sp, 8'hff, 23'd0};
    end else if (a_zero || b_zero) begin
      p = {sp, 31'd0};
    end else if (ep[9] || ep == 10'd0) begin
      p = {sp, 31'd0};                 // underflow: flush to zero
    end else if (ep >= 10'd255) begin
      p = {sp, 8'hff, 23'd0};          // overflow: infinity
    end else begin
      p = {sp, ep[7:0], mp};
    end
  end
endmodule
