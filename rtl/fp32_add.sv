// fp32_add: FP32 adder used for the PE accumulations and the merge row.
//
// Single-cycle combinational IEEE 754 binary32 addition with round to nearest,
// ties to even. The operand with the larger magnitude is kept as is; the other
// is shifted right into a 27-bit window (24 significand bits, guard, round,
// and a sticky bit collecting everything shifted further). After the add or
// subtract the result is normalised (one right shift on carry-out, a leading
// zero count for cancellation) and rounded. Denormal inputs and results are
// flushed to zero; Inf and NaN follow IEEE 754 (Inf - Inf = NaN). The paper
// only says each PE has FP32 adders; this arithmetic detail is this design's.
module fp32_add
  import rasa_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t s
);
  logic        sx, sy, sub;
  logic [7:0]  ex, ey, d;
  logic [23:0] mx, my;
  logic [26:0] xw, yw, ysh;
  logic [27:0] sum;
  logic [26:0] nrm;
  logic [9:0]  er;           // signed result exponent
  logic [4:0]  lz;
  logic        sticky, rnd_up;
  logic [24:0] rm;           // rounded significand with carry
  logic        a_nan, b_nan, a_inf, b_inf;

  always_comb begin
    a_nan = (a[30:23] == 8'hff) && (a[22:0] != 0);
    b_nan = (b[30:23] == 8'hff) && (b[22:0] != 0);
    a_inf = (a[30:23] == 8'hff) && (a[22:0] == 0);
    b_inf = (b[30:23] == 8'hff) && (b[22:0] == 0);
    // order by magnitude: x is the larger one
    if (a[30:0] >= b[30:0]) begin
      {sx, ex} = {a[31], a[30:23]};
      {sy, ey} = {b[31], b[30:23]};
      mx = (a[30:23] == 0) ? 24'd0 : {1'b1, a[22:0]};
      my = (b[30:23] == 0) ? 24'd0 : {1'b1, b[22:0]};
    end else begin
      {sx, ex} = {b[31], b[30:23]};
      {sy, ey} = {a[31], a[30:23]};
      mx = (b[30:23] == 0) ? 24'd0 : {1'b1, b[22:0]};
      my = (a[30:23] == 0) ? 24'd0 : {1'b1, a[22:0]};
    end
    if (ey == 0) ey = ex;      // zero operand: no alignment needed
    sub = sx ^ sy;
    d   = ex - ey;
    xw  = {mx, 3'b000};
    yw  = {my, 3'b000};
    // alignment shift with sticky
    if (d >= 8'd27) begin
      ysh    = 27'd0;
      sticky = (my != 0);
    end else begin
      ysh    = yw >> d;
      sticky = ((yw & ((27'd1 << d) - 27'd1)) != 0);
    end
    ysh[0] = ysh[0] | sticky;
    sum = sub ? ({1'b0, xw} - {1'b0, ysh}) : ({1'b0, xw} + {1'b0, ysh});
    er  = {2'b00, ex};
    lz  = 5'd0;
    nrm = 27'd0;
    if (sum[27]) begin
      nrm = sum[27:1];
      nrm[0] = sum[1] | sum[0];
      er  = er + 10'd1;
    end else begin
      // count leading zeros of sum[26:0]
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      nrm = sum[26:0] << lz;
      er  = er - {5'd0, lz};
    end
    // round to nearest even: nrm = [26:3] significand, [2] guard, [1:0] rest
    rnd_up = nrm[2] && (nrm[1] || nrm[0] || nrm[3]);
    rm     = {1'b0, nrm[26:3]} + {24'd0, rnd_up};
    if (rm[24]) begin
      rm = rm >> 1;
      er = er + 10'd1;
    end
    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31]))) begin
      s = 32'h7fc0_0000;
    end else if (a_inf || b_inf) begin
      s = a_inf ? a : b;
    end else if (sum == 28'd0) begin
      s = {sx & sy, 31'd0};              // exact zero: -0 only for -0 + -0
    end else if (er[9] || er == 10'd0) begin
      s = {sx, 31'd0};                   // underflow: flush to zero
    end else if (er >= 10'd255) begin
      s = {sx, 8'hff, 23'd0};
    end else begin
      s = {sx, er[7:0], rm[22:0]};
    end
  end
endmodule
