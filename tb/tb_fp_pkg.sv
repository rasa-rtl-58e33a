// tb_fp_pkg: floating-point reference functions for the testbenches.
//
// Values are converted to and from SystemVerilog `real` (IEEE double), which
// holds every FP32 and BF16 value exactly. to_fp32() rounds a double to FP32
// with round to nearest, ties to even, flushing results below the smallest
// normal number to zero, which is the arithmetic the engine implements.
package tb_fp_pkg;

  function automatic real fp32_to_real(input logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic real bf16_to_real(input logic [15:0] h);
    return fp32_to_real({h, 16'd0});
  endfunction

  function automatic logic [31:0] to_fp32(input real x);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;       // with hidden bit
    logic [24:0] r;
    logic        g, st;
    d = $realtobits(x);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    r  = {1'b0, m[52:29]};
    g  = m[28];
    st = (m[27:0] != 0);
    if (g && (st || r[0])) r = r + 25'd1;
    if (r[24]) begin
      r = r >> 1;
      e = e + 1;
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hff, 23'd0};
    return {s, 8'(e), r[22:0]};
  endfunction

  // BF16 value k/4 for a small integer k (exact)
  function automatic logic [15:0] bf16_q4(input int k);
    logic [31:0] f;
    f = to_fp32(real'(k) / 4.0);
    return f[31:16];
  endfunction

endpackage
