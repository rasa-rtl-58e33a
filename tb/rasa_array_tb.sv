// rasa_array_tb: end-to-end check of the DMDB array with merge row, built
// at 8x8 PEs here to keep the build short (the full 16x16 array is exercised
// by the engine-level test).
//
// Three tile multiplies run back to back with the schedule the controller
// uses: weight load of instruction q (into buffer q mod 2) in cycles
// 16q .. 16q+15, feed of instruction q in cycles 16(q+1) .. 16(q+1)+15, so
// each weight load overlaps the previous instruction's feed and the third
// load rewrites buffer 0 while the first instruction's data is still in the
// array. The testbench skews the inputs itself: A row m, lane r enters at
// f + m + r; C[m][c] at f + m + c; weight item j of column c at s + j + c.
// Result C[m][c] must appear on c_south[c] in cycle f + m + c + ROWS + 1.
// Values are multiples of 1/4 with small numerators, so every sum is exact
// and the reference is integer arithmetic in units of 1/16.
module rasa_array_tb;
  import rasa_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned ROWS = 8;
  localparam int unsigned COLS = 8;
  localparam int unsigned M = 16;
  localparam int unsigned NQ = 3;
  logic    clk = 0, rst_n = 0;
  a_lane_t a_west  [ROWS];
  fp32_t   c_north [COLS];
  w_link_t w_north [COLS];
  fp32_t   c_south [COLS];
  int checks = 0, failures = 0;
  // operands as quarter-integers: A[q][m][k], B[q][k][n], C[q][m][n]
  int qa [NQ][M][2*ROWS];
  int qb [NQ][2*ROWS][COLS];
  int qc [NQ][M][COLS];
  int seen;

  rasa_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref16(input int q, input int m, input int n);
    int acc = 4 * qc[q][m][n];
    for (int k = 0; k < 2 * ROWS; k++) acc += qa[q][m][k] * qb[q][k][n];
    return acc;
  endfunction

  initial begin
    for (int q = 0; q < NQ; q++) begin
      for (int m = 0; m < M; m++)
        for (int k = 0; k < 2 * ROWS; k++) qa[q][m][k] = $urandom_range(0, 16) - 8;
      for (int k = 0; k < 2 * ROWS; k++)
        for (int n = 0; n < COLS; n++) qb[q][k][n] = $urandom_range(0, 16) - 8;
      for (int m = 0; m < M; m++)
        for (int n = 0; n < COLS; n++) qc[q][m][n] = $urandom_range(0, 200) - 100;
    end
    a_west = '{default: '0}; c_north = '{default: '0}; w_north = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    seen = 0;
    for (int t = 0; t < 16 * (NQ + 1) + M + ROWS + COLS + 8; t++) begin
      @(posedge clk);
      #1;
      // outputs of cycle t
      for (int c = 0; c < COLS; c++) begin
        automatic int rel = t - int'(c) - int'(ROWS) - 1 - 16;   // = 16q + m
        if (rel >= 0 && rel < 16 * int'(NQ)) begin
          automatic int q = rel / 16, m = rel % 16;
          checks++;
          seen++;
          if (c_south[c] !== to_fp32(real'(ref16(q, m, c)) / 16.0)) begin
            failures++;
            $display("FAIL q%0d C[%0d][%0d] = %h expected %h", q, m, c,
                     c_south[c], to_fp32(real'(ref16(q, m, c)) / 16.0));
          end
        end
      end
      // inputs of cycle t
      for (int r = 0; r < ROWS; r++) begin
        automatic int rel = t - r - 16;
        a_west[r] = '0;
        if (rel >= 0 && rel < 16 * int'(NQ)) begin
          automatic int q = rel / 16, m = rel % 16;
          a_west[r] = '{valid: 1'b1, sel: 1'(q), a1: bf16_q4(qa[q][m][2*r+1]),
                        a0: bf16_q4(qa[q][m][2*r])};
        end
      end
      for (int c = 0; c < COLS; c++) begin
        automatic int rel = t - c - 16;
        automatic int relw = t - c;
        c_north[c] = '0;
        w_north[c] = '0;
        if (rel >= 0 && rel < 16 * int'(NQ)) begin
          logic [31:0] cv;
          cv = to_fp32(real'(qc[rel/16][rel%16][c]) / 4.0);
          c_north[c] = cv;
        end
        if (relw >= 0 && relw < 16 * int'(NQ)) begin
          automatic int q = relw / 16, j = relw % 16;
          w_north[c] = '{valid: 1'b1, row: ROW_AW'(j), sel: 1'(q),
                         w1: bf16_q4(qb[q][2*j+1][c]), w0: bf16_q4(qb[q][2*j][c])};
        end
      end
    end
    checks++;
    if (seen != int'(NQ * M * COLS)) begin
      failures++;
      $display("FAIL only %0d results seen", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
