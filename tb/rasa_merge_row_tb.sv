// rasa_merge_row_tb: random partial-sum pairs into every column; one cycle
// later each column must hold s0 + s1 rounded to FP32.
module rasa_merge_row_tb;
  import rasa_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned COLS = 16;
  logic  clk = 0, rst_n = 0;
  psum_t ps_in [COLS];
  fp32_t c_out [COLS];
  fp32_t expv  [COLS];
  int checks = 0, failures = 0;

  rasa_merge_row #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    ps_in = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 100; i++) begin
      for (int c = 0; c < COLS; c++) begin
        e = $urandom_range(100, 150);
        ps_in[c].s0 = {1'($urandom), 8'(e), 23'($urandom)};
        ps_in[c].s1 = {1'($urandom), 8'(e + $urandom_range(0, 20) - 10), 23'($urandom)};
        expv[c] = to_fp32(fp32_to_real(ps_in[c].s0) + fp32_to_real(ps_in[c].s1));
      end
      @(posedge clk);
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (c_out[c] !== expv[c]) begin
          failures++;
          $display("FAIL col %0d: %h expected %h", c, c_out[c], expv[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
