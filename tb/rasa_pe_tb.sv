// rasa_pe_tb: checks one DMDB processing element.
//
// Loads different weight pairs into both buffers over the weight link (and
// sends items addressed to another row, which must be ignored), then streams
// A pairs with both buffer selects and checks, one cycle later, the two
// partial sums (reference: exact product, sum rounded to FP32) and the
// forwarded A and weight-link items. Also checks that a weight load into one
// buffer leaves computation with the other buffer undisturbed.
module rasa_pe_tb;
  import rasa_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned MYROW = 5;
  logic clk = 0, rst_n = 0;
  a_lane_t a_in, a_out;
  psum_t   ps_in, ps_out;
  w_link_t w_in, w_out;
  int checks = 0, failures = 0;
  bf16_t wt0 [2], wt1 [2];

  rasa_pe #(.ROW(MYROW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic fp32_t ref_acc(input fp32_t s, input bf16_t a, input bf16_t w);
    return to_fp32(fp32_to_real(s) + bf16_to_real(a) * bf16_to_real(w));
  endfunction

  task automatic load_w(input logic sel, input bf16_t v0, input bf16_t v1);
    w_in <= '{valid: 1'b1, row: ROW_AW'(MYROW), sel: sel, w1: v1, w0: v0};
    @(posedge clk);
    // the forwarded item shows the link is a one-stage pipeline
    #1 chk(w_out.valid && w_out.w0 == v0 && w_out.w1 == v1 && w_out.sel == sel,
           "weight link forward");
  endtask

  initial begin
    a_in = '0; ps_in = '0; w_in = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    wt0[0] = bf16_q4(6);  wt1[0] = bf16_q4(-3);
    wt0[1] = bf16_q4(-7); wt1[1] = bf16_q4(5);
    load_w(1'b0, wt0[0], wt1[0]);
    load_w(1'b1, wt0[1], wt1[1]);
    // items for other rows must not be taken
    w_in <= '{valid: 1'b1, row: ROW_AW'(MYROW + 1), sel: 1'b0,
              w1: bf16_q4(1), w0: bf16_q4(1)};
    @(posedge clk);
    w_in <= '{valid: 1'b0, row: ROW_AW'(MYROW), sel: 1'b1,
              w1: bf16_q4(2), w0: bf16_q4(2)};
    @(posedge clk);
    w_in <= '0;
    for (int i = 0; i < 200; i++) begin
      a_lane_t a;
      psum_t   p;
      logic    sel;
      sel = 1'($urandom);
      a = '{valid: 1'b1, sel: sel,
            a1: {1'($urandom), 8'($urandom_range(100, 150)), 7'($urandom)},
            a0: {1'($urandom), 8'($urandom_range(100, 150)), 7'($urandom)}};
      p = '{s1: {1'($urandom), 8'($urandom_range(110, 140)), 23'($urandom)},
            s0: {1'($urandom), 8'($urandom_range(110, 140)), 23'($urandom)}};
      // while computing with buffer sel, reload the other buffer with the
      // same values: the computation must not notice
      if (i % 3 == 0)
        w_in <= '{valid: 1'b1, row: ROW_AW'(MYROW), sel: !sel,
                  w1: wt1[!sel], w0: wt0[!sel]};
      else
        w_in <= '0;
      a_in  <= a;
      ps_in <= p;
      @(posedge clk);
      #1;
      chk(a_out == a, "A forwarded east");
      chk(ps_out.s0 == ref_acc(p.s0, a.a0, wt0[sel]), "partial sum 0");
      chk(ps_out.s1 == ref_acc(p.s1, a.a1, wt1[sel]), "partial sum 1");
    end
    // a real weight change in buffer 0 takes effect for the next use
    w_in <= '{valid: 1'b1, row: ROW_AW'(MYROW), sel: 1'b0,
              w1: bf16_q4(2), w0: bf16_q4(4)};
    a_in <= '{valid: 1'b1, sel: 1'b1, a1: bf16_q4(4), a0: bf16_q4(4)};
    ps_in <= '0;
    @(posedge clk);
    #1 chk(ps_out.s0 == to_fp32(-7.0 / 4.0), "buffer 1 kept during load of 0");
    w_in <= '0;
    a_in <= '{valid: 1'b1, sel: 1'b0, a1: bf16_q4(4), a0: bf16_q4(4)};
    @(posedge clk);
    #1 chk(ps_out.s0 == to_fp32(1.0) && ps_out.s1 == to_fp32(0.5), "new buffer 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
