// rasa_skew_tb: drives random words into a skewing and a de-skewing instance
// every cycle, keeps a history of the inputs, and checks that lane i comes
// out exactly i+1 cycles later (skew) or LANES-i cycles later (de-skew).
module rasa_skew_tb;
  localparam int unsigned LANES = 16;
  localparam int unsigned W = 12;
  localparam int unsigned N = 200;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] din [LANES], dsk [LANES], ddsk [LANES];
  logic [W-1:0] hist [N][LANES];
  int checks = 0, failures = 0;

  rasa_skew #(.LANES(LANES), .W(W), .REVERSE(1'b0)) u_skew (
    .clk, .rst_n, .in_data(din), .out_data(dsk));
  rasa_skew #(.LANES(LANES), .W(W), .REVERSE(1'b1)) u_deskew (
    .clk, .rst_n, .in_data(din), .out_data(ddsk));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < N; t++) begin
      for (int l = 0; l < LANES; l++) begin
        hist[t][l] = W'($urandom);
        din[l] <= hist[t][l];
      end
      @(posedge clk);
      #1;
      // after the edge ending cycle t, lane l shows the word of cycle t-l
      for (int l = 0; l < LANES; l++) begin
        if (t >= l) begin
          checks++;
          if (dsk[l] !== hist[t-l][l]) begin
            failures++;
            $display("FAIL skew lane %0d cycle %0d", l, t);
          end
        end
        if (t >= LANES - 1 - l) begin
          checks++;
          if (ddsk[l] !== hist[t-(LANES-1-l)][l]) begin
            failures++;
            $display("FAIL deskew lane %0d cycle %0d", l, t);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
