// rasa_skew: per-lane delay lines that skew data into, or de-skew data out
// of, the systolic array.
//
// Lane i of in_data appears on out_data after i+1 clock cycles (REVERSE = 0),
// or after LANES-i cycles (REVERSE = 1). With REVERSE = 0 a row of a tile
// read in one cycle enters the array as a diagonal wavefront (lane 0 first);
// with REVERSE = 1 the diagonal wavefront leaving the array is re-aligned into
// one row. Every lane is a chain of registers of width W, reset to zero.
// The paper only says operands enter "in a skewed manner"; the shift-register
// realisation is this design's.
module rasa_skew #(
  parameter int unsigned LANES   = 16,
  parameter int unsigned W       = 32,
  parameter bit          REVERSE = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in_data  [LANES],
  output logic [W-1:0] out_data [LANES]
);
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int unsigned DEPTH = REVERSE ? (LANES - i) : (i + 1);
    logic [W-1:0] pipe [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pipe <= '{default: '0};
      end else begin
        pipe[0] <= in_data[i];
        for (int d = 1; d < DEPTH; d++) pipe[d] <= pipe[d-1];
      end
    end
    assign out_data[i] = pipe[DEPTH-1];
  end
endmodule
