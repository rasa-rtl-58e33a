// rasa_array: weight-stationary systolic array of DMDB processing elements
// with the partial-sum merge row underneath.
//
// ROWS x COLS PEs (16 x 16 by default: each PE has two multipliers, so the
// array covers the K = 32 depth of a BF16 tile). A pairs enter the west edge
// of each row and move east; C values enter the north edge of each column as
// partial sum 0 (partial sum 1 starts at zero) and the two partial sums move
// south; weight-link items enter the north edge and move south. The merge row
// adds the two partial sums leaving each column.
//
// Timing: if a_west[r] carries A row m at cycle t + r and c_north[c] carries
// C[m][c] at cycle t + c, then PE(r,c) sees them at t + r + c, and c_south[c]
// holds the finished C[m][c] from cycle t + c + ROWS + 1 (ROWS PE registers
// plus the merge register). Inputs must therefore be skewed by the caller.
module rasa_array
  import rasa_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  a_lane_t a_west  [ROWS],
  input  fp32_t   c_north [COLS],
  input  w_link_t w_north [COLS],
  output fp32_t   c_south [COLS]
);
  // a_h[r][c]: A into PE(r,c) from the west; ps_v / w_v[r][c]: into PE(r,c)
  // from the north (index ROWS is the bottom edge).
  a_lane_t a_h  [ROWS][COLS+1];
  psum_t   ps_v [ROWS+1][COLS];
  w_link_t w_v  [ROWS+1][COLS];
  psum_t   ps_bottom [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_west
    assign a_h[r][0] = a_west[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_north
    assign ps_v[0][c] = '{s1: '0, s0: c_north[c]};
    assign w_v[0][c]  = w_north[c];
    assign ps_bottom[c] = ps_v[ROWS][c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      rasa_pe #(.ROW(r)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .a_in  (a_h[r][c]),
        .a_out (a_h[r][c+1]),
        .ps_in (ps_v[r][c]),
        .ps_out(ps_v[r+1][c]),
        .w_in  (w_v[r][c]),
        .w_out (w_v[r+1][c])
      );
    end
  end

  rasa_merge_row #(.COLS(COLS)) u_merge (
    .clk   (clk),
    .rst_n (rst_n),
    .ps_in (ps_bottom),
    .c_out (c_south)
  );
endmodule
