// rasa_top: RASA matrix engine, DMDB-WLS configuration.
//
// A systolic-array functional unit for a CPU core that executes three
// instructions on eight tile registers (16 rows x 64 bytes each):
//   rasa_tl  treg, [addr, stride]   load a tile from memory
//   rasa_ts  [addr, stride], treg   store a tile to memory
//   rasa_mm  tC, tA, tB             tC += tA x tB  (BF16 in, FP32 out;
//                                   16x32 A, 32x16 B in BF16 pairs, 16x16 C)
// The datapath is a 16x16 weight-stationary array of PEs with two multipliers
// and two weight buffers each, a merge-adder row, and skew/de-skew buffers
// between the tile registers and the array edges. rasa_ctrl overlaps the
// sub-stages of consecutive rasa_mm instructions so that, in steady state, a
// rasa_mm starts every 16 cycles; rasa_lsu moves tiles to and from memory in
// parallel with the array.
//
// Interface: instructions arrive with instr_valid/instr_ready and issue in
// order. The memory port carries one 64-byte row per request (valid/ready),
// with in-order read responses. idle is high when nothing is in flight.
// Latency of one isolated rasa_mm from issue to its last result row written:
// 16 (WL) + 16 (FF) + 34 (array transit) + 1 cycles. A single clock drives
// everything; the paper clocks the array at 500 MHz next to a 2 GHz core,
// which this design leaves to the integration.
module rasa_top
  import rasa_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                instr_valid,
  output logic                instr_ready,
  input  rasa_instr_t         instr,
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic                mem_req_write,
  output logic [ADDR_W-1:0]   mem_req_addr,
  output logic [ROW_BITS-1:0] mem_req_wdata,
  input  logic                mem_rsp_valid,
  input  logic [ROW_BITS-1:0] mem_rsp_rdata,
  output logic                idle,
  // event pulses for performance counting
  output logic                ev_feed_start,
  output logic                ev_wl_start,
  output logic                ev_wl_bypass,
  output logic                ev_wl_overlap,
  output logic                ev_stall,
  output logic                ev_mm_done
);
  // ---------------- register file
  logic [REG_AW-1:0]   rd_reg  [4];
  logic [ROW_AW-1:0]   rd_row  [4];
  logic [ROW_BITS-1:0] rd_data [4];
  logic                wr_en   [2];
  logic [REG_AW-1:0]   wr_reg  [2];
  logic [ROW_AW-1:0]   wr_row  [2];
  logic [ROW_BITS-1:0] wr_data [2];
  logic                clr_dirty;
  logic [REG_AW-1:0]   clr_reg;
  logic [NREG-1:0]     dirty;

  rasa_tile_regfile u_rf (
    .clk, .rst_n,
    .rd_reg, .rd_row, .rd_data,
    .wr_en, .wr_reg, .wr_row, .wr_data,
    .clr_dirty, .clr_reg, .dirty
  );

  // ---------------- controller
  logic              feed_valid, feed_sel, wl_valid, wl_sel;
  logic              lsu_start, lsu_busy;
  logic [REG_AW-1:0] lsu_reg;
  logic [ROW_AW-1:0] b_row;

  rasa_ctrl u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr_ready, .instr,
    .a_reg (rd_reg[0]), .a_row (rd_row[0]),
    .b_reg (rd_reg[1]), .b_row (b_row),
    .c_reg (rd_reg[2]), .c_row (rd_row[2]),
    .wb_en (wr_en[0]),  .wb_reg (wr_reg[0]), .wb_row (wr_row[0]),
    .dirty, .clr_dirty, .clr_reg,
    .feed_valid, .feed_sel, .wl_valid, .wl_sel,
    .lsu_start, .lsu_busy, .lsu_reg,
    .idle,
    .ev_feed_start, .ev_wl_start, .ev_wl_bypass, .ev_wl_overlap,
    .ev_stall, .ev_mm_done
  );
  assign rd_row[1] = b_row;

  // ---------------- tile load / store unit
  rasa_lsu u_lsu (
    .clk, .rst_n,
    .start  (lsu_start),
    .op     (instr.op),
    .treg   (instr.rd),
    .addr   (instr.addr),
    .stride (instr.stride),
    .busy   (lsu_busy),
    .cur_reg(lsu_reg),
    .rf_rd_row (rd_row[3]),
    .rf_rd_data(rd_data[3]),
    .rf_wr_en  (wr_en[1]),
    .rf_wr_row (wr_row[1]),
    .rf_wr_data(wr_data[1]),
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr,
    .mem_req_wdata, .mem_rsp_valid, .mem_rsp_rdata
  );
  assign rd_reg[3] = lsu_reg;
  assign wr_reg[1] = lsu_reg;

  // ---------------- edge formatting and skew
  logic [$bits(a_lane_t)-1:0] a_fmt [ARR_ROWS], a_skw [ARR_ROWS];
  logic [31:0]                c_fmt [ARR_COLS], c_skw [ARR_COLS];
  logic [$bits(w_link_t)-1:0] w_fmt [ARR_COLS], w_skw [ARR_COLS];
  logic [31:0]                r_fmt [ARR_COLS], r_dsk [ARR_COLS];
  a_lane_t a_west  [ARR_ROWS];
  fp32_t   c_north [ARR_COLS];
  w_link_t w_north [ARR_COLS];
  fp32_t   c_south [ARR_COLS];

  for (genvar r = 0; r < ARR_ROWS; r++) begin : g_a
    a_lane_t lane;
    assign lane = '{valid: feed_valid, sel: feed_sel,
                    a1: rd_data[0][32*r+16 +: 16], a0: rd_data[0][32*r +: 16]};
    assign a_fmt[r]   = lane;
    assign a_west[r]  = a_lane_t'(a_skw[r]);
  end
  for (genvar c = 0; c < ARR_COLS; c++) begin : g_c
    w_link_t item;
    assign item = '{valid: wl_valid, row: b_row, sel: wl_sel,
                    w1: rd_data[1][32*c+16 +: 16], w0: rd_data[1][32*c +: 16]};
    assign w_fmt[c]   = item;
    assign w_north[c] = w_link_t'(w_skw[c]);
    assign c_fmt[c]   = rd_data[2][32*c +: 32];
    assign c_north[c] = c_skw[c];
    assign r_fmt[c]   = c_south[c];
    assign wr_data[0][32*c +: 32] = r_dsk[c];
  end

  rasa_skew #(.LANES(ARR_ROWS), .W($bits(a_lane_t)), .REVERSE(1'b0)) u_skew_a (
    .clk, .rst_n, .in_data(a_fmt), .out_data(a_skw));
  rasa_skew #(.LANES(ARR_COLS), .W(32), .REVERSE(1'b0)) u_skew_c (
    .clk, .rst_n, .in_data(c_fmt), .out_data(c_skw));
  rasa_skew #(.LANES(ARR_COLS), .W($bits(w_link_t)), .REVERSE(1'b0)) u_skew_w (
    .clk, .rst_n, .in_data(w_fmt), .out_data(w_skw));
  rasa_skew #(.LANES(ARR_COLS), .W(32), .REVERSE(1'b1)) u_deskew (
    .clk, .rst_n, .in_data(r_fmt), .out_data(r_dsk));

  // ---------------- systolic array
  rasa_array #(.ROWS(ARR_ROWS), .COLS(ARR_COLS)) u_array (
    .clk, .rst_n, .a_west, .c_north, .w_north, .c_south);
endmodule
