// rasa_lsu: tile load / tile store unit (rasa_tl, rasa_ts).
//
// A tile in memory is 16 rows of 64 bytes separated by a fixed stride. On
// start, a load (op = OP_TL) sends 16 read requests, row r at addr + r*stride,
// and writes the in-order responses into rows 0..15 of register treg; a store
// (op = OP_TS) reads row r of treg and sends it as a write request to
// addr + r*stride. Requests use a valid/ready handshake: a request is sent in
// every cycle in which mem_req_valid and mem_req_ready are both high, one per
// cycle at most. Read responses arrive with mem_rsp_valid, in request order,
// any number of cycles later, and cannot be refused. busy is high from the
// cycle after start until the last response (load) or the last accepted
// write request (store); start is only taken while busy is low.
//
// The tile format (16 x 64B at a stride) is the paper's; the memory interface
// and handshake are this design's choice.
module rasa_lsu
  import rasa_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // command
  input  logic                 start,
  input  rasa_op_e             op,
  input  logic [REG_AW-1:0]    treg,
  input  logic [ADDR_W-1:0]    addr,
  input  logic [31:0]          stride,
  output logic                 busy,
  output logic [REG_AW-1:0]    cur_reg,
  // tile register access
  output logic [ROW_AW-1:0]    rf_rd_row,
  input  logic [ROW_BITS-1:0]  rf_rd_data,
  output logic                 rf_wr_en,
  output logic [ROW_AW-1:0]    rf_wr_row,
  output logic [ROW_BITS-1:0]  rf_wr_data,
  // memory
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_write,
  output logic [ADDR_W-1:0]    mem_req_addr,
  output logic [ROW_BITS-1:0]  mem_req_wdata,
  input  logic                 mem_rsp_valid,
  input  logic [ROW_BITS-1:0]  mem_rsp_rdata
);
  logic              is_load;
  logic [ADDR_W-1:0] next_addr;
  logic [31:0]       stride_q;
  logic [ROW_AW:0]   req_cnt;   // requests sent
  logic [ROW_AW:0]   rsp_cnt;   // load responses received
  logic              fire;

  assign fire          = mem_req_valid && mem_req_ready;
  assign mem_req_valid = busy && (req_cnt < (ROW_AW+1)'(TROWS));
  assign mem_req_write = !is_load;
  assign mem_req_addr  = next_addr;
  assign rf_rd_row     = req_cnt[ROW_AW-1:0];
  assign mem_req_wdata = rf_rd_data;
  assign rf_wr_en      = busy && is_load && mem_rsp_valid;
  assign rf_wr_row     = rsp_cnt[ROW_AW-1:0];
  assign rf_wr_data    = mem_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      is_load   <= 1'b0;
      cur_reg   <= '0;
      next_addr <= '0;
      stride_q  <= '0;
      req_cnt   <= '0;
      rsp_cnt   <= '0;
    end else if (!busy) begin
      if (start) begin
        busy      <= 1'b1;
        is_load   <= (op == OP_TL);
        cur_reg   <= treg;
        next_addr <= addr;
        stride_q  <= stride;
        req_cnt   <= '0;
        rsp_cnt   <= '0;
      end
    end else begin
      if (fire) begin
        req_cnt   <= req_cnt + 1'b1;
        next_addr <= next_addr + ADDR_W'(stride_q);
      end
      if (rf_wr_en) rsp_cnt <= rsp_cnt + 1'b1;
      if (is_load) begin
        if (rf_wr_en && rsp_cnt == (ROW_AW+1)'(TROWS - 1)) busy <= 1'b0;
      end else begin
        if (fire && req_cnt == (ROW_AW+1)'(TROWS - 1)) busy <= 1'b0;
      end
    end
  end

`ifndef SYNTHESIS
  // a response must never arrive for a request that was not sent
  a_rsp_in_order: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (busy && is_load && rsp_cnt < req_cnt));
`endif
endmodule
