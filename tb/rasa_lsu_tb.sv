// rasa_lsu_tb: tile loads and stores through the load/store unit against the
// behavioural memory (random back-pressure, 3-cycle read latency) and a model
// of the tile register rows. Checks request addresses (base + r * stride),
// the rows written into the register, the data stored to memory, and that a
// full tile of 16 rows is moved each time.
module rasa_lsu_tb;
  import rasa_pkg::*;
  logic                clk = 0, rst_n = 0;
  logic                start;
  rasa_op_e            op;
  logic [REG_AW-1:0]   treg;
  logic [ADDR_W-1:0]   addr;
  logic [31:0]         stride;
  logic                busy;
  logic [REG_AW-1:0]   cur_reg;
  logic [ROW_AW-1:0]   rf_rd_row;
  logic [ROW_BITS-1:0] rf_rd_data;
  logic                rf_wr_en;
  logic [ROW_AW-1:0]   rf_wr_row;
  logic [ROW_BITS-1:0] rf_wr_data;
  logic                mem_req_valid, mem_req_ready, mem_req_write;
  logic [ADDR_W-1:0]   mem_req_addr;
  logic [ROW_BITS-1:0] mem_req_wdata;
  logic                mem_rsp_valid;
  logic [ROW_BITS-1:0] mem_rsp_rdata;
  logic [ROW_BITS-1:0] regs [NREG][TROWS];
  int checks = 0, failures = 0;
  int nreq;
  logic [ADDR_W-1:0] exp_addr;

  rasa_lsu dut (.*);
  rasa_mem_model #(.DEPTH(256), .LAT(3), .STALLS(1'b1)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));
  always #5 clk = ~clk;

  assign rf_rd_data = regs[cur_reg][rf_rd_row];
  always @(posedge clk) if (rf_wr_en) regs[cur_reg][rf_wr_row] <= rf_wr_data;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // every accepted request must go to the next strided address
  always @(posedge clk) begin
    if (mem_req_valid && mem_req_ready) begin
      checks++;
      if (mem_req_addr !== exp_addr) begin
        failures++;
        $display("FAIL address %h expected %h", mem_req_addr, exp_addr);
      end
      exp_addr <= exp_addr + ADDR_W'(stride);
      nreq++;
    end
  end

  task automatic run(input rasa_op_e o, input int r, input int base, input int str);
    op = o; treg = REG_AW'(r); addr = ADDR_W'(base); stride = str;
    exp_addr = ADDR_W'(base); nreq = 0;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    #1;
    while (busy) begin
      @(posedge clk);
      #1;
    end
    checks++;
    if (nreq != TROWS) begin
      failures++;
      $display("FAIL %0d requests", nreq);
    end
  endtask

  initial begin
    start = 0; op = OP_TL; treg = '0; addr = '0; stride = '0;
    for (int i = 0; i < 256; i++)
      for (int w = 0; w < ROW_BITS / 32; w++) u_mem.mem[i][32*w +: 32] = $urandom;
    for (int r = 0; r < NREG; r++)
      for (int w = 0; w < TROWS; w++) regs[r][w] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // loads with two strides, into two registers
    run(OP_TL, 3, 64 * 10, 64);
    run(OP_TL, 5, 64 * 40, 192);
    for (int w = 0; w < TROWS; w++) begin
      checks += 2;
      if (regs[3][w] !== u_mem.mem[10 + w]) begin failures++; $display("FAIL tl row %0d", w); end
      if (regs[5][w] !== u_mem.mem[40 + 3 * w]) begin failures++; $display("FAIL tl2 row %0d", w); end
    end
    // store register 5 elsewhere with another stride
    run(OP_TS, 5, 64 * 120, 128);
    for (int w = 0; w < TROWS; w++) begin
      checks++;
      if (u_mem.mem[120 + 2 * w] !== regs[5][w]) begin failures++; $display("FAIL ts row %0d", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
