// rasa_mem_model: behavioural memory for the testbenches (not synthesizable
// design content). Holds DEPTH rows of 64 bytes addressed by byte address
// (row = addr / 64). Accepts a request whenever req_ready is high; ready is
// pseudo-randomly withheld when STALLS is set. Reads return the row LAT
// cycles after acceptance, in order; writes update the row at acceptance.
module rasa_mem_model #(
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned LAT    = 3,
  parameter bit          STALLS = 1'b1
) (
  input  logic         clk,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_write,
  input  logic [47:0]  req_addr,
  input  logic [511:0] req_wdata,
  output logic         rsp_valid,
  output logic [511:0] rsp_rdata
);
  logic [511:0] mem [DEPTH];
  logic         pv [LAT];
  logic [511:0] pd [LAT];
  int unsigned  n_reads = 0, n_writes = 0;

  initial begin
    req_ready = 1'b1;
    for (int i = 0; i < LAT; i++) begin
      pv[i] = 1'b0;
      pd[i] = '0;
    end
  end

  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (req_write) begin
        mem[req_addr[47:6] % DEPTH] <= req_wdata;
        n_writes++;
      end else begin
        pv[0] <= 1'b1;
        pd[0] <= mem[req_addr[47:6] % DEPTH];
        n_reads++;
      end
    end
    req_ready <= STALLS ? ($urandom_range(0, 3) != 0) : 1'b1;
  end
endmodule
