// rasa_tile_regfile: the eight architectural tile registers with dirty bits.
//
// NREG registers of TROWS rows x ROW_BITS bits (8 x 16 x 64 bytes, as in the
// AMX-style register model the engine assumes). Four combinational row read
// ports serve the array's A feed, C feed and weight load and the tile store;
// two row write ports take the result write-back and the tile load. The
// controller's scoreboard keeps the two write ports off the same row; should
// they collide anyway, the result write-back port wins.
//
// Each register has a dirty bit, used by the weight-load bypass: it is set by
// any write to the register and cleared (clr_dirty) when the register is
// loaded into a weight buffer. A write in the same cycle as a clear wins, so
// a change is never lost. Dirty bits reset to 1 because the contents after
// reset are unknown. Writes take effect at the clock edge; reads see the
// stored value in the same cycle.
//
// The register count and size and the per-register dirty bit are the paper's;
// the number of ports is this design's choice.
module rasa_tile_regfile
  import rasa_pkg::*;
#(
  parameter int unsigned NREGS    = NREG,
  parameter int unsigned ROWS     = TROWS,
  parameter int unsigned RBITS    = ROW_BITS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // read ports: 0 = A feed, 1 = B weight load, 2 = C feed, 3 = tile store
  input  logic [$clog2(NREGS)-1:0]   rd_reg  [4],
  input  logic [$clog2(ROWS)-1:0]    rd_row  [4],
  output logic [RBITS-1:0]           rd_data [4],
  // write ports: 0 = result write-back, 1 = tile load
  input  logic                       wr_en   [2],
  input  logic [$clog2(NREGS)-1:0]   wr_reg  [2],
  input  logic [$clog2(ROWS)-1:0]    wr_row  [2],
  input  logic [RBITS-1:0]           wr_data [2],
  // dirty bits
  input  logic                       clr_dirty,
  input  logic [$clog2(NREGS)-1:0]   clr_reg,
  output logic [NREGS-1:0]           dirty
);
  logic [RBITS-1:0] mem [NREGS][ROWS];

  always_comb begin
    for (int p = 0; p < 4; p++) rd_data[p] = mem[rd_reg[p]][rd_row[p]];
  end

  // storage: no reset, the dirty bits mark the contents as unknown
  always_ff @(posedge clk) begin
    if (wr_en[1]) mem[wr_reg[1]][wr_row[1]] <= wr_data[1];
    if (wr_en[0]) mem[wr_reg[0]][wr_row[0]] <= wr_data[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dirty <= '1;
    end else begin
      for (int r = 0; r < NREGS; r++) begin
        if ((wr_en[0] && wr_reg[0] == r[$clog2(NREGS)-1:0]) ||
            (wr_en[1] && wr_reg[1] == r[$clog2(NREGS)-1:0]))
          dirty[r] <= 1'b1;
        else if (clr_dirty && clr_reg == r[$clog2(NREGS)-1:0])
          dirty[r] <= 1'b0;
      end
    end
  end
endmodule
