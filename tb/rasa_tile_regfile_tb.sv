// rasa_tile_regfile_tb: random traffic on all four read and two write ports
// of the tile register file, compared with a model array, plus the dirty-bit
// rules: set by a write on either port, cleared by clr_dirty, set wins.
module rasa_tile_regfile_tb;
  import rasa_pkg::*;
  logic                clk = 0, rst_n = 0;
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
  logic [ROW_BITS-1:0] model [NREG][TROWS];
  logic [NREG-1:0]     mdirty;
  int checks = 0, failures = 0;

  rasa_tile_regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ROW_BITS-1:0] rnd_row();
    logic [ROW_BITS-1:0] v;
    for (int i = 0; i < ROW_BITS / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    wr_en = '{default: 1'b0}; clr_dirty = 0; clr_reg = '0;
    rd_reg = '{default: '0}; rd_row = '{default: '0};
    wr_reg = '{default: '0}; wr_row = '{default: '0}; wr_data = '{default: '0};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    checks++;
    if (dirty !== '1) begin failures++; $display("FAIL dirty reset"); end
    // fill everything through both ports
    for (int r = 0; r < NREG; r++)
      for (int w = 0; w < TROWS; w++) begin
        model[r][w] = rnd_row();
        wr_en[r % 2] = 1'b1; wr_en[1 - r % 2] = 1'b0;
        wr_reg[r % 2] = REG_AW'(r); wr_row[r % 2] = ROW_AW'(w);
        wr_data[r % 2] = model[r][w];
        @(posedge clk);
        #1;
      end
    wr_en = '{default: 1'b0};
    mdirty = '1;
    for (int i = 0; i < 3000; i++) begin
      // reads of the current contents
      for (int p = 0; p < 4; p++) begin
        rd_reg[p] = REG_AW'($urandom);
        rd_row[p] = ROW_AW'($urandom);
      end
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rd_data[p] !== model[rd_reg[p]][rd_row[p]]) begin
          failures++;
          $display("FAIL read port %0d reg %0d row %0d", p, rd_reg[p], rd_row[p]);
        end
      end
      // random writes (never the same row twice) and dirty clears
      wr_en[0] = ($urandom_range(0, 3) == 0);
      wr_en[1] = ($urandom_range(0, 3) == 0);
      for (int p = 0; p < 2; p++) begin
        wr_reg[p] = REG_AW'($urandom); wr_row[p] = ROW_AW'($urandom);
        wr_data[p] = rnd_row();
      end
      if (wr_reg[0] == wr_reg[1] && wr_row[0] == wr_row[1]) wr_en[1] = 1'b0;
      clr_dirty = ($urandom_range(0, 1) == 0);
      clr_reg   = (i % 5 == 0 && wr_en[0]) ? wr_reg[0] : REG_AW'($urandom);
      @(posedge clk);
      if (clr_dirty) mdirty[clr_reg] = 1'b0;
      for (int p = 0; p < 2; p++)
        if (wr_en[p]) begin
          model[wr_reg[p]][wr_row[p]] = wr_data[p];
          mdirty[wr_reg[p]] = 1'b1;
        end
      #1;
      checks++;
      if (dirty !== mdirty) begin
        failures++;
        $display("FAIL dirty %b expected %b", dirty, mdirty);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
