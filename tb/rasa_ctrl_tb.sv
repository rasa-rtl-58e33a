// rasa_ctrl_tb: checks the RASA controller's schedule on its own.
//
// The testbench plays register file (dirty bits) and load/store unit (busy
// for 20 cycles after a start), issues instruction sequences, and checks:
//  * each weight load reads rows 0..15 of its B register in 16 consecutive
//    cycles, into the buffer the model predicts (toggle on a load, keep on a
//    bypass); a bypass happens exactly when B repeats with a clear dirty bit;
//  * each feed reads rows 0..15 of A and C in 16 consecutive cycles, with the
//    buffer select of its weights, and starts only after its weight load;
//  * a weight load into a buffer starts at least 16 cycles after the last
//    feed that used that buffer started (the array data has moved past);
//  * each fed row is written back exactly WB_DELAY = 34 cycles later;
//  * back-to-back rasa_mm with changing B start a feed every 16 cycles;
//  * a rasa_mm whose C is still being computed waits (stall) until written.
module rasa_ctrl_tb;
  import rasa_pkg::*;
  localparam int unsigned WBD = 34;
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready;
  rasa_instr_t instr;
  logic [REG_AW-1:0] a_reg, b_reg, c_reg, wb_reg, clr_reg, lsu_reg;
  logic [ROW_AW-1:0] a_row, b_row, c_row, wb_row;
  logic wb_en, clr_dirty, feed_valid, feed_sel, wl_valid, wl_sel;
  logic lsu_start, lsu_busy, idle;
  logic [NREG-1:0] dirty;
  logic ev_feed_start, ev_wl_start, ev_wl_bypass, ev_wl_overlap, ev_stall, ev_mm_done;
  int checks = 0, failures = 0;
  longint cycle = 0;
  int lsu_cnt = 0;

  rasa_ctrl #(.WB_DELAY(WBD)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- environment: dirty bits and a load/store unit
  assign lsu_busy = (lsu_cnt != 0);
  always @(posedge clk) begin
    if (!rst_n) begin
      dirty   <= '1;
      lsu_cnt <= 0;
      lsu_reg <= '0;
    end else begin
      for (int r = 0; r < NREG; r++) begin
        if ((wb_en && wb_reg == r) || (lsu_start && instr.rd == r && instr.op == OP_TL))
          dirty[r] <= 1'b1;
        else if (clr_dirty && clr_reg == r)
          dirty[r] <= 1'b0;
      end
      if (lsu_start) begin
        lsu_cnt <= 20;
        lsu_reg <= instr.rd;
      end else if (lsu_cnt != 0) lsu_cnt <= lsu_cnt - 1;
    end
  end

  // ---- expectations, in issue order
  typedef struct { int a, b, c; bit need_wl; bit sel; } mm_exp_t;
  mm_exp_t exp_q [$];      // issued rasa_mm, in order
  mm_exp_t wl_q [$];       // those expecting a weight load
  mm_exp_t fd_q [$];       // those expecting a feed
  int  m_lastb = -1;
  bit  m_dirty [NREG];
  bit  m_buf = 1'b0;
  int  wl_row_exp = -1, fd_row_exp = -1;
  mm_exp_t wl_cur, fd_cur;
  longint last_feed_start [2] = '{-100, -100};
  longint feed_starts [$];
  typedef struct { longint cyc; int treg, row; } wb_exp_t;
  wb_exp_t wb_q [$];
  int n_bypass = 0, n_stall = 0, n_wl = 0;
  bit pending_c [NREG];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (ev_stall) n_stall++;
      if (ev_wl_bypass) n_bypass++;
      // issue
      if (instr_valid && instr_ready) begin
        if (instr.op == OP_MM) begin
          mm_exp_t e;
          e.a = instr.rs1; e.b = instr.rs2; e.c = instr.rd;
          chk(!pending_c[instr.rs1] && !pending_c[instr.rs2] && !pending_c[instr.rd],
              "rasa_mm issued while one of its registers awaits a result");
          e.need_wl = !(int'(instr.rs2) == m_lastb && !m_dirty[instr.rs2]);
          chk(ev_wl_bypass == !e.need_wl, "bypass decision");
          if (e.need_wl) begin
            m_buf = !m_buf;
            m_dirty[instr.rs2] = 1'b0;
            wl_q.push_back('{a: e.a, b: e.b, c: e.c, need_wl: 1'b1, sel: m_buf});
          end
          e.sel = m_buf;
          m_lastb = instr.rs2;
          fd_q.push_back(e);
          pending_c[instr.rd] = 1'b1;
        end else if (instr.op == OP_TL) m_dirty[instr.rd] = 1'b1;
      end
      if (wb_en) m_dirty[wb_reg] = 1'b1;
      if (ev_mm_done) pending_c[wb_reg] = 1'b0;
      // weight load
      if (wl_valid) begin
        if (wl_row_exp < 0) begin
          chk(wl_q.size() > 0, "unexpected weight load");
          if (wl_q.size() > 0) wl_cur = wl_q.pop_front();
          wl_row_exp = 0;
          n_wl++;
          chk(cycle - last_feed_start[wl_cur.sel] >= 16,
              "weight load into a buffer still in use");
        end
        chk(int'(b_row) == wl_row_exp && int'(b_reg) == wl_cur.b && wl_sel == wl_cur.sel,
            $sformatf("weight load row %0d reg %0d sel %0d", b_row, b_reg, wl_sel));
        wl_row_exp = (wl_row_exp == 15) ? -1 : wl_row_exp + 1;
      end else chk(wl_row_exp < 0, "weight load interrupted");
      // feed
      if (feed_valid) begin
        if (fd_row_exp < 0) begin
          chk(fd_q.size() > 0, "unexpected feed");
          if (fd_q.size() > 0) fd_cur = fd_q.pop_front();
          fd_row_exp = 0;
          last_feed_start[fd_cur.sel] = cycle;
          feed_starts.push_back(cycle);
          // its weights must be fully loaded: no pending load for it
          chk(!(wl_row_exp >= 0 && wl_cur.b == fd_cur.b && wl_cur.sel == fd_cur.sel),
              "feed started before its weight load finished");
        end
        chk(int'(a_row) == fd_row_exp && int'(c_row) == fd_row_exp &&
            int'(a_reg) == fd_cur.a && int'(c_reg) == fd_cur.c && feed_sel == fd_cur.sel,
            "feed row/register/select");
        wb_q.push_back('{cyc: cycle + WBD, treg: c_reg, row: a_row});
        fd_row_exp = (fd_row_exp == 15) ? -1 : fd_row_exp + 1;
      end else chk(fd_row_exp < 0, "feed interrupted");
      // write-back
      if (wb_q.size() > 0 && wb_q[0].cyc == cycle) begin
        wb_exp_t w;
        w = wb_q.pop_front();
        chk(wb_en && int'(wb_reg) == w.treg && int'(wb_row) == w.row, "write-back");
      end else chk(!wb_en, "spurious write-back");
    end
  end

  task automatic issue(input rasa_op_e op, input int c, input int a, input int b);
    // drive at the falling edge, look at ready once it has settled: the
    // instruction is taken at the next rising edge when ready is high
    @(negedge clk);
    instr_valid = 1'b1;
    instr = '{op: op, rd: REG_AW'(c), rs1: REG_AW'(a), rs2: REG_AW'(b), addr: '0, stride: 64};
    #1;
    while (!instr_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1;
    instr_valid = 1'b0;
  endtask

  task automatic drain();
    @(posedge clk);
    while (!idle) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  initial begin
    int f0;
    instr_valid = 1'b0; instr = '0;
    for (int r = 0; r < NREG; r++) begin m_dirty[r] = 1'b1; pending_c[r] = 1'b0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // back-to-back, new B each time
    f0 = feed_starts.size();
    issue(OP_MM, 0, 4, 5);
    issue(OP_MM, 1, 4, 6);
    issue(OP_MM, 2, 4, 7);
    issue(OP_MM, 3, 4, 5);
    drain();
    for (int i = f0 + 1; i < f0 + 4; i++)
      chk(feed_starts[i] - feed_starts[i-1] == 16, "feed spacing 16 with weight-load skip");
    // same B, clean: bypass; then a write to B makes it dirty
    issue(OP_MM, 0, 4, 6);
    issue(OP_MM, 1, 5, 6);
    issue(OP_TL, 6, 0, 0);
    issue(OP_MM, 2, 4, 6);
    issue(OP_MM, 2, 5, 6);            // RAW on C = 2: must wait
    issue(OP_MM, 3, 4, 2);            // B is a pending result: must wait
    drain();
    // random programs
    for (int i = 0; i < 60; i++) begin
      int c, a, b;
      c = $urandom_range(0, 3); a = $urandom_range(4, 7); b = $urandom_range(4, 7);
      if ($urandom_range(0, 7) == 0) issue(OP_TL, $urandom_range(4, 7), 0, 0);
      else if ($urandom_range(0, 9) == 0) issue(OP_TS, c, 0, 0);
      else issue(OP_MM, c, a, b);
    end
    drain();
    chk(wl_q.size() == 0 && fd_q.size() == 0 && wb_q.size() == 0, "all work done");
    chk(n_bypass > 0 && n_stall > 0, "bypass and stall exercised");
    $display("feeds=%0d weight loads=%0d bypasses=%0d stall cycles=%0d", feed_starts.size(), n_wl, n_bypass, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
