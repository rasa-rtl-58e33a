// rasa_top_tb: end-to-end test of the RASA engine at its default size.
//
// Phase 1 runs the 32x32x32 GEMM program of the engine's reference code
// sequence: load four C tiles, two B tiles and two A tiles, four rasa_mm
// (the second and fourth reuse the previous B register, so their weight
// load is bypassed), and store the C tiles. Phase 2 reloads tiles and issues
// back-to-back rasa_mm with a new B register each time (weight load hidden
// behind the previous feed, WLS), then one that accumulates into a C still in
// flight (scoreboard stall), a tile load into a B register followed by a
// rasa_mm naming the same B again (dirty bit forces a reload), and stores.
//
// A sequential model executes the same program on its own copy of memory and
// registers; all values are multiples of 1/4 with small numerators, so every
// FP32 result is exact and order-independent. Checked: every stored row of
// memory, the number of weight loads and bypasses predicted by the model, the
// 16-cycle spacing of back-to-back feeds, the latency of an isolated
// rasa_mm, and that every mechanism occurred.
module rasa_top_tb;
  import rasa_pkg::*;
  import tb_fp_pkg::*;
  localparam int unsigned MEMROWS = 512;
  logic                clk = 0, rst_n = 0;
  logic                instr_valid, instr_ready;
  rasa_instr_t         instr;
  logic                mem_req_valid, mem_req_ready, mem_req_write;
  logic [ADDR_W-1:0]   mem_req_addr;
  logic [ROW_BITS-1:0] mem_req_wdata;
  logic                mem_rsp_valid;
  logic [ROW_BITS-1:0] mem_rsp_rdata;
  logic                idle;
  logic ev_feed_start, ev_wl_start, ev_wl_bypass, ev_wl_overlap, ev_stall, ev_mm_done;

  rasa_top dut (.*);
  rasa_mem_model #(.DEPTH(MEMROWS), .LAT(4), .STALLS(1'b1)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_write(mem_req_write), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---------------- reference model
  logic [ROW_BITS-1:0] mmem [MEMROWS];
  logic [ROW_BITS-1:0] mreg [NREG][TROWS];
  logic [NREG-1:0]     mdirty;
  int                  m_lastb;
  int                  exp_wl, exp_bypass, exp_dirty_reload;

  function automatic logic [ROW_BITS-1:0] rnd_row(input bit fp32);
    logic [ROW_BITS-1:0] v;
    if (fp32) for (int i = 0; i < 16; i++) v[32*i +: 32] = to_fp32(real'($urandom_range(0, 160) - 80) / 4.0);
    else      for (int i = 0; i < 32; i++) v[16*i +: 16] = bf16_q4($urandom_range(0, 16) - 8);
    return v;
  endfunction

  task automatic model_exec(input rasa_instr_t i);
    case (i.op)
      OP_TL: begin
        for (int r = 0; r < TROWS; r++) mreg[i.rd][r] = mmem[(i.addr + r * i.stride) / 64];
        mdirty[i.rd] = 1'b1;
      end
      OP_TS: for (int r = 0; r < TROWS; r++) mmem[(i.addr + r * i.stride) / 64] = mreg[i.rd][r];
      default: begin
        if (int'(i.rs2) == m_lastb && !mdirty[i.rs2]) exp_bypass++;
        else begin
          if (int'(i.rs2) == m_lastb) exp_dirty_reload++;
          exp_wl++;
          mdirty[i.rs2] = 1'b0;
        end
        m_lastb = int'(i.rs2);
        for (int m = 0; m < TROWS; m++)
          for (int n = 0; n < 16; n++) begin
            automatic real acc = fp32_to_real(mreg[i.rd][m][32*n +: 32]);
            for (int k = 0; k < 32; k++)
              acc += bf16_to_real(mreg[i.rs1][m][16*k +: 16]) *
                     bf16_to_real(mreg[i.rs2][k/2][32*n + 16*(k%2) +: 16]);
            mreg[i.rd][m][32*n +: 32] = to_fp32(acc);
          end
        mdirty[i.rd] = 1'b1;
      end
    endcase
  endtask

  // ---------------- program
  rasa_instr_t prog [$];
  int n_issued = 0;

  function automatic rasa_instr_t tl(input int r, input int slot, input int stride = 64);
    return '{op: OP_TL, rd: REG_AW'(r), rs1: '0, rs2: '0, addr: ADDR_W'(slot * 1024), stride: stride};
  endfunction
  function automatic rasa_instr_t ts(input int r, input int slot, input int stride = 64);
    return '{op: OP_TS, rd: REG_AW'(r), rs1: '0, rs2: '0, addr: ADDR_W'(slot * 1024), stride: stride};
  endfunction
  function automatic rasa_instr_t mm(input int c, input int a, input int b);
    return '{op: OP_MM, rd: REG_AW'(c), rs1: REG_AW'(a), rs2: REG_AW'(b), addr: '0, stride: 0};
  endfunction

  // ---------------- instruction driver and event counters
  int n_feed = 0, n_wl = 0, n_bypass = 0, n_overlap = 0, n_stall = 0, n_done = 0;
  longint feed_cyc [$];
  longint accept_cyc [$];
  longint done_cyc [$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (instr_valid && instr_ready) begin
        accept_cyc.push_back(cycle);
        n_issued++;
      end
      if (ev_feed_start) begin n_feed++; feed_cyc.push_back(cycle); end
      if (ev_wl_start)   n_wl++;
      if (ev_wl_bypass)  n_bypass++;
      if (ev_wl_overlap) n_overlap++;
      if (ev_stall)      n_stall++;
      if (ev_mm_done)    begin n_done++; done_cyc.push_back(cycle); end
    end
  end

  task automatic run_program();
    // drive at the falling edge, look at ready once it has settled: the
    // instruction is taken at the next rising edge when ready is high
    foreach (prog[i]) begin
      @(negedge clk);
      instr       = prog[i];
      instr_valid = 1'b1;
      #1;
      while (!instr_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
      model_exec(prog[i]);
    end
    @(negedge clk);
    instr_valid = 1'b0;
    @(posedge clk);
    while (!idle) @(posedge clk);
    prog.delete();
  endtask

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mm_accept_idx;
    instr_valid = 1'b0;
    instr = '0;
    mdirty = '1;
    m_lastb = -1;
    exp_wl = 0; exp_bypass = 0; exp_dirty_reload = 0;
    // memory: slots 0-3 C tiles (FP32), 4-5 B tiles, 6-7 A tiles (BF16),
    // slots 8-15 phase-2 operands; slot 16+ results
    for (int s = 0; s < 16; s++)
      for (int r = 0; r < 16; r++) begin
        u_mem.mem[s * 16 + r] = rnd_row(s < 4 || (s >= 8 && s < 12));
        mmem[s * 16 + r] = u_mem.mem[s * 16 + r];
      end
    for (int r = 256; r < MEMROWS; r++) begin u_mem.mem[r] = '0; mmem[r] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // ---- phase 1: the 32x32 GEMM code sequence
    for (int t = 0; t < 4; t++) prog.push_back(tl(t, t));
    prog.push_back(tl(4, 4));
    prog.push_back(tl(6, 6));
    prog.push_back(mm(0, 6, 4));
    prog.push_back(tl(7, 7));
    prog.push_back(mm(1, 7, 4));
    prog.push_back(tl(5, 5));
    prog.push_back(mm(2, 6, 5));
    prog.push_back(mm(3, 7, 5));
    for (int t = 0; t < 4; t++) prog.push_back(ts(t, 16 + t));
    run_program();
    chk(n_bypass == 2, "phase 1: two weight-load bypasses");

    // ---- phase 2a: an isolated rasa_mm, for its latency
    for (int t = 0; t < 4; t++) prog.push_back(tl(t, 8 + t));
    prog.push_back(tl(4, 12, 128));          // A, strided in memory
    prog.push_back(tl(5, 13));
    prog.push_back(tl(6, 14));
    prog.push_back(tl(7, 15));
    run_program();
    mm_accept_idx = accept_cyc.size();
    prog.push_back(mm(0, 4, 6));
    run_program();
    chk(done_cyc[$] - accept_cyc[mm_accept_idx] == 66,
        $sformatf("isolated rasa_mm latency %0d, expected 16+16+34", done_cyc[$] - accept_cyc[mm_accept_idx]));

    // ---- phase 2b: back-to-back rasa_mm with changing B (WLS)
    begin
      int f0;
      f0 = feed_cyc.size();
      prog.push_back(mm(1, 4, 5));
      prog.push_back(mm(2, 4, 6));
      prog.push_back(mm(3, 4, 7));
      prog.push_back(mm(0, 4, 5));
      prog.push_back(mm(0, 4, 6));           // C=t0 still in flight: stall
      run_program();
      for (int i = f0 + 1; i < f0 + 4; i++)
        chk(feed_cyc[i] - feed_cyc[i-1] == 16,
            $sformatf("back-to-back feed spacing %0d", feed_cyc[i] - feed_cyc[i-1]));
    end
    // ---- phase 2c: same B again after it was reloaded (dirty bit)
    prog.push_back(mm(1, 4, 6));
    prog.push_back(tl(6, 13));
    prog.push_back(mm(2, 4, 6));
    prog.push_back(mm(3, 4, 6));             // clean again: bypass
    for (int t = 0; t < 4; t++) prog.push_back(ts(t, 20 + 2 * t, 128));
    run_program();

    // ---- results
    for (int r = 256; r < MEMROWS; r++) begin
      checks++;
      if (u_mem.mem[r] !== mmem[r]) begin
        failures++;
        if (failures < 10) $display("FAIL memory row %0d", r);
      end
    end
    chk(n_wl == exp_wl, $sformatf("weight loads %0d, model %0d", n_wl, exp_wl));
    chk(n_bypass == exp_bypass, $sformatf("bypasses %0d, model %0d", n_bypass, exp_bypass));
    chk(n_feed == n_done, "every fed rasa_mm written back");
    $display("mechanisms: feeds=%0d weight_loads=%0d bypass(WLBP)=%0d overlap_cycles(WLS)=%0d dirty_reloads=%0d hazard_stalls=%0d",
             n_feed, n_wl, n_bypass, n_overlap, exp_dirty_reload, n_stall);
    chk(n_bypass > 0, "WLBP bypass happened");
    chk(n_overlap > 0, "WLS overlap happened");
    chk(exp_dirty_reload > 0, "dirty-bit reload happened");
    chk(n_stall > 0, "hazard stall happened");
    chk(u_mem.n_writes > 0 && u_mem.n_reads > 0, "tile load and store happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
