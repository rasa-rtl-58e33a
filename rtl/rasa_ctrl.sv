// rasa_ctrl: RASA control unit (instruction issue, sub-stage sequencing,
// weight-load bypass and weight-load skip).
//
// A rasa_mm executes in four sub-stages: weight load (WL), feed first (FF),
// feed second (FS) and drain (DR). This unit sequences the two sub-stages that
// need a register-file port, WL and FF; FS and DR follow by themselves in the
// skew buffers and the array, and the write-back of each result row is
// triggered by a tag that travels down a WB_DELAY-deep delay line in step
// with the data.
//
//  * W stage (WL): reads the B register one pair row per cycle, row j in
//    cycle j, and sends it down the weight links into the weight buffer the
//    instruction was given. 16 cycles.
//  * F stage (FF): reads A row m and C row m in cycle m and sends them into
//    the array, tagged with the instruction's weight buffer. 16 cycles.
//
// Pipelining: the W stage of instruction i+1 runs while instruction i is in
// the F stage, into the other weight buffer (weight-load skip, WLS). Its WL
// may start only once no instruction in the F stage uses that buffer; its FF
// starts once its WL is done and the F stage is free. With a new rasa_mm in
// every slot, one rasa_mm enters FF every 16 cycles, and FF of the next
// instruction overlaps FS and DR of the previous one (basic pipelining).
// Weight-load bypass (WLBP): when a rasa_mm names the same B register as the
// previous one, that register was loaded into the previous one's buffer and
// its dirty bit is still clear, WL is skipped and the same buffer is reused.
// WL clears the loaded register's dirty bit in its first cycle.
//
// Issue is in order, one instruction per cycle at most, handshake
// instr_valid/instr_ready. Scoreboard: a rasa_mm waits while one of its
// registers is the destination of an unfinished rasa_mm (c_pending) or the
// register of a running tile load/store; a rasa_tl/rasa_ts waits while the
// load/store unit is busy, or its register is used by a rasa_mm in the W or F
// stage or awaits a rasa_mm result.
//
// The sub-stages and the three control optimisations are the paper's; the
// scoreboard, the buffer-availability rule and the row-addressed weight links
// are this design's realisation of them.
module rasa_ctrl
  import rasa_pkg::*;
#(
  parameter int unsigned WB_DELAY = ARR_ROWS + ARR_COLS + 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // instruction stream
  input  logic                 instr_valid,
  output logic                 instr_ready,
  input  rasa_instr_t          instr,
  // register file: A feed, B weight load, C feed, result write-back
  output logic [REG_AW-1:0]    a_reg,
  output logic [ROW_AW-1:0]    a_row,
  output logic [REG_AW-1:0]    b_reg,
  output logic [ROW_AW-1:0]    b_row,
  output logic [REG_AW-1:0]    c_reg,
  output logic [ROW_AW-1:0]    c_row,
  output logic                 wb_en,
  output logic [REG_AW-1:0]    wb_reg,
  output logic [ROW_AW-1:0]    wb_row,
  input  logic [NREG-1:0]      dirty,
  output logic                 clr_dirty,
  output logic [REG_AW-1:0]    clr_reg,
  // towards the skew buffers
  output logic                 feed_valid,
  output logic                 feed_sel,
  output logic                 wl_valid,
  output logic                 wl_sel,
  // tile load/store unit
  output logic                 lsu_start,
  input  logic                 lsu_busy,
  input  logic [REG_AW-1:0]    lsu_reg,
  output logic                 idle,
  // event pulses, one per occurrence
  output logic                 ev_feed_start,   // a rasa_mm entered FF
  output logic                 ev_wl_start,     // a weight load started
  output logic                 ev_wl_bypass,    // a rasa_mm skipped WL (WLBP)
  output logic                 ev_wl_overlap,   // a WL cycle overlapped an FF cycle (WLS)
  output logic                 ev_stall,        // an instruction waited for a hazard
  output logic                 ev_mm_done       // last result row of a rasa_mm written
);
  localparam int unsigned CNT_W = 3;   // up to 7 unfinished results per register

  // W stage
  logic              w_valid, w_need_wl, w_wl_act, w_wl_done, w_buf;
  logic [REG_AW-1:0] w_a, w_b, w_c;
  logic [ROW_AW-1:0] w_cnt;
  // F stage
  logic              f_valid, f_buf;
  logic [REG_AW-1:0] f_a, f_c;
  logic [ROW_AW-1:0] f_cnt;
  // weight buffers
  logic              cur_buf;
  logic [REG_AW-1:0] buf_reg [2];
  logic [1:0]        buf_ok;
  // scoreboard
  logic [CNT_W-1:0]  c_pending [NREG];

  typedef struct packed {
    logic              valid;
    logic [REG_AW-1:0] treg;
    logic [ROW_AW-1:0] row;
  } wb_tag_t;
  wb_tag_t wb_pipe [WB_DELAY];

  logic is_mm, hz_mm, hz_ls, f_free_next, w_to_f, w_wl_start, w_accept;
  logic accept, bypass, f_last;
  logic [NREG-1:0] mm_ref;   // registers referenced by the W and F stages

  function automatic logic pend(input logic [CNT_W-1:0] cnt [NREG],
                                input logic [REG_AW-1:0] r);
    return cnt[r] != '0;
  endfunction

  always_comb begin
    mm_ref = '0;
    if (w_valid) begin
      mm_ref[w_a] = 1'b1;
      mm_ref[w_b] = 1'b1;
      mm_ref[w_c] = 1'b1;
    end
    if (f_valid) begin
      mm_ref[f_a] = 1'b1;
      mm_ref[f_c] = 1'b1;
    end
    is_mm  = (instr.op == OP_MM);
    hz_mm  = pend(c_pending, instr.rs1) || pend(c_pending, instr.rs2) ||
             pend(c_pending, instr.rd) ||
             (lsu_busy && (lsu_reg == instr.rs1 || lsu_reg == instr.rs2 ||
                           lsu_reg == instr.rd));
    hz_ls  = lsu_busy || mm_ref[instr.rd] || pend(c_pending, instr.rd);
    f_last      = f_valid && (f_cnt == ROW_AW'(TROWS - 1));
    f_free_next = !f_valid || f_last;
    w_to_f = w_valid && f_free_next &&
             (!w_need_wl || w_wl_done || (w_wl_act && w_cnt == ROW_AW'(TROWS - 1)));
    w_wl_start = w_valid && w_need_wl && !w_wl_act && !w_wl_done &&
                 !(f_valid && f_buf == w_buf);
    w_accept = !w_valid || w_to_f;
    if (is_mm) instr_ready = w_accept && !hz_mm;
    else       instr_ready = !hz_ls;
    accept = instr_valid && instr_ready;
    bypass = buf_ok[cur_buf] && (buf_reg[cur_buf] == instr.rs2) && !dirty[instr.rs2];

    // register-file and datapath controls
    a_reg      = f_a;
    a_row      = f_cnt;
    c_reg      = f_c;
    c_row      = f_cnt;
    feed_valid = f_valid;
    feed_sel   = f_buf;
    b_reg      = w_b;
    b_row      = w_cnt;
    wl_valid   = w_wl_act || w_wl_start;
    wl_sel     = w_buf;
    clr_dirty  = w_wl_start;
    clr_reg    = w_b;
    wb_en      = wb_pipe[WB_DELAY-1].valid;
    wb_reg     = wb_pipe[WB_DELAY-1].treg;
    wb_row     = wb_pipe[WB_DELAY-1].row;
    lsu_start  = accept && !is_mm;

    idle = !w_valid && !f_valid && !lsu_busy;
    for (int r = 0; r < NREG; r++) if (c_pending[r] != '0) idle = 1'b0;

    ev_feed_start = w_to_f;
    ev_wl_start   = w_wl_start;
    ev_wl_bypass  = accept && is_mm && bypass;
    ev_wl_overlap = wl_valid && f_valid;
    ev_stall      = instr_valid && !instr_ready &&
                    (is_mm ? (w_accept && hz_mm) : hz_ls);
    ev_mm_done    = wb_en && (wb_row == ROW_AW'(TROWS - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_valid   <= 1'b0;
      w_need_wl <= 1'b0;
      w_wl_act  <= 1'b0;
      w_wl_done <= 1'b0;
      w_buf     <= 1'b0;
      w_a       <= '0;
      w_b       <= '0;
      w_c       <= '0;
      w_cnt     <= '0;
      f_valid   <= 1'b0;
      f_buf     <= 1'b0;
      f_a       <= '0;
      f_c       <= '0;
      f_cnt     <= '0;
      cur_buf   <= 1'b0;
      buf_reg   <= '{default: '0};
      buf_ok    <= '0;
      c_pending <= '{default: '0};
      wb_pipe   <= '{default: '0};
    end else begin
      // ---------------- F stage
      if (w_to_f) begin
        f_valid <= 1'b1;
        f_buf   <= w_buf;
        f_a     <= w_a;
        f_c     <= w_c;
        f_cnt   <= '0;
      end else if (f_valid) begin
        f_cnt <= f_cnt + 1'b1;
        if (f_last) f_valid <= 1'b0;
      end
      // ---------------- W stage
      if (w_wl_start) begin
        w_wl_act <= 1'b1;          // row 0 is sent in the start cycle
        w_cnt    <= ROW_AW'(1);
      end else if (w_wl_act) begin
        w_cnt <= w_cnt + 1'b1;
        if (w_cnt == ROW_AW'(TROWS - 1)) begin
          w_wl_act  <= 1'b0;
          w_wl_done <= 1'b1;
        end
      end
      if (w_to_f) w_valid <= 1'b0;
      if (accept && is_mm) begin
        w_valid   <= 1'b1;
        w_a       <= instr.rs1;
        w_b       <= instr.rs2;
        w_c       <= instr.rd;
        w_wl_act  <= 1'b0;
        w_wl_done <= 1'b0;
        w_cnt     <= '0;
        if (bypass) begin
          w_need_wl <= 1'b0;
          w_buf     <= cur_buf;
        end else begin
          w_need_wl        <= 1'b1;
          w_buf            <= !cur_buf;
          cur_buf          <= !cur_buf;
          buf_reg[!cur_buf] <= instr.rs2;
          buf_ok[!cur_buf]  <= 1'b1;
        end
      end
      // ---------------- write-back tags and scoreboard
      wb_pipe[0] <= '{valid: f_valid, treg: f_c, row: f_cnt};
      for (int i = 1; i < WB_DELAY; i++) wb_pipe[i] <= wb_pipe[i-1];
      for (int r = 0; r < NREG; r++) begin
        if (accept && is_mm && instr.rd == r[REG_AW-1:0]) begin
          if (!(ev_mm_done && wb_reg == r[REG_AW-1:0]))
            c_pending[r] <= c_pending[r] + 1'b1;
        end else if (ev_mm_done && wb_reg == r[REG_AW-1:0]) begin
          c_pending[r] <= c_pending[r] - 1'b1;
        end
      end
    end
  end

`ifndef SYNTHESIS
  // the F stage never holds an instruction whose weight load is unfinished
  a_wl_before_ff: assert property (@(posedge clk) disable iff (!rst_n)
    w_to_f |-> (!w_need_wl || w_wl_done || w_wl_act));
  // instructions stay put while not accepted
  a_instr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (instr_valid && !instr_ready) |=> instr_valid);
`endif
endmodule
