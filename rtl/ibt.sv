// ibt: instruction bundle table of Vis-TOP.
//
// The controller between the instruction stream and the component modules.
// It accepts two kinds of instruction (vt_pkg): a parameter set instruction
// (OP_PSET) writes one register of the register bank; a module execution
// instruction (OP_EXEC) selects the component module to run. For an
// execution the table derives, from the registers, the module's command
// (rows, length, output columns, batch, shift, mode), the number of data
// movements in and out (rows*len elements in; rows*nout or rows*len out) and
// the storage addresses, holds them in registers for the whole execution,
// broadcasts the command on the instruction bus with a one-cycle exec_start,
// and then moves the data itself: it reads operands from the memory cache
// unit in order (src_a + n and, for vector operations, src_b + n), offers
// them on the data bus as a valid/ready stream through a two-entry buffer,
// and writes every result the module returns to dst + n. A data selection
// execution moves its own data; the table only waits for its done.
// Instructions are accepted only while idle, so a parameter set instruction
// never changes a running execution. A selection from main memory into the
// cache with mode bit MODE_SEL_BG set runs in the background instead: the
// table returns to idle at once and later executions overlap the transfer
// (sel_active stays high until it ends). A second selection, or an
// execution of M_NONE, which serves as a barrier, waits until the
// background selection has finished. Software must not read a region that
// a background selection is still filling.
// The paper describes the table's role
// (choosing the low-level bundle, computing execution counts, movement
// counts and addresses, and registering the control signals); the
// instruction format, this streaming engine and the handshakes are this
// design's own. Model-level bundles (residual attention, residual
// feed-forward, patch merging) are sequences of these instructions.
// Timing: PSET takes one cycle; EXEC takes two cycles of set-up, then runs
// at one element per cycle when the module never stalls.
module ibt
  import vt_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // instruction stream
  input  logic                  instr_valid,
  output logic                  instr_ready,
  input  logic [INSTR_W-1:0]    instr_data,
  // register bank
  output logic                  rf_we,
  output logic [4:0]            rf_waddr,
  output logic [REG_W-1:0]      rf_wdata,
  input  logic [REG_W-1:0]      rf_q [NREGS],
  // instruction bus
  output cmd_t                  cmd,
  output sel_cfg_t              sel_cfg,
  output logic                  exec_start,
  input  logic                  sel_done,
  output logic                  sel_active,
  // memory cache unit
  output logic                  ca_en,
  output logic [REG_W-1:0]      ca_addr,
  input  logic [DATA_W-1:0]     ca_data,
  output logic                  cb_en,
  output logic [REG_W-1:0]      cb_addr,
  input  logic [DATA_W-1:0]     cb_data,
  output logic                  cw_en,
  output logic [REG_W-1:0]      cw_addr,
  output logic [DATA_W-1:0]     cw_data,
  // data bus towards the active module
  output logic                  s_valid,
  input  logic                  s_ready,
  output logic [2*DATA_W-1:0]   s_data,
  input  logic                  o_valid,
  input  logic [DATA_W-1:0]     o_data,
  // status
  output logic                  busy,
  output logic [REG_W-1:0]      n_exec
);
  typedef enum logic [1:0] {S_IDLE, S_CALC, S_START, S_RUN} state_e;
  state_e state;

  opcode_e          opc;
  module_e          emod;
  logic             ifire;
  assign opc         = opcode_e'(instr_data[63:60]);
  assign emod        = module_e'(instr_data[3:0]);
  // while a background selection runs, another selection or a barrier
  // (execution of M_NONE) waits; everything else proceeds
  logic bg_active, bg_q, sel_wait;
  assign sel_wait    = bg_active && (opc == OP_EXEC) && (emod == M_SEL || emod == M_NONE);
  assign instr_ready = (state == S_IDLE) && !sel_wait;
  assign ifire       = instr_valid && instr_ready;

  assign rf_we    = ifire && (opc == OP_PSET);
  assign rf_waddr = instr_data[52:48];
  assign rf_wdata = instr_data[31:0];

  logic [REG_W-1:0] in_total, out_total, issued, out_cnt;
  logic [REG_W-1:0] src_a, src_b, dst;
  module_e          mod_q;
  logic             stream_mode;

  assign busy        = (state != S_IDLE);
  assign sel_active  = bg_active || (cmd.mod == M_SEL);
  assign exec_start  = (state == S_START);
  assign stream_mode = (state == S_RUN) && (mod_q != M_SEL);

  // ------------------------------------------------------- streaming engine
  logic [2*DATA_W-1:0] fifo [2];
  logic                wp, rp, inflight;
  logic [1:0]          fcount;
  logic                pop, can_issue;

  assign s_valid   = stream_mode && (fcount != 0);
  assign s_data    = fifo[rp];
  assign pop       = s_valid && s_ready;
  assign can_issue = stream_mode && (issued < in_total) &&
                     (32'(fcount) + 32'(inflight) - 32'(pop) < 2);
  assign ca_en     = can_issue;
  assign ca_addr   = src_a + issued;
  assign cb_en     = can_issue && (mod_q == M_VEC);
  assign cb_addr   = src_b + issued;
  assign cw_en     = stream_mode && o_valid;
  assign cw_addr   = dst + out_cnt;
  assign cw_data   = o_data;

  always_ff @(posedge clk) begin
    if (inflight) fifo[wp] <= {cb_data, ca_data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; mod_q <= M_NONE; cmd <= '0; sel_cfg <= '0;
      in_total <= '0; out_total <= '0; issued <= '0; out_cnt <= '0;
      src_a <= '0; src_b <= '0; dst <= '0;
      wp <= 1'b0; rp <= 1'b0; inflight <= 1'b0; fcount <= '0; n_exec <= '0;
      bg_active <= 1'b0; bg_q <= 1'b0;
    end else begin
      // executions end in the foreground and, for a background selection,
      // possibly in the same cycle
      n_exec <= n_exec + REG_W'(state == S_RUN && ((mod_q == M_SEL) ? sel_done : (out_cnt == out_total)))
                       + REG_W'(bg_active && sel_done);
      if (bg_active && sel_done) bg_active <= 1'b0;
      inflight <= can_issue;
      if (inflight) wp <= ~wp;
      if (pop)      rp <= ~rp;
      fcount <= fcount + 2'(inflight) - 2'(pop);
      if (can_issue) issued <= issued + 1;
      if (cw_en)     out_cnt <= out_cnt + 1;

      unique case (state)
        S_IDLE: if (ifire && opc == OP_EXEC && emod != M_NONE && emod <= M_VEC) begin
          mod_q <= emod;
          state <= S_CALC;
        end
        S_CALC: begin
          // control of the execution, held in registers until it ends
          cmd.mod   <= mod_q;
          cmd.rows  <= rf_q[R_ROWS];
          cmd.len   <= rf_q[R_LEN];
          cmd.nout  <= rf_q[R_NOUT];
          cmd.batch <= rf_q[R_BATCH];
          cmd.shift <= rf_q[R_SHIFT];
          cmd.mode  <= rf_q[R_MODE];
          // kept while a background selection runs on
          if (mod_q == M_SEL)
            sel_cfg <= '{m_h: rf_q[R_MH], m_w: rf_q[R_MW], m_c: rf_q[R_MC],
                         s_h: rf_q[R_SH], s_w: rf_q[R_SW], s_c: rf_q[R_SC],
                         f_h: rf_q[R_FH], f_w: rf_q[R_FW], f_c: rf_q[R_FC],
                         src_off: rf_q[R_SRC_OFF], dst_off: rf_q[R_DST_OFF],
                         src_ext: rf_q[R_MODE][MODE_SEL_SRC_EXT],
                         dst_ext: rf_q[R_MODE][MODE_SEL_DST_EXT]};
          // a selection from main memory into the cache may run in the
          // background, overlapping the executions that follow
          bg_q      <= (mod_q == M_SEL) && rf_q[R_MODE][MODE_SEL_BG] &&
                       rf_q[R_MODE][MODE_SEL_SRC_EXT] && !rf_q[R_MODE][MODE_SEL_DST_EXT];
          // number of data movements and their storage addresses
          in_total  <= rf_q[R_ROWS] * rf_q[R_LEN];
          out_total <= rf_q[R_ROWS] * ((mod_q == M_MM) ? rf_q[R_NOUT] : rf_q[R_LEN]);
          src_a     <= rf_q[R_SRC_A];
          src_b     <= rf_q[R_SRC_B];
          dst       <= rf_q[R_DST];
          issued    <= '0;
          out_cnt   <= '0;
          state     <= S_START;
        end
        S_START: if (bg_q) begin
          state     <= S_IDLE;
          cmd.mod   <= M_NONE;
          bg_active <= 1'b1;
        end else state <= S_RUN;
        S_RUN: begin
          if ((mod_q == M_SEL) ? sel_done : (out_cnt == out_total)) begin
            state   <= S_IDLE;
            cmd.mod <= M_NONE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fifo: assert property (@(posedge clk) disable iff (!rst_n) fcount <= 2);
  a_no_extra_out: assert property (@(posedge clk) disable iff (!rst_n)
                    cw_en |-> out_cnt < out_total);
endmodule
