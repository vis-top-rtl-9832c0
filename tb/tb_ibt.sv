// tb_ibt: self-checking testbench of the instruction bundle table.
//
// The table is connected to a register array, a one-cycle cache model and a
// stand-in compute module written here: for element-wise executions it
// returns a ^ 8'h5A (or a + b for vector operations) after a random delay
// and with random back-pressure; for a matrix multiply it returns, per row,
// nout bytes (sum of the row's inputs + column) after taking len inputs; a
// data selection ends when the testbench pulses sel_done. The checks: every
// parameter set instruction writes the right register; the command and the
// selection configuration on the instruction bus equal the registers; every
// result lands at dst + n with the expected value and nothing is written
// past the end; no instruction is accepted during an execution; n_exec
// counts executions; a background selection leaves the table free for a
// computation, holds off a second selection and a barrier until its done,
// and is counted; and an element-wise run with a module that never
// stalls ends len*rows + 6 cycles after the execution instruction is
// accepted (calculate, start, read latency, module latency, write).
module tb_ibt;
  import vt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready;
  logic [63:0] instr_data;
  logic rf_we;
  logic [4:0] rf_waddr;
  logic [31:0] rf_wdata;
  logic [31:0] rf_q [NREGS];
  cmd_t cmd;
  sel_cfg_t sel_cfg;
  logic exec_start, sel_done, sel_active;
  logic ca_en, cb_en, cw_en;
  logic [31:0] ca_addr, cb_addr, cw_addr;
  logic [7:0] ca_data, cb_data, cw_data;
  logic s_valid, s_ready, o_valid;
  logic [15:0] s_data;
  logic [7:0] o_data;
  logic busy;
  logic [31:0] n_exec;

  ibt dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // registers and cache model
  logic [7:0] cache [0:4095];
  logic [7:0] expc [0:4095];
  always @(posedge clk) begin
    if (!rst_n) for (int r = 0; r < NREGS; r++) rf_q[r] <= 0;
    else if (rf_we) rf_q[rf_waddr] <= rf_wdata;
    if (ca_en) ca_data <= cache[ca_addr[11:0]];
    if (cb_en) cb_data <= cache[cb_addr[11:0]];
    if (cw_en) cache[cw_addr[11:0]] <= cw_data;
  end

  // stand-in module
  bit stall_mod;
  logic [7:0] oq [$];
  int row_in = 0, row_sum = 0;
  always @(negedge clk) s_ready = !stall_mod || ($urandom % 3 != 0);
  always @(posedge clk) begin
    o_valid <= 0;
    if (s_valid && s_ready) begin
      if (cmd.mod == M_MM) begin
        row_sum += int'(s_data[7:0]); row_in++;
        if (row_in == int'(cmd.len)) begin
          for (int n = 0; n < int'(cmd.nout); n++) oq.push_back(8'(row_sum + n));
          row_in = 0; row_sum = 0;
        end
      end else if (cmd.mod == M_VEC) oq.push_back(s_data[7:0] + s_data[15:8]);
      else oq.push_back(s_data[7:0] ^ 8'h5A);
    end
    if (oq.size() != 0 && (!stall_mod || $urandom % 2 == 0)) begin
      o_valid <= 1; o_data <= oq.pop_front();
    end
  end

  // instruction bus observation
  int start_cyc;
  always @(posedge clk) if (exec_start) begin
    start_cyc = cyc;
    chk(cmd.rows == rf_q[R_ROWS] && cmd.len == rf_q[R_LEN] && cmd.nout == rf_q[R_NOUT] &&
        cmd.batch == rf_q[R_BATCH] && cmd.shift == rf_q[R_SHIFT] && cmd.mode == rf_q[R_MODE], "cmd fields");
    if (cmd.mod == M_SEL) chk(sel_cfg.m_h == rf_q[R_MH] && sel_cfg.s_w == rf_q[R_SW] && sel_cfg.f_c == rf_q[R_FC] &&
        sel_cfg.dst_off == rf_q[R_DST_OFF] && sel_cfg.src_ext == rf_q[R_MODE][0], "sel_cfg fields");
  end
  always @(posedge clk) if (busy && instr_valid && instr_ready) chk(0, "instruction accepted while busy");

  task automatic send(logic [63:0] w);
    @(negedge clk); instr_valid = 1; instr_data = w;
    while (!instr_ready) @(negedge clk);
    @(negedge clk); instr_valid = 0;
  endtask
  task automatic pset(reg_e r, int v);
    send({OP_PSET, 7'd0, 5'(r), 16'd0, 32'(v)});
    @(negedge clk);
    chk(rf_q[r] == 32'(v), $sformatf("pset reg %0d", r));
  endtask
  task automatic run(module_e m, int sa, int sb, int d, int rows, int len, int nout, bit stall, bit timed);
    int n0, outn, t0;
    stall_mod = stall;
    pset(R_SRC_A, sa); pset(R_SRC_B, sb); pset(R_DST, d); pset(R_ROWS, rows);
    pset(R_LEN, len); pset(R_NOUT, nout); pset(R_BATCH, 7); pset(R_SHIFT, 3); pset(R_MODE, 32'($urandom));
    for (int a = 0; a < 4096; a++) begin cache[a] = 8'($urandom); expc[a] = cache[a]; end
    outn = (m == M_MM) ? rows * nout : rows * len;
    for (int r = 0; r < rows; r++) begin
      int s = 0;
      for (int k = 0; k < len; k++) s += int'(cache[sa + r*len + k]);
      if (m == M_MM) for (int n = 0; n < nout; n++) expc[d + r*nout + n] = 8'(s + n);
    end
    if (m != M_MM) for (int e = 0; e < outn; e++)
      expc[d + e] = (m == M_VEC) ? cache[sa + e] + cache[sb + e] : cache[sa + e] ^ 8'h5A;
    n0 = n_exec;
    send({OP_EXEC, 56'd0, 4'(m)});
    t0 = cyc;
    while (busy && cyc - t0 < 50000) @(negedge clk);
    chk(!busy, "execution ended");
    if (timed) chk(cyc - t0 == rows * len + 6, $sformatf("cycles %0d exp %0d", cyc - t0, rows * len + 6));
    chk(n_exec == n0 + 1, "n_exec");
    @(negedge clk);
    for (int a = 0; a < 4096; a++) chk(cache[a] == expc[a], $sformatf("cache[%0d]=%0d exp %0d", a, cache[a], expc[a]));
  endtask

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    instr_valid = 0; instr_data = 0; sel_done = 0; stall_mod = 0; s_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    run(M_GELU, 100, 0, 2000, 3, 50, 0, 0, 1);
    run(M_GELU, 300, 0, 1000, 4, 37, 0, 1, 0);
    run(M_VEC, 10, 700, 2500, 2, 90, 0, 1, 0);
    run(M_MM, 50, 0, 3000, 5, 24, 17, 1, 0);
    run(M_SM, 0, 0, 3500, 2, 49, 0, 1, 0);
    // data selection: the table waits for sel_done
    pset(R_MH, 14); pset(R_SW, 7); pset(R_FC, 3); pset(R_DST_OFF, 77); pset(R_MODE, 1);
    begin
      automatic int n0 = n_exec;
      send({OP_EXEC, 56'd0, 4'(M_SEL)});
      repeat (20) @(negedge clk);
      chk(busy && n_exec == n0, "waits for data selection");
      sel_done = 1; @(negedge clk); sel_done = 0; @(negedge clk);
      chk(!busy && n_exec == n0 + 1, "data selection finished");
    end
    // background selection: the table goes idle at once, computation
    // overlaps, a second selection waits, a barrier waits
    pset(R_MODE, 32'h9);                       // source main memory, background
    begin
      automatic int n0 = n_exec;
      send({OP_EXEC, 56'd0, 4'(M_SEL)});
      repeat (4) @(negedge clk);
      chk(!busy && sel_active, "background selection leaves the table idle");
      run(M_GELU, 400, 0, 1500, 2, 33, 0, 1, 0);
      chk(sel_active && n_exec == n0 + 1, "computation overlapped the selection");
      pset(R_MODE, 32'h9);
      instr_valid = 1; instr_data = {OP_EXEC, 56'd0, 4'(M_SEL)};
      repeat (10) @(negedge clk);
      chk(!instr_ready, "second selection waits");
      sel_done = 1; @(negedge clk); sel_done = 0;
      chk(n_exec == n0 + 2, "background selection counted");
      while (!instr_ready) @(negedge clk);
      @(negedge clk); instr_valid = 0;
      repeat (4) @(negedge clk);
      chk(sel_active && !busy, "second selection in the background");
      instr_valid = 1; instr_data = {OP_EXEC, 56'd0, 4'(M_NONE)};
      repeat (6) @(negedge clk);
      chk(!instr_ready, "barrier waits for the selection");
      sel_done = 1; @(negedge clk); sel_done = 0;
      while (!instr_ready) @(negedge clk);
      @(negedge clk); instr_valid = 0;
      @(negedge clk);
      chk(!sel_active && !busy && n_exec == n0 + 3, "barrier passed, nothing left running");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
