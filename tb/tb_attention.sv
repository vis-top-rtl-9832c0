// tb_attention: one head of Swin-T window attention run on the full-size
// Vis-TOP processor (C = 96 PEs, 512 KiB cache, every parameter at its
// default), with this testbench acting as the host.
//
// A 7x7 window of 96-channel tokens is selected from main memory into the
// cache. Three matrix multiplies project it to Q, K and V of head width 32.
// K and V are written back to main memory by two data selections. The host
// then reads them back and streams them as parameters: K transposed for the
// 49x49 scores Q K^T (batch 32), which the softmax normalises row by row,
// and V for the weighted sum P V (batch 49). The 1/sqrt(32) scale is folded
// into the requantisation shift. Every stage is compared with a reference
// computed here from the stage input: exact for copies and products, one LSB
// for softmax. Parameter-stream stalls, data-bus back-pressure and main-
// memory read stalls are counted and must occur.
module tb_attention;
  import vt_pkg::*;
  localparam int C = 96;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, prm_valid, prm_ready;
  logic [63:0] instr_data;
  logic [C*8-1:0] prm_data;
  logic mem_rd_req, mem_rd_gnt, mem_rd_valid, mem_wr_req, mem_wr_gnt;
  logic [31:0] mem_rd_addr, mem_wr_addr, n_exec, n_replay;
  logic [7:0] mem_rd_data, mem_wr_data;
  logic busy, sel_err;

  vistop dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ main memory
  logic [7:0] mem [0:65535];
  typedef struct { logic [7:0] d; int due; } resp_t;
  resp_t rq [$];
  int last_due = 0;
  int n_rd_stall = 0;
  always @(negedge clk) begin
    mem_rd_gnt = ($urandom % 4) != 0;
    mem_wr_gnt = ($urandom % 4) != 0;
    mem_rd_valid = 0;
    if (rq.size() != 0 && rq[0].due <= cyc) begin
      mem_rd_valid = 1; mem_rd_data = rq[0].d; void'(rq.pop_front());
    end
  end
  always @(posedge clk) begin
    if (mem_rd_req && mem_rd_gnt) begin
      automatic int due = cyc + 1 + $urandom % 5;
      if (due <= last_due) due = last_due + 1;
      last_due = due;
      rq.push_back('{mem[mem_rd_addr[15:0]], due});
    end
    if (mem_rd_req && !mem_rd_gnt) n_rd_stall++;
    if (mem_wr_req && mem_wr_gnt) mem[mem_wr_addr[15:0]] <= mem_wr_data;
  end

  // ---------------------------------------------- instruction and parameter streams
  logic [63:0]    iq [$];
  logic [C*8-1:0] pq [$];
  int n_prm_stall = 0, n_bus_bp = 0;
  int n_mod [8];
  always @(negedge clk) begin
    instr_valid = rst_n && (iq.size() != 0) && ($urandom % 3 != 0);
    instr_data  = (iq.size() != 0) ? iq[0] : 64'd0;
    prm_valid   = rst_n && (pq.size() != 0) && ($urandom % 5 != 0);
    prm_data    = (pq.size() != 0) ? pq[0] : '0;
  end
  always @(posedge clk) begin
    if (instr_valid && instr_ready) void'(iq.pop_front());
    if (prm_valid && prm_ready) void'(pq.pop_front());
    if (!prm_valid && (dut.mm_prm_ready || dut.ln_prm_ready || dut.vec_prm_ready)) n_prm_stall++;
    if (dut.s_valid && !dut.s_ready) n_bus_bp++;
    if (dut.exec_start) n_mod[int'(dut.cmd.mod)]++;
  end

  function automatic logic [63:0] pset(reg_e r, int v);
    return {OP_PSET, 7'd0, 5'(r), 16'd0, 32'(v)};
  endfunction
  function automatic logic [63:0] exec(module_e m);
    return {OP_EXEC, 56'd0, 4'(m)};
  endfunction
  task automatic prog_stream(int sa, int sb, int d, int rows, int len, int nout, int batch, int shift, int mode);
    iq.push_back(pset(R_SRC_A, sa)); iq.push_back(pset(R_SRC_B, sb)); iq.push_back(pset(R_DST, d));
    iq.push_back(pset(R_ROWS, rows)); iq.push_back(pset(R_LEN, len)); iq.push_back(pset(R_NOUT, nout));
    iq.push_back(pset(R_BATCH, batch)); iq.push_back(pset(R_SHIFT, shift)); iq.push_back(pset(R_MODE, mode));
  endtask
  task automatic prog_sel(int mc, int mh, int mw, int sc, int sh, int sw, int fc, int fh, int fw,
                          int so, int dof, int mode);
    iq.push_back(pset(R_MC, mc)); iq.push_back(pset(R_MH, mh)); iq.push_back(pset(R_MW, mw));
    iq.push_back(pset(R_SC, sc)); iq.push_back(pset(R_SH, sh)); iq.push_back(pset(R_SW, sw));
    iq.push_back(pset(R_FC, fc)); iq.push_back(pset(R_FH, fh)); iq.push_back(pset(R_FW, fw));
    iq.push_back(pset(R_SRC_OFF, so)); iq.push_back(pset(R_DST_OFF, dof)); iq.push_back(pset(R_MODE, mode));
    iq.push_back(exec(M_SEL));
  endtask

  localparam int T = 49, D = 96, HD = 32;
  localparam int A_X = 0, A_Q = 8192, A_K = 12288, A_V = 16384, A_S = 20480, A_P = 24576, A_O = 28672;
  localparam int M_X = 0, M_K = 20000, M_V = 24000;
  localparam int NEXEC = 9;
  logic signed [7:0] Wq [D][HD], Wk [D][HD], Wv [D][HD];

  function automatic logic signed [7:0] cm(int a); return $signed(dut.u_cache.mem[a]); endfunction
  function automatic int sat(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic int rshift(int v, int s); return s == 0 ? v : ((v + (1 << (s - 1))) >>> s); endfunction
  task automatic chk(int got, int exp, int tol, string what, int idx);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s[%0d] got %0d exp %0d", what, idx, got, exp);
    end
  endtask
  // reference: rows x n product of the cache matrix at a (rows x k) and w
  task automatic chk_mm(int a, int d, int rows, int k, int n, int sh, string what,
                        ref logic signed [7:0] w [D][HD]);
    for (int r = 0; r < rows; r++) for (int j = 0; j < n; j++) begin
      automatic int acc = 0;
      for (int i = 0; i < k; i++) acc += int'(cm(a + r*k + i)) * int'(w[i][j]);
      chk(cm(d + r*n + j), sat(rshift(acc, sh)), 0, what, r*n + j);
    end
  endtask

  initial begin
    #20000000; failures++; $display("watchdog expired at n_exec=%0d", n_exec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [C*8-1:0] beat;
    for (int a = 0; a < 65536; a++) mem[a] = 8'(int'($urandom % 121) - 60);
    for (int i = 0; i < D; i++) for (int j = 0; j < HD; j++) begin
      Wq[i][j] = 8'(int'($urandom % 41) - 20); Wk[i][j] = 8'(int'($urandom % 41) - 20);
      Wv[i][j] = 8'(int'($urandom % 41) - 20);
    end

    // window into the cache, then the three projections (batch 96)
    prog_sel(1, T, D, 1, T, D, 0, 0, 0, M_X, A_X, 1 << MODE_SEL_SRC_EXT);
    prog_stream(A_X, 0, A_Q, T, D, HD, D, 7, 0); iq.push_back(exec(M_MM));
    for (int r = 0; r < T; r++) for (int j = 0; j < HD; j++) begin
      for (int i = 0; i < C; i++) beat[i*8 +: 8] = Wq[i][j];
      pq.push_back(beat);
    end
    prog_stream(A_X, 0, A_K, T, D, HD, D, 7, 0); iq.push_back(exec(M_MM));
    for (int r = 0; r < T; r++) for (int j = 0; j < HD; j++) begin
      for (int i = 0; i < C; i++) beat[i*8 +: 8] = Wk[i][j];
      pq.push_back(beat);
    end
    prog_stream(A_X, 0, A_V, T, D, HD, D, 7, 0); iq.push_back(exec(M_MM));
    for (int r = 0; r < T; r++) for (int j = 0; j < HD; j++) begin
      for (int i = 0; i < C; i++) beat[i*8 +: 8] = Wv[i][j];
      pq.push_back(beat);
    end
    // K and V back to main memory
    prog_sel(1, T, HD, 1, T, HD, 0, 0, 0, A_K, M_K, 1 << MODE_SEL_DST_EXT);
    prog_sel(1, T, HD, 1, T, HD, 0, 0, 0, A_V, M_V, 1 << MODE_SEL_DST_EXT);

    instr_valid = 0; prm_valid = 0; instr_data = 0; prm_data = 0;
    mem_rd_valid = 0; mem_rd_data = 0; mem_rd_gnt = 0; mem_wr_gnt = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (n_exec < 6) @(negedge clk);

    // the host streams K^T and V from main memory
    prog_stream(A_Q, 0, A_S, T, HD, T, HD, 8, 0); iq.push_back(exec(M_MM));
    for (int r = 0; r < T; r++) for (int n = 0; n < T; n++) begin
      for (int i = 0; i < C; i++) beat[i*8 +: 8] = (i < HD) ? mem[M_K + n*HD + i] : 8'($urandom);
      pq.push_back(beat);
    end
    prog_stream(A_S, 0, A_P, T, T, 0, 0, 0, 0); iq.push_back(exec(M_SM));
    prog_stream(A_P, 0, A_O, T, T, HD, T, 7, 0); iq.push_back(exec(M_MM));
    for (int r = 0; r < T; r++) for (int n = 0; n < HD; n++) begin
      for (int i = 0; i < C; i++) beat[i*8 +: 8] = (i < T) ? mem[M_V + i*HD + n] : 8'($urandom);
      pq.push_back(beat);
    end
    while (n_exec < NEXEC) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("finished %0d executions in %0d cycles", n_exec, cyc);

    for (int e = 0; e < T*D; e++) chk(cm(A_X + e), $signed(mem[M_X + e]), 0, "sel", e);
    chk_mm(A_X, A_Q, T, D, HD, 7, "q", Wq);
    chk_mm(A_X, A_K, T, D, HD, 7, "k", Wk);
    chk_mm(A_X, A_V, T, D, HD, 7, "v", Wv);
    for (int e = 0; e < T*HD; e++) begin
      chk($signed(mem[M_K + e]), cm(A_K + e), 0, "k_wb", e);
      chk($signed(mem[M_V + e]), cm(A_V + e), 0, "v_wb", e);
    end
    for (int r = 0; r < T; r++) for (int n = 0; n < T; n++) begin
      automatic int acc = 0;
      for (int i = 0; i < HD; i++) acc += int'(cm(A_Q + r*HD + i)) * int'(cm(A_K + n*HD + i));
      chk(cm(A_S + r*T + n), sat(rshift(acc, 8)), 0, "score", r*T + n);
    end
    for (int r = 0; r < T; r++) begin
      real s;
      s = 0;
      for (int k = 0; k < T; k++) s += $exp(cm(A_S + r*T + k) / 16.0);
      for (int k = 0; k < T; k++) begin
        automatic int e = $rtoi($exp(cm(A_S + r*T + k) / 16.0) / s * 128 + 0.5);
        chk(cm(A_P + r*T + k), e > 127 ? 127 : e, 1, "prob", r*T + k);
      end
    end
    for (int r = 0; r < T; r++) for (int n = 0; n < HD; n++) begin
      automatic int acc = 0;
      for (int i = 0; i < T; i++) acc += int'(cm(A_P + r*T + i)) * int'(cm(A_V + i*HD + n));
      chk(cm(A_O + r*HD + n), sat(rshift(acc, 7)), 0, "out", r*HD + n);
    end
    chk(int'(n_exec), NEXEC, 0, "n_exec", 0);
    chk(int'(sel_err), 0, 0, "sel_err", 0);

    chk(int'(n_prm_stall > 0), 1, 0, "param_stall", 0);
    chk(int'(n_bus_bp > 0), 1, 0, "data_bus_backpressure", 0);
    chk(int'(n_rd_stall > 0), 1, 0, "mem_read_stall", 0);
    $display("mechanisms: sel=%0d mm=%0d sm=%0d prm_stall=%0d bus_bp=%0d rd_stall=%0d",
             n_mod[M_SEL], n_mod[M_MM], n_mod[M_SM], n_prm_stall, n_bus_bp, n_rd_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
