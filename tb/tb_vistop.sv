// tb_vistop: end-to-end testbench of the Vis-TOP processor at its default
// size (C = 96 PEs, 512 KiB cache), running the layers of one Swin-T
// window of 7x7 tokens with 96 channels.
//
// Main memory holds a 14x14x96 feature map (token-major, channels fastest).
// The instruction program:
//   1. data selection, main memory -> cache: the 7x7 window at (7,7);
//   2. layer normalisation over 96 channels (gamma/beta streamed);
//   3. matrix multiply 49x96 * 96x96, batch 96 (one block per row);
//      then a background data selection of the next window (0,0) into a
//      spare cache area, which runs while steps 4-5 compute;
//   4. GELU;  5. residual add of the window input (vector ADD) -- steps 4
//      and 5 are recorded as a stored instruction bundle and replayed twice
//      (the second replay recomputes the same values); a barrier (EXEC
//      with no module) then waits for the background selection;
//   6. matrix multiply 49x96 * 96x49 with batch 32 (three accumulated blocks);
//   7. softmax over rows of 49;  8. vector MUL by a streamed operand;
//   9. data selection, cache -> main memory;
//  10. a data selection whose small cube leaves the large one (error).
// The parameter stream, the instruction stream and main memory insert random
// bubbles and latencies. After the run every cache region and the written-
// back main memory are compared with references computed here from the
// stage inputs (exact for selection, matrix multiply and vector operations;
// one LSB for GELU and softmax, two for layer normalisation). Each mechanism
// (every module, bundle replays, selection overlapping computation, parameter-stream stalls, data-bus
// back-pressure, main-memory read stalls, multi-block accumulation, the
// selection error) is counted and must occur.
module tb_vistop;
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
  int n_prm_stall = 0, n_bus_bp = 0, n_acc_blocks = 0, n_overlap = 0;
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
    if (dut.u_mm.v1 && !dut.u_mm.f1) n_acc_blocks++;
    if (dut.exec_start) n_mod[int'(dut.cmd.mod)]++;
    if (dut.sel_active && dut.ibt_busy) n_overlap++;
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

  // ------------------------------------------------------------ test data
  localparam int T = 49, D = 96, N2 = 49, B2 = 32;
  localparam int A_X = 0, A_LN = 8192, A_MM1 = 16384, A_GE = 24576, A_RES = 32768,
                 A_MM2 = 40960, A_SM = 45056, A_MUL = 49152, A_X2 = 53248, M_OUT = 20000;
  logic signed [7:0] G [T*D], Bt [T*D], W1 [D][D], W2 [D][N2], P [T*N2];

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

  localparam int NEXEC = 13;

  initial begin
    #20000000; failures++; $display("watchdog expired at n_exec=%0d", n_exec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [C*8-1:0] beat;
    for (int a = 0; a < 65536; a++) mem[a] = 8'(int'($urandom % 121) - 60);
    for (int e = 0; e < T*D; e++) begin G[e] = 8'(int'($urandom % 129) - 64); Bt[e] = 8'(int'($urandom % 33) - 16); end
    for (int i = 0; i < D; i++) for (int n = 0; n < D; n++) W1[i][n] = 8'(int'($urandom % 41) - 20);
    for (int i = 0; i < D; i++) for (int n = 0; n < N2; n++) W2[i][n] = 8'(int'($urandom % 41) - 20);
    for (int e = 0; e < T*N2; e++) P[e] = 8'(int'($urandom % 61) - 30);

    // program and parameter stream, in execution order
    prog_sel(14, 14, 96, 7, 7, 96, 7, 7, 0, 0, A_X, 1 << MODE_SEL_SRC_EXT);          // 1
    prog_stream(A_X, 0, A_LN, T, D, 0, 0, 0, 0);   iq.push_back(exec(M_LN));         // 2
    for (int e = 0; e < T*D; e++) begin beat = '0; beat[15:0] = {Bt[e], G[e]}; pq.push_back(beat); end
    prog_stream(A_LN, 0, A_MM1, T, D, D, 96, 7, 0); iq.push_back(exec(M_MM));        // 3
    for (int r = 0; r < T; r++) for (int n = 0; n < D; n++) begin
      for (int i = 0; i < C; i++) beat[i*8 +: 8] = W1[i][n];
      pq.push_back(beat);
    end
    prog_sel(14, 14, 96, 7, 7, 96, 0, 0, 0, 0, A_X2,
             (1 << MODE_SEL_SRC_EXT) | (1 << MODE_SEL_BG));                        // background
    // 4-5 as a stored bundle: recorded once, replayed twice (same results)
    begin
      automatic int q0 = iq.size(), k;
      logic [63:0] bw [$];
      prog_stream(A_MM1, 0, A_GE, T, D, 0, 0, 0, 0); iq.push_back(exec(M_GELU));     // 4
      prog_stream(A_GE, A_X, A_RES, T, D, 0, 0, 0, V_ADD); iq.push_back(exec(M_VEC)); // 5
      k = iq.size() - q0;
      bw = iq[q0:$];
      repeat (k) void'(iq.pop_back());
      iq.push_back({OP_BREC, 12'd0, 16'd100, 16'd0, 16'(k)});
      foreach (bw[i]) iq.push_back(bw[i]);
      iq.push_back({OP_BRUN, 12'd0, 16'd100, 16'd0, 16'(k)});
      iq.push_back({OP_BRUN, 12'd0, 16'd100, 16'd0, 16'(k)});
    end
    iq.push_back(exec(M_NONE));                                                       // barrier
    prog_stream(A_RES, 0, A_MM2, T, D, N2, B2, 8, 0); iq.push_back(exec(M_MM));      // 6
    for (int r = 0; r < T; r++) for (int b = 0; b < D / B2; b++) for (int n = 0; n < N2; n++) begin
      for (int i = 0; i < C; i++) beat[i*8 +: 8] = (i < B2) ? W2[b*B2+i][n] : 8'($urandom);
      pq.push_back(beat);
    end
    prog_stream(A_MM2, 0, A_SM, T, N2, 0, 0, 0, 0); iq.push_back(exec(M_SM));        // 7
    prog_stream(A_SM, 0, A_MUL, T, N2, 0, 0, 4, V_MUL | (1 << MODE_VEC_B_PARAM));
    iq.push_back(exec(M_VEC));                                                        // 8
    for (int e = 0; e < T*N2; e++) begin beat = '0; beat[7:0] = P[e]; pq.push_back(beat); end
    prog_sel(1, T, N2, 1, T, N2, 0, 0, 0, A_MUL, M_OUT, 1 << MODE_SEL_DST_EXT);       // 9
    prog_sel(1, 4, 4, 2, 4, 4, 0, 0, 0, 0, 60000, 0);                                 // 10: error

    instr_valid = 0; prm_valid = 0; instr_data = 0; prm_data = 0;
    mem_rd_valid = 0; mem_rd_data = 0; mem_rd_gnt = 0; mem_wr_gnt = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (n_exec < NEXEC) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("finished %0d executions in %0d cycles", n_exec, cyc);

    // 1. window selection
    for (int t = 0; t < T; t++) for (int c = 0; c < D; c++)
      chk(cm(A_X + t*D + c), $signed(mem[((7 + t/7)*14 + 7 + t%7)*96 + c]), 0, "sel", t*D+c);
    // background selection of window (0,0)
    for (int t = 0; t < T; t++) for (int c = 0; c < D; c++)
      chk(cm(A_X2 + t*D + c), $signed(mem[((t/7)*14 + t%7)*96 + c]), 0, "bg_sel", t*D+c);
    // 2. layer normalisation
    for (int t = 0; t < T; t++) begin
      real m, m2, y;
      m = 0; m2 = 0;
      for (int c = 0; c < D; c++) begin m += cm(A_X+t*D+c) / 16.0; m2 += (cm(A_X+t*D+c) / 16.0) ** 2; end
      m /= D; m2 /= D;
      for (int c = 0; c < D; c++) begin
        y = (G[t*D+c] / 64.0) * (cm(A_X+t*D+c) / 16.0 - m) / $sqrt(m2 - m*m + 1.0/65536) + Bt[t*D+c] / 16.0;
        chk(cm(A_LN+t*D+c), sat($rtoi(y*16 + (y >= 0 ? 0.5 : -0.5))), 2, "ln", t*D+c);
      end
    end
    // 3. matrix multiply, batch 96
    for (int t = 0; t < T; t++) for (int n = 0; n < D; n++) begin
      automatic int acc = 0;
      for (int i = 0; i < D; i++) acc += int'(cm(A_LN+t*D+i)) * int'(W1[i][n]);
      chk(cm(A_MM1+t*D+n), sat(rshift(acc, 7)), 0, "mm1", t*D+n);
    end
    // 4. GELU
    for (int e = 0; e < T*D; e++) begin
      real x, y;
      x = cm(A_MM1+e) / 16.0;
      y = 0.5 * x * (1 + $tanh(0.7978845608 * (x + 0.044715*x*x*x))) * 16;
      chk(cm(A_GE+e), $rtoi(y + (y >= 0 ? 0.5 : -0.5)), 1, "gelu", e);
    end
    // 5. residual add
    for (int e = 0; e < T*D; e++) chk(cm(A_RES+e), sat(cm(A_GE+e) + cm(A_X+e)), 0, "res", e);
    // 6. matrix multiply, batch 32
    for (int t = 0; t < T; t++) for (int n = 0; n < N2; n++) begin
      automatic int acc = 0;
      for (int i = 0; i < D; i++) acc += int'(cm(A_RES+t*D+i)) * int'(W2[i][n]);
      chk(cm(A_MM2+t*N2+n), sat(rshift(acc, 8)), 0, "mm2", t*N2+n);
    end
    // 7. softmax
    for (int t = 0; t < T; t++) begin
      real s;
      s = 0;
      for (int k = 0; k < N2; k++) s += $exp(cm(A_MM2+t*N2+k) / 16.0);
      for (int k = 0; k < N2; k++) begin
        automatic int e = $rtoi($exp(cm(A_MM2+t*N2+k) / 16.0) / s * 128 + 0.5);
        chk(cm(A_SM+t*N2+k), e > 127 ? 127 : e, 1, "sm", t*N2+k);
      end
    end
    // 8. vector multiply by streamed operand
    for (int e = 0; e < T*N2; e++) chk(cm(A_MUL+e), sat(rshift(int'(cm(A_SM+e)) * int'(P[e]), 4)), 0, "mul", e);
    // 9. write-back to main memory
    for (int e = 0; e < T*N2; e++) chk($signed(mem[M_OUT+e]), cm(A_MUL+e), 0, "wb", e);
    // 10. selection error, nothing written
    chk(int'(sel_err), 1, 0, "sel_err", 0);
    chk(int'(n_exec), NEXEC, 0, "n_exec", 0);

    // every mechanism must have happened
    chk(int'(n_mod[M_SEL] > 0 && n_mod[M_MM] > 0 && n_mod[M_SM] > 0 && n_mod[M_LN] > 0 &&
             n_mod[M_GELU] > 0 && n_mod[M_VEC] > 0), 1, 0, "all_modules", 0);
    chk(int'(n_prm_stall > 0), 1, 0, "param_stall", 0);
    chk(int'(n_bus_bp > 0), 1, 0, "data_bus_backpressure", 0);
    chk(int'(n_rd_stall > 0), 1, 0, "mem_read_stall", 0);
    chk(int'(n_acc_blocks > 0), 1, 0, "multi_block_accumulation", 0);
    chk(int'(n_replay), 2, 0, "bundle_replays", 0);
    chk(int'(n_overlap > 0), 1, 0, "selection_overlaps_computation", 0);
    $display("mechanisms: sel=%0d mm=%0d sm=%0d ln=%0d gelu=%0d vec=%0d prm_stall=%0d bus_bp=%0d rd_stall=%0d acc_blocks=%0d replays=%0d overlap=%0d",
             n_mod[M_SEL], n_mod[M_MM], n_mod[M_SM], n_mod[M_LN], n_mod[M_GELU], n_mod[M_VEC],
             n_prm_stall, n_bus_bp, n_rd_stall, n_acc_blocks, n_replay, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
