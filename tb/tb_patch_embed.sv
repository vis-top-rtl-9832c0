// tb_patch_embed: the Swin-T patch embedding run on the full-size Vis-TOP
// processor (C = 96 PEs, 512 KiB cache, every parameter at its default).
//
// A 3x28x28 image (C x H x W, W fastest) in main memory is cut into 49
// patches of 4x4 pixels, one 7x7 window of tokens. Each patch is a 3x4x4
// cube copied into the cache by one data selection; the selection is
// recorded once as a stored bundle and replayed 49 times, the host changing
// only the offsets FH, FW and DST_OFF between replays. The 49x48 patch
// matrix is then projected to 96 channels by a matrix multiply with batch
// 48, a streamed bias is added by the vector unit and the tokens are layer
// normalised. Every stage is compared with a reference computed here from
// the stage input: exact for the copies, the projection and the bias, two
// LSBs for layer normalisation. Replays, parameter-stream stalls, data-bus
// back-pressure and main-memory read stalls are counted and must occur.
module tb_patch_embed;
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

  localparam int IH = 28, IW = 28, PS = 4, NP = 49, K = 48, D = 96;
  localparam int A_P = 0, A_E = 8192, A_B = 16384, A_N = 24576;
  localparam int NEXEC = NP + 3;
  logic signed [7:0] Wp [K][D], bias [D], G [NP*D], Bt [NP*D];

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

  initial begin
    #20000000; failures++; $display("watchdog expired at n_exec=%0d", n_exec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [C*8-1:0] beat;
    for (int a = 0; a < 65536; a++) mem[a] = 8'(int'($urandom % 129) - 64);
    for (int i = 0; i < K; i++) for (int n = 0; n < D; n++) Wp[i][n] = 8'(int'($urandom % 41) - 20);
    for (int n = 0; n < D; n++) bias[n] = 8'(int'($urandom % 41) - 20);
    for (int e = 0; e < NP*D; e++) begin G[e] = 8'(int'($urandom % 129) - 64); Bt[e] = 8'(int'($urandom % 33) - 16); end

    // patch selection: cube registers once, the copy recorded as a bundle
    iq.push_back(pset(R_MC, 3));  iq.push_back(pset(R_MH, IH)); iq.push_back(pset(R_MW, IW));
    iq.push_back(pset(R_SC, 3));  iq.push_back(pset(R_SH, PS)); iq.push_back(pset(R_SW, PS));
    iq.push_back(pset(R_FC, 0));  iq.push_back(pset(R_SRC_OFF, 0));
    iq.push_back(pset(R_MODE, 1 << MODE_SEL_SRC_EXT));
    iq.push_back({OP_BREC, 12'd0, 16'd7, 16'd0, 16'd1});
    iq.push_back(exec(M_SEL));
    for (int p = 0; p < NP; p++) begin
      iq.push_back(pset(R_FH, PS * (p / 7))); iq.push_back(pset(R_FW, PS * (p % 7)));
      iq.push_back(pset(R_DST_OFF, A_P + p * K));
      iq.push_back({OP_BRUN, 12'd0, 16'd7, 16'd0, 16'd1});
    end
    // projection 48 -> 96, batch 48 (one block per token)
    prog_stream(A_P, 0, A_E, NP, K, D, K, 6, 0); iq.push_back(exec(M_MM));
    for (int r = 0; r < NP; r++) for (int n = 0; n < D; n++) begin
      for (int i = 0; i < C; i++) beat[i*8 +: 8] = (i < K) ? Wp[i][n] : 8'($urandom);
      pq.push_back(beat);
    end
    // bias from the parameter stream
    prog_stream(A_E, 0, A_B, NP, D, 0, 0, 0, V_ADD | (1 << MODE_VEC_B_PARAM)); iq.push_back(exec(M_VEC));
    for (int e = 0; e < NP*D; e++) begin beat = '0; beat[7:0] = bias[e % D]; pq.push_back(beat); end
    // layer normalisation over the 96 channels
    prog_stream(A_B, 0, A_N, NP, D, 0, 0, 0, 0); iq.push_back(exec(M_LN));
    for (int e = 0; e < NP*D; e++) begin beat = '0; beat[15:0] = {Bt[e], G[e]}; pq.push_back(beat); end

    instr_valid = 0; prm_valid = 0; instr_data = 0; prm_data = 0;
    mem_rd_valid = 0; mem_rd_data = 0; mem_rd_gnt = 0; mem_wr_gnt = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (n_exec < NEXEC) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("finished %0d executions in %0d cycles", n_exec, cyc);

    // patches: element c*16 + h*4 + w of patch p
    for (int p = 0; p < NP; p++) for (int c = 0; c < 3; c++) for (int h = 0; h < PS; h++) for (int w = 0; w < PS; w++)
      chk(cm(A_P + p*K + c*16 + h*4 + w),
          $signed(mem[c*IH*IW + (PS*(p/7) + h)*IW + PS*(p%7) + w]), 0, "patch", p*K + c*16 + h*4 + w);
    for (int t = 0; t < NP; t++) for (int n = 0; n < D; n++) begin
      automatic int acc = 0;
      for (int i = 0; i < K; i++) acc += int'(cm(A_P+t*K+i)) * int'(Wp[i][n]);
      chk(cm(A_E+t*D+n), sat(rshift(acc, 6)), 0, "proj", t*D+n);
      chk(cm(A_B+t*D+n), sat(cm(A_E+t*D+n) + bias[n]), 0, "bias", t*D+n);
    end
    for (int t = 0; t < NP; t++) begin
      real m, m2, y;
      m = 0; m2 = 0;
      for (int c = 0; c < D; c++) begin m += cm(A_B+t*D+c) / 16.0; m2 += (cm(A_B+t*D+c) / 16.0) ** 2; end
      m /= D; m2 /= D;
      for (int c = 0; c < D; c++) begin
        y = (G[t*D+c] / 64.0) * (cm(A_B+t*D+c) / 16.0 - m) / $sqrt(m2 - m*m + 1.0/65536) + Bt[t*D+c] / 16.0;
        chk(cm(A_N+t*D+c), sat($rtoi(y*16 + (y >= 0 ? 0.5 : -0.5))), 2, "ln", t*D+c);
      end
    end
    chk(int'(n_exec), NEXEC, 0, "n_exec", 0);
    chk(int'(sel_err), 0, 0, "sel_err", 0);

    chk(int'(n_replay), NP, 0, "bundle_replays", 0);
    chk(int'(n_prm_stall > 0), 1, 0, "param_stall", 0);
    chk(int'(n_bus_bp > 0), 1, 0, "data_bus_backpressure", 0);
    chk(int'(n_rd_stall > 0), 1, 0, "mem_read_stall", 0);
    $display("mechanisms: sel=%0d replays=%0d prm_stall=%0d bus_bp=%0d rd_stall=%0d",
             n_mod[M_SEL], n_replay, n_prm_stall, n_bus_bp, n_rd_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
