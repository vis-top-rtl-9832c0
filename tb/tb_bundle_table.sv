// tb_bundle_table: self-checking testbench of the stored instruction bundles.
//
// A reference model kept here (a queue of expected output words and an
// associative array as the bundle memory) follows the instruction stream
// the testbench sends: plain words must pass through unchanged and in
// order; words after OP_BREC must be stored and not passed; OP_BRUN must
// replay exactly the stored words (skipping record/replay words stored
// inside a bundle) and count one replay. The sink applies random
// back-pressure. Checked: every output word and the total count, n_replay,
// that a pass-through word appears in the same cycle it is offered, that
// busy falls after each replay, and that a replay of k words with a sink
// that never stalls takes 2k cycles.
module tb_bundle_table;
  import vt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, busy;
  logic [63:0] in_data, out_data;
  logic [31:0] n_replay;
  bundle_table #(.DEPTH(64)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic [63:0] expq [$];
  logic [63:0] bmem [int];
  int nout = 0, exp_replays = 0;
  bit stall_sink;
  always @(negedge clk) out_ready = !stall_sink || ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    nout++;
    if (expq.size() == 0) chk(0, "unexpected output word");
    else begin
      automatic logic [63:0] e = expq.pop_front();
      chk(out_data == e, $sformatf("word %0d: %h exp %h", nout, out_data, e));
    end
  end

  function automatic logic [63:0] rnd_word();
    return ($urandom % 2 != 0) ? {OP_PSET, 7'd0, 5'($urandom), 16'd0, 32'($urandom)}
                        : {OP_EXEC, 28'($urandom), 28'($urandom) & 28'hFFF_FFF0, 4'($urandom % 7)};
  endfunction
  function automatic logic [63:0] ctl(opcode_e op, int base, int cnt);
    return {op, 12'd0, 16'(base), 16'd0, 16'(cnt)};
  endfunction

  task automatic send(logic [63:0] w);
    in_valid = 1; in_data = w;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk); in_valid = 0;
  endtask
  task automatic plain(int n);
    for (int i = 0; i < n; i++) begin
      automatic logic [63:0] w = rnd_word();
      expq.push_back(w);
      send(w);
    end
  endtask
  task automatic record(int base, int n, bit nested);
    send(ctl(OP_BREC, base, n));
    for (int i = 0; i < n; i++) begin
      automatic logic [63:0] w = (nested && i == 1) ? ctl(OP_BRUN, 0, 3) : rnd_word();
      bmem[(base + i) % 64] = w;
      send(w);
    end
  endtask
  task automatic replay(int base, int n);
    for (int i = 0; i < n; i++) begin
      automatic logic [3:0] op = bmem[(base + i) % 64][63:60];
      if (op != OP_BREC && op != OP_BRUN) expq.push_back(bmem[(base + i) % 64]);
    end
    exp_replays++;
    send(ctl(OP_BRUN, base, n));
  endtask
  task automatic drain();
    while (expq.size() != 0 || busy) @(negedge clk);
    @(negedge clk);
  endtask

  // pass-through is combinational
  always @(posedge clk) if (rst_n && !busy && in_valid && in_data[63:60] <= 4'(OP_EXEC))
    chk(out_valid && out_data == in_data, "pass-through in the same cycle");

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_data = 0; stall_sink = 0; out_ready = 1;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    record(0, 64, 0);               // known contents everywhere
    plain(10);
    record(0, 12, 0);
    plain(3);
    replay(0, 12);
    drain();
    chk(n_replay == 1, "one replay counted");
    // timing of a replay with a sink that never stalls
    begin
      automatic time t0, t1;
      record(20, 8, 0);
      drain();
      for (int i = 0; i < 8; i++) expq.push_back(bmem[20 + i]);
      exp_replays++;
      in_valid = 1; in_data = ctl(OP_BRUN, 20, 8);
      @(posedge clk); t0 = $time; @(negedge clk); in_valid = 0;
      while (busy) @(negedge clk);
      t1 = $time;
      chk((t1 - t0) / 10 == 16, $sformatf("replay of 8 words took %0d cycles, exp 16", (t1 - t0) / 10));
      drain();
    end
    stall_sink = 1;
    record(40, 30, 1);              // wraps past DEPTH, holds a nested replay word
    plain(5);
    replay(40, 30);
    replay(2, 5);                   // part of the first bundle
    send(ctl(OP_BRUN, 7, 0));       // empty replay
    exp_replays++;
    plain(4);
    drain();
    chk(n_replay == exp_replays, $sformatf("n_replay %0d exp %0d", n_replay, exp_replays));
    chk(!busy, "idle at the end");
    for (int rep = 0; rep < 40; rep++) begin
      automatic int b = $urandom % 64, n = 1 + $urandom % 20;
      if ($urandom % 2 != 0) record(b, n, $urandom % 4 == 0);
      plain($urandom % 4);
      replay($urandom % 64, 1 + $urandom % 20);
      drain();
    end
    chk(nout > 300, "enough words seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
