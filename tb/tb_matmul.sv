// tb_matmul: self-checking testbench of the matrix-multiply module.
//
// Runs several shapes (row length a multiple of the batch or not, batch
// smaller than the PE count, one output column or many) with random int8 data
// and parameters, compares every result with a reference product computed
// here, and checks the cycle count of a stall-free run against
// blocks * (batch + nout + 3). A second pass inserts random bubbles on both
// input streams. Uses C = 8 PEs to keep the run short.
module tb_matmul;
  import vt_pkg::*;
  localparam int C = 8;
  localparam int MAX_N = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [31:0] cfg_rows, cfg_len, cfg_nout, cfg_batch, cfg_shift;
  logic in_valid, in_ready, prm_valid, prm_ready, out_valid;
  logic signed [7:0] in_data, out_data;
  logic [C*8-1:0] prm_data;

  matmul #(.C(C), .MAX_N(MAX_N)) dut (.*);

  int checks = 0, failures = 0;

  logic signed [7:0] X [0:15][0:63];
  logic signed [7:0] W [0:63][0:31];
  logic signed [7:0] got [$];
  bit stall;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (out_valid) got.push_back(out_data);

  // stream drivers
  int xi, wi;
  int rows, len, nout, batch, shift;
  function automatic int nblk(); return (len + batch - 1) / batch; endfunction

  task automatic drive_inputs();
    int r, k;
    for (r = 0; r < rows; r++) begin
      for (k = 0; k < len; k++) begin
        in_valid = 1; in_data = X[r][k];
        while (!in_ready) @(negedge clk);
        @(negedge clk);
        in_valid = 0;
        if (stall && ($urandom % 3 == 0)) @(negedge clk);
      end
    end
  endtask

  task automatic drive_params();
    int r, b, n, i;
    for (r = 0; r < rows; r++)
      for (b = 0; b < nblk(); b++)
        for (n = 0; n < nout; n++) begin
          prm_valid = 1;
          for (i = 0; i < C; i++)
            prm_data[i*8 +: 8] = (b*batch + i < len && i < batch) ? W[b*batch+i][n] : 8'($urandom);
          while (!prm_ready) @(negedge clk);
          @(negedge clk);
          prm_valid = 0;
          if (stall && ($urandom % 3 == 0)) @(negedge clk);
        end
  endtask

  task automatic run(int r_, int l_, int n_, int b_, int s_, bit st);
    int t0, t1, acc, exp8, idx;
    rows = r_; len = l_; nout = n_; batch = b_; shift = s_; stall = st;
    for (int r = 0; r < rows; r++) for (int k = 0; k < len; k++) X[r][k] = 8'($urandom);
    for (int k = 0; k < len; k++) for (int n = 0; n < nout; n++) W[k][n] = 8'($urandom);
    got.delete();
    cfg_rows = rows; cfg_len = len; cfg_nout = nout; cfg_batch = batch; cfg_shift = shift;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    fork drive_inputs(); drive_params(); join
    while (!done) @(negedge clk);
    t1 = cyc;
    @(negedge clk);
    checks++;
    if (got.size() != rows * nout) begin
      failures++; $display("FAIL size %0d exp %0d", got.size(), rows*nout);
    end
    idx = 0;
    for (int r = 0; r < rows; r++)
      for (int n = 0; n < nout; n++) begin
        acc = 0;
        for (int k = 0; k < len; k++) acc += int'(X[r][k]) * int'(W[k][n]);
        if (shift > 0) acc = (acc + (1 << (shift - 1))) >>> shift;
        exp8 = acc > 127 ? 127 : (acc < -128 ? -128 : acc);
        checks++;
        if (idx >= got.size() || int'(got[idx]) != exp8) begin
          failures++;
          if (failures < 10) $display("FAIL r%0d n%0d got %0d exp %0d", r, n, idx < got.size() ? int'(got[idx]) : 999, exp8);
        end
        idx++;
      end
    if (!st) begin
      checks++;
      // stall-free: each block takes batch-or-remainder load cycles, nout beats, 3 drain cycles
      begin
        int expc = 0;
        for (int b = 0; b < nblk(); b++) expc += ((len - b*batch) < batch ? (len - b*batch) : batch) + nout + 3;
        expc = expc * rows;
        if (t1 - t0 != expc) begin
          failures++; $display("FAIL cycles %0d exp %0d", t1 - t0, expc);
        end
      end
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; in_valid = 0; prm_valid = 0; in_data = 0; prm_data = 0;
    cfg_rows = 0; cfg_len = 0; cfg_nout = 0; cfg_batch = 0; cfg_shift = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(3, 16, 5, 8, 6, 0);   // exact multiple of the batch
    run(2, 20, 7, 8, 7, 0);   // partial last block
    run(2, 11, 1, 3, 4, 0);   // reduced batch, single column
    run(1, 8, 32, 8, 0, 0);   // full accumulator bank, no shift (saturation)
    run(4, 19, 9, 5, 5, 1);   // random bubbles on both streams
    run(3, 24, 4, 8, 6, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
