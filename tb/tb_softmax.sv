// tb_softmax: self-checking testbench of the softmax module.
//
// Runs rows of the window length 49 (7x7 window attention) and shorter rows
// with random int8 scores of small and large spread, compares each output
// with round(128 * softmax) computed here in floating point (one LSB of
// tolerance, 1.0 saturating to 127), and checks the row latency of
// 3*len + 34 cycles when the input never stalls.
module tb_softmax;
  import vt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, in_valid, in_ready, out_valid;
  logic [31:0] cfg_rows, cfg_len;
  logic signed [7:0] in_data, out_data;
  softmax dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic signed [7:0] X [0:7][0:48];
  int got [$];
  always @(posedge clk) if (out_valid) got.push_back(int'(out_data));

  task automatic run(int rows, int len, int spread, bit stall);
    int t0, idx;
    for (int r = 0; r < rows; r++) for (int k = 0; k < len; k++)
      X[r][k] = 8'(int'($urandom % (2 * spread + 1)) - spread);
    got.delete();
    cfg_rows = rows; cfg_len = len;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    for (int r = 0; r < rows; r++)
      for (int k = 0; k < len; k++) begin
        if (stall) while ($urandom % 3 == 0) @(negedge clk);
        in_valid = 1; in_data = X[r][k];
        while (!in_ready) @(negedge clk);
        @(negedge clk); in_valid = 0;
      end
    while (!done) @(negedge clk);
    if (!stall) begin
      checks++;
      if (cyc - t0 != rows * (3 * len + 34)) begin
        failures++; $display("FAIL cycles %0d exp %0d", cyc - t0, rows * (3 * len + 34));
      end
    end
    @(negedge clk);
    checks++;
    if (got.size() != rows * len) begin failures++; $display("FAIL count %0d", got.size()); end
    idx = 0;
    for (int r = 0; r < rows; r++) begin
      real s, p; int e;
      s = 0.0;
      for (int k = 0; k < len; k++) s += $exp(real'(X[r][k]) / 16.0);
      for (int k = 0; k < len; k++) begin
        p = $exp(real'(X[r][k]) / 16.0) / s * 128.0;
        e = $rtoi(p + 0.5); if (e > 127) e = 127;
        checks++;
        if (idx >= got.size() || got[idx] - e > 1 || e - got[idx] > 1) begin
          failures++;
          if (failures < 10) $display("FAIL r%0d k%0d got %0d exp %0d", r, k, idx < got.size() ? got[idx] : -999, e);
        end
        idx++;
      end
    end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; in_valid = 0; in_data = 0; cfg_rows = 0; cfg_len = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(3, 49, 40, 0);
    run(2, 49, 128, 0);
    run(4, 7, 16, 0);
    run(2, 49, 64, 1);
    run(1, 1, 10, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
