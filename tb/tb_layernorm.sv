// tb_layernorm: self-checking testbench of the layer-normalisation module.
//
// Normalises rows of 96, 384, 768 and 1536 int8 activations (Swin-T
// embedding widths, 1536 being the 4C input of the last patch merging; the
// 1536 row uses full-scale inputs, the worst case for the sums) with random
// gamma/beta, with and without gaps
// on the input and parameter streams, and compares each output with a
// floating-point reference y = gamma (x - mean) / sqrt(var + 2^-16) + beta
// rounded to the 4-fractional-bit output format (two LSB of tolerance).
module tb_layernorm;
  import vt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, in_valid, in_ready, prm_valid, prm_ready, out_valid;
  logic [31:0] cfg_rows, cfg_len;
  logic signed [7:0] in_data, out_data;
  logic [15:0] prm_data;
  layernorm dut (.*);

  int checks = 0, failures = 0;
  logic signed [7:0] X [0:3][0:1535];
  logic signed [7:0] G [0:3][0:1535];
  logic signed [7:0] B [0:3][0:1535];
  int got [$];
  always @(posedge clk) if (out_valid) got.push_back(int'(out_data));

  task automatic run(int rows, int len, int spread, int ofs, bit stall);
    int idx;
    for (int r = 0; r < rows; r++) for (int k = 0; k < len; k++) begin
      X[r][k] = 8'(int'($urandom % (2 * spread + 1)) - spread + ofs);
      G[r][k] = 8'(int'($urandom % 129) - 64);
      B[r][k] = 8'(int'($urandom % 65) - 32);
    end
    got.delete();
    cfg_rows = rows; cfg_len = len;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int r = 0; r < rows; r++) begin
      for (int k = 0; k < len; k++) begin
        if (stall) while ($urandom % 3 == 0) @(negedge clk);
        in_valid = 1; in_data = X[r][k];
        while (!in_ready) @(negedge clk);
        @(negedge clk); in_valid = 0;
      end
      for (int k = 0; k < len; k++) begin
        if (stall) while ($urandom % 3 == 0) @(negedge clk);
        prm_valid = 1; prm_data = {B[r][k], G[r][k]};
        while (!prm_ready) @(negedge clk);
        @(negedge clk); prm_valid = 0;
      end
    end
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (got.size() != rows * len) begin failures++; $display("FAIL count %0d", got.size()); end
    idx = 0;
    for (int r = 0; r < rows; r++) begin
      real m, m2, v, y; int e;
      m = 0.0; m2 = 0.0;
      for (int k = 0; k < len; k++) begin
        m += real'(X[r][k]) / 16.0; m2 += (real'(X[r][k]) / 16.0) ** 2;
      end
      m = m / len; m2 = m2 / len; v = m2 - m * m;
      if (v < 0.0) v = 0.0;
      for (int k = 0; k < len; k++) begin
        y = (real'(G[r][k]) / 64.0) * (real'(X[r][k]) / 16.0 - m) / $sqrt(v + 1.0 / 65536.0)
            + real'(B[r][k]) / 16.0;
        y = y * 16.0;
        e = $rtoi(y + (y >= 0 ? 0.5 : -0.5));
        if (e > 127) e = 127; if (e < -128) e = -128;
        checks++;
        if (idx >= got.size() || got[idx] - e > 2 || e - got[idx] > 2) begin
          failures++;
          if (failures < 10) $display("FAIL r%0d k%0d got %0d exp %0d", r, k, idx < got.size() ? got[idx] : -999, e);
        end
        idx++;
      end
    end
  endtask

  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; in_valid = 0; in_data = 0; prm_valid = 0; prm_data = 0; cfg_rows = 0; cfg_len = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(2, 96, 40, 0, 0);
    run(1, 768, 100, 10, 0);
    run(2, 96, 8, -20, 1);
    run(1, 384, 127, 0, 1);
    run(1, 1536, 127, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
