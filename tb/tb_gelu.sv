// tb_gelu: self-checking testbench of the GELU stream module.
//
// Streams all 256 int8 inputs back to back, then a random sequence with
// gaps, and compares each output with round(16 * gelu(x/16)) computed here in
// floating point from the tanh formula (at most one LSB apart). Also checks
// the three-cycle latency and that no output is lost or added.
module tb_gelu;
  import vt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid;
  logic signed [7:0] in_data, out_data;
  gelu dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic signed [7:0] sent [$];
  int sent_cyc [$];
  int nout = 0;

  function automatic int ref_gelu(int xi);
    real x, u, y;
    x = real'(xi) / 16.0;
    u = 0.7978845608 * (x + 0.044715 * x * x * x);
    y = 0.5 * x * (1.0 + $tanh(u)) * 16.0;
    return $rtoi(y + ((y >= 0) ? 0.5 : -0.5));
  endfunction

  always @(posedge clk) if (in_valid && in_ready) begin
    sent.push_back(in_data); sent_cyc.push_back(cyc);
  end
  always @(posedge clk) if (out_valid) begin
    automatic logic signed [7:0] x = sent.pop_front();
    automatic int c = sent_cyc.pop_front();
    automatic int e = ref_gelu(int'(x));
    nout++;
    checks++;
    if (int'(out_data) - e > 1 || e - int'(out_data) > 1) begin
      failures++; $display("FAIL x=%0d got %0d exp %0d", x, out_data, e);
    end
    checks++;
    if (cyc - c != 3) begin failures++; $display("FAIL latency %0d", cyc - c); end
  end

  initial begin
    #200000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_data = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = -128; i < 128; i++) begin
      @(negedge clk); in_valid = 1; in_data = 8'(i);
    end
    for (int i = 0; i < 300; i++) begin
      @(negedge clk); in_valid = ($urandom % 2) == 0; in_data = 8'($urandom);
    end
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (sent.size() != 0 || nout < 256) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
