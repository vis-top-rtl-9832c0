// tb_vecop: self-checking testbench of the basic vector operations module.
//
// For each operation (ADD, SUB, MUL with shift, MAX) and each source of
// operand b (data bus or parameter stream) it streams random int8 pairs with
// random gaps on both inputs and compares every result with an exact
// saturating reference computed here.
module tb_vecop;
  import vt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start;
  logic [31:0] cfg_mode, cfg_shift;
  logic in_valid, in_ready, prm_valid, prm_ready, out_valid;
  logic [15:0] in_data;
  logic [7:0] prm_data;
  logic signed [7:0] out_data;
  vecop dut (.*);

  int checks = 0, failures = 0;
  int expq [$];
  int op, shift; bit bprm;

  function automatic int sat(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic int refop(int a, int b);
    case (op)
      0: return sat(a + b);
      1: return sat(a - b);
      2: return sat(shift == 0 ? a * b : ((a * b + (1 << (shift - 1))) >>> shift));
      default: return a > b ? a : b;
    endcase
  endfunction

  always @(posedge clk) if (in_valid && in_ready) begin
    automatic int a = int'($signed(in_data[7:0]));
    automatic int b = bprm ? int'($signed(prm_data)) : int'($signed(in_data[15:8]));
    expq.push_back(refop(a, b));
  end
  always @(posedge clk) if (out_valid) begin
    automatic int e = expq.pop_front();
    checks++;
    if (int'(out_data) != e) begin failures++; $display("FAIL op%0d got %0d exp %0d", op, out_data, e); end
  end

  initial begin
    #400000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; in_valid = 0; prm_valid = 0; in_data = 0; prm_data = 0; cfg_mode = 0; cfg_shift = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int o = 0; o < 4; o++)
      for (int bp = 0; bp < 2; bp++) begin
        op = o; bprm = bit'(bp); shift = (o == 2) ? 3 + bp : 0;
        cfg_mode = 32'(o) | (32'(bp) << MODE_VEC_B_PARAM); cfg_shift = shift;
        @(negedge clk); start = 1; @(negedge clk); start = 0;
        for (int i = 0; i < 100; i++) begin
          in_valid = ($urandom % 4) != 0; in_data = 16'($urandom);
          prm_valid = ($urandom % 4) != 0; prm_data = 8'($urandom);
          @(negedge clk);
        end
        in_valid = 0; prm_valid = 0;
        repeat (3) @(negedge clk);
        checks++;
        if (expq.size() != 0) begin failures++; $display("FAIL pending outputs"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
