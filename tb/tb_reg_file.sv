// tb_reg_file: self-checking testbench of the register bank.
//
// Checks that every register reads zero after reset, then writes random
// values to random registers (including back-to-back writes) and compares
// all registers with a reference copy after each write.
module tb_reg_file;
  import vt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we;
  logic [4:0] waddr;
  logic [31:0] wdata;
  logic [31:0] q [NREGS];
  reg_file dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] refr [NREGS];

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < NREGS; r++) begin
      refr[r] = 0; checks++;
      if (q[r] !== 0) begin failures++; $display("FAIL reset r%0d", r); end
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = ($urandom % 4) != 0; waddr = 5'($urandom); wdata = $urandom;
      @(negedge clk);
      if (we) refr[waddr] = wdata;
      we = 0;
      for (int r = 0; r < NREGS; r++) begin
        checks++;
        if (q[r] !== refr[r]) begin failures++; if (failures < 10) $display("FAIL r%0d", r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
