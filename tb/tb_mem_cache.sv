// tb_mem_cache: self-checking testbench of the memory cache unit.
//
// Writes random bytes to random addresses (kept in a reference array), reads
// them back on both ports, including a read and a write of the same address
// in one cycle (the read must return the old byte), and checks the
// one-cycle read latency. Uses a 4 KiB instance.
module tb_mem_cache;
  import vt_pkg::*;
  localparam int D = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ra_en, rb_en, we;
  logic [11:0] ra_addr, rb_addr, waddr;
  logic [7:0] ra_data, rb_data, wdata;
  mem_cache #(.DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] refm [D];
  bit valid [D];

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ra_en = 0; rb_en = 0; we = 0; ra_addr = 0; rb_addr = 0; waddr = 0; wdata = 0;
    for (int a = 0; a < D; a++) valid[a] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = 1; waddr = 12'($urandom); wdata = 8'($urandom);
      refm[waddr] = wdata; valid[waddr] = 1;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic logic [11:0] a = 12'($urandom), b = 12'($urandom);
      automatic logic [7:0] ea = refm[a], eb = refm[b];
      automatic bit va = valid[a], vb = valid[b];
      @(negedge clk);
      ra_en = 1; ra_addr = a; rb_en = 1; rb_addr = b;
      we = (n % 5 == 0); waddr = a; wdata = 8'($urandom);   // read-first collision
      @(negedge clk);
      ra_en = 0; rb_en = 0;
      if (we) refm[a] = wdata;
      we = 0;
      if (va) begin checks++; if (ra_data !== ea) begin failures++; $display("FAIL A %0d", a); end end
      if (vb && !(b == a && n % 5 == 0)) begin
        checks++; if (rb_data !== eb) begin failures++; $display("FAIL B %0d", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
