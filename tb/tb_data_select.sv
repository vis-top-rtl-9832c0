// tb_data_select: self-checking testbench of the data selection engine.
//
// A memory model with random grants and random (in-order) read latency
// serves the source; a second array takes the writes, also with random
// grants. For several cube shapes, including a 7x7 window cut out of a
// 14x14x8 feature map, the destination is compared byte by byte with the
// paper's algorithm evaluated here, bytes outside the destination block
// must stay untouched, and an out-of-range small cube must raise err and
// write nothing. A stall-free run must copy one byte per cycle.
module tb_data_select;
  import vt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, err;
  sel_cfg_t cfg;
  logic rd_req, rd_gnt, rd_valid, wr_req, wr_gnt;
  logic [31:0] rd_addr, wr_addr;
  logic [7:0] rd_data, wr_data;
  data_select dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [7:0] src [0:8191];
  logic [7:0] dst [0:8191];
  logic [7:0] expd [0:8191];
  bit random_timing;
  int nwrites;

  // in-order read responses with random latency
  typedef struct { logic [7:0] d; int due; } resp_t;
  resp_t q [$];
  int last_due = 0;
  always @(negedge clk) rd_gnt = random_timing ? ($urandom % 3 != 0) : 1'b1;
  always @(negedge clk) wr_gnt = random_timing ? ($urandom % 3 != 0) : 1'b1;
  always @(posedge clk) begin
    if (rd_req && rd_gnt) begin
      automatic int lat = random_timing ? 1 + $urandom % 4 : 1;
      automatic int due = cyc + lat;
      if (due <= last_due) due = last_due + 1;
      last_due = due;
      q.push_back('{src[rd_addr[12:0]], due});
    end
    if (wr_req && wr_gnt) begin dst[wr_addr[12:0]] <= wr_data; nwrites++; end
  end
  always @(negedge clk) begin
    rd_valid = 0;
    if (q.size() != 0 && q[0].due <= cyc) begin
      rd_valid = 1; rd_data = q[0].d; void'(q.pop_front());
    end
  end

  task automatic run(int mc, int mh, int mw, int sc, int sh, int sw, int fc, int fh, int fw,
                     int so, int dof, bit rt, bit expect_err);
    int t0, n;
    random_timing = rt;
    for (int a = 0; a < 8192; a++) begin src[a] = 8'($urandom); dst[a] = 8'(a * 7); expd[a] = 8'(a * 7); end
    if (!expect_err)
      for (int i = 0; i < sc; i++) for (int j = 0; j < sh; j++) for (int k = 0; k < sw; k++)
        expd[i*sh*sw + j*sw + k + dof] = src[(i+fc)*mh*mw + (j+fh)*mw + (k+fw) + so];
    cfg = '{m_h: mh, m_w: mw, m_c: mc, s_h: sh, s_w: sw, s_c: sc, f_h: fh, f_w: fw, f_c: fc,
            src_off: so, dst_off: dof, src_ext: 1'b0, dst_ext: 1'b0};
    nwrites = 0;
    @(negedge clk); start = 1; t0 = cyc; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    n = cyc - t0;
    @(negedge clk);
    checks++;
    if (err != expect_err) begin failures++; $display("FAIL err=%0b", err); end
    checks++;
    if (nwrites != (expect_err ? 0 : sc * sh * sw)) begin failures++; $display("FAIL writes %0d", nwrites); end
    for (int a = 0; a < 8192; a++) begin
      checks++;
      if (dst[a] !== expd[a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %0d exp %0d", a, dst[a], expd[a]);
      end
    end
    if (!rt && !expect_err) begin
      checks++;
      if (n != sc * sh * sw + 4) begin failures++; $display("FAIL cycles %0d exp %0d", n, sc*sh*sw + 4); end
    end
  endtask

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; cfg = '0; rd_valid = 0; rd_data = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    //   mc mh  mw  sc sh sw fc fh fw  so   dof
    run(6, 10, 12, 3, 4, 5, 2, 3, 4, 17, 4000, 0, 0);
    run(8, 14, 14, 8, 7, 7, 0, 7, 7, 0, 3000, 0, 0);    // one 7x7 window of a 14x14x8 map
    run(8, 14, 14, 8, 7, 7, 0, 0, 7, 5, 100, 1, 0);     // random grants and latency
    run(1, 1, 40, 1, 1, 13, 0, 0, 27, 3, 200, 1, 0);    // single row selection
    run(4, 5, 5, 2, 2, 2, 3, 0, 0, 0, 500, 0, 1);       // leaves the large cube
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
