// reg_file: the register bank of Vis-TOP.
//
// Holds the values written by parameter set instructions (addresses, row
// count and length, output columns, batch, shift, mode, and the nine cube
// sizes and two offsets of data selection; see vt_pkg::reg_e). All
// registers are visible at once to the instruction bundle table, which
// derives the control of each module execution from them. The paper shows
// a register block fed by the instruction bundle table; the count (NREGS),
// width and reset value (zero) are this design's own.
// Timing: a write is visible on q the cycle after we.
module reg_file
  import vt_pkg::*;
#(
  parameter int unsigned N = NREGS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  logic [$clog2(N)-1:0]   waddr,
  input  logic [REG_W-1:0]       wdata,
  output logic [REG_W-1:0]       q [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++) q[r] <= '0;
    end else if (we) begin
      q[waddr] <= wdata;
    end
  end
endmodule
