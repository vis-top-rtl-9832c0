// mm_pe: one processing element of the matrix-multiply module.
//
// A PE holds one input element (loaded once per block, stationary while the
// parameters stream past), latches the parameter that the current parameter
// beat carries for it, and registers their product. This is the PE drawn in
// the paper's stream-module figure: an input register, a parameter register,
// a multiplier and an output register. A disabled PE (lane beyond the
// configured batch) produces zero.
//
// Timing: the parameter is registered on the edge after w_load; the product
// appears one edge later (two-cycle latency from the parameter beat).
module mm_pe
  import vt_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr_x,   // clear the stationary input
  input  logic                      ld_x,    // load x_in as the stationary input
  input  logic signed [DATA_W-1:0]  x_in,
  input  logic                      w_load,  // a parameter beat is accepted
  input  logic signed [DATA_W-1:0]  w_in,
  input  logic                      lane_en, // lane is inside the batch
  output logic signed [2*DATA_W-1:0] p_out
);
  logic signed [DATA_W-1:0] x_q, w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q   <= '0;
      w_q   <= '0;
      p_out <= '0;
    end else begin
      if (clr_x)     x_q <= '0;
      else if (ld_x) x_q <= x_in;
      if (w_load)    w_q <= lane_en ? w_in : '0;
      p_out <= x_q * w_q;
    end
  end
endmodule
