// gelu: element-wise GELU stream module of Vis-TOP.
//
// y = 0.5 x (1 + tanh(sqrt(2/pi) (x + 0.044715 x^3))), the tanh fit of GELU
// that the paper uses. Input and output are int8 with ACT_FRAC = 4 fractional
// bits. The fixed-point evaluation is this design's own:
//   stage 1: x^2;
//   stage 2: u = sqrt(2/pi) (x + 0.044715 x^3) in Q12 (constants in Q16);
//   stage 3: tanh(|u|) by linear interpolation between TANH_Q15[k] =
//            round(32768 tanh(k/4)), k = 0..16 (1.0 beyond |u| = 4), the
//            sign restored, then y = x (1 + tanh) / 2 rounded and saturated.
// The result is within one LSB of the exact tanh formula.
// Interface: a stream without backpressure (in_ready is always 1); one
// element per cycle, out_valid three cycles after in_valid.
module gelu
  import vt_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_data,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_data
);
  localparam logic signed [31:0] K_CUBE = 32'sd2930;   // 0.044715 * 65536
  localparam logic signed [31:0] K_SQ2P = 32'sd52290;  // sqrt(2/pi) * 65536
  localparam logic [15:0] TANH_Q15 [17] = '{
    16'd0,     16'd8025,  16'd15143, 16'd20813, 16'd24956, 16'd27797,
    16'd29660, 16'd30847, 16'd31589, 16'd32048, 16'd32329, 16'd32501,
    16'd32606, 16'd32670, 16'd32708, 16'd32732, 16'd32746};

  assign in_ready = 1'b1;

  logic                     v1, v2;
  logic signed [DATA_W-1:0] x1, x2;
  logic signed [15:0]       xx1;        // x^2, Q8
  logic signed [31:0]       u2;         // u, Q12

  // stage 2 arithmetic
  logic signed [47:0] x3, t, u;
  assign x3 = 48'(xx1) * 48'(x1);                       // Q12
  assign t  = (48'(x1) <<< 8) + ((x3 * 48'(K_CUBE)) >>> 16);
  assign u  = (t * 48'(K_SQ2P)) >>> 16;

  // stage 3 arithmetic
  logic [31:0]        a;
  logic [4:0]         k;
  logic [9:0]         fr;
  logic [15:0]        th_mag;
  logic signed [17:0] th;
  logic signed [47:0] y;
  always_comb begin
    a  = u2[31] ? 32'(-u2) : 32'(u2);
    k  = (a[31:10] >= 22'd16) ? 5'd16 : a[14:10];
    fr = a[9:0];
    if (k == 5'd16) th_mag = 16'd32767;
    else            th_mag = 16'(TANH_Q15[k] +
                       ((32'(TANH_Q15[k+1] - TANH_Q15[k]) * 32'(fr)) >> 10));
    th = u2[31] ? -18'(th_mag) : 18'(th_mag);
    y  = (48'(x2) * 48'(18'sd32768 + th) + 48'sd32768) >>> 16;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      x1 <= '0; x2 <= '0; xx1 <= '0; u2 <= '0; out_data <= '0;
    end else begin
      v1  <= in_valid;
      x1  <= in_data;
      xx1 <= in_data * in_data;
      v2  <= v1;
      x2  <= x1;
      u2  <= 32'(u);
      out_valid <= v2;
      out_data  <= sat8(y);
    end
  end
endmodule
