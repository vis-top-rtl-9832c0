// vecop: basic vector operations stream module of Vis-TOP.
//
// Element-wise a OP b on int8 streams, one element per cycle: ADD and SUB
// (saturating, e.g. the residual connections), MUL ((a*b) >>> shift,
// rounded and saturated) and MAX. Operand a comes from the data bus; operand
// b comes either with it (second byte of the data-bus word, read from a
// second cache address) or from lane 0 of the parameter stream (bias or
// scale), chosen by mode bit MODE_VEC_B_PARAM. The paper only names this
// module; the operation set and the operand routing are this design's own.
// Interface: cfg_mode / cfg_shift are sampled on start and hold until the
// next start. Output one cycle after each accepted element, no backpressure.
module vecop
  import vt_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [REG_W-1:0]         cfg_mode,
  input  logic [REG_W-1:0]         cfg_shift,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [2*DATA_W-1:0]      in_data,    // {b, a}
  input  logic                     prm_valid,
  output logic                     prm_ready,
  input  logic [DATA_W-1:0]        prm_data,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_data
);
  vec_op_e     op_q;
  logic        bprm_q;
  logic [4:0]  shift_q;

  logic fire;
  assign in_ready  = !bprm_q || prm_valid;
  assign prm_ready = bprm_q && in_valid;
  assign fire      = in_valid && in_ready;

  logic signed [DATA_W-1:0] a, b;
  logic signed [47:0]       r, prod, rnd;
  assign a    = in_data[DATA_W-1:0];
  assign b    = bprm_q ? prm_data : in_data[2*DATA_W-1:DATA_W];
  assign prod = 48'(a) * 48'(b);
  assign rnd  = (shift_q == 0) ? 48'sd0 : (48'sd1 <<< (shift_q - 1));

  always_comb begin
    unique case (op_q)
      V_ADD:   r = 48'(a) + 48'(b);
      V_SUB:   r = 48'(a) - 48'(b);
      V_MUL:   r = (prod + rnd) >>> shift_q;
      default: r = (a > b) ? 48'(a) : 48'(b);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q <= V_ADD; bprm_q <= 1'b0; shift_q <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (start) begin
        op_q    <= vec_op_e'(cfg_mode[1:0]);
        bprm_q  <= cfg_mode[MODE_VEC_B_PARAM];
        shift_q <= cfg_shift[4:0];
      end
      out_valid <= fire;
      if (fire) out_data <= sat8(r);
    end
  end
endmodule
