// softmax: row-wise softmax block module of Vis-TOP.
//
// For each row of cfg_len int8 scores x (ACT_FRAC = 4 fractional bits, value
// x/16) it produces p_i = exp(x_i - max) / sum_j exp(x_j - max) as int8 with
// 7 fractional bits (1.0 saturates to 127/128). Subtracting the row maximum
// follows the usual (PyTorch) formulation that the paper refers to; the
// fixed-point evaluation below is this design's own.
//
// How it works, per row, one element per cycle in each pass:
//  1. load: the row is written into a buffer of MAX_LEN entries while the
//     maximum is tracked;
//  2. exponent: e_i = 2^(-(max-x_i)*log2(e)/16) is formed as a shift by the
//     integer part and a quadratic fit of 2^-f on the fraction (Q15 result,
//     error below 0.2 %), written back and summed;
//  3. one division 2^30 / sum gives the reciprocal (seq_div, 32 cycles);
//  4. output: p_i = (e_i * recip) >> 23, rounded, saturated to 127.
// Interface: cfg_* sampled on start; in_* valid/ready stream accepted only in
// the load pass; out_* has no backpressure; done pulses after the last row.
// Time per row: 3*len + 34 cycles when the input never stalls.
module softmax
  import vt_pkg::*;
#(
  parameter int unsigned MAX_LEN = 49
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [REG_W-1:0]         cfg_rows,
  input  logic [REG_W-1:0]         cfg_len,
  output logic                     busy,
  output logic                     done,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_data,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_data
);
  localparam int unsigned AW = (MAX_LEN > 1) ? $clog2(MAX_LEN) : 1;
  localparam logic [15:0] LOG2E_Q12 = 16'd5909;   // log2(e) * 4096
  localparam logic [15:0] C1_Q15    = 16'd22007;  // 2^-f ~ 1 - C1 f + C2 f^2
  localparam logic [15:0] C2_Q15    = 16'd5623;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_EXP, S_DIVS, S_DIVW, S_OUT} state_e;
  state_e state;

  logic signed [DATA_W-1:0] xbuf [MAX_LEN];
  logic [15:0]              ebuf [MAX_LEN];
  logic [REG_W-1:0]         rows_q, len_q, row;
  logic [AW-1:0]            idx;
  logic signed [DATA_W-1:0] xmax;
  logic [31:0]              sum;
  logic                     div_start, div_busy, div_done;
  logic [31:0]              recip;

  seq_div #(.W(32)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start),
    .dividend(32'h4000_0000), .divisor(sum),
    .busy(div_busy), .done(div_done), .quotient(recip)
  );

  assign in_ready  = (state == S_LOAD);
  assign busy      = (state != S_IDLE);
  assign div_start = (state == S_DIVS);

  // exp(-(xmax - x)/16) in Q15
  function automatic logic [15:0] exp_neg(input logic [8:0] d);
    logic [24:0] v;
    logic [4:0]  n;
    logic [14:0] f15;
    logic [31:0] t1, t2, sq;
    logic [16:0] p;
    v   = 25'(d) * 25'(LOG2E_Q12);     // exponent in base 2, Q16
    n   = (v[24:16] > 9'd16) ? 5'd16 : v[20:16];
    f15 = v[15:1];
    sq  = (32'(f15) * 32'(f15)) >> 15;
    t1  = (32'(f15) * 32'(C1_Q15)) >> 15;
    t2  = (sq * 32'(C2_Q15)) >> 15;
    p   = 17'(32'd32768 - t1 + t2);
    return 16'(p >> n);
  endfunction

  logic [8:0] dcur;
  logic [15:0] ecur;
  assign dcur = 9'(10'(signed'(xmax)) - 10'(signed'(xbuf[idx])));
  assign ecur = exp_neg(dcur);

  logic [47:0] prod;
  logic [47:0] q;
  assign prod = 48'(ebuf[idx]) * 48'(recip) + 48'h40_0000;
  assign q    = prod >> 23;

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) xbuf[idx] <= in_data;
    if (state == S_EXP)              ebuf[idx] <= ecur;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rows_q <= '0; len_q <= '0; row <= '0; idx <= '0;
      xmax <= '0; sum <= '0; done <= 1'b0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rows_q <= cfg_rows; len_q <= cfg_len; row <= '0; idx <= '0;
          xmax   <= -8'sd128;
          state  <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          if (in_data > xmax) xmax <= in_data;
          if (REG_W'(idx) + 1 == len_q) begin
            idx <= '0; sum <= '0; state <= S_EXP;
          end else idx <= idx + 1'b1;
        end
        S_EXP: begin
          sum <= sum + 32'(ecur);
          if (REG_W'(idx) + 1 == len_q) begin
            idx <= '0; state <= S_DIVS;
          end else idx <= idx + 1'b1;
        end
        S_DIVS: state <= S_DIVW;
        S_DIVW: if (div_done) state <= S_OUT;
        S_OUT: begin
          out_valid <= 1'b1;
          out_data  <= (q > 48'd127) ? 8'sd127 : 8'(q);
          if (REG_W'(idx) + 1 == len_q) begin
            idx <= '0;
            if (row + 1 == rows_q) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              row <= row + 1; xmax <= -8'sd128; state <= S_LOAD;
            end
          end else idx <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
           (state == S_IDLE && start) |-> (cfg_len != 0 && cfg_len <= MAX_LEN && cfg_rows != 0));
endmodule
