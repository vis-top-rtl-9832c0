// layernorm: row-wise layer normalisation block module of Vis-TOP.
//
// y_i = gamma_i (x_i - E[x]) / sqrt(Var[x] + eps) + beta_i over each row of
// cfg_len int8 activations (ACT_FRAC = 4). As in the paper the variance is
// taken as E[x^2] - (E[x])^2, so one pass over the row gathers both sums and
// no second pass over (x - mean) is needed. gamma (int8, 6 fractional bits)
// and beta (int8, 4 fractional bits) arrive with each output element on the
// parameter stream: lane 0 = gamma, lane 1 = beta. Formats, eps (one LSB of
// the Q16 variance, about 1.5e-5) and the sequencing are this design's own.
//
// How it works, per row:
//  1. load (one element per cycle): buffer x, S = sum x, Q = sum x^2;
//  2. three divisions on one shared 40-bit seq_div (40 cycles each; the
//     paper's variance formula keeps division to a minimum, but it
//     cannot be avoided entirely): mean = (S << 8) / L (Q12),
//     E[x^2] = (Q << 8) / L (Q16), and after var = E[x^2] - mean^2 and a
//     16-step bit-serial square root (std in Q12), inv = 2^28 / std (Q16);
//  3. output (one element per parameter beat):
//     y = (((x<<8) - mean) * inv >> 16) * gamma >> 14 + beta, saturated.
// Interface: cfg_* sampled on start; in_* valid/ready (load pass only);
// prm_* valid/ready (output pass only); out_* without backpressure.
module layernorm
  import vt_pkg::*;
#(
  parameter int unsigned MAX_LEN = 1536
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
  input  logic                     prm_valid,
  output logic                     prm_ready,
  input  logic [2*DATA_W-1:0]      prm_data,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_data
);
  localparam int unsigned AW = (MAX_LEN > 1) ? $clog2(MAX_LEN) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_MEAN, S_MEANW, S_E2, S_E2W, S_VAR, S_SQRT, S_INV, S_INVW, S_OUT
  } state_e;
  state_e state;

  logic signed [DATA_W-1:0] xbuf [MAX_LEN];
  logic [REG_W-1:0]         rows_q, len_q, row;
  logic [AW-1:0]            idx;
  logic signed [31:0]       s_sum;
  logic [31:0]              q_sum;
  logic signed [31:0]       mean_q12;
  logic [31:0]              e2_q16;
  logic [31:0]              sq_num, sq_rem;
  logic [15:0]              std_q12;
  logic [4:0]               sq_cnt;
  logic [31:0]              inv_q16;

  logic        div_start, div_busy, div_done;
  logic [39:0] div_n, div_d, div_q;
  seq_div #(.W(40)) u_div (
    .clk(clk), .rst_n(rst_n), .start(div_start), .dividend(div_n), .divisor(div_d),
    .busy(div_busy), .done(div_done), .quotient(div_q)
  );

  logic [31:0] s_abs;
  assign s_abs = s_sum[31] ? 32'(-s_sum) : 32'(s_sum);

  always_comb begin
    div_start = 1'b0;
    div_n     = '0;
    div_d     = 40'(len_q);
    unique case (state)
      S_MEAN: begin div_start = 1'b1; div_n = 40'(s_abs) << 8; end
      S_E2:   begin div_start = 1'b1; div_n = 40'(q_sum) << 8; end
      S_INV:  begin div_start = 1'b1; div_n = 40'h1000_0000; div_d = 40'(std_q12); end
      default: ;
    endcase
  end

  assign in_ready  = (state == S_LOAD);
  assign prm_ready = (state == S_OUT);
  assign busy      = (state != S_IDLE);

  // square root step
  logic [31:0] sq_rem_sh, sq_trial;
  assign sq_rem_sh = {sq_rem[29:0], sq_num[31:30]};
  assign sq_trial  = {14'd0, std_q12, 2'b01};

  // variance from the two moments
  logic signed [63:0] mean_sq_q16, var_s;
  assign mean_sq_q16 = (64'(mean_q12) * 64'(mean_q12)) >>> 8;
  assign var_s       = 64'(e2_q16) - mean_sq_q16;

  // output arithmetic
  logic signed [DATA_W-1:0] gam, bet;
  logic signed [63:0]       xm, nrm, yv;
  assign gam = prm_data[DATA_W-1:0];
  assign bet = prm_data[2*DATA_W-1:DATA_W];
  assign xm  = (64'(xbuf[idx]) <<< 8) - 64'(mean_q12);
  assign nrm = (xm * $signed(64'(inv_q16))) >>> 16;
  assign yv  = ((nrm * 64'(gam) + 64'sd8192) >>> 14) + 64'(bet);

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) xbuf[idx] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; rows_q <= '0; len_q <= '0; row <= '0; idx <= '0;
      s_sum <= '0; q_sum <= '0; mean_q12 <= '0; e2_q16 <= '0;
      sq_num <= '0; sq_rem <= '0; std_q12 <= '0; sq_cnt <= '0; inv_q16 <= '0;
      done <= 1'b0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rows_q <= cfg_rows; len_q <= cfg_len; row <= '0; idx <= '0;
          s_sum <= '0; q_sum <= '0;
          state <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          s_sum <= s_sum + 32'(in_data);
          q_sum <= q_sum + 32'(in_data * in_data);
          if (REG_W'(idx) + 1 == len_q) begin
            idx <= '0; state <= S_MEAN;
          end else idx <= idx + 1'b1;
        end
        S_MEAN:  state <= S_MEANW;
        S_MEANW: if (div_done) begin
          mean_q12 <= s_sum[31] ? -32'(div_q) : 32'(div_q);
          state    <= S_E2;
        end
        S_E2:    state <= S_E2W;
        S_E2W:   if (div_done) begin
          e2_q16 <= 32'(div_q);
          state  <= S_VAR;
        end
        S_VAR: begin
          // eps of one LSB keeps the square root and the reciprocal finite
          sq_num  <= ((var_s < 64'sd0) ? 32'd1 : 32'(var_s) + 32'd1) << 8;
          sq_rem  <= '0; std_q12 <= '0; sq_cnt <= '0;
          state   <= S_SQRT;
        end
        S_SQRT: begin
          if (sq_rem_sh >= sq_trial) begin
            sq_rem  <= sq_rem_sh - sq_trial;
            std_q12 <= {std_q12[14:0], 1'b1};
          end else begin
            sq_rem  <= sq_rem_sh;
            std_q12 <= {std_q12[14:0], 1'b0};
          end
          sq_num <= sq_num << 2;
          sq_cnt <= sq_cnt + 1'b1;
          if (sq_cnt == 5'd15) state <= S_INV;
        end
        S_INV:   state <= S_INVW;
        S_INVW:  if (div_done) begin
          inv_q16 <= 32'(div_q);
          state   <= S_OUT;
        end
        S_OUT: if (prm_valid) begin
          out_valid <= 1'b1;
          out_data  <= sat8(48'(yv));
          if (REG_W'(idx) + 1 == len_q) begin
            idx <= '0;
            s_sum <= '0; q_sum <= '0;
            if (row + 1 == rows_q) begin
              state <= S_IDLE; done <= 1'b1;
            end else begin
              row <= row + 1; state <= S_LOAD;
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
