// matmul: the matrix-multiply fixed module of Vis-TOP (C processing elements).
//
// Computes Y[r][n] = sum_k X[r][k] * W[k][n] for r < rows, n < nout, k < len,
// with int8 inputs and parameters, 32-bit accumulation and an int8 result
// requantised by an arithmetic right shift with rounding and saturation.
//
// How it works. Following the paper, the input data of one row are spread
// over the C PEs (one element per PE) and stay there, while the parameters
// arrive as a stream on the parameter stream bus: each beat carries one
// parameter per PE (lane i = W[k0+i][n]). Every PE multiplies and the C
// products are summed by an adder tree ("aggregated") into the partial sum of
// output column n. The number of active PEs is the reconfigurable batch
// (1..C); a row longer than the batch is processed as several blocks whose
// partial sums collect in an accumulator bank of MAX_N words, and the row's
// results leave on the last block. The block loop, the accumulator bank, the
// rounding and the handshakes are this design's own choices; the paper gives
// the PE array, the broadcast of parameters to the PEs and the aggregation.
//
// Interface: cfg_* are sampled on start. in_* is the data bus (one int8 per
// cycle, valid/ready), prm_* the parameter stream (C lanes of int8 per beat,
// valid/ready), out_* the results in row-major order (no backpressure).
// Timing per block: min(batch, inputs left in the row) load cycles + nout
// parameter beats + 3 cycles of set-up and drain when both streams never
// stall, so a row of len inputs costs ceil(len/batch) such blocks; the result of column n leaves three
// edges after its parameter beat is accepted.
module matmul
  import vt_pkg::*;
#(
  parameter int unsigned C     = 96,
  parameter int unsigned MAX_N = 3072
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [REG_W-1:0]           cfg_rows,
  input  logic [REG_W-1:0]           cfg_len,
  input  logic [REG_W-1:0]           cfg_nout,
  input  logic [REG_W-1:0]           cfg_batch,
  input  logic [REG_W-1:0]           cfg_shift,
  output logic                       busy,
  output logic                       done,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic signed [DATA_W-1:0]   in_data,
  input  logic                       prm_valid,
  output logic                       prm_ready,
  input  logic [C*DATA_W-1:0]        prm_data,
  output logic                       out_valid,
  output logic signed [DATA_W-1:0]   out_data
);
  localparam int unsigned NW = (MAX_N > 1) ? $clog2(MAX_N) : 1;
  localparam int unsigned CW = $clog2(C + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DRAIN} state_e;
  state_e state;

  logic [REG_W-1:0] rows_q, len_q, nout_q, batch_q;
  logic [5:0]       shift_q;
  logic [REG_W-1:0] row, kcnt, jcnt;
  logic [CW-1:0]    lidx;
  logic             blk_first, blk_last;

  // pipeline valid bits and tags
  logic             v0, v1, v2;
  logic [NW-1:0]    j0, j1;
  logic             f0, f1, l0, l1;

  logic in_fire, prm_fire;
  assign in_ready  = (state == S_LOAD);
  assign prm_ready = (state == S_STREAM);
  assign in_fire   = in_valid && in_ready;
  assign prm_fire  = prm_valid && prm_ready;
  assign busy      = (state != S_IDLE);

  // ---------------------------------------------------------------- PE array
  logic                       clr_x;
  assign clr_x = (state == S_IDLE && start) || (state == S_DRAIN && !v0 && !v1);
  logic signed [2*DATA_W-1:0] prod [C];

  for (genvar i = 0; i < C; i++) begin : g_pe
    mm_pe u_pe (
      .clk    (clk),
      .rst_n  (rst_n),
      .clr_x  (clr_x),
      .ld_x   (in_fire && (lidx == CW'(i))),
      .x_in   (in_data),
      .w_load (prm_fire),
      .w_in   (prm_data[i*DATA_W +: DATA_W]),
      .lane_en(REG_W'(i) < batch_q),
      .p_out  (prod[i])
    );
  end

  // adder tree (aggregation of the PE outputs)
  logic signed [ACC_W-1:0] tree_sum;
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < C; i++) tree_sum += ACC_W'(prod[i]);
  end

  // ------------------------------------------------------------- control FSM
  logic last_in_blk;
  assign last_in_blk = (REG_W'(lidx) + 1 == batch_q) || (kcnt + 1 == len_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      rows_q    <= '0; len_q <= '0; nout_q <= '0; batch_q <= '0; shift_q <= '0;
      row       <= '0; kcnt <= '0; jcnt <= '0; lidx <= '0;
      blk_first <= 1'b0; blk_last <= 1'b0;
      done      <= 1'b0;
    end else begin
      done  <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rows_q  <= cfg_rows;
          len_q   <= cfg_len;
          nout_q  <= cfg_nout;
          batch_q <= (cfg_batch > REG_W'(C)) ? REG_W'(C) : cfg_batch;
          shift_q <= cfg_shift[5:0];
          row     <= '0; kcnt <= '0; lidx <= '0;
          blk_first <= 1'b1;
          state   <= S_LOAD;
        end
        S_LOAD: if (in_fire) begin
          kcnt <= kcnt + 1;
          lidx <= lidx + 1'b1;
          if (last_in_blk) begin
            blk_last <= (kcnt + 1 == len_q);
            jcnt     <= '0;
            state    <= S_STREAM;
          end
        end
        S_STREAM: if (prm_fire) begin
          jcnt <= jcnt + 1;
          if (jcnt + 1 == nout_q) state <= S_DRAIN;
        end
        S_DRAIN: if (!v0 && !v1) begin
          lidx      <= '0;
          blk_first <= blk_last;
          if (blk_last) begin
            kcnt <= '0;
            if (row + 1 == rows_q) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              row   <= row + 1;
              state <= S_LOAD;
            end
          end else begin
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------- accumulate / output stages
  logic signed [ACC_W-1:0] bank [MAX_N];
  logic signed [ACC_W-1:0] bank_rd;
  logic signed [ACC_W-1:0] acc_new;
  logic signed [ACC_W-1:0] rnd;

  assign acc_new = (f1 ? '0 : bank_rd) + tree_sum;
  assign rnd     = (shift_q == 0) ? '0 : (ACC_W'(1) <<< (shift_q - 1));

  always_ff @(posedge clk) begin
    if (v0) bank_rd <= bank[j0];
    if (v1) bank[j1] <= acc_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; v1 <= 1'b0; v2 <= 1'b0;
      j0 <= '0; j1 <= '0; f0 <= 1'b0; f1 <= 1'b0; l0 <= 1'b0; l1 <= 1'b0;
      out_data <= '0;
    end else begin
      v0 <= prm_fire;
      j0 <= NW'(jcnt);
      f0 <= blk_first;
      l0 <= blk_last;
      v1 <= v0; j1 <= j0; f1 <= f0; l1 <= l0;
      v2 <= v1 && l1;
      if (v1 && l1) out_data <= sat8((48'(acc_new) + 48'(rnd)) >>> shift_q);
    end
  end
  assign out_valid = v2;

  // the batch must select at least one PE and a row must produce a column
  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
           (state == S_IDLE && start) |-> (cfg_batch != 0 && cfg_nout != 0 &&
                                          cfg_nout <= MAX_N && cfg_len != 0 && cfg_rows != 0));
endmodule
