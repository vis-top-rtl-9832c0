// data_select: data selection and data arrangement engine of Vis-TOP.
//
// Implements the paper's data-selection algorithm. Data are stored as a
// flattened C x H x W cube, W fastest, then H, then C. Given the large cube
// (MH, MW, MC), the small cube (SH, SW, SC) and its offset (FH, FW, FC) it
// copies, for i < SC, j < SH, k < SW,
//   dst[i*SH*SW + j*SW + k + dst_off] = src[(i+FC)*MH*MW + (j+FH)*MW + (k+FW) + src_off]
// so the selected block arrives packed (arranged) in the same layout, ready
// for the next module. Source and destination are each either the memory
// cache unit or main memory (cfg.src_ext / cfg.dst_ext, chosen by the top).
// The loop order and address formula are the paper's; the ports, the
// in-order read interface, the range check (err when the small cube leaves
// the large one) and the small skid FIFO are this design's own.
//
// Interface: rd_req/rd_addr issue a read, accepted when rd_gnt; rd_valid /
// rd_data return the bytes in request order, any latency. wr_req / wr_addr /
// wr_data write one byte, accepted when wr_gnt. At most FIFO_DEPTH reads are
// in flight or buffered. With a one-cycle memory that always grants, one
// byte is copied per cycle after a four-cycle start.
module data_select
  import vt_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  sel_cfg_t            cfg,
  output logic                busy,
  output logic                done,
  output logic                err,
  output logic                rd_req,
  output logic [REG_W-1:0]    rd_addr,
  input  logic                rd_gnt,
  input  logic                rd_valid,
  input  logic [DATA_W-1:0]   rd_data,
  output logic                wr_req,
  output logic [REG_W-1:0]    wr_addr,
  output logic [DATA_W-1:0]   wr_data,
  input  logic                wr_gnt
);
  localparam int unsigned FW_ = $clog2(FIFO_DEPTH + 1);
  localparam int unsigned PW  = $clog2(FIFO_DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_RUN} state_e;
  state_e state;

  sel_cfg_t         c;
  logic [REG_W-1:0] plane, total;
  logic [REG_W-1:0] i, j, k;          // loop indices of the small cube
  logic             issue_done;
  logic [REG_W-1:0] wcnt;             // bytes written
  logic [FW_-1:0]   inflight, fcount;
  logic [DATA_W-1:0] fifo [FIFO_DEPTH];
  logic [PW-1:0]    wp, rp;

  assign busy = (state != S_IDLE);

  // Algorithm 1 source address
  assign rd_addr = (i + c.f_c) * plane + (j + c.f_h) * c.m_w + (k + c.f_w) + c.src_off;
  assign rd_req  = (state == S_RUN) && !issue_done && (32'(inflight) + 32'(fcount) < FIFO_DEPTH);

  assign wr_req  = (state == S_RUN) && (fcount != 0);
  assign wr_addr = c.dst_off + wcnt;
  assign wr_data = fifo[rp];

  logic rd_fire, wr_fire;
  assign rd_fire = rd_req && rd_gnt;
  assign wr_fire = wr_req && wr_gnt;

  logic bad;
  assign bad = (cfg.f_c + cfg.s_c > cfg.m_c) || (cfg.f_h + cfg.s_h > cfg.m_h) ||
               (cfg.f_w + cfg.s_w > cfg.m_w) || (cfg.s_c == 0) || (cfg.s_h == 0) || (cfg.s_w == 0);

  always_ff @(posedge clk) begin
    if (rd_valid) fifo[wp] <= rd_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; plane <= '0; total <= '0;
      i <= '0; j <= '0; k <= '0; issue_done <= 1'b0; wcnt <= '0;
      inflight <= '0; fcount <= '0; wp <= '0; rp <= '0;
      done <= 1'b0; err <= 1'b0;
    end else begin
      done <= 1'b0;
      inflight <= inflight + FW_'(rd_fire) - FW_'(rd_valid);
      fcount   <= fcount + FW_'(rd_valid) - FW_'(wr_fire);
      if (rd_valid) wp <= (32'(wp) == FIFO_DEPTH - 1) ? '0 : wp + 1'b1;
      if (wr_fire)  rp <= (32'(rp) == FIFO_DEPTH - 1) ? '0 : rp + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          c   <= cfg;
          err <= bad;
          if (bad) done <= 1'b1;
          else     state <= S_INIT;
        end
        S_INIT: begin
          plane <= c.m_h * c.m_w;
          total <= c.s_c * c.s_h * c.s_w;
          i <= '0; j <= '0; k <= '0; wcnt <= '0; issue_done <= 1'b0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (rd_fire) begin
            if (k + 1 == c.s_w) begin
              k <= '0;
              if (j + 1 == c.s_h) begin
                j <= '0;
                if (i + 1 == c.s_c) issue_done <= 1'b1;
                else i <= i + 1;
              end else j <= j + 1;
            end else k <= k + 1;
          end
          if (wr_fire) begin
            wcnt <= wcnt + 1;
            if (wcnt + 1 == total) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                   32'(fcount) <= FIFO_DEPTH && 32'(inflight) <= FIFO_DEPTH);
endmodule
