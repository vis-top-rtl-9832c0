// bundle_table: stored instruction bundles in front of the instruction
// bundle table of Vis-TOP.
//
// A model-level block (a window-attention or MLP step, a patch merging)
// becomes a fixed sequence of parameter set and module execution
// instructions, its instruction bundle. This unit lets the host send that
// sequence once and then start it with a single instruction:
//  * OP_BREC (base = [47:32], count = [15:0]): the next count words of the
//    instruction stream are written into the bundle memory at base.. and
//    are not executed;
//  * OP_BRUN (base, count): the stored words base..base+count-1 are issued
//    to the instruction decoder in order, then the external stream resumes;
//  * every other word passes straight through (combinationally).
// Registers not set inside a bundle keep the values the host gave them, so
// one bundle can be replayed on different windows by setting only the
// addresses or offsets between replays. OP_BREC and OP_BRUN found inside a
// bundle are skipped (no nesting); a bundle address past DEPTH wraps.
// The processor is described as choosing the low-level bundle that belongs
// to a model structure; the record/replay mechanism, the encoding and DEPTH
// are this design's own.
// Interface: in_* is the external instruction stream and out_* the stream to
// the decoder, both valid/ready. Timing: pass-through adds no cycle; a
// recorded word takes one cycle; a replayed word takes two cycles (memory
// read, then offer) plus the decoder's own stall. n_replay counts finished
// replays; busy is high while recording or replaying.
module bundle_table
  import vt_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [INSTR_W-1:0] in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [INSTR_W-1:0] out_data,
  output logic               busy,
  output logic [REG_W-1:0]   n_replay
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  typedef enum logic [1:0] {B_PASS, B_REC, B_RD, B_OUT} bstate_e;
  bstate_e state;

  logic [INSTR_W-1:0] mem [DEPTH];
  logic [INSTR_W-1:0] rdata;
  logic [AW-1:0]      ptr;
  logic [15:0]        left;

  opcode_e in_op, rd_op;
  logic    in_ctl, rd_skip;
  assign in_op   = opcode_e'(in_data[63:60]);
  assign in_ctl  = (in_op == OP_BREC) || (in_op == OP_BRUN);
  assign rd_op   = opcode_e'(rdata[63:60]);
  assign rd_skip = (rd_op == OP_BREC) || (rd_op == OP_BRUN);

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = in_data;
    unique case (state)
      B_PASS: begin
        in_ready  = in_ctl ? 1'b1 : out_ready;
        out_valid = in_valid && !in_ctl;
      end
      B_REC:  in_ready = 1'b1;
      B_RD:   ;
      B_OUT: begin
        out_valid = !rd_skip;
        out_data  = rdata;
      end
      default: ;
    endcase
  end
  assign busy = (state != B_PASS);

  // bundle memory: one write port (recording), one synchronous read port
  always_ff @(posedge clk) begin
    if (state == B_REC && in_valid) mem[ptr] <= in_data;
    if (state == B_RD)              rdata    <= mem[ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_PASS; ptr <= '0; left <= '0; n_replay <= '0;
    end else begin
      unique case (state)
        B_PASS: if (in_valid && in_ctl) begin
          ptr  <= AW'(in_data[47:32]);
          left <= in_data[15:0];
          if (in_data[15:0] != 16'd0) state <= (in_op == OP_BREC) ? B_REC : B_RD;
          else if (in_op == OP_BRUN)  n_replay <= n_replay + 1'b1;
        end
        B_REC: if (in_valid) begin
          ptr  <= ptr + 1'b1;
          left <= left - 1'b1;
          if (left == 16'd1) state <= B_PASS;
        end
        B_RD: state <= B_OUT;
        B_OUT: if (rd_skip || out_ready) begin
          ptr  <= ptr + 1'b1;
          left <= left - 1'b1;
          if (left == 16'd1) begin
            state    <= B_PASS;
            n_replay <= n_replay + 1'b1;
          end else state <= B_RD;
        end
        default: state <= B_PASS;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                  (state == B_OUT && !rd_skip && !out_ready) |=> (state == B_OUT && $stable(out_data)));
endmodule
