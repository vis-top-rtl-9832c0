// vistop: top level of the Vis-TOP visual Transformer overlay processor.
//
// A programmable processor for vision Transformers (the reference workload
// is Swin Transformer tiny with 8-bit fixed-point data). Instead of hard-
// wiring one network it provides a small set of component modules and lets
// an instruction stream decide their order, sizes and addresses:
//   * fixed module: matmul (C = 96 PEs, reconfigurable batch);
//   * variable modules: softmax, layernorm, gelu, vecop (nonlinear and basic
//     vector operations) and data_select (data selection / arrangement);
//   * control: ibt (instruction bundle table) with reg_file (registers),
//     fed through bundle_table, which records instruction bundles and
//     replays a stored bundle on one instruction;
//   * storage: mem_cache (memory cache unit);
//   * buses: bus_mux (instruction bus, data bus, parameter stream bus).
// Three external streams feed it, as in the paper's architecture figure:
// instructions, parameters (a C-lane stream of int8 weights, gamma/beta or
// vector operands, used once each) and image data in main memory, which
// data_select reads into the cache and results are written back to.
//
// Interface: instr_* 64-bit instructions (valid/ready); prm_* parameter
// stream (valid/ready, C bytes per beat); mem_rd_* / mem_wr_* byte ports to
// main memory (request/grant, in-order read data with any latency); busy is
// high while an instruction executes or a bundle is recorded or replayed,
// n_exec counts finished executions, n_replay finished bundle replays,
// sel_err flags a data-selection cube that left its large cube.
module vistop
  import vt_pkg::*;
#(
  parameter int unsigned C           = 96,
  parameter int unsigned CACHE_DEPTH = 524288,
  parameter int unsigned MM_MAX_N    = 3072,
  parameter int unsigned SM_MAX_LEN  = 49,
  parameter int unsigned LN_MAX_LEN  = 1536,
  parameter int unsigned BUNDLE_DEPTH = 256
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  instr_valid,
  output logic                  instr_ready,
  input  logic [INSTR_W-1:0]    instr_data,
  input  logic                  prm_valid,
  output logic                  prm_ready,
  input  logic [C*DATA_W-1:0]   prm_data,
  output logic                  mem_rd_req,
  output logic [REG_W-1:0]      mem_rd_addr,
  input  logic                  mem_rd_gnt,
  input  logic                  mem_rd_valid,
  input  logic [DATA_W-1:0]     mem_rd_data,
  output logic                  mem_wr_req,
  output logic [REG_W-1:0]      mem_wr_addr,
  output logic [DATA_W-1:0]     mem_wr_data,
  input  logic                  mem_wr_gnt,
  output logic                  busy,
  output logic [REG_W-1:0]      n_exec,
  output logic [REG_W-1:0]      n_replay,
  output logic                  sel_err
);
  localparam int unsigned PW = C * DATA_W;
  localparam int unsigned CAW = $clog2(CACHE_DEPTH);

  // ------------------------------------------------ control and registers
  logic             rf_we;
  logic [4:0]       rf_waddr;
  logic [REG_W-1:0] rf_wdata;
  logic [REG_W-1:0] rf_q [NREGS];
  cmd_t             cmd;
  sel_cfg_t         sel_cfg;
  logic             exec_start;

  logic             ca_en, cb_en, cw_en;
  logic [REG_W-1:0] ca_addr, cb_addr, cw_addr;
  logic [DATA_W-1:0] ca_data, cb_data, cw_data;
  logic             s_valid, s_ready, o_valid;
  logic [2*DATA_W-1:0] s_data;
  logic [DATA_W-1:0]   o_data;

  logic sel_busy, sel_done, sel_active;

  // stored instruction bundles in front of the decoder
  logic               dec_valid, dec_ready, ibt_busy, bt_busy;
  logic [INSTR_W-1:0] dec_data;

  bundle_table #(.DEPTH(BUNDLE_DEPTH)) u_bt (
    .clk(clk), .rst_n(rst_n),
    .in_valid(instr_valid), .in_ready(instr_ready), .in_data(instr_data),
    .out_valid(dec_valid), .out_ready(dec_ready), .out_data(dec_data),
    .busy(bt_busy), .n_replay(n_replay)
  );
  assign busy     = ibt_busy || bt_busy || sel_active;

  reg_file u_regs (
    .clk(clk), .rst_n(rst_n), .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata), .q(rf_q)
  );

  ibt u_ibt (
    .clk(clk), .rst_n(rst_n),
    .instr_valid(dec_valid), .instr_ready(dec_ready), .instr_data(dec_data),
    .rf_we(rf_we), .rf_waddr(rf_waddr), .rf_wdata(rf_wdata), .rf_q(rf_q),
    .cmd(cmd), .sel_cfg(sel_cfg), .exec_start(exec_start), .sel_done(sel_done),
    .sel_active(sel_active),
    .ca_en(ca_en), .ca_addr(ca_addr), .ca_data(ca_data),
    .cb_en(cb_en), .cb_addr(cb_addr), .cb_data(cb_data),
    .cw_en(cw_en), .cw_addr(cw_addr), .cw_data(cw_data),
    .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .o_valid(o_valid), .o_data(o_data),
    .busy(ibt_busy), .n_exec(n_exec)
  );

  // ------------------------------------------------------------ buses
  logic sel_start, mm_start, sm_start, ln_start, vec_start;
  logic mm_in_valid, sm_in_valid, ln_in_valid, gelu_in_valid, vec_in_valid;
  logic mm_in_ready, sm_in_ready, ln_in_ready, gelu_in_ready, vec_in_ready;
  logic [DATA_W-1:0]   x_data;
  logic [2*DATA_W-1:0] vec_in_data;
  logic mm_out_valid, sm_out_valid, ln_out_valid, gelu_out_valid, vec_out_valid;
  logic [DATA_W-1:0] mm_out_data, sm_out_data, ln_out_data, gelu_out_data, vec_out_data;
  logic mm_prm_valid, ln_prm_valid, vec_prm_valid;
  logic mm_prm_ready, ln_prm_ready, vec_prm_ready;
  logic [PW-1:0] bus_prm;

  logic             sel_rd_req, sel_rd_gnt, sel_rd_valid, sel_wr_req, sel_wr_gnt;
  logic [REG_W-1:0] sel_rd_addr, sel_wr_addr;
  logic [DATA_W-1:0] sel_rd_data, sel_wr_data;
  logic             ra_en, rb_en, we;
  logic [REG_W-1:0] ra_addr, rb_addr, waddr;
  logic [DATA_W-1:0] ra_data, wdata;

  bus_mux #(.PW(PW)) u_bus (
    .clk(clk), .rst_n(rst_n), .cmd_mod(cmd.mod), .exec_start(exec_start),
    .sel_start(sel_start), .mm_start(mm_start), .sm_start(sm_start),
    .ln_start(ln_start), .vec_start(vec_start),
    .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .o_valid(o_valid), .o_data(o_data),
    .mm_in_valid(mm_in_valid), .sm_in_valid(sm_in_valid), .ln_in_valid(ln_in_valid),
    .gelu_in_valid(gelu_in_valid), .vec_in_valid(vec_in_valid),
    .mm_in_ready(mm_in_ready), .sm_in_ready(sm_in_ready), .ln_in_ready(ln_in_ready),
    .gelu_in_ready(gelu_in_ready), .vec_in_ready(vec_in_ready),
    .x_data(x_data), .vec_in_data(vec_in_data),
    .mm_out_valid(mm_out_valid), .sm_out_valid(sm_out_valid), .ln_out_valid(ln_out_valid),
    .gelu_out_valid(gelu_out_valid), .vec_out_valid(vec_out_valid),
    .mm_out_data(mm_out_data), .sm_out_data(sm_out_data), .ln_out_data(ln_out_data),
    .gelu_out_data(gelu_out_data), .vec_out_data(vec_out_data),
    .p_valid(prm_valid), .p_ready(prm_ready), .p_data(prm_data),
    .mm_prm_valid(mm_prm_valid), .ln_prm_valid(ln_prm_valid), .vec_prm_valid(vec_prm_valid),
    .mm_prm_ready(mm_prm_ready), .ln_prm_ready(ln_prm_ready), .vec_prm_ready(vec_prm_ready),
    .prm_data(bus_prm),
    .ca_en(ca_en), .ca_addr(ca_addr), .ca_data(ca_data),
    .cb_en(cb_en), .cb_addr(cb_addr),
    .cw_en(cw_en), .cw_addr(cw_addr), .cw_data(cw_data),
    .sel_active(sel_active), .sel_src_ext(sel_cfg.src_ext), .sel_dst_ext(sel_cfg.dst_ext),
    .sel_rd_req(sel_rd_req), .sel_rd_addr(sel_rd_addr), .sel_rd_gnt(sel_rd_gnt),
    .sel_rd_valid(sel_rd_valid), .sel_rd_data(sel_rd_data),
    .sel_wr_req(sel_wr_req), .sel_wr_addr(sel_wr_addr), .sel_wr_data(sel_wr_data),
    .sel_wr_gnt(sel_wr_gnt),
    .ra_en(ra_en), .ra_addr(ra_addr), .ra_data(ra_data),
    .rb_en(rb_en), .rb_addr(rb_addr),
    .we(we), .waddr(waddr), .wdata(wdata),
    .mem_rd_req(mem_rd_req), .mem_rd_addr(mem_rd_addr), .mem_rd_gnt(mem_rd_gnt),
    .mem_rd_valid(mem_rd_valid), .mem_rd_data(mem_rd_data),
    .mem_wr_req(mem_wr_req), .mem_wr_addr(mem_wr_addr), .mem_wr_data(mem_wr_data),
    .mem_wr_gnt(mem_wr_gnt)
  );

  // ------------------------------------------------- memory cache unit
  mem_cache #(.DEPTH(CACHE_DEPTH)) u_cache (
    .clk(clk),
    .ra_en(ra_en), .ra_addr(ra_addr[CAW-1:0]), .ra_data(ra_data),
    .rb_en(rb_en), .rb_addr(rb_addr[CAW-1:0]), .rb_data(cb_data),
    .we(we), .waddr(waddr[CAW-1:0]), .wdata(wdata)
  );

  // ----------------------------------- data selection and data arrangement
  data_select u_sel (
    .clk(clk), .rst_n(rst_n), .start(sel_start), .cfg(sel_cfg),
    .busy(sel_busy), .done(sel_done), .err(sel_err),
    .rd_req(sel_rd_req), .rd_addr(sel_rd_addr), .rd_gnt(sel_rd_gnt),
    .rd_valid(sel_rd_valid), .rd_data(sel_rd_data),
    .wr_req(sel_wr_req), .wr_addr(sel_wr_addr), .wr_data(sel_wr_data), .wr_gnt(sel_wr_gnt)
  );

  // ------------------------------------------------------- block modules
  logic mm_busy, mm_done, sm_busy, sm_done, ln_busy, ln_done;

  matmul #(.C(C), .MAX_N(MM_MAX_N)) u_mm (
    .clk(clk), .rst_n(rst_n), .start(mm_start),
    .cfg_rows(cmd.rows), .cfg_len(cmd.len), .cfg_nout(cmd.nout),
    .cfg_batch(cmd.batch), .cfg_shift(cmd.shift),
    .busy(mm_busy), .done(mm_done),
    .in_valid(mm_in_valid), .in_ready(mm_in_ready), .in_data(x_data),
    .prm_valid(mm_prm_valid), .prm_ready(mm_prm_ready), .prm_data(bus_prm),
    .out_valid(mm_out_valid), .out_data(mm_out_data)
  );

  softmax #(.MAX_LEN(SM_MAX_LEN)) u_sm (
    .clk(clk), .rst_n(rst_n), .start(sm_start),
    .cfg_rows(cmd.rows), .cfg_len(cmd.len),
    .busy(sm_busy), .done(sm_done),
    .in_valid(sm_in_valid), .in_ready(sm_in_ready), .in_data(x_data),
    .out_valid(sm_out_valid), .out_data(sm_out_data)
  );

  layernorm #(.MAX_LEN(LN_MAX_LEN)) u_ln (
    .clk(clk), .rst_n(rst_n), .start(ln_start),
    .cfg_rows(cmd.rows), .cfg_len(cmd.len),
    .busy(ln_busy), .done(ln_done),
    .in_valid(ln_in_valid), .in_ready(ln_in_ready), .in_data(x_data),
    .prm_valid(ln_prm_valid), .prm_ready(ln_prm_ready), .prm_data(bus_prm[2*DATA_W-1:0]),
    .out_valid(ln_out_valid), .out_data(ln_out_data)
  );

  // ------------------------------------------------------ stream modules
  gelu u_gelu (
    .clk(clk), .rst_n(rst_n),
    .in_valid(gelu_in_valid), .in_ready(gelu_in_ready), .in_data(x_data),
    .out_valid(gelu_out_valid), .out_data(gelu_out_data)
  );

  vecop u_vec (
    .clk(clk), .rst_n(rst_n), .start(vec_start),
    .cfg_mode(cmd.mode), .cfg_shift(cmd.shift),
    .in_valid(vec_in_valid), .in_ready(vec_in_ready), .in_data(vec_in_data),
    .prm_valid(vec_prm_valid), .prm_ready(vec_prm_ready), .prm_data(bus_prm[DATA_W-1:0]),
    .out_valid(vec_out_valid), .out_data(vec_out_data)
  );
endmodule
