// bus_mux: data bus and parameter stream bus of Vis-TOP.
//
// Connects the shared buses to the component module that the current
// execution selected (cmd_mod, from the instruction bundle table):
//  * instruction bus: the one-cycle exec_start goes to that module only;
//  * data bus: the operand stream from the table goes to that module's
//    input, and that module's results go back to the table;
//  * parameter stream bus: the external parameter stream (PW bits per beat)
//    goes to the matrix multiply (all lanes), layer normalisation (lanes 0-1,
//    gamma and beta) or vector module (lane 0), whichever is active;
//  * memory ports: while data selection runs (sel_active, in the
//    foreground or in the background), its read side goes to the memory
//    cache unit or to main memory and its write side likewise
//    (sel_src_ext / sel_dst_ext). The table keeps cache read ports A and B
//    whenever selection does not read the cache, and it has priority on
//    the cache write port: a selection write to the cache is granted only
//    in cycles in which the table writes no result, so a background
//    selection fills the cache in the gaps of a running execution.
//    A cache read answers one cycle later and is always granted.
// The paper draws these buses and what each carries but not how they are
// arbitrated; this one-owner-at-a-time routing is this design's own.
module bus_mux
  import vt_pkg::*;
#(
  parameter int unsigned PW = 768
) (
  input  logic                clk,
  input  logic                rst_n,
  input  module_e             cmd_mod,
  input  logic                exec_start,
  output logic                sel_start, mm_start, sm_start, ln_start, vec_start,
  // data bus, table side
  input  logic                s_valid,
  output logic                s_ready,
  input  logic [2*DATA_W-1:0] s_data,
  output logic                o_valid,
  output logic [DATA_W-1:0]   o_data,
  // data bus, module side
  output logic                mm_in_valid, sm_in_valid, ln_in_valid, gelu_in_valid, vec_in_valid,
  input  logic                mm_in_ready, sm_in_ready, ln_in_ready, gelu_in_ready, vec_in_ready,
  output logic [DATA_W-1:0]   x_data,
  output logic [2*DATA_W-1:0] vec_in_data,
  input  logic                mm_out_valid, sm_out_valid, ln_out_valid, gelu_out_valid, vec_out_valid,
  input  logic [DATA_W-1:0]   mm_out_data, sm_out_data, ln_out_data, gelu_out_data, vec_out_data,
  // parameter stream bus
  input  logic                p_valid,
  output logic                p_ready,
  input  logic [PW-1:0]       p_data,
  output logic                mm_prm_valid, ln_prm_valid, vec_prm_valid,
  input  logic                mm_prm_ready, ln_prm_ready, vec_prm_ready,
  output logic [PW-1:0]       prm_data,
  // memory ports of the table
  input  logic                ca_en,
  input  logic [REG_W-1:0]    ca_addr,
  output logic [DATA_W-1:0]   ca_data,
  input  logic                cb_en,
  input  logic [REG_W-1:0]    cb_addr,
  input  logic                cw_en,
  input  logic [REG_W-1:0]    cw_addr,
  input  logic [DATA_W-1:0]   cw_data,
  // memory ports of data selection
  input  logic                sel_active,
  input  logic                sel_src_ext, sel_dst_ext,
  input  logic                sel_rd_req,
  input  logic [REG_W-1:0]    sel_rd_addr,
  output logic                sel_rd_gnt,
  output logic                sel_rd_valid,
  output logic [DATA_W-1:0]   sel_rd_data,
  input  logic                sel_wr_req,
  input  logic [REG_W-1:0]    sel_wr_addr,
  input  logic [DATA_W-1:0]   sel_wr_data,
  output logic                sel_wr_gnt,
  // memory cache unit
  output logic                ra_en,
  output logic [REG_W-1:0]    ra_addr,
  input  logic [DATA_W-1:0]   ra_data,
  output logic                rb_en,
  output logic [REG_W-1:0]    rb_addr,
  output logic                we,
  output logic [REG_W-1:0]    waddr,
  output logic [DATA_W-1:0]   wdata,
  // main memory
  output logic                mem_rd_req,
  output logic [REG_W-1:0]    mem_rd_addr,
  input  logic                mem_rd_gnt,
  input  logic                mem_rd_valid,
  input  logic [DATA_W-1:0]   mem_rd_data,
  output logic                mem_wr_req,
  output logic [REG_W-1:0]    mem_wr_addr,
  output logic [DATA_W-1:0]   mem_wr_data,
  input  logic                mem_wr_gnt
);
  logic is_sel, sel_rd_cache, sel_wr_cache;
  assign is_sel       = (cmd_mod == M_SEL);
  assign sel_rd_cache = sel_active && !sel_src_ext;
  assign sel_wr_cache = sel_active && !sel_dst_ext;

  // instruction bus
  assign sel_start = exec_start && is_sel;
  assign mm_start  = exec_start && (cmd_mod == M_MM);
  assign sm_start  = exec_start && (cmd_mod == M_SM);
  assign ln_start  = exec_start && (cmd_mod == M_LN);
  assign vec_start = exec_start && (cmd_mod == M_VEC);

  // data bus
  assign x_data        = s_data[DATA_W-1:0];
  assign vec_in_data   = s_data;
  assign mm_in_valid   = s_valid && (cmd_mod == M_MM);
  assign sm_in_valid   = s_valid && (cmd_mod == M_SM);
  assign ln_in_valid   = s_valid && (cmd_mod == M_LN);
  assign gelu_in_valid = s_valid && (cmd_mod == M_GELU);
  assign vec_in_valid  = s_valid && (cmd_mod == M_VEC);

  always_comb begin
    unique case (cmd_mod)
      M_MM:    begin s_ready = mm_in_ready;   o_valid = mm_out_valid;   o_data = mm_out_data;   end
      M_SM:    begin s_ready = sm_in_ready;   o_valid = sm_out_valid;   o_data = sm_out_data;   end
      M_LN:    begin s_ready = ln_in_ready;   o_valid = ln_out_valid;   o_data = ln_out_data;   end
      M_GELU:  begin s_ready = gelu_in_ready; o_valid = gelu_out_valid; o_data = gelu_out_data; end
      M_VEC:   begin s_ready = vec_in_ready;  o_valid = vec_out_valid;  o_data = vec_out_data;  end
      default: begin s_ready = 1'b0;          o_valid = 1'b0;           o_data = '0;            end
    endcase
  end

  // parameter stream bus
  assign prm_data     = p_data;
  assign mm_prm_valid  = p_valid && (cmd_mod == M_MM);
  assign ln_prm_valid  = p_valid && (cmd_mod == M_LN);
  assign vec_prm_valid = p_valid && (cmd_mod == M_VEC);
  always_comb begin
    unique case (cmd_mod)
      M_MM:    p_ready = mm_prm_ready;
      M_LN:    p_ready = ln_prm_ready;
      M_VEC:   p_ready = vec_prm_ready;
      default: p_ready = 1'b0;
    endcase
  end

  // memory ports
  logic sel_cache_rd_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sel_cache_rd_q <= 1'b0;
    else        sel_cache_rd_q <= sel_rd_cache && sel_rd_req;
  end

  // cache read port A: data selection reading the cache, else the table
  always_comb begin
    if (sel_rd_cache) begin
      ra_en   = sel_rd_req;
      ra_addr = sel_rd_addr;
    end else begin
      ra_en   = ca_en;
      ra_addr = ca_addr;
    end
  end
  // cache write port: a result of the table first, else data selection
  always_comb begin
    if (cw_en) begin
      we    = 1'b1;
      waddr = cw_addr;
      wdata = cw_data;
    end else begin
      we    = sel_wr_cache && sel_wr_req;
      waddr = sel_wr_addr;
      wdata = sel_wr_data;
    end
  end
  assign rb_en   = cb_en;
  assign rb_addr = cb_addr;
  assign ca_data = ra_data;

  assign mem_rd_req   = sel_active && sel_src_ext && sel_rd_req;
  assign mem_rd_addr  = sel_rd_addr;
  assign mem_wr_req   = sel_active && sel_dst_ext && sel_wr_req;
  assign mem_wr_addr  = sel_wr_addr;
  assign mem_wr_data  = sel_wr_data;

  assign sel_rd_gnt   = sel_src_ext ? mem_rd_gnt : 1'b1;
  assign sel_rd_valid = sel_src_ext ? mem_rd_valid : sel_cache_rd_q;
  assign sel_rd_data  = sel_src_ext ? mem_rd_data : ra_data;
  assign sel_wr_gnt   = sel_dst_ext ? mem_wr_gnt : !cw_en;
endmodule
