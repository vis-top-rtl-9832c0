// tb_bus_mux: self-checking testbench of the data, parameter and memory
// routing between the shared buses and the component modules.
//
// Every cycle the testbench picks a random active module and random values
// for every input, then compares each output against a reference written
// here from the routing rules: start pulses only for the active module;
// operand valid only to the active module; result, ready and parameter
// ready taken from the active module; while a selection is active (in
// the foreground or the background) its source and destination bits pick
// cache or main memory, the table keeps the cache read ports it does not
// need and always wins the cache write port (the selection's write grant
// drops in those cycles; such conflicts are counted and must occur); a
// cache read for data selection is reported valid exactly one cycle after
// its request. Inputs change at the
// falling edge and outputs are compared just before the next rising edge.
module tb_bus_mux;
  import vt_pkg::*;
  localparam int unsigned PW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  module_e cmd_mod;
  logic exec_start, sel_start, mm_start, sm_start, ln_start, vec_start;
  logic s_valid, s_ready, o_valid;
  logic [15:0] s_data;
  logic [7:0] o_data;
  logic mm_in_valid, sm_in_valid, ln_in_valid, gelu_in_valid, vec_in_valid;
  logic mm_in_ready, sm_in_ready, ln_in_ready, gelu_in_ready, vec_in_ready;
  logic [7:0] x_data;
  logic [15:0] vec_in_data;
  logic mm_out_valid, sm_out_valid, ln_out_valid, gelu_out_valid, vec_out_valid;
  logic [7:0] mm_out_data, sm_out_data, ln_out_data, gelu_out_data, vec_out_data;
  logic p_valid, p_ready;
  logic [PW-1:0] p_data, prm_data;
  logic mm_prm_valid, ln_prm_valid, vec_prm_valid, mm_prm_ready, ln_prm_ready, vec_prm_ready;
  logic ca_en, cb_en, cw_en;
  logic [31:0] ca_addr, cb_addr, cw_addr;
  logic [7:0] ca_data, cw_data;
  logic sel_active, sel_src_ext, sel_dst_ext, sel_rd_req, sel_rd_gnt, sel_rd_valid, sel_wr_req, sel_wr_gnt;
  logic [31:0] sel_rd_addr, sel_wr_addr;
  logic [7:0] sel_rd_data, sel_wr_data;
  logic ra_en, rb_en, we;
  logic [31:0] ra_addr, rb_addr, waddr;
  logic [7:0] ra_data, wdata;
  logic mem_rd_req, mem_rd_gnt, mem_rd_valid, mem_wr_req, mem_wr_gnt;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  logic [7:0] mem_rd_data, mem_wr_data;

  bus_mux #(.PW(PW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [7:0] r8(); return 8'($urandom); endfunction
  bit prev_sel_cache_rd;
  int n_conflict = 0;

  initial begin
    automatic int n_sel = 0;
    prev_sel_cache_rd = 0;
    {exec_start, s_valid, p_valid, ca_en, cb_en, cw_en, sel_rd_req, sel_wr_req} = '0;
    {sel_active, sel_src_ext, sel_dst_ext, mem_rd_gnt, mem_rd_valid, mem_wr_gnt} = '0;
    {mm_in_ready, sm_in_ready, ln_in_ready, gelu_in_ready, vec_in_ready} = '0;
    {mm_out_valid, sm_out_valid, ln_out_valid, gelu_out_valid, vec_out_valid} = '0;
    {mm_prm_ready, ln_prm_ready, vec_prm_ready} = '0;
    {s_data, p_data, ca_addr, cb_addr, cw_addr, cw_data, sel_rd_addr, sel_wr_addr, sel_wr_data} = '0;
    {mm_out_data, sm_out_data, ln_out_data, gelu_out_data, vec_out_data, ra_data, mem_rd_data} = '0;
    cmd_mod = M_NONE;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      cmd_mod = module_e'($urandom % 7);
      sel_active = (cmd_mod == M_SEL) || ($urandom % 2 == 0);
      if (sel_active) n_sel++;
      {exec_start, s_valid, p_valid, ca_en, cb_en, cw_en, sel_rd_req, sel_wr_req} = 8'($urandom);
      {sel_src_ext, sel_dst_ext, mem_rd_gnt, mem_rd_valid, mem_wr_gnt} = 5'($urandom);
      {mm_in_ready, sm_in_ready, ln_in_ready, gelu_in_ready, vec_in_ready} = 5'($urandom);
      {mm_out_valid, sm_out_valid, ln_out_valid, gelu_out_valid, vec_out_valid} = 5'($urandom);
      {mm_prm_ready, ln_prm_ready, vec_prm_ready} = 3'($urandom);
      s_data = 16'($urandom); p_data = PW'($urandom);
      ca_addr = $urandom; cb_addr = $urandom; cw_addr = $urandom; cw_data = r8();
      sel_rd_addr = $urandom; sel_wr_addr = $urandom; sel_wr_data = r8();
      mm_out_data = r8(); sm_out_data = r8(); ln_out_data = r8(); gelu_out_data = r8(); vec_out_data = r8();
      ra_data = r8(); mem_rd_data = r8();
      #4;
      begin
        automatic bit is_sel = (cmd_mod == M_SEL);
        automatic bit er, eov; automatic logic [7:0] eod; automatic bit epr;
        chk({sel_start, mm_start, sm_start, ln_start, vec_start} ==
            {exec_start && is_sel, exec_start && cmd_mod == M_MM, exec_start && cmd_mod == M_SM,
             exec_start && cmd_mod == M_LN, exec_start && cmd_mod == M_VEC}, "start demux");
        chk({mm_in_valid, sm_in_valid, ln_in_valid, gelu_in_valid, vec_in_valid} ==
            {s_valid && cmd_mod == M_MM, s_valid && cmd_mod == M_SM, s_valid && cmd_mod == M_LN,
             s_valid && cmd_mod == M_GELU, s_valid && cmd_mod == M_VEC}, "operand valid demux");
        chk(x_data == s_data[7:0] && vec_in_data == s_data, "operand data");
        case (cmd_mod)
          M_MM:   begin er = mm_in_ready;   eov = mm_out_valid;   eod = mm_out_data;   end
          M_SM:   begin er = sm_in_ready;   eov = sm_out_valid;   eod = sm_out_data;   end
          M_LN:   begin er = ln_in_ready;   eov = ln_out_valid;   eod = ln_out_data;   end
          M_GELU: begin er = gelu_in_ready; eov = gelu_out_valid; eod = gelu_out_data; end
          M_VEC:  begin er = vec_in_ready;  eov = vec_out_valid;  eod = vec_out_data;  end
          default: begin er = 0; eov = 0; eod = 0; end
        endcase
        chk(s_ready == er && o_valid == eov && (!eov || o_data == eod), "result mux");
        epr = (cmd_mod == M_MM) ? mm_prm_ready : (cmd_mod == M_LN) ? ln_prm_ready :
              (cmd_mod == M_VEC) ? vec_prm_ready : 1'b0;
        chk(p_ready == epr && prm_data == p_data, "parameter ready and data");
        chk({mm_prm_valid, ln_prm_valid, vec_prm_valid} ==
            {p_valid && cmd_mod == M_MM, p_valid && cmd_mod == M_LN, p_valid && cmd_mod == M_VEC}, "parameter valid demux");
        begin
          automatic bit rdc = sel_active && !sel_src_ext, wrc = sel_active && !sel_dst_ext;
          if (rdc) chk(ra_en == sel_rd_req && (!ra_en || ra_addr == sel_rd_addr), "selection owns cache read port");
          else     chk(ra_en == ca_en && (!ca_en || ra_addr == ca_addr), "table owns cache read port");
          chk(ca_data == ra_data, "port A data to the table");
          chk(rb_en == cb_en && (!cb_en || rb_addr == cb_addr), "table port b");
          if (cw_en) chk(we && waddr == cw_addr && wdata == cw_data, "table result has write priority");
          else chk(we == (wrc && sel_wr_req) && (!we || (waddr == sel_wr_addr && wdata == sel_wr_data)), "selection cache write");
          chk(mem_rd_req == (sel_active && sel_src_ext && sel_rd_req) && (!mem_rd_req || mem_rd_addr == sel_rd_addr), "main memory read");
          chk(mem_wr_req == (sel_active && sel_dst_ext && sel_wr_req) &&
              (!mem_wr_req || (mem_wr_addr == sel_wr_addr && mem_wr_data == sel_wr_data)), "main memory write");
          chk(sel_rd_gnt == (sel_src_ext ? mem_rd_gnt : 1'b1), "selection read grant");
          chk(sel_wr_gnt == (sel_dst_ext ? mem_wr_gnt : !cw_en), "selection write grant yields to the table");
          if (sel_src_ext) chk(sel_rd_valid == mem_rd_valid && (!sel_rd_valid || sel_rd_data == mem_rd_data), "sel memory read data");
          else chk(sel_rd_valid == prev_sel_cache_rd && (!sel_rd_valid || sel_rd_data == ra_data), "sel cache read data one cycle later");
          if (sel_active && cw_en && sel_wr_req && !sel_dst_ext) n_conflict++;
        end
        prev_sel_cache_rd = sel_active && !sel_src_ext && sel_rd_req;
      end
    end
    chk(n_sel > 1000, "selection cycles exercised");
    chk(n_conflict > 100, "write-port conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
