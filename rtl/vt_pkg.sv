// vt_pkg: types and constants shared by the Vis-TOP overlay processor.
//
// Data are 8-bit fixed point (fix_8). Activations use ACT_FRAC fractional
// bits (value = int8 / 16). The instruction word is 64 bits. The two kinds
// the processor's instruction set names are a parameter set instruction
// that writes one 32-bit register and a module execution instruction that
// starts one component module; two more (record and replay) let a stored
// instruction bundle be reused, one per model-level block. The field layout, the register map and the
// fixed-point formats are this design's own choices.
package vt_pkg;

  localparam int unsigned DATA_W   = 8;   // fix_8 data
  localparam int unsigned ACC_W    = 32;  // matrix-multiply accumulators
  localparam int unsigned ACT_FRAC = 4;   // fractional bits of activations
  localparam int unsigned INSTR_W  = 64;
  localparam int unsigned REG_W    = 32;
  localparam int unsigned NREGS    = 32;

  // Instruction opcodes, bits [63:60]
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_PSET = 4'd1,   // [52:48] register index, [31:0] value
    OP_EXEC = 4'd2,   // [3:0] module id
    OP_BREC = 4'd3,   // record the next [15:0] words as a bundle at [47:32]
    OP_BRUN = 4'd4    // replay the [15:0] stored words starting at [47:32]
  } opcode_e;

  // Component modules that a module execution instruction can start
  typedef enum logic [3:0] {
    M_NONE = 4'd0,
    M_SEL  = 4'd1,    // data selection / data arrangement
    M_MM   = 4'd2,    // matrix multiply
    M_SM   = 4'd3,    // softmax
    M_LN   = 4'd4,    // layer normalization
    M_GELU = 4'd5,    // GELU
    M_VEC  = 4'd6     // basic vector operations
  } module_e;

  // Register map written by parameter set instructions
  typedef enum logic [4:0] {
    R_SRC_A   = 5'd0,   // cache address of operand A
    R_SRC_B   = 5'd1,   // cache address of operand B
    R_DST     = 5'd2,   // cache address of the result
    R_ROWS    = 5'd3,   // number of rows (tokens)
    R_LEN     = 5'd4,   // row length (K for matrix multiply)
    R_NOUT    = 5'd5,   // output columns of matrix multiply
    R_BATCH   = 5'd6,   // active PEs of matrix multiply
    R_SHIFT   = 5'd7,   // requantisation right shift
    R_MODE    = 5'd8,   // module specific mode bits
    R_MH      = 5'd9,
    R_MW      = 5'd10,
    R_MC      = 5'd11,
    R_SH      = 5'd12,
    R_SW      = 5'd13,
    R_SC      = 5'd14,
    R_FH      = 5'd15,
    R_FW      = 5'd16,
    R_FC      = 5'd17,
    R_SRC_OFF = 5'd18,  // data selection source offset
    R_DST_OFF = 5'd19   // data selection destination offset
  } reg_e;

  // R_MODE bits for data selection: source and destination memories
  localparam int unsigned MODE_SEL_SRC_EXT = 0; // 1: main memory, 0: cache
  localparam int unsigned MODE_SEL_DST_EXT = 1; // 1: main memory, 0: cache
  localparam int unsigned MODE_SEL_BG      = 3; // 1: run in the background (main memory -> cache only)

  // R_MODE bits [1:0] for basic vector operations, bit 2 selects operand B
  typedef enum logic [1:0] {
    V_ADD = 2'd0,
    V_SUB = 2'd1,
    V_MUL = 2'd2,
    V_MAX = 2'd3
  } vec_op_e;
  localparam int unsigned MODE_VEC_B_PARAM = 2; // 1: operand B from parameter stream

  // Data selection configuration (the nine cube parameters and two offsets)
  typedef struct packed {
    logic [REG_W-1:0] m_h, m_w, m_c;   // large cube MH, MW, MC
    logic [REG_W-1:0] s_h, s_w, s_c;   // small cube SH, SW, SC
    logic [REG_W-1:0] f_h, f_w, f_c;   // offsets FH, FW, FC
    logic [REG_W-1:0] src_off, dst_off;
    logic             src_ext, dst_ext;
  } sel_cfg_t;

  // Instruction bus: the command the instruction bundle table broadcasts
  typedef struct packed {
    module_e          mod;
    logic [REG_W-1:0] rows;
    logic [REG_W-1:0] len;
    logic [REG_W-1:0] nout;
    logic [REG_W-1:0] batch;
    logic [REG_W-1:0] shift;
    logic [REG_W-1:0] mode;
  } cmd_t;

  function automatic logic signed [DATA_W-1:0] sat8(input logic signed [47:0] v);
    if (v > 48'sd127)       return 8'sd127;
    else if (v < -48'sd128) return -8'sd128;
    else                    return v[DATA_W-1:0];
  endfunction

endpackage
