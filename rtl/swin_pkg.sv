// swin_pkg: types and constants shared by the Swin Transformer accelerator.
//
// All data are 16-bit two's-complement fixed point with FRAC_W = 10 fraction
// bits (Q6.10). The 16-bit width is the paper's; the split is this design's
// choice, picked so that the exponential unit's LUT index falls on fraction
// bits 9..7 as drawn for it. Attention windows are 7x7 (M2 = 49 rows per
// matrix), the MMU produces c_o = 32 output columns per tile and takes
// c_i = 1 input channel per cycle (32 PEs x 49 multipliers = 1568 DSPs).
//
// The control unit is driven by instructions (instr_t). The paper names a
// control unit but gives no instruction set; the one below is this design's.
package swin_pkg;

  localparam int DATA_W = 16;   // Fix16 everywhere
  localparam int FRAC_W = 10;   // fraction bits of every fixed-point value
  localparam int M2     = 49;   // rows of a window matrix (7 x 7 tokens)
  localparam int CO     = 32;   // output columns per MMU tile (c_o)
  localparam int CI     = 1;    // input channels per MMU cycle (c_i)
  localparam int ACC_W  = 40;   // accumulator width
  localparam int EXP_W  = 32;   // unsigned exponential-unit result, Q22.10
  localparam int LOG_W  = 24;   // signed log-domain values, Q14.10

  localparam int ILB_BANKS = 4;
  localparam int ADDR_W    = 16;  // buffer word address width
  localparam int EXT_AW    = 32;  // external memory element address width

  typedef logic signed [DATA_W-1:0] fix_t;

  typedef enum logic [1:0] {
    OP_LOAD    = 2'd0,   // external memory -> buffer (MRU)
    OP_MATMUL  = 2'd1,   // A x B (+bias) (+shortcut) (GELU) -> ILB bank
    OP_SOFTMAX = 2'd2,   // ILB rows (+mask) -> softmax -> attention bank
    OP_STORE   = 2'd3    // ILB bank -> external memory (MWU)
  } opcode_e;

  // buffer targets of a LOAD
  typedef enum logic [2:0] {
    BUF_FIB  = 3'd0,
    BUF_WGT  = 3'd1,
    BUF_BIAS = 3'd2,
    BUF_MASK = 3'd3,
    BUF_ILB  = 3'd4
  } buf_sel_e;

  // A operand (M2 x c_i column) sources
  typedef enum logic [1:0] {
    A_FIB = 2'd0,
    A_ILB = 2'd1,
    A_ATT = 2'd2
  } a_src_e;

  // B operand (c_i x c_o row) sources
  typedef enum logic {
    B_WGT   = 1'b0,  // weight buffer word, 32 lanes
    B_ILB_T = 1'b1   // ILB word read as a row of a transposed matrix (K^T), zero padded
  } b_src_e;

  // shortcut (residual) sources
  typedef enum logic {
    SC_FIB = 1'b0,   // MSA shortcut: block input in the FIB
    SC_ILB = 1'b1    // FFN shortcut: MSA output in an ILB bank
  } sc_src_e;

  typedef struct packed {
    opcode_e              op;
    // LOAD / STORE
    buf_sel_e             buf_sel;
    logic [EXT_AW-1:0]    ext_addr;
    logic [ADDR_W-1:0]    buf_addr;
    logic [ADDR_W-1:0]    n_words;
    logic [5:0]           lanes;      // elements per word moved (1..49)
    // MATMUL
    a_src_e               a_src;
    logic [1:0]           a_bank;
    logic [ADDR_W-1:0]    a_base;
    logic [ADDR_W-1:0]    k_len;      // C_I / c_i
    b_src_e               b_src;
    logic [1:0]           b_bank;
    logic [ADDR_W-1:0]    b_base;
    logic [7:0]           n_tiles;    // ceil(C_O / c_o)
    logic                 bias_en;
    logic [ADDR_W-1:0]    bias_base;
    logic                 sc_en;
    sc_src_e              sc_src;
    logic [1:0]           sc_bank;
    logic [ADDR_W-1:0]    sc_base;
    logic                 gelu_en;
    logic                 row_mode;   // drain rows (transposed) instead of columns
    // MATMUL / SOFTMAX destination and SOFTMAX source
    logic [1:0]           dst_bank;   // also the ILB bank of LOAD/STORE
    logic [ADDR_W-1:0]    dst_base;
    logic                 mask_en;
    logic [ADDR_W-1:0]    mask_base;
  } instr_t;

  // saturate a wide signed value to DATA_W bits
  function automatic fix_t sat_fix(input logic signed [ACC_W-1:0] v);
    localparam logic signed [ACC_W-1:0] MAXV = (ACC_W'(1) <<< (DATA_W-1)) - 1;
    localparam logic signed [ACC_W-1:0] MINV = -(ACC_W'(1) <<< (DATA_W-1));
    if (v > MAXV)      return fix_t'(MAXV);
    else if (v < MINV) return fix_t'(MINV);
    else               return fix_t'(v);
  endfunction

  // round a Q.(2*FRAC_W) accumulator to Q.FRAC_W and saturate
  function automatic fix_t round_sat(input logic signed [ACC_W-1:0] acc);
    logic signed [ACC_W-1:0] r;
    r = (acc + (ACC_W'(1) <<< (FRAC_W-1))) >>> FRAC_W;
    return sat_fix(r);
  endfunction

endpackage
