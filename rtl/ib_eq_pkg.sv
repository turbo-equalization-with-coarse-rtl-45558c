// ib_eq_pkg: constants and types shared by the coarsely quantized turbo
// equalizer.
//
// Every message of the receiver is a small unsigned index: a channel message
// t_r (W_R bits), a decoder feedback message t_d (W_D bits), forward and
// backward metric messages t_alpha / t_beta (W_A bits each) and an equalizer
// output message t_e (W_E bits). A message value t in {1..2^w} is carried as
// the index t-1. The meaning of an index is fixed only by the lookup tables,
// which are designed offline and loaded through the table write bus below.
//
// The default sizes are the ones of the main evaluated configuration:
// 5-bit channel messages, 3-bit feedback, 8-bit metrics, sub-blocks of 10
// symbols with 10 overlap symbols on each side, 3 pipeline stages per update
// and three unrolled equalizer runs (two turbo iterations). The 4-bit output
// message width is this design's choice, matched to a 4-bit message decoder.
package ib_eq_pkg;

  localparam int unsigned DEF_W_R  = 5;   // channel message bits
  localparam int unsigned DEF_W_D  = 3;   // decoder feedback bits
  localparam int unsigned DEF_W_A  = 8;   // forward/backward metric bits
  localparam int unsigned DEF_W_E  = 4;   // equalizer output bits (own choice)
  localparam int unsigned DEF_N_B  = 10;  // symbols per sub-block
  localparam int unsigned DEF_N_O  = 10;  // overlap symbols on each side
  localparam int unsigned DEF_S_P  = 3;   // pipeline stages per update
  localparam int unsigned DEF_N_EQ = 3;   // unrolled equalizer runs

  // Table write bus: wide enough for the largest table (final LUT,
  // 2*W_A address bits) and for a W_A-bit entry, with room to grow.
  localparam int unsigned CFG_AW = 24;
  localparam int unsigned CFG_DW = 16;

  // Which table or register a configuration write goes to.
  typedef enum logic [2:0] {
    TBL_F1  = 3'd0,  // forward  LUT 1: (t_alpha, t_r)   -> z_alpha
    TBL_F2  = 3'd1,  // forward  LUT 2: (z_alpha, t_d)   -> t_alpha'
    TBL_B1  = 3'd2,  // backward LUT 1: (t_beta', t_d)   -> z_beta
    TBL_B2  = 3'd3,  // backward LUT 2: (z_beta,  t_r)   -> t_beta
    TBL_E   = 3'd4,  // final    LUT  : (z_alpha, t_beta') -> t_e
    TBL_QTH = 3'd5,  // quantizer thresholds (top level only)
    TBL_REG = 3'd6   // start / padding registers (top level only)
  } tbl_sel_e;

  // Register numbers within TBL_REG.
  localparam logic [CFG_AW-1:0] REG_ALPHA_INIT = 0;  // forward start message
  localparam logic [CFG_AW-1:0] REG_BETA_INIT  = 1;  // backward start message
  localparam logic [CFG_AW-1:0] REG_PAD_R      = 2;  // t_r beyond the frame edge
  localparam logic [CFG_AW-1:0] REG_PAD_D      = 3;  // t_d beyond the frame edge
  localparam logic [CFG_AW-1:0] REG_PRIOR_D    = 4;  // t_d of the first run

  typedef struct packed {
    logic                 we;
    tbl_sel_e             sel;
    logic [CFG_AW-1:0]    addr;
    logic [CFG_DW-1:0]    data;
  } lut_wr_t;

endpackage
