// tb_turbo_eq_top_full: end-to-end test of the turbo equalizer at its
// default sizes (5-bit channel, 3-bit feedback, 8-bit metrics, 4-bit output
// messages, sub-blocks of 10 with overlap 10, 3 stages per update, 3 runs,
// 256-cycle decoder slot). The equalizer is instantiated without parameter
// overrides; turbo_tb_env's defaults equal those sizes. Loading the
// 3 x 86016 table entries takes most of the run time.
module tb_turbo_eq_top_full;
  import ib_eq_pkg::*;

  localparam int unsigned N_B = DEF_N_B, N_EQ = DEF_N_EQ;
  localparam int unsigned W_E = DEF_W_E, W_D = DEF_W_D, W_IN = 10;

  logic clk, rst_n, cfg_we, in_valid, in_first, in_last;
  logic [N_EQ-1:0] cfg_eq_mask, te_valid, te_first, te_last;
  tbl_sel_e cfg_sel;
  logic [CFG_AW-1:0] cfg_addr;
  logic [CFG_DW-1:0] cfg_data;
  logic signed [W_IN-1:0] in_r [N_B];
  logic [W_E-1:0] te [N_EQ][N_B];
  logic [N_EQ-1:1] fb_req;
  logic [W_D-1:0] fb_td [N_EQ-1][N_B];

  turbo_eq_top dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_eq_mask(cfg_eq_mask), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .in_r(in_r), .te_valid(te_valid), .te_first(te_first),
    .te_last(te_last), .te(te), .fb_req(fb_req), .fb_td(fb_td));

  turbo_tb_env #(.N_FRAMES(6), .MAX_BLK(8), .WATCHDOG(400000)) env (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_eq_mask(cfg_eq_mask), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .in_r(in_r), .te_valid(te_valid), .te_first(te_first),
    .te_last(te_last), .te(te), .fb_req(fb_req), .fb_td(fb_td));
endmodule
