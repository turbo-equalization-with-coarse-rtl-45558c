// tb_turbo_eq_top: end-to-end test of the turbo equalizer at reduced sizes
// (4-bit metrics, 3-bit channel, 2-bit feedback, 3-bit output messages,
// sub-blocks of 4 with overlap 2, 2 stages per update, 3 runs, 40-cycle
// decoder slot). All checking is done by turbo_tb_env.
module tb_turbo_eq_top;
  import ib_eq_pkg::*;

  localparam int unsigned W_R = 3, W_D = 2, W_A = 4, W_E = 3;
  localparam int unsigned N_B = 4, N_O = 2, S_P = 2, N_EQ = 3, DEC_DELAY = 40, W_IN = 8;

  logic clk, rst_n, cfg_we, in_valid, in_first, in_last;
  logic [N_EQ-1:0] cfg_eq_mask, te_valid, te_first, te_last;
  tbl_sel_e cfg_sel;
  logic [CFG_AW-1:0] cfg_addr;
  logic [CFG_DW-1:0] cfg_data;
  logic signed [W_IN-1:0] in_r [N_B];
  logic [W_E-1:0] te [N_EQ][N_B];
  logic [N_EQ-1:1] fb_req;
  logic [W_D-1:0] fb_td [N_EQ-1][N_B];

  turbo_eq_top #(.W_R(W_R), .W_D(W_D), .W_A(W_A), .W_E(W_E), .N_B(N_B), .N_O(N_O),
                 .S_P(S_P), .N_EQ(N_EQ), .DEC_DELAY(DEC_DELAY), .W_IN(W_IN)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_eq_mask(cfg_eq_mask), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .in_r(in_r), .te_valid(te_valid), .te_first(te_first),
    .te_last(te_last), .te(te), .fb_req(fb_req), .fb_td(fb_td));

  turbo_tb_env #(.W_R(W_R), .W_D(W_D), .W_A(W_A), .W_E(W_E), .N_B(N_B), .N_O(N_O),
                 .S_P(S_P), .N_EQ(N_EQ), .DEC_DELAY(DEC_DELAY), .W_IN(W_IN),
                 .N_FRAMES(8), .MAX_BLK(6), .WATCHDOG(100000)) env (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_eq_mask(cfg_eq_mask), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .in_r(in_r), .te_valid(te_valid), .te_first(te_first),
    .te_last(te_last), .te(te), .fb_req(fb_req), .fb_td(fb_td));
endmodule
