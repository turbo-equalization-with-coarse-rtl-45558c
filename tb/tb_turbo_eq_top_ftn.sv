// tb_turbo_eq_top_ftn: end-to-end test on the faster-than-Nyquist setup.
// Frames are whole 64800-bit codewords (6480 sub-blocks of 10 symbols) sent
// through the 12-tap FTN channel; the tables model only the first three
// taps. The decoder slot between runs is 8192 cycles so that a whole
// codeword fits before the decoder answers. Widths are the default ones.
module tb_turbo_eq_top_ftn;
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

  turbo_eq_top #(.DEC_DELAY(8192)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_eq_mask(cfg_eq_mask), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .in_r(in_r), .te_valid(te_valid), .te_first(te_first),
    .te_last(te_last), .te(te), .fb_req(fb_req), .fb_td(fb_td));

  turbo_tb_env #(.DEC_DELAY(8192), .CHANNEL(1), .FIX_BLK(6480), .N_FRAMES(2), .WATCHDOG(700000)) env (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_eq_mask(cfg_eq_mask), .cfg_sel(cfg_sel),
    .cfg_addr(cfg_addr), .cfg_data(cfg_data), .in_valid(in_valid), .in_first(in_first),
    .in_last(in_last), .in_r(in_r), .te_valid(te_valid), .te_first(te_first),
    .te_last(te_last), .te(te), .fb_req(fb_req), .fb_td(fb_td));

  // Outer watchdog: the environment normally ends the run well before this.
  initial begin
    repeat (800000) @(posedge clk);
    $display("outer watchdog expired");
    $display("TB_RESULT checks=1 failures=1");
    $finish;
  end
endmodule
