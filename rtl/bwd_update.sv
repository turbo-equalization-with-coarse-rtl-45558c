// bwd_update: reduced (two-LUT) backward update of the IB equalizer.
//
// The backward recursion runs from the end of a window towards its start.
// The full update maps the backward message from the right, t_beta', the
// channel message t_r and the feedback t_d to t_beta with one three-input
// table. The reduced structure used here is
//   z_beta = LUT1(t_beta', t_d)        2^(W_A+W_D) entries, towards S'
//   t_beta = LUT2(z_beta,  t_r)        2^(W_A+W_R) entries, towards S
// so the feedback enters first and the channel message second, mirroring
// the forward update.
//
// Timing: inputs sampled together, t_b_next appears S_P cycles later
// (S_P >= 2): one register after LUT1, S_P-1 after LUT2. One new set of
// inputs per cycle.
//
// Table writes: wr.we with wr.sel = TBL_B1 or TBL_B2; table address is
// {first input, second input} (this design's choice).
module bwd_update
  import ib_eq_pkg::*;
#(
  parameter int unsigned W_A       = ib_eq_pkg::DEF_W_A,
  parameter int unsigned W_R       = ib_eq_pkg::DEF_W_R,
  parameter int unsigned W_D       = ib_eq_pkg::DEF_W_D,
  parameter int unsigned S_P       = ib_eq_pkg::DEF_S_P,
  parameter bit          SYMMETRIC = 1'b0
) (
  input  logic           clk,
  input  lut_wr_t        wr,
  input  logic [W_A-1:0] t_b,
  input  logic [W_R-1:0] t_r,
  input  logic [W_D-1:0] t_d,
  output logic [W_A-1:0] t_b_next
);

  logic [W_A-1:0] z_comb, z_q, t2_comb;
  logic [W_R-1:0] tr_q;

  ib_lut #(.IN_W(W_A+W_D), .OUT_W(W_A), .SYMMETRIC(SYMMETRIC)) u_lut1 (
    .clk     (clk),
    .wr_en   (wr.we && wr.sel == TBL_B1),
    .wr_addr (wr.addr[W_A+W_D-1:0]),
    .wr_data (wr.data[W_A-1:0]),
    .y       ({t_b, t_d}),
    .t       (z_comb)
  );

  always_ff @(posedge clk) begin
    z_q  <= z_comb;
    tr_q <= t_r;
  end

  ib_lut #(.IN_W(W_A+W_R), .OUT_W(W_A), .SYMMETRIC(SYMMETRIC)) u_lut2 (
    .clk     (clk),
    .wr_en   (wr.we && wr.sel == TBL_B2),
    .wr_addr (wr.addr[W_A+W_R-1:0]),
    .wr_data (wr.data[W_A-1:0]),
    .y       ({z_q, tr_q}),
    .t       (t2_comb)
  );

  delay_line #(.W(W_A), .DEPTH(S_P-1)) u_out (
    .clk   (clk),
    .rst_n (1'b1),
    .d     (t2_comb),
    .q     (t_b_next)
  );

  initial begin
    assert (S_P >= 2) else $error("bwd_update: S_P must be at least 2");
  end

endmodule
