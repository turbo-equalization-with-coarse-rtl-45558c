// final_update: reduced final update of the IB equalizer.
//
// The full final update maps (t_alpha, t_r, t_beta') to the equalizer output
// message t_e with 2^(W_A+W_R+W_A) entries. In the reduced structure the
// channel message is not looked up again: the forward intermediate message
// z_alpha = LUT1(t_alpha, t_r) already holds it, so
//   t_e = LUT(z_alpha, t_beta')        2^(2*W_A) entries.
// The decoder feedback t_d of the current symbol is not an input, so t_e is
// extrinsic with respect to the decoder.
//
// Timing: t_e appears S_P cycles after z_a / t_b are applied (S_P >= 1;
// all registers follow the table and may be retimed into it). One new pair
// per cycle. Table writes: wr.we with wr.sel = TBL_E, address {z_a, t_b}.
module final_update
  import ib_eq_pkg::*;
#(
  parameter int unsigned W_A       = ib_eq_pkg::DEF_W_A,
  parameter int unsigned W_E       = ib_eq_pkg::DEF_W_E,
  parameter int unsigned S_P       = ib_eq_pkg::DEF_S_P,
  parameter bit          SYMMETRIC = 1'b0
) (
  input  logic           clk,
  input  lut_wr_t        wr,
  input  logic [W_A-1:0] z_a,
  input  logic [W_A-1:0] t_b,
  output logic [W_E-1:0] t_e
);

  logic [W_E-1:0] te_comb;

  ib_lut #(.IN_W(2*W_A), .OUT_W(W_E), .SYMMETRIC(SYMMETRIC)) u_lut (
    .clk     (clk),
    .wr_en   (wr.we && wr.sel == TBL_E),
    .wr_addr (wr.addr[2*W_A-1:0]),
    .wr_data (wr.data[W_E-1:0]),
    .y       ({z_a, t_b}),
    .t       (te_comb)
  );

  delay_line #(.W(W_E), .DEPTH(S_P)) u_out (
    .clk   (clk),
    .rst_n (1'b1),
    .d     (te_comb),
    .q     (t_e)
  );

  initial begin
    assert (S_P >= 1) else $error("final_update: S_P must be at least 1");
  end

endmodule
