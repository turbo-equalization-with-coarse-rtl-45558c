// fwd_update: reduced (two-LUT) forward update of the IB equalizer.
//
// The full forward update maps the previous forward message t_alpha, the
// channel message t_r and the decoder feedback t_d to the next forward
// message t_alpha' with one three-input table of 2^(W_A+W_R+W_D) entries.
// The reduced structure used here splits it into two two-input tables:
//   z_alpha  = LUT1(t_alpha, t_r)      2^(W_A+W_R) entries
//   t_alpha' = LUT2(z_alpha, t_d)      2^(W_A+W_D) entries
// Both tables compress towards the next channel state. z_alpha is also an
// output, because the reduced final update consumes it.
//
// Timing: inputs are sampled together; z_a and t_a_next appear S_P clock
// cycles later (S_P >= 2). One register stage follows LUT1, the remaining
// S_P-1 follow LUT2, where synthesis retiming may spread them over the
// multiplexer levels. A new set of inputs may be applied every cycle.
//
// Table writes: wr.we with wr.sel = TBL_F1 or TBL_F2 writes entry wr.addr of
// that table. The table address is {first input, second input}, the first
// input in the upper bits; this order is this design's choice.
module fwd_update
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
  input  logic [W_A-1:0] t_a,
  input  logic [W_R-1:0] t_r,
  input  logic [W_D-1:0] t_d,
  output logic [W_A-1:0] z_a,
  output logic [W_A-1:0] t_a_next
);

  logic [W_A-1:0] z_comb, z_q, t2_comb;
  logic [W_D-1:0] td_q;

  ib_lut #(.IN_W(W_A+W_R), .OUT_W(W_A), .SYMMETRIC(SYMMETRIC)) u_lut1 (
    .clk     (clk),
    .wr_en   (wr.we && wr.sel == TBL_F1),
    .wr_addr (wr.addr[W_A+W_R-1:0]),
    .wr_data (wr.data[W_A-1:0]),
    .y       ({t_a, t_r}),
    .t       (z_comb)
  );

  always_ff @(posedge clk) begin
    z_q  <= z_comb;
    td_q <= t_d;
  end

  ib_lut #(.IN_W(W_A+W_D), .OUT_W(W_A), .SYMMETRIC(SYMMETRIC)) u_lut2 (
    .clk     (clk),
    .wr_en   (wr.we && wr.sel == TBL_F2),
    .wr_addr (wr.addr[W_A+W_D-1:0]),
    .wr_data (wr.data[W_A-1:0]),
    .y       ({z_q, td_q}),
    .t       (t2_comb)
  );

  delay_line #(.W(2*W_A), .DEPTH(S_P-1)) u_out (
    .clk   (clk),
    .rst_n (1'b1),
    .d     ({z_q, t2_comb}),
    .q     ({z_a, t_a_next})
  );

  initial begin
    assert (S_P >= 2) else $error("fwd_update: S_P must be at least 2");
  end

endmodule
