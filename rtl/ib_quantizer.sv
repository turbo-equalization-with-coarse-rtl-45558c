// ib_quantizer: maps received channel samples to W_R-bit channel messages.
//
// Each of the N samples r (signed, W_IN bits) is compared with the
// 2^W_R - 1 thresholds thr, which must be in ascending order; the channel
// message is the number of thresholds not above the sample, an index from
// 0 to 2^W_R - 1. With thresholds designed by the information bottleneck
// method this is the receiver's IB quantizer; with equally spaced thresholds
// it is a uniform quantizer. The thresholds are inputs, loaded elsewhere.
//
// Timing: one register stage; t_r is valid one cycle after r. N samples
// (one sub-block) per cycle.
//
// A threshold quantizer is this design's reading of the quantizer block;
// how the thresholds are found is outside the hardware.
module ib_quantizer #(
  parameter int unsigned N    = ib_eq_pkg::DEF_N_B,
  parameter int unsigned W_IN = 10,
  parameter int unsigned W_R  = ib_eq_pkg::DEF_W_R
) (
  input  logic                   clk,
  input  logic signed [W_IN-1:0] r   [N],
  input  logic signed [W_IN-1:0] thr [2**W_R-1],
  output logic        [W_R-1:0]  t_r [N]
);

  localparam int unsigned N_T = 2**W_R - 1;

  always_ff @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      logic [W_R:0] cnt;
      cnt = '0;
      for (int k = 0; k < N_T; k++) cnt += (W_R+1)'(r[n] >= thr[k]);
      t_r[n] <= cnt[W_R-1:0];
    end
  end

endmodule
