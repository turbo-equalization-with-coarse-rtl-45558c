// x_equalizer: one fully pipelined run of the LUT-based equalizer on one
// window per clock cycle, in the X-shaped arrangement of forward and
// backward recursions.
//
// A window holds N_W = N_O + N_B + N_O positions p = 0..N_W-1 of channel
// messages t_r and decoder feedback t_d; the N_B positions N_O..N_O+N_B-1
// form the sub-block whose output messages are produced. The recursions are
// unrolled in space: every update of every window position has its own
// hardware unit, so a new window can enter each cycle.
//
//   * Forward units f = 0..N_O+N_B-1 work on position p = f. Unit 0 starts
//     from alpha_init; unit f takes t_alpha' of unit f-1. Unit f sees its
//     inputs f*S_P cycles after the window entered.
//   * Backward units b = 0..N_O+N_B-1 work on position p = N_W-1-b, from the
//     right edge inwards. Unit 0 starts from beta_init. Unit b sees its
//     inputs b*S_P cycles after entry.
//   The two chains cross in the middle of the sub-block, forming the X.
//   * The final unit of sub-block symbol i (p = N_O+i) combines z_alpha of
//     forward unit p with the backward message arriving from the right,
//     t_beta' = output of backward unit N_W-2-p. Whichever is ready first
//     waits in a metric shift register, |2p+2-N_W|*S_P cycles deep.
//   * Channel/feedback shift registers hand each position's (t_r, t_d) to
//     its forward unit after p*S_P and to its backward unit after
//     (N_W-1-p)*S_P cycles.
//   * Output shift registers delay each final result so that all N_B output
//     messages of a window leave in the same cycle.
//
// Timing: out_* appear LAT = (N_O+N_B+1)*S_P cycles after in_*; throughput
// one window (N_B messages) per cycle, no stalls. The valid and frame flags
// travel in a reset shift register alongside the data.
//
// Table writes on wr go to every unit at once, so all forward units share
// one forward table pair, all backward units one backward pair and all
// final units one final table, as in the static (recursion-independent)
// table design. The cycle-by-cycle schedule of the units, the start
// messages as inputs and the broadcast table load are this design's
// choices; the unit counts and the kinds of shift registers follow the
// paper's X-shaped structure.
module x_equalizer
  import ib_eq_pkg::*;
#(
  parameter int unsigned W_A       = ib_eq_pkg::DEF_W_A,
  parameter int unsigned W_R       = ib_eq_pkg::DEF_W_R,
  parameter int unsigned W_D       = ib_eq_pkg::DEF_W_D,
  parameter int unsigned W_E       = ib_eq_pkg::DEF_W_E,
  parameter int unsigned N_B       = ib_eq_pkg::DEF_N_B,
  parameter int unsigned N_O       = ib_eq_pkg::DEF_N_O,
  parameter int unsigned S_P       = ib_eq_pkg::DEF_S_P,
  parameter bit          SYMMETRIC = 1'b0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  lut_wr_t        wr,
  input  logic [W_A-1:0] alpha_init,
  input  logic [W_A-1:0] beta_init,
  input  logic           in_valid,
  input  logic           in_first,
  input  logic           in_last,
  input  logic [W_R-1:0] in_tr [N_B+2*N_O],
  input  logic [W_D-1:0] in_td [N_B+2*N_O],
  output logic           out_valid,
  output logic           out_first,
  output logic           out_last,
  output logic [W_E-1:0] out_te [N_B]
);

  localparam int unsigned N_W = N_B + 2*N_O;   // window length
  localparam int unsigned N_U = N_O + N_B;     // units per recursion
  localparam int unsigned LAT = (N_U + 1) * S_P;
  localparam int unsigned W_M = W_R + W_D;

  // Table write bus registered once to keep its fan-out off the input path.
  lut_wr_t wr_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_q <= '0;
    else        wr_q <= wr;
  end

  // ---------------- channel & feedback shift registers --------------------
  logic [W_M-1:0] fw_in [N_U];   // (t_r, t_d) for forward unit f
  logic [W_M-1:0] bw_in [N_U];   // (t_r, t_d) for backward unit b

  for (genvar p = 0; p < N_W; p++) begin : g_pos
    localparam bit          HAS_F = (p < N_U);
    localparam bit          HAS_B = (p >= N_O);
    localparam int unsigned T_F   = p * S_P;
    localparam int unsigned T_B   = (N_W - 1 - p) * S_P;
    localparam int unsigned T_LO  = (HAS_F && HAS_B) ? ((T_F < T_B) ? T_F : T_B)
                                                     : (HAS_F ? T_F : T_B);
    localparam int unsigned T_HI  = (HAS_F && HAS_B) ? ((T_F < T_B) ? T_B : T_F)
                                                     : T_LO;
    logic [W_M-1:0] tap_lo, tap_hi;

    delay_line #(.W(W_M), .DEPTH(T_LO)) u_lo (
      .clk(clk), .rst_n(rst_n), .d({in_tr[p], in_td[p]}), .q(tap_lo));
    delay_line #(.W(W_M), .DEPTH(T_HI - T_LO)) u_hi (
      .clk(clk), .rst_n(rst_n), .d(tap_lo), .q(tap_hi));

    if (HAS_F) begin : g_f
      assign fw_in[p] = (T_F == T_LO) ? tap_lo : tap_hi;
    end
    if (HAS_B) begin : g_b
      assign bw_in[N_W-1-p] = (T_B == T_LO) ? tap_lo : tap_hi;
    end
  end

  // ---------------- forward chain ----------------------------------------
  logic [W_A-1:0] fz [N_U];      // z_alpha of forward unit f
  logic [W_A-1:0] fa [N_U];      // t_alpha' of forward unit f

  for (genvar f = 0; f < N_U; f++) begin : g_fwd
    logic [W_A-1:0] a_in;
    if (f == 0) begin : g_first
      assign a_in = alpha_init;
    end else begin : g_next
      assign a_in = fa[f-1];
    end
    fwd_update #(.W_A(W_A), .W_R(W_R), .W_D(W_D), .S_P(S_P),
                 .SYMMETRIC(SYMMETRIC)) u_fwd (
      .clk      (clk),
      .wr       (wr_q),
      .t_a      (a_in),
      .t_r      (fw_in[f][W_M-1:W_D]),
      .t_d      (fw_in[f][W_D-1:0]),
      .z_a      (fz[f]),
      .t_a_next (fa[f])
    );
  end

  // ---------------- backward chain ---------------------------------------
  logic [W_A-1:0] bb [N_U];      // t_beta of backward unit b

  for (genvar b = 0; b < N_U; b++) begin : g_bwd
    logic [W_A-1:0] b_in;
    if (b == 0) begin : g_first
      assign b_in = beta_init;
    end else begin : g_next
      assign b_in = bb[b-1];
    end
    bwd_update #(.W_A(W_A), .W_R(W_R), .W_D(W_D), .S_P(S_P),
                 .SYMMETRIC(SYMMETRIC)) u_bwd (
      .clk      (clk),
      .wr       (wr_q),
      .t_b      (b_in),
      .t_r      (bw_in[b][W_M-1:W_D]),
      .t_d      (bw_in[b][W_D-1:0]),
      .t_b_next (bb[b])
    );
  end

  // ---------------- metric shift registers, final units, output align ----
  for (genvar i = 0; i < N_B; i++) begin : g_fin
    localparam int unsigned P   = N_O + i;
    localparam int unsigned BU  = N_W - 2 - P;          // backward unit
    localparam int unsigned T_Z = (P + 1) * S_P;        // z_alpha ready
    localparam int unsigned T_T = (BU + 1) * S_P;       // t_beta' ready
    localparam int unsigned T_M = (T_Z > T_T) ? T_Z : T_T;
    logic [W_A-1:0] z_al, b_al;
    logic [W_E-1:0] te;

    delay_line #(.W(W_A), .DEPTH(T_M - T_Z)) u_zsr (
      .clk(clk), .rst_n(rst_n), .d(fz[P]), .q(z_al));
    delay_line #(.W(W_A), .DEPTH(T_M - T_T)) u_bsr (
      .clk(clk), .rst_n(rst_n), .d(bb[BU]), .q(b_al));

    final_update #(.W_A(W_A), .W_E(W_E), .S_P(S_P),
                   .SYMMETRIC(SYMMETRIC)) u_fin (
      .clk (clk),
      .wr  (wr_q),
      .z_a (z_al),
      .t_b (b_al),
      .t_e (te)
    );

    delay_line #(.W(W_E), .DEPTH(LAT - T_M - S_P)) u_osr (
      .clk(clk), .rst_n(rst_n), .d(te), .q(out_te[i]));
  end

  // ---------------- valid and frame flags ---------------------------------
  delay_line #(.W(3), .DEPTH(LAT), .RESET(1'b1)) u_flags (
    .clk   (clk),
    .rst_n (rst_n),
    .d     ({in_valid, in_valid && in_first, in_valid && in_last}),
    .q     ({out_valid, out_first, out_last})
  );

  initial begin
    assert (N_O >= 1) else $error("x_equalizer: N_O must be at least 1");
  end

endmodule
