// turbo_eq_top: coarsely quantized turbo equalizer with N_EQ unrolled
// equalizer runs (N_EQ-1 turbo iterations).
//
// Received samples enter one sub-block (N_B samples) per cycle and are
// quantized to W_R-bit channel messages. Equalizer run 0 sees no decoder
// feedback yet: every symbol gets the configured prior message. Its N_B
// output messages per cycle leave on te[0] for decoder 0. While decoder 0
// works, the quantized channel sub-blocks travel through a channel pipeline
// of DEC_DELAY cycles; when a sub-block leaves it, fb_req[1] is raised and
// decoder 0 must present the feedback messages of the same sub-block on
// fb_td[0] in that cycle. Run 1 then equalizes with channel messages and
// feedback, and so on up to run N_EQ-1. Decoders, interleaver and
// de-interleaver are outside this module.
//
// Each run consists of a window builder (sub-blocks to overlapping windows)
// and an x_equalizer (LUT-based forward/backward/final updates, one window
// per cycle).
//
// Configuration (cfg_we high for one cycle per write, while no frame is in
// flight): cfg_sel selects a table (TBL_F1..TBL_E), the quantizer
// thresholds (TBL_QTH, address = threshold number, shared by all runs) or a
// register (TBL_REG, address REG_*); cfg_eq_mask selects the runs a table or
// register write goes to, so each run may have its own tables.
//
// Timing: te[k] of a sub-block leaves k*DEC_DELAY + (1 + window wait + 1 +
// (N_O+N_B+1)*S_P) cycles after its samples entered, where the window wait
// is the gap until the next sub-block (one cycle if the frame streams
// without bubbles; one extra cycle for the last sub-block). DEC_DELAY must
// cover the equalizer latency, the frame length and the decoder latency.
//
// The chain of equalizer runs, the channel pipeline and the unrolled
// structure follow the paper; the request/feedback handshake, the fixed
// DEC_DELAY, the register map and the threshold quantizer are this design's
// choices.
module turbo_eq_top
  import ib_eq_pkg::*;
#(
  parameter int unsigned W_R       = ib_eq_pkg::DEF_W_R,
  parameter int unsigned W_D       = ib_eq_pkg::DEF_W_D,
  parameter int unsigned W_A       = ib_eq_pkg::DEF_W_A,
  parameter int unsigned W_E       = ib_eq_pkg::DEF_W_E,
  parameter int unsigned N_B       = ib_eq_pkg::DEF_N_B,
  parameter int unsigned N_O       = ib_eq_pkg::DEF_N_O,
  parameter int unsigned S_P       = ib_eq_pkg::DEF_S_P,
  parameter int unsigned N_EQ      = ib_eq_pkg::DEF_N_EQ,
  parameter int unsigned DEC_DELAY = 256,
  parameter int unsigned W_IN      = 10,
  parameter bit          SYMMETRIC = 1'b0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // configuration
  input  logic                   cfg_we,
  input  logic [N_EQ-1:0]        cfg_eq_mask,
  input  tbl_sel_e               cfg_sel,
  input  logic [CFG_AW-1:0]      cfg_addr,
  input  logic [CFG_DW-1:0]      cfg_data,
  // received samples, one sub-block per valid cycle
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic signed [W_IN-1:0] in_r      [N_B],
  // equalizer output messages, towards the decoders
  output logic [N_EQ-1:0]        te_valid,
  output logic [N_EQ-1:0]        te_first,
  output logic [N_EQ-1:0]        te_last,
  output logic [W_E-1:0]         te        [N_EQ][N_B],
  // decoder feedback, run k takes fb_td[k-1] when fb_req[k] is high
  output logic [N_EQ-1:1]        fb_req,
  input  logic [W_D-1:0]         fb_td     [N_EQ-1][N_B]
);

  localparam int unsigned N_W = N_B + 2*N_O;
  localparam int unsigned N_T = 2**W_R - 1;
  localparam int unsigned W_CH = 3 + N_B*W_R;   // valid, first, last, t_r

  // ---------------- configuration registers --------------------------------
  logic signed [W_IN-1:0] thr        [N_T];
  logic [W_A-1:0]         alpha_init [N_EQ];
  logic [W_A-1:0]         beta_init  [N_EQ];
  logic [W_R-1:0]         pad_r      [N_EQ];
  logic [W_D-1:0]         pad_d      [N_EQ];
  logic [W_D-1:0]         prior_d    [N_EQ];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_T; k++) thr[k] <= '0;
      for (int e = 0; e < N_EQ; e++) begin
        alpha_init[e] <= '0;
        beta_init[e]  <= '0;
        pad_r[e]      <= '0;
        pad_d[e]      <= '0;
        prior_d[e]    <= '0;
      end
    end else if (cfg_we) begin
      if (cfg_sel == TBL_QTH && cfg_addr < CFG_AW'(N_T))
        thr[cfg_addr[W_R-1:0]] <= cfg_data[W_IN-1:0];
      if (cfg_sel == TBL_REG) begin
        for (int e = 0; e < N_EQ; e++) begin
          if (cfg_eq_mask[e]) begin
            case (cfg_addr)
              REG_ALPHA_INIT: alpha_init[e] <= cfg_data[W_A-1:0];
              REG_BETA_INIT:  beta_init[e]  <= cfg_data[W_A-1:0];
              REG_PAD_R:      pad_r[e]      <= cfg_data[W_R-1:0];
              REG_PAD_D:      pad_d[e]      <= cfg_data[W_D-1:0];
              REG_PRIOR_D:    prior_d[e]    <= cfg_data[W_D-1:0];
              default: ;
            endcase
          end
        end
      end
    end
  end

  // ---------------- quantizer --------------------------------------------
  logic [W_R-1:0] q_tr [N_B];
  logic           q_valid, q_first, q_last;

  ib_quantizer #(.N(N_B), .W_IN(W_IN), .W_R(W_R)) u_quant (
    .clk (clk),
    .r   (in_r),
    .thr (thr),
    .t_r (q_tr)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {q_valid, q_first, q_last} <= '0;
    else        {q_valid, q_first, q_last} <= {in_valid, in_valid && in_first, in_valid && in_last};
  end

  // ---------------- equalizer runs ---------------------------------------
  logic [W_CH-1:0] ch [N_EQ];    // channel stream entering run k

  for (genvar i = 0; i < N_B; i++) begin : g_pack
    assign ch[0][3+i*W_R +: W_R] = q_tr[i];
  end
  assign ch[0][2:0] = {q_valid, q_first, q_last};

  for (genvar k = 0; k < N_EQ; k++) begin : g_run
    logic           c_valid, c_first, c_last;
    logic [W_D-1:0] td   [N_B];
    logic [W_R+W_D-1:0] blk [N_B];
    logic [W_R+W_D-1:0] win [N_W];
    logic [W_R-1:0] w_tr [N_W];
    logic [W_D-1:0] w_td [N_W];
    logic           w_valid, w_first, w_last;
    lut_wr_t        wr;

    if (k > 0) begin : g_pipe
      // channel pipeline: carries the quantized sub-blocks past decoder k-1
      delay_line #(.W(W_CH), .DEPTH(DEC_DELAY), .RESET(1'b1)) u_chan (
        .clk(clk), .rst_n(rst_n), .d(ch[k-1]), .q(ch[k]));
      assign fb_req[k] = ch[k][2];
      for (genvar i = 0; i < N_B; i++) begin : g_td
        assign td[i] = fb_td[k-1][i];
      end
    end else begin : g_prior
      for (genvar i = 0; i < N_B; i++) begin : g_td
        assign td[i] = prior_d[0];
      end
    end

    assign {c_valid, c_first, c_last} = ch[k][2:0];
    for (genvar i = 0; i < N_B; i++) begin : g_blk
      assign blk[i] = {ch[k][3+i*W_R +: W_R], td[i]};
    end

    window_builder #(.N_B(N_B), .N_O(N_O), .W_MSG(W_R+W_D)) u_win (
      .clk       (clk),
      .rst_n     (rst_n),
      .pad       ({pad_r[k], pad_d[k]}),
      .in_valid  (c_valid),
      .in_first  (c_first),
      .in_last   (c_last),
      .in_blk    (blk),
      .out_valid (w_valid),
      .out_first (w_first),
      .out_last  (w_last),
      .out_win   (win)
    );

    for (genvar p = 0; p < N_W; p++) begin : g_split
      assign w_tr[p] = win[p][W_R+W_D-1:W_D];
      assign w_td[p] = win[p][W_D-1:0];
    end

    always_comb begin
      wr      = '0;
      wr.we   = cfg_we && cfg_eq_mask[k] && (cfg_sel inside {TBL_F1, TBL_F2, TBL_B1, TBL_B2, TBL_E});
      wr.sel  = cfg_sel;
      wr.addr = cfg_addr;
      wr.data = cfg_data;
    end

    x_equalizer #(.W_A(W_A), .W_R(W_R), .W_D(W_D), .W_E(W_E), .N_B(N_B),
                  .N_O(N_O), .S_P(S_P), .SYMMETRIC(SYMMETRIC)) u_eq (
      .clk        (clk),
      .rst_n      (rst_n),
      .wr         (wr),
      .alpha_init (alpha_init[k]),
      .beta_init  (beta_init[k]),
      .in_valid   (w_valid),
      .in_first   (w_first),
      .in_last    (w_last),
      .in_tr      (w_tr),
      .in_td      (w_td),
      .out_valid  (te_valid[k]),
      .out_first  (te_first[k]),
      .out_last   (te_last[k]),
      .out_te     (te[k])
    );
  end

  initial begin
    assert (N_EQ >= 2) else $error("turbo_eq_top: N_EQ must be at least 2");
  end

endmodule
