// turbo_tb_env: stimulus, decoder model and checker for turbo_eq_top.
//
// Connected to a turbo_eq_top instance by its testbench, with the same
// sizes as parameters. It
//   1. writes the quantizer thresholds, the start/padding registers and a
//      different set of hashed test tables into every equalizer run
//      (selected through the run mask);
//   2. generates frames of BPSK symbols, passes them through the magnetic
//      recording (EPR4) channel h = [.5,.5,-.5,-.5] (CHANNEL=0) or the
//      12-tap faster-than-Nyquist channel (CHANNEL=1) with approximately
//      Gaussian noise, scales them to W_IN-bit samples and streams them in,
//      one sub-block per cycle, with random bubbles, back-to-back frames and
//      one-sub-block frames;
//   3. plays the decoders: every output sub-block of run k is mapped to
//      feedback messages td = (3*te + 1) mod 2^W_D, queued, and presented on
//      fb_td[k] in the cycle the equalizer raises fb_req[k+1];
//   4. recomputes every run with its own sequential reference (quantizer,
//      windowing with padding, forward/backward/final loops) and compares
//      all output messages, frame flags and output cycles.
// Each mechanism (frame edge padding, bubbles, back-to-back frames, single
// sub-block frames, feedback hand-over) is counted and a failure is counted
// for one that never happened (single sub-block frames only when frame
// lengths are random, FIX_BLK=0).
module turbo_tb_env
  import ib_eq_pkg::*;
  import tb_ib_pkg::*;
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
  parameter int unsigned N_FRAMES  = 6,
  parameter int unsigned MAX_BLK   = 6,
  parameter int unsigned CHANNEL   = 0,        // 0: EPR4, 1: faster-than-Nyquist
  parameter int unsigned FIX_BLK   = 0,        // >0: every frame has FIX_BLK sub-blocks
  parameter longint      WATCHDOG  = 2000000
) (
  output logic                   clk,
  output logic                   rst_n,
  output logic                   cfg_we,
  output logic [N_EQ-1:0]        cfg_eq_mask,
  output tbl_sel_e               cfg_sel,
  output logic [CFG_AW-1:0]      cfg_addr,
  output logic [CFG_DW-1:0]      cfg_data,
  output logic                   in_valid,
  output logic                   in_first,
  output logic                   in_last,
  output logic signed [W_IN-1:0] in_r      [N_B],
  input  logic [N_EQ-1:0]        te_valid,
  input  logic [N_EQ-1:0]        te_first,
  input  logic [N_EQ-1:0]        te_last,
  input  logic [W_E-1:0]         te        [N_EQ][N_B],
  input  logic [N_EQ-1:1]        fb_req,
  output logic [W_D-1:0]         fb_td     [N_EQ-1][N_B]
);

  localparam int unsigned N_W = N_B + 2*N_O;
  localparam int unsigned N_T = 2**W_R - 1;
  localparam int unsigned LAT = (N_O + N_B + 1) * S_P;
  localparam int          SCALE = 2**(W_IN-4);       // sample units per 1.0
  localparam int unsigned PAD_R = 1, PAD_D = 1, PRIOR_D = 2;
  // faster-than-Nyquist impulse response, in units of 1e-4
  localparam int FTN_H [12] = '{8907, 4088, -1919, 510, -40, 45, -76, 39, -14, 19, -20, 14};

  int checks = 0, failures = 0;
  longint cyc = 0;
  int n_edge_win = 0, n_bubbles = 0, n_b2b = 0, n_single = 0, n_fb = 0, n_cfg = 0;
  int thr [N_T];

  typedef struct {
    int unsigned te [N_B];
    bit first, last;
    longint t_out;
  } exp_t;
  exp_t exp_q [N_EQ][$];
  typedef struct { int unsigned td [N_B]; } fb_t;
  fb_t fb_q [N_EQ][$];

  initial clk = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned alpha0(int k); return (3 + k) % (2**W_A); endfunction
  function automatic int unsigned beta0(int k);  return (7 + 2*k) % (2**W_A); endfunction
  function automatic int unsigned dec_map(int unsigned t); return (3*t + 1) % (2**W_D); endfunction

  // ---------------- decoder model ----------------------------------------
  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < int'(N_EQ) - 1; k++) begin
        if (te_valid[k]) begin
          fb_t f;
          for (int i = 0; i < int'(N_B); i++) f.td[i] = dec_map(te[k][i]);
          fb_q[k].push_back(f);
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int k = 1; k < int'(N_EQ); k++) begin
      if (rst_n && fb_req[k]) begin
        checks++;
        if (fb_q[k-1].size() == 0) begin
          failures++;
          $display("feedback for run %0d requested before decoder output", k);
        end else begin
          fb_t f;
          f = fb_q[k-1].pop_front();
          for (int i = 0; i < int'(N_B); i++) fb_td[k-1][i] = W_D'(f.td[i]);
          n_fb++;
        end
      end
    end
  end

  // ---------------- output checker ----------------------------------------
  always @(posedge clk) begin
    if (rst_n) begin
      for (int k = 0; k < int'(N_EQ); k++) begin
        if (te_valid[k]) begin
          exp_t e;
          checks++;
          if (exp_q[k].size() == 0) begin
            failures++; $display("run %0d: unexpected output", k);
          end else begin
            e = exp_q[k].pop_front();
            if (cyc != e.t_out) begin
              failures++; $display("run %0d: output at %0d exp %0d", k, cyc, e.t_out);
            end
            if (te_first[k] != e.first || te_last[k] != e.last) begin
              failures++; $display("run %0d: flags wrong", k);
            end
            for (int i = 0; i < int'(N_B); i++) if (te[k][i] != W_E'(e.te[i])) begin
              failures++;
              $display("run %0d: msg %0d got %0d exp %0d", k, i, te[k][i], e.te[i]);
            end
          end
        end
      end
    end
  end

  // ---------------- stimulus ----------------------------------------------
  task automatic cfg_write(input tbl_sel_e sel, input int k_mask, input int addr, input int data);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = sel; cfg_eq_mask = N_EQ'(k_mask);
    cfg_addr = CFG_AW'(addr); cfg_data = CFG_DW'(data);
    n_cfg++;
  endtask

  task automatic load_tables(input int k);
    int unsigned aw [5], ow [5];
    tbl_sel_e    sl [5];
    sl = '{TBL_F1, TBL_F2, TBL_B1, TBL_B2, TBL_E};
    aw = '{W_A+W_R, W_A+W_D, W_A+W_D, W_A+W_R, 2*W_A};
    ow = '{W_A, W_A, W_A, W_A, W_E};
    for (int s = 0; s < 5; s++)
      for (int a = 0; a < 2**aw[s]; a++)
        cfg_write(sl[s], 1 << k, a, tbl_val(sl[s], k, a, ow[s]));
  endtask

  function automatic int gauss_noise(input int sigma);
    // sum of 12 uniforms in [-0.5,0.5) has unit variance
    int acc = 0;
    for (int n = 0; n < 12; n++) acc += int'($urandom % 1024) - 512;
    return (acc * sigma) / 1024;
  endfunction

  function automatic int quant(input int x);
    int c = 0;
    for (int k = 0; k < int'(N_T); k++) if (x >= thr[k]) c++;
    return c;
  endfunction

  // Reference of one frame for all runs; t_in[j] = cycle count before the
  // edge that samples sub-block j.
  task automatic expect_frame(input int nblk, input int unsigned tr_f[], input longint t_in[]);
    int unsigned td_f [];
    int nsym;
    nsym = nblk * int'(N_B);
    td_f = new[nsym];
    for (int s = 0; s < nsym; s++) td_f[s] = PRIOR_D;
    for (int k = 0; k < int'(N_EQ); k++) begin
      int unsigned next_td [];
      next_td = new[nsym];
      for (int j = 0; j < nblk; j++) begin
        int unsigned tr [], td [], te [];
        exp_t e;
        tr = new[N_W];
        td = new[N_W];
        for (int p = 0; p < int'(N_W); p++) begin
          int s;
          s = j * int'(N_B) - int'(N_O) + p;
          if (s < 0 || s >= nsym) begin tr[p] = PAD_R; td[p] = PAD_D; end
          else begin tr[p] = tr_f[s]; td[p] = td_f[s]; end
        end
        ref_window(k, W_A, W_R, W_D, W_E, N_B, N_O, alpha0(k), beta0(k), tr, td, te);
        for (int i = 0; i < int'(N_B); i++) begin
          int idx;
          int unsigned v;
          e.te[i] = te[i];
          idx = j * int'(N_B) + i;
          v = dec_map(te[i]);
          next_td[idx] = v;
        end
        e.first = (j == 0);
        e.last  = (j == nblk - 1);
        if (j < nblk - 1) e.t_out = t_in[j+1] + 2 + LAT;
        else              e.t_out = t_in[j] + 3 + LAT;
        e.t_out += longint'(k) * longint'(DEC_DELAY);
        exp_q[k].push_back(e);
        if (k == 0 && (e.first || e.last)) n_edge_win++;
      end
      td_f = next_td;
    end
  endtask

  // The whole frame (symbols, samples and bubble pattern) is generated and
  // its expected outputs are queued before it is driven, since long frames
  // produce outputs while they are still being sent.
  task automatic send_frame(input int nblk, input bit gaps);
    int unsigned tr_f [];
    longint t_in [];
    int d [], r_f [];
    bit gap [];
    int nsym, ng;
    longint t0;
    nsym = nblk * int'(N_B);
    tr_f = new[nsym];
    r_f  = new[nsym];
    t_in = new[nblk];
    gap  = new[nblk];
    d    = new[nsym];
    for (int s = 0; s < nsym; s++) d[s] = ($urandom % 2 == 1) ? 1 : -1;
    for (int s = 0; s < nsym; s++) begin
      int x2, r, lim;
      if (CHANNEL == 0) begin
        // 2*x = d_k + d_{k-1} - d_{k-2} - d_{k-3}, symbols before the frame are +1
        x2 = d[s] + ((s >= 1) ? d[s-1] : 1) - ((s >= 2) ? d[s-2] : 1) - ((s >= 3) ? d[s-3] : 1);
        r  = (x2 * SCALE) / 2 + gauss_noise(SCALE / 2);
      end else begin
        x2 = 0;
        for (int l = 0; l < 12; l++) x2 += FTN_H[l] * ((s >= l) ? d[s-l] : 1);
        r  = (x2 * SCALE) / 10000 + gauss_noise(SCALE / 2);
      end
      lim = 2**(W_IN-1);
      if (r >= lim) r = lim - 1;
      if (r < -lim) r = -lim;
      r_f[s]  = r;
      tr_f[s] = quant(r);
    end
    t0 = cyc;
    ng = 0;
    for (int j = 0; j < nblk; j++) begin
      gap[j] = gaps && ($urandom % 3 == 0);
      if (gap[j]) ng++;
      t_in[j] = t0 + longint'(j + ng);
    end
    if (nblk == 1) n_single++;
    expect_frame(nblk, tr_f, t_in);
    for (int j = 0; j < nblk; j++) begin
      if (gap[j]) begin
        in_valid = 1'b0;
        @(negedge clk);
        n_bubbles++;
      end
      for (int i = 0; i < int'(N_B); i++) begin
        int s;
        s = j * int'(N_B) + i;
        in_r[i] = W_IN'(r_f[s]);
      end
      in_valid = 1'b1;
      in_first = (j == 0);
      in_last  = (j == nblk - 1);
      checks++;
      if (cyc != t_in[j]) begin failures++; $display("stimulus timing off"); end
      @(negedge clk);
    end
    in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0; cfg_we = 1'b0; cfg_eq_mask = '0; cfg_sel = TBL_F1;
    cfg_addr = '0; cfg_data = '0;
    in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
    for (int i = 0; i < int'(N_B); i++) in_r[i] = '0;
    for (int k = 0; k < int'(N_EQ) - 1; k++)
      for (int i = 0; i < int'(N_B); i++) fb_td[k][i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // quantizer: equally spaced thresholds over +-2 (channel output range)
    for (int k = 0; k < int'(N_T); k++) begin
      thr[k] = ((2*k + 2 - int'(N_T) - 1) * 2 * SCALE) / int'(N_T + 1);
      cfg_write(TBL_QTH, 0, k, thr[k]);
    end
    for (int k = 0; k < int'(N_EQ); k++) begin
      cfg_write(TBL_REG, 1 << k, REG_ALPHA_INIT, alpha0(k));
      cfg_write(TBL_REG, 1 << k, REG_BETA_INIT, beta0(k));
      cfg_write(TBL_REG, 1 << k, REG_PAD_R, PAD_R);
      cfg_write(TBL_REG, 1 << k, REG_PAD_D, PAD_D);
      cfg_write(TBL_REG, 1 << k, REG_PRIOR_D, PRIOR_D);
      load_tables(k);
    end
    @(negedge clk);
    cfg_we = 1'b0;
    $display("configuration done after %0d writes", n_cfg);
    repeat (2) @(negedge clk);
    for (int f = 0; f < int'(N_FRAMES); f++) begin
      int nblk;
      if (FIX_BLK > 0) nblk = int'(FIX_BLK);
      else nblk = (f == 1) ? 1 : 2 + int'($urandom % (MAX_BLK - 1));
      send_frame(nblk, f % 2 == 0);
      if (f % 3 != 2 && f != int'(N_FRAMES) - 1) n_b2b++;
      else repeat (3) @(negedge clk);
    end
    repeat (int'(N_EQ) * DEC_DELAY + LAT + 10) @(negedge clk);
    for (int k = 0; k < int'(N_EQ); k++) begin
      checks++;
      if (exp_q[k].size() != 0) begin failures++; $display("run %0d: %0d outputs missing", k, exp_q[k].size()); end
    end
    $display("edge_windows=%0d bubbles=%0d back_to_back=%0d single_block_frames=%0d feedback_handovers=%0d cfg_writes=%0d",
             n_edge_win, n_bubbles, n_b2b, n_single, n_fb, n_cfg);
    checks++; if (n_edge_win == 0) begin failures++; $display("no frame edge"); end
    checks++; if (n_bubbles == 0)  begin failures++; $display("no bubble"); end
    checks++; if (n_b2b == 0)      begin failures++; $display("no back-to-back frames"); end
    checks++; if (n_single == 0 && FIX_BLK == 0) begin failures++; $display("no single sub-block frame"); end
    checks++; if (n_fb == 0)       begin failures++; $display("no feedback hand-over"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
