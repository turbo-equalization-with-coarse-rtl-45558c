// tb_x_equalizer_sym: self-checking test of one pipelined equalizer run
// built with symmetric half tables (SYMMETRIC=1).
//
// Only half of each table is loaded; the other half must follow from the
// symmetry LUT(y) = ~LUT'(~y[w-1:1]) for y[0]=1.
// Loads half of all five tables with hashed test contents and streams random
// windows of channel and feedback messages, one per cycle with random
// bubbles. Each window's N_B output messages are compared with the
// sequential reference (forward loop, backward loop, final lookups), and
// each must leave exactly (N_O+N_B+1)*S_P cycles after it entered, with its
// first/last flags.
module tb_x_equalizer_sym;
  import ib_eq_pkg::*;
  import tb_ib_pkg::*;

  localparam int unsigned W_A = 4, W_R = 3, W_D = 2, W_E = 3;
  localparam int unsigned N_B = 4, N_O = 2, S_P = 2;
  localparam int unsigned N_W = N_B + 2*N_O;
  localparam int unsigned LAT = (N_O + N_B + 1) * S_P;
  localparam int unsigned RUN = 1;
  localparam int unsigned A0 = 5, B0 = 9;
  localparam int unsigned N_WIN = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  lut_wr_t wr;
  logic in_valid, in_first, in_last, out_valid, out_first, out_last;
  logic [W_R-1:0] in_tr [N_W];
  logic [W_D-1:0] in_td [N_W];
  logic [W_E-1:0] out_te [N_B];
  int checks = 0, failures = 0, n_bubbles = 0;
  longint cyc = 0;

  typedef struct {
    int unsigned te [N_B];
    bit first, last;
    longint t_in;
  } exp_t;
  exp_t exp_q [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  x_equalizer #(.W_A(W_A), .W_R(W_R), .W_D(W_D), .W_E(W_E), .N_B(N_B), .N_O(N_O),
                .S_P(S_P), .SYMMETRIC(1'b1)) dut (
    .clk(clk), .rst_n(rst_n), .wr(wr), .alpha_init(W_A'(A0)), .beta_init(W_A'(B0)),
    .in_valid(in_valid), .in_first(in_first), .in_last(in_last), .in_tr(in_tr), .in_td(in_td),
    .out_valid(out_valid), .out_first(out_first), .out_last(out_last), .out_te(out_te));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        e = exp_q.pop_front();
        if (cyc - e.t_in != longint'(LAT)) begin
          failures++; $display("latency %0d exp %0d", cyc - e.t_in, LAT);
        end
        if (out_first != e.first || out_last != e.last) begin
          failures++; $display("flags wrong");
        end
        for (int i = 0; i < int'(N_B); i++) if (out_te[i] != W_E'(e.te[i])) begin
          failures++;
          $display("win out %0d got %0d exp %0d", i, out_te[i], e.te[i]);
        end
      end
    end
  end

  task automatic load(input tbl_sel_e sel, input int unsigned aw, input int unsigned ow);
    for (int a = 0; a < 2**(aw-1); a++) begin
      @(negedge clk);
      wr = '0;
      wr.we = 1'b1; wr.sel = sel; wr.addr = CFG_AW'(a);
      wr.data = CFG_DW'(tbl_val(sel, RUN, a, ow));
    end
    @(negedge clk);
    wr = '0;
  endtask

  initial begin
    wr = '0; in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
    for (int p = 0; p < int'(N_W); p++) begin in_tr[p] = '0; in_td[p] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load(TBL_F1, W_A + W_R, W_A);
    load(TBL_F2, W_A + W_D, W_A);
    load(TBL_B1, W_A + W_D, W_A);
    load(TBL_B2, W_A + W_R, W_A);
    load(TBL_E,  2*W_A,     W_E);
    repeat (2) @(negedge clk);
    for (int n = 0; n < int'(N_WIN); n++) begin
      int unsigned tr [] , td [], te [];
      exp_t e;
      if ($urandom % 4 == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
        n_bubbles++;
      end
      tr = new[N_W];
      td = new[N_W];
      for (int p = 0; p < int'(N_W); p++) begin
        tr[p] = $urandom % (2**W_R);
        td[p] = $urandom % (2**W_D);
        in_tr[p] = W_R'(tr[p]);
        in_td[p] = W_D'(td[p]);
      end
      ref_window(RUN, W_A, W_R, W_D, W_E, N_B, N_O, A0, B0, tr, td, te, 1'b1);
      for (int i = 0; i < int'(N_B); i++) e.te[i] = te[i];
      e.first = (n % 5 == 0);
      e.last  = (n % 5 == 4);
      e.t_in  = cyc;            // edges counted before the sampling edge
      exp_q.push_back(e);
      in_valid = 1'b1;
      in_first = e.first;
      in_last  = e.last;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d windows missing", exp_q.size()); end
    checks++;
    if (n_bubbles == 0) begin failures++; $display("no bubble exercised"); end
    $display("bubbles=%0d", n_bubbles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
