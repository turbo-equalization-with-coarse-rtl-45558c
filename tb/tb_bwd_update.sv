// tb_bwd_update: self-checking test of the reduced backward update.
//
// Loads both backward tables with hashed test contents, applies a new
// random (t_beta', t_r, t_d) every cycle and expects
// t_beta = B2(B1(t_beta', t_d), t_r) exactly S_P cycles later.
module tb_bwd_update;
  import ib_eq_pkg::*;
  import tb_ib_pkg::*;

  localparam int unsigned W_A = 4, W_R = 3, W_D = 2, S_P = 2;
  localparam int unsigned N_VEC = 400;

  logic clk = 1'b0;
  lut_wr_t wr;
  logic [W_A-1:0] t_b, t_b_next;
  logic [W_R-1:0] t_r;
  logic [W_D-1:0] t_d;
  int checks = 0, failures = 0;
  int unsigned exp_b [$];

  always #5 clk = ~clk;

  bwd_update #(.W_A(W_A), .W_R(W_R), .W_D(W_D), .S_P(S_P)) dut (
    .clk(clk), .wr(wr), .t_b(t_b), .t_r(t_r), .t_d(t_d), .t_b_next(t_b_next));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input tbl_sel_e sel, input int unsigned aw);
    for (int a = 0; a < 2**aw; a++) begin
      @(negedge clk);
      wr = '0;
      wr.we = 1'b1; wr.sel = sel; wr.addr = CFG_AW'(a);
      wr.data = CFG_DW'(tbl_val(sel, 0, a, W_A));
    end
    @(negedge clk);
    wr = '0;
  endtask

  initial begin
    wr = '0; t_b = '0; t_r = '0; t_d = '0;
    load(TBL_B1, W_A + W_D);
    load(TBL_B2, W_A + W_R);
    for (int n = 0; n < int'(N_VEC + S_P); n++) begin
      @(negedge clk);
      if (n >= int'(S_P)) begin
        int unsigned eb;
        eb = exp_b.pop_front();
        checks++;
        if (t_b_next != W_A'(eb)) begin
          failures++;
          $display("vec %0d: got %0d exp %0d", n - S_P, t_b_next, eb);
        end
      end
      t_b = W_A'($urandom);
      t_r = W_R'($urandom);
      t_d = W_D'($urandom);
      exp_b.push_back(lk(TBL_B2, 0, lk(TBL_B1, 0, t_b, t_d, W_D, W_A), t_r, W_R, W_A));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
