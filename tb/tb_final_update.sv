// tb_final_update: self-checking test of the reduced final update.
//
// Loads the final table with hashed test contents, applies a random
// (z_alpha, t_beta') every cycle and expects t_e = E(z_alpha, t_beta')
// exactly S_P cycles later.
module tb_final_update;
  import ib_eq_pkg::*;
  import tb_ib_pkg::*;

  localparam int unsigned W_A = 4, W_E = 3, S_P = 3;
  localparam int unsigned N_VEC = 400;

  logic clk = 1'b0;
  lut_wr_t wr;
  logic [W_A-1:0] z_a, t_b;
  logic [W_E-1:0] t_e;
  int checks = 0, failures = 0;
  int unsigned exp_e [$];

  always #5 clk = ~clk;

  final_update #(.W_A(W_A), .W_E(W_E), .S_P(S_P)) dut (
    .clk(clk), .wr(wr), .z_a(z_a), .t_b(t_b), .t_e(t_e));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr = '0; z_a = '0; t_b = '0;
    for (int a = 0; a < 2**(2*W_A); a++) begin
      @(negedge clk);
      wr = '0;
      wr.we = 1'b1; wr.sel = TBL_E; wr.addr = CFG_AW'(a);
      wr.data = CFG_DW'(tbl_val(TBL_E, 0, a, W_E));
    end
    @(negedge clk);
    wr = '0;
    for (int n = 0; n < int'(N_VEC + S_P); n++) begin
      @(negedge clk);
      if (n >= int'(S_P)) begin
        int unsigned ee;
        ee = exp_e.pop_front();
        checks++;
        if (t_e != W_E'(ee)) begin
          failures++;
          $display("vec %0d: got %0d exp %0d", n - S_P, t_e, ee);
        end
      end
      z_a = W_A'($urandom);
      t_b = W_A'($urandom);
      exp_e.push_back(lk(TBL_E, 0, z_a, t_b, W_A, W_E));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
