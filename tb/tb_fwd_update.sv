// tb_fwd_update: self-checking test of the reduced forward update.
//
// Loads both forward tables with hashed test contents, then applies a new
// random (t_alpha, t_r, t_d) every cycle. Each result must equal
// z = F1(t_alpha, t_r), t_alpha' = F2(z, t_d) and must appear exactly S_P
// cycles after its inputs.
module tb_fwd_update;
  import ib_eq_pkg::*;
  import tb_ib_pkg::*;

  localparam int unsigned W_A = 4, W_R = 3, W_D = 2, S_P = 3;
  localparam int unsigned N_VEC = 400;

  logic clk = 1'b0;
  lut_wr_t wr;
  logic [W_A-1:0] t_a, z_a, t_a_next;
  logic [W_R-1:0] t_r;
  logic [W_D-1:0] t_d;
  int checks = 0, failures = 0;
  int unsigned exp_z [$], exp_a [$];

  always #5 clk = ~clk;

  fwd_update #(.W_A(W_A), .W_R(W_R), .W_D(W_D), .S_P(S_P)) dut (
    .clk(clk), .wr(wr), .t_a(t_a), .t_r(t_r), .t_d(t_d), .z_a(z_a), .t_a_next(t_a_next));

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
    wr = '0; t_a = '0; t_r = '0; t_d = '0;
    load(TBL_F1, W_A + W_R);
    load(TBL_F2, W_A + W_D);
    for (int n = 0; n < int'(N_VEC + S_P); n++) begin
      @(negedge clk);
      // outputs of the inputs applied S_P cycles ago
      if (n >= int'(S_P)) begin
        int unsigned ez, ea;
        ez = exp_z.pop_front();
        ea = exp_a.pop_front();
        checks++;
        if (z_a != W_A'(ez) || t_a_next != W_A'(ea)) begin
          failures++;
          $display("vec %0d: got z=%0d a=%0d exp z=%0d a=%0d", n - S_P, z_a, t_a_next, ez, ea);
        end
      end
      t_a = W_A'($urandom);
      t_r = W_R'($urandom);
      t_d = W_D'($urandom);
      begin
        int unsigned z;
        z = lk(TBL_F1, 0, t_a, t_r, W_R, W_A);
        exp_z.push_back(z);
        exp_a.push_back(lk(TBL_F2, 0, z, t_d, W_D, W_A));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
