// tb_ib_quantizer: self-checking test of the threshold quantizer.
//
// Uses ascending, unevenly spaced thresholds and random samples across the
// whole signed range, plus samples equal to each threshold. The expected
// message is the number of thresholds not above the sample, one cycle later.
module tb_ib_quantizer;
  localparam int unsigned N = 4, W_IN = 8, W_R = 3;
  localparam int unsigned N_T = 2**W_R - 1;

  logic clk = 1'b0;
  logic signed [W_IN-1:0] r [N];
  logic signed [W_IN-1:0] thr [N_T];
  logic [W_R-1:0] t_r [N];
  int checks = 0, failures = 0;
  int exp_prev [N];

  always #5 clk = ~clk;

  ib_quantizer #(.N(N), .W_IN(W_IN), .W_R(W_R)) dut (.clk(clk), .r(r), .thr(thr), .t_r(t_r));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int quant(input int x);
    int c = 0;
    for (int k = 0; k < int'(N_T); k++) if (x >= int'(thr[k])) c++;
    return c;
  endfunction

  initial begin
    // thresholds -90, -50, -20, 0, 15, 40, 100
    thr[0] = -90; thr[1] = -50; thr[2] = -20; thr[3] = 0;
    thr[4] = 15;  thr[5] = 40;  thr[6] = 100;
    for (int n = 0; n < int'(N); n++) r[n] = '0;
    @(negedge clk);
    for (int v = 0; v < 500; v++) begin
      for (int n = 0; n < int'(N); n++) begin
        if (v < int'(N_T)) r[n] = thr[v] - W_IN'(n % 2);   // at and just below
        else               r[n] = W_IN'($urandom);
        exp_prev[n] = quant(int'(r[n]));
      end
      @(negedge clk);
      for (int n = 0; n < int'(N); n++) begin
        checks++;
        if (int'(t_r[n]) != exp_prev[n]) begin
          failures++;
          $display("v=%0d n=%0d got %0d exp %0d", v, n, t_r[n], exp_prev[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
