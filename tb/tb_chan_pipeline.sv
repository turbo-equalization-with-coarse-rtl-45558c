// tb_chan_pipeline: self-checking test of the delay line used for the
// channel pipeline and all shift registers.
//
// A data line of depth 7 must return every random word exactly 7 cycles
// later; a reset line of depth 5 must read zero throughout reset and for
// its first 5 cycles afterwards, then follow its input 5 cycles late.
module tb_chan_pipeline;
  localparam int unsigned W = 12, D1 = 7, D2 = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0] d1, q1;
  logic [2:0]   d2, q2;
  logic [W-1:0] hist1 [$];
  logic [2:0]   hist2 [$];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  delay_line #(.W(W), .DEPTH(D1)) u_data (
    .clk(clk), .rst_n(1'b1), .d(d1), .q(q1));
  delay_line #(.W(3), .DEPTH(D2), .RESET(1'b1)) u_flag (
    .clk(clk), .rst_n(rst_n), .d(d2), .q(q2));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d1 = '0; d2 = 3'b111;
    repeat (3) @(negedge clk);
    checks++;
    if (q2 != 3'b000) begin failures++; $display("reset line not cleared"); end
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      d1 = W'($urandom);
      d2 = 3'($urandom);
      hist1.push_back(d1);
      hist2.push_back(d2);
      @(negedge clk);
      if (hist1.size() > D1) void'(hist1.pop_front());
      if (hist2.size() > D2) void'(hist2.pop_front());
      if (n >= int'(D1) - 1) begin
        checks++;
        if (q1 != hist1[0]) begin failures++; $display("n=%0d q1=%0h exp %0h", n, q1, hist1[0]); end
      end
      checks++;
      if (n < int'(D2) - 1) begin
        if (q2 != 3'b000) begin failures++; $display("n=%0d q2=%0d not cleared", n, q2); end
      end else if (q2 != hist2[0]) begin
        failures++; $display("n=%0d q2=%0d exp %0d", n, q2, hist2[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
