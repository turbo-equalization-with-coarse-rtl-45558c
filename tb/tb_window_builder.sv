// tb_window_builder: self-checking test of the sub-block windowing.
//
// Sends several frames of random length (1 to 5 sub-blocks) with random
// bubbles, including a frame that starts in the cycle right after the
// previous frame's last sub-block. The expected windows are cut from a copy
// of each frame, padded with the pad message beyond its edges, and compared
// in order, together with the first/last flags and the emission cycle.
module tb_window_builder;
  localparam int unsigned N_B = 4, N_O = 2, W_MSG = 6;
  localparam int unsigned N_W = N_B + 2*N_O;
  localparam logic [W_MSG-1:0] PAD = 6'h2A;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_first, in_last, out_valid, out_first, out_last;
  logic [W_MSG-1:0] in_blk [N_B];
  logic [W_MSG-1:0] out_win [N_W];
  int checks = 0, failures = 0;
  int n_frames = 0, n_bubbles = 0, n_b2b = 0;

  typedef struct {
    logic [W_MSG-1:0] win [N_W];
    bit first, last;
  } win_t;
  win_t exp_q [$];

  always #5 clk = ~clk;

  window_builder #(.N_B(N_B), .N_O(N_O), .W_MSG(W_MSG)) dut (
    .clk(clk), .rst_n(rst_n), .pad(PAD),
    .in_valid(in_valid), .in_first(in_first), .in_last(in_last), .in_blk(in_blk),
    .out_valid(out_valid), .out_first(out_first), .out_last(out_last), .out_win(out_win));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      win_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("unexpected window");
      end else begin
        e = exp_q.pop_front();
        if (out_first != e.first || out_last != e.last) begin
          failures++;
          $display("flags got %0b%0b exp %0b%0b", out_first, out_last, e.first, e.last);
        end
        for (int p = 0; p < int'(N_W); p++) if (out_win[p] != e.win[p]) begin
          failures++;
          $display("win pos %0d got %0h exp %0h", p, out_win[p], e.win[p]);
          break;
        end
      end
    end
  end

  task automatic send_frame(input int nblk, input bit gaps);
    logic [W_MSG-1:0] sym [5*N_B];
    for (int k = 0; k < nblk * int'(N_B); k++) sym[k] = W_MSG'($urandom);
    for (int j = 0; j < nblk; j++) begin
      win_t e;
      for (int p = 0; p < int'(N_W); p++) begin
        int s;
        s = j * int'(N_B) - int'(N_O) + p;
        if (s < 0 || s >= nblk * int'(N_B)) e.win[p] = PAD;
        else e.win[p] = sym[s];
      end
      e.first = (j == 0);
      e.last  = (j == nblk - 1);
      exp_q.push_back(e);
    end
    for (int j = 0; j < nblk; j++) begin
      if (gaps && ($urandom % 3 == 0)) begin
        in_valid = 1'b0;
        @(negedge clk);
        n_bubbles++;
      end
      in_valid = 1'b1;
      in_first = (j == 0);
      in_last  = (j == nblk - 1);
      for (int i = 0; i < int'(N_B); i++) in_blk[i] = sym[j*int'(N_B) + i];
      @(negedge clk);
    end
    in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
    n_frames++;
  endtask

  initial begin
    in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
    for (int i = 0; i < int'(N_B); i++) in_blk[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int f = 0; f < 12; f++) begin
      send_frame(1 + ($urandom % 5), f % 2 == 1);
      if (f % 3 != 2) n_b2b++;                 // next frame follows at once
      else repeat (2) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d windows missing", exp_q.size());
    end
    checks++;
    if (n_bubbles == 0 || n_b2b == 0) begin failures++; $display("bubble/back-to-back not exercised"); end
    $display("frames=%0d bubbles=%0d back_to_back=%0d", n_frames, n_bubbles, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
