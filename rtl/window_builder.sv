// window_builder: divides a frame into overlapping equalizer windows.
//
// A frame of P*N_B symbols arrives as P sub-blocks of N_B messages, one
// sub-block per valid cycle, marked by in_first on its first and in_last on
// its last sub-block. For each sub-block j the builder emits a window of
// N_O + N_B + N_O messages: the last N_O messages of sub-block j-1, the
// sub-block itself and the first N_O messages of sub-block j+1. The overlap
// lets each window's forward and backward recursions settle before they
// reach the sub-block. Beyond the frame edges the overlap is filled with
// the message pad. N_O <= N_B is required.
//
// Timing: window j is emitted (registered) in the cycle after sub-block j+1
// arrives, or, for the last sub-block of a frame, two cycles after it
// arrived. A first sub-block of the next frame may arrive in the cycle right
// after a last one. Bubbles (in_valid low) are allowed anywhere. out_first /
// out_last mark the windows of the first and last sub-block of a frame.
//
// The windowing follows the sub-block division of the paper; the emission
// rule, the padding and the frame flags are this design's choices.
module window_builder #(
  parameter int unsigned N_B   = ib_eq_pkg::DEF_N_B,
  parameter int unsigned N_O   = ib_eq_pkg::DEF_N_O,
  parameter int unsigned W_MSG = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [W_MSG-1:0] pad,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [W_MSG-1:0] in_blk  [N_B],
  output logic             out_valid,
  output logic             out_first,
  output logic             out_last,
  output logic [W_MSG-1:0] out_win [N_B+2*N_O]
);

  localparam int unsigned N_W = N_B + 2*N_O;

  // Held sub-block j, waiting for the head of j+1, and the tail of j-1.
  logic             held_valid, held_first, held_last;
  logic [W_MSG-1:0] held      [N_B];
  logic [W_MSG-1:0] prev_tail [N_O];

  logic emit, emit_padded;
  assign emit_padded = held_valid && held_last;
  assign emit        = emit_padded || (held_valid && in_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_valid <= 1'b0;
      held_first <= 1'b0;
      held_last  <= 1'b0;
      out_valid  <= 1'b0;
      out_first  <= 1'b0;
      out_last   <= 1'b0;
    end else begin
      out_valid <= emit;
      if (emit) begin
        out_first <= held_first;
        out_last  <= held_last;
      end
      if (in_valid) begin
        held_valid <= 1'b1;
        held_first <= in_first;
        held_last  <= in_last;
      end else if (emit) begin
        held_valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (emit) begin
      for (int i = 0; i < N_O; i++) out_win[i] <= prev_tail[i];
      for (int i = 0; i < N_B; i++) out_win[N_O+i] <= held[i];
      for (int i = 0; i < N_O; i++)
        out_win[N_O+N_B+i] <= emit_padded ? pad : in_blk[i];
    end
    if (in_valid) begin
      for (int i = 0; i < N_B; i++) held[i] <= in_blk[i];
      for (int i = 0; i < N_O; i++)
        prev_tail[i] <= (in_first || !held_valid) ? pad : held[N_B-N_O+i];
    end
  end

  // Protocol: after a last sub-block only a first one may follow; a first
  // one may only follow a completed frame.
  a_frame_order: assert property (@(posedge clk) disable iff (!rst_n)
                                   (in_valid && held_valid) |-> (held_last == in_first))
    else $error("window_builder: frame boundary violated");

  initial begin
    assert (N_O <= N_B) else $error("window_builder: N_O must not exceed N_B");
    assert (N_W == N_B + 2*N_O);
  end

endmodule
