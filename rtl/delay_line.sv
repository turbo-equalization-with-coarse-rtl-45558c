// delay_line: a W-bit shift register of DEPTH stages.
//
// q is d delayed by DEPTH clock cycles; DEPTH=0 is a plain wire. It is the
// building block of every shift register in the equalizer: the channel and
// feedback registers that feed each update unit at its turn, the metric
// registers that carry forward and backward messages to the final updates,
// the output alignment registers, and the pipeline that carries the
// quantized channel sub-blocks from one equalizer run to the next while the
// decoder works.
//
// With RESET=1 all stages clear to zero on rst_n low (used for valid flags);
// with RESET=0 the data stages are not reset, as their content is only read
// when a valid flag travelling alongside says so.
module delay_line #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4,
  parameter bit          RESET = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_sr
    logic [W-1:0] sr [DEPTH];
    if (RESET) begin : g_rst
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < DEPTH; k++) sr[k] <= '0;
        end else begin
          sr[0] <= d;
          for (int k = 1; k < DEPTH; k++) sr[k] <= sr[k-1];
        end
      end
    end else begin : g_nrst
      always_ff @(posedge clk) begin
        sr[0] <= d;
        for (int k = 1; k < DEPTH; k++) sr[k] <= sr[k-1];
      end
    end
    assign q = sr[DEPTH-1];
  end

endmodule
