// ib_lut: one two-input information-bottleneck lookup table.
//
// The table is a bank of memory cells, one OUT_W-bit entry per value of the
// IN_W-bit input y, and a selection network that picks the entry addressed
// by y. Bit y[0] plays the role of y_1, which steers the first multiplexer
// stage (adjacent entries), y[IN_W-1] the last; the read is written as an
// array index, which synthesises to exactly that 2:1 multiplexer tree with
// IN_W stages.
//
// With SYMMETRIC=1 the table is stored for y_1=0 only (2^(IN_W-1) cells) and
// the other half is obtained by the symmetry LUT(y) = ~LUT'(~y[IN_W-1:1])
// when y_1=1: the remaining input bits and the output are inverted. This
// halves the cells at the cost of one inverting multiplexer per input and
// output bit, and requires a table designed to be symmetric.
//
// Interface: the cells are written one entry per clock through wr_en /
// wr_addr / wr_data (with SYMMETRIC=1 only wr_addr[IN_W-2:0] is used). The
// lookup y -> t is purely combinational; pipelining belongs to the update
// units. Cells are not reset: the table must be loaded before use.
//
// The multiplexer structure and the symmetric variant follow the paper; the
// write port is this design's choice, as the paper treats the table contents
// as fixed after the offline design.
module ib_lut #(
  parameter int unsigned IN_W      = 13,
  parameter int unsigned OUT_W     = 8,
  parameter bit          SYMMETRIC = 1'b0
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [IN_W-1:0]  wr_addr,
  input  logic [OUT_W-1:0] wr_data,
  input  logic [IN_W-1:0]  y,
  output logic [OUT_W-1:0] t
);

  localparam int unsigned AW = SYMMETRIC ? IN_W - 1 : IN_W;

  logic [OUT_W-1:0] cells [2**AW];

  always_ff @(posedge clk) begin
    if (wr_en) cells[wr_addr[AW-1:0]] <= wr_data;
  end

  if (SYMMETRIC) begin : g_sym
    logic          inv;
    logic [AW-1:0] a;
    assign inv = y[0];
    assign a   = inv ? ~y[IN_W-1:1] : y[IN_W-1:1];
    assign t   = inv ? ~cells[a] : cells[a];
  end else begin : g_full
    assign t = cells[y];
  end

  initial begin
    assert (IN_W >= 2) else $error("ib_lut: IN_W must be at least 2");
  end

endmodule
