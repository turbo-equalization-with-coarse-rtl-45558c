// tb_ib_lut: self-checking test of the IB lookup table.
//
// Two instances, a full table and a symmetric half table, are loaded with
// the hashed test contents and then read at every address. The full table
// must return its entry; the symmetric one must return LUT'(y[w-1:1]) when
// y[0]=0 and the inverted ~LUT'(~y[w-1:1]) when y[0]=1.
module tb_ib_lut;
  import tb_ib_pkg::*;

  localparam int unsigned IN_W  = 6;
  localparam int unsigned OUT_W = 4;

  logic             clk = 1'b0;
  logic             wr_en;
  logic [IN_W-1:0]  wr_addr, y;
  logic [OUT_W-1:0] wr_data, t_full, t_sym;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ib_lut #(.IN_W(IN_W), .OUT_W(OUT_W), .SYMMETRIC(1'b0)) u_full (
    .clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data), .y(y), .t(t_full));
  ib_lut #(.IN_W(IN_W), .OUT_W(OUT_W), .SYMMETRIC(1'b1)) u_sym (
    .clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data), .y(y), .t(t_sym));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 1'b0; wr_addr = '0; wr_data = '0; y = '0;
    // Load: the symmetric instance uses the lower IN_W-1 address bits, so
    // the first half of the writes fills it completely as well.
    for (int a = 0; a < 2**IN_W; a++) begin
      @(negedge clk);
      wr_en   = 1'b1;
      wr_addr = IN_W'(a);
      wr_data = OUT_W'(tbl_val(1, 0, a, OUT_W));
    end
    @(negedge clk);
    wr_en = 1'b0;
    // The symmetric half table was last written with entries 2^(IN_W-1)..
    // of the hash; its reference uses the same entries.
    for (int a = 0; a < 2**IN_W; a++) begin
      int unsigned exp_full, exp_sym, half;
      y = IN_W'(a);
      #1;
      exp_full = tbl_val(1, 0, a, OUT_W);
      if (a % 2 == 0) begin
        half    = (a >> 1);
        exp_sym = tbl_val(1, 0, half + 2**(IN_W-1), OUT_W);
      end else begin
        half    = (~(a >> 1)) & (2**(IN_W-1) - 1);
        exp_sym = (~tbl_val(1, 0, half + 2**(IN_W-1), OUT_W)) & (2**OUT_W - 1);
      end
      checks++;
      if (t_full != OUT_W'(exp_full)) begin
        failures++;
        $display("full y=%0d got %0d exp %0d", a, t_full, exp_full);
      end
      checks++;
      if (t_sym != OUT_W'(exp_sym)) begin
        failures++;
        $display("sym y=%0d got %0d exp %0d", a, t_sym, exp_sym);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
