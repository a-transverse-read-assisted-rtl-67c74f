// tb_ung: exhaustive check of the unary mixed-segment generator (P = 64).
//
// For every bEdge in 0..63 the 64-bit output must have exactly bEdge ones,
// all at the low end (seg[b] = 1 for b < bEdge), so the top bit is always 0.
// Combinational; checked after a settle delay.
//
// Paper vs own: the unary conversion of bEdge is the paper's; the
// thermometer-code circuit is this design's simplest choice.
module tb_ung;
  int checks = 0, failures = 0;
  logic [5:0]  bedge;
  logic [63:0] seg;
  ung dut (.bedge(bedge), .seg(seg));
  initial begin
    for (int e = 0; e < 64; e++) begin
      logic [63:0] exp;
      bedge = 6'(e);
      #1;
      exp = (64'd1 << e) - 64'd1;
      checks++;
      if (seg != exp) begin
        failures++;
        $display("FAIL bedge=%0d seg=%h", e, seg);
      end
      checks++;
      if (seg[63] != 1'b0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
