// ung: unary number generator for the mixed UN segment.
//
// The smaller operand u of a multiplication is coded as a unary number
// (u ones followed by zeros). Cut into P-bit segments, it has u>>L full-'1'
// segments (the counter), then one mixed segment holding bEdge = u mod P
// leading ones, then full-'0' segments. This block expands bEdge into that
// mixed segment: seg[b] = 1 for b < bedge. Bit P-1 is therefore always 0.
//
// Interface: bedge[L-1:0] in, seg[P-1:0] out. Combinational.
// The function is the paper's; the thermometer-decoder form is the simplest
// circuit that performs it.
module ung #(
  parameter int unsigned P = trsc_pkg::SEG,
  localparam int unsigned L = $clog2(P)
) (
  input  logic [L-1:0] bedge,
  output logic [P-1:0] seg
);

  always_comb begin
    for (int b = 0; b < P; b++)
      seg[b] = (b < int'(bedge));
  end

endmodule
