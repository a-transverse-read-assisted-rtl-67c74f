// sn_lsb_gen: SN 1-bit generator of the PFC multiplier.
//
// Produces the last bit of SN segment j from the PFC LSBs field. Segment j
// ends at SN position P*(j+1)-1, whose BN bit is B_(L + ctz(j+1)); so the
// generator keeps an accumulator that counts segments and selects the LSB
// field bit named by the lowest set bit of acc+1. Bit 0 of acc+1 is set in
// every second segment, bit 1 in every fourth, and so on, which is the
// "frequency of ones per accumulator bit" rule. When acc+1 is a power of two
// beyond the field (the final segment of the SN), the bit is 0.
// The accumulator is also compared with the UN counter: last_full is high
// while the current segment is the last full-'1' segment to emit.
//
// Interface: clear resets acc to 0, step advances it by one segment.
// lsb and last_full are combinational from acc; acc updates on clk.
// Reset is asynchronous, active low (this design's choice).
//
// Paper vs own: the LSB field and its use as the segments' last bits are
// the paper's; the lowest-set-bit selection and the counter compare are this
// design's way of doing it.
module sn_lsb_gen #(
  parameter int unsigned NL = trsc_pkg::NBITS - $clog2(trsc_pkg::SEG)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          step,
  input  logic [NL-1:0] lsbs,
  input  logic [NL-1:0] counter,   // number of full-'1' UN segments
  output logic [NL-1:0] acc,       // index of the current segment
  output logic          lsb,
  output logic          last_full
);

  logic [NL:0] nxt;       // acc + 1, one bit wider
  logic [NL:0] low1;      // lowest set bit of nxt, one-hot

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= '0;
    else if (step)  acc <= acc + 1'b1;
  end

  always_comb begin
    nxt       = {1'b0, acc} + 1'b1;
    low1      = nxt & (~nxt + 1'b1);
    lsb       = |(low1[NL-1:0] & lsbs);
    last_full = (nxt == {1'b0, counter});
  end

endmodule
