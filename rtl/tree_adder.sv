// tree_adder: adder of transverse-read results for one vector.
//
// Sums the TR counts of all parts a vector occupies and returns the signed
// dot-product contribution of one TR round. The parts are added in three
// registered stages, matching the three cycles the adder needs after TR:
//   1. per group: the P part counts of every selected group (a group not in
//      use_mask contributes 0);
//   2. same-signed sums: groups 0..NG/2-1 hold positive products, groups
//      NG/2..NG-1 negative ones; each half is summed without sign;
//   3. a final signed adder: positive sum minus negative sum.
//
// Interface: in_valid samples cnt and use_mask; out_valid pulses three cycles
// later with sum. Sums are loop-described; synthesis builds the adder trees.
//
// Signed halves and the final signed adder follow the paper; the split of
// the tree into exactly these three pipeline stages is this design's choice.
module tree_adder #(
  parameter int unsigned NG = trsc_pkg::NPART,
  parameter int unsigned P  = trsc_pkg::SEG,
  parameter int unsigned D  = trsc_pkg::DOMAINS,
  localparam int unsigned CW = $clog2(D + 1),
  localparam int unsigned GSW = $clog2(P * D + 1),           // one group
  localparam int unsigned HSW = GSW + $clog2(NG / 2),        // one half
  localparam int unsigned SW  = HSW + 1                      // signed
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [NG-1:0][P-1:0][CW-1:0]  cnt,
  input  logic [NG-1:0]                 use_mask,
  output logic                          out_valid,
  output logic signed [SW-1:0]          sum
);

  logic [NG-1:0][GSW-1:0] gsum_d, gsum_q;
  logic [HSW-1:0]         pos_d, neg_d, pos_q, neg_q;
  logic [2:0]             vld;

  always_comb begin
    for (int g = 0; g < NG; g++) begin
      gsum_d[g] = '0;
      if (use_mask[g])
        for (int b = 0; b < P; b++) gsum_d[g] = gsum_d[g] + GSW'(cnt[g][b]);
    end
    pos_d = '0;
    neg_d = '0;
    for (int g = 0; g < NG / 2; g++) begin
      pos_d = pos_d + HSW'(gsum_q[g]);
      neg_d = neg_d + HSW'(gsum_q[g + NG / 2]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      gsum_q <= '0;
      pos_q  <= '0;
      neg_q  <= '0;
      sum    <= '0;
    end else begin
      vld <= {vld[1:0], in_valid};
      if (in_valid) gsum_q <= gsum_d;
      if (vld[0]) begin
        pos_q <= pos_d;
        neg_q <= neg_d;
      end
      if (vld[1]) sum <= $signed({1'b0, pos_q}) - $signed({1'b0, neg_q});
    end
  end

  assign out_valid = vld[2];

endmodule
