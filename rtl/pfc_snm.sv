// pfc_snm: PFC stochastic-number multiplier (one MAC unit).
//
// Multiplies two NB-bit magnitudes in low-discrepancy stochastic computing
// and emits the product as a stream of P-bit segments instead of a binary
// number. The larger operand is coded as an SN through PFC (seed + LSBs), the
// smaller one as a UN, split into counter = u >> L full-'1' segments and a
// bEdge = u mod P mixed segment. AND with a full-'1' UN segment returns the
// SN segment itself, so those segments are emitted directly ("output
// computation"): {LSB_j, seed} for j = 0..counter-1, with LSB_j from the SN
// 1-bit generator. Then one mixed segment {0, seed & UNG(bEdge)} is emitted,
// the only AND operation; it is skipped when bEdge = 0. Full-'0' segments are
// never produced (early termination), so a product of zero emits nothing.
// The number of ones over all segments equals the LD-SC product count
// sum_{q<u} S_q, about a*b/2^NB.
//
// Interface: start (one cycle, ignored while busy) latches the PFC of the
// larger operand, the counter/bEdge of the smaller, and neg = a_neg ^ b_neg.
// seg_valid/seg_ready is a valid/ready handshake: a segment is taken in a
// cycle where both are high, and seg/seg_neg hold while valid is high and
// ready is low. done pulses one cycle after the last segment is taken (or one
// cycle after start when there is nothing to emit). With ready held high a
// multiplication emits one segment per cycle: at most (2^NB-1)>>L + 1
// segments (4 for NB = 8, P = 64).
//
// The operand comparison, the segment order and the AND structure follow the
// paper; the handshake, the registered PFC buffer and the done pulse are this
// design's choices.
module pfc_snm #(
  parameter int unsigned NB = trsc_pkg::NBITS,
  parameter int unsigned P  = trsc_pkg::SEG,
  localparam int unsigned L  = $clog2(P),
  localparam int unsigned NL = NB - L
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NB-1:0] a,
  input  logic          a_neg,
  input  logic [NB-1:0] b,
  input  logic          b_neg,
  output logic          busy,
  output logic          seg_valid,
  input  logic          seg_ready,
  output logic [P-1:0]  seg,
  output logic          seg_neg,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_FULL, S_MIXED} state_e;
  state_e state;

  // Operand sorting: the larger becomes SN, the smaller UN.
  logic [NB-1:0] sn_in, un_in;
  assign sn_in = (a >= b) ? a : b;
  assign un_in = (a >= b) ? b : a;

  // PFC of the SN operand (combinational on the inputs, latched at start).
  logic [P-2:0]  seed_in, seed_q;
  logic [NL-1:0] lsbs_in, lsbs_q;
  pfc_encoder #(.NB(NB), .P(P)) u_pfc (.bn(sn_in), .seed(seed_in), .lsbs(lsbs_in));

  // UN split into counter and bEdge.
  logic [NL-1:0] cnt_q;
  logic [L-1:0]  bedge_q;

  // SN 1-bit generator.
  logic          take;
  logic [NL-1:0] acc;
  logic          lsb, last_full;
  sn_lsb_gen #(.NL(NL)) u_lsb (
    .clk, .rst_n,
    .clear    (start && !busy),
    .step     (take && state == S_FULL),
    .lsbs     (lsbs_q),
    .counter  (cnt_q),
    .acc      (acc),
    .lsb      (lsb),
    .last_full(last_full)
  );

  // UNG for the mixed segment.
  logic [P-1:0] un_mixed;
  ung #(.P(P)) u_ung (.bedge(bedge_q), .seg(un_mixed));

  assign busy      = (state != S_IDLE);
  assign seg_valid = busy;
  assign take      = seg_valid && seg_ready;

  // Segment decoding: full segments are the SN segment itself, the mixed one
  // is the AND with the UNG output (its last bit is always 0).
  always_comb begin
    if (state == S_MIXED) seg = {1'b0, seed_q & un_mixed[P-2:0]};
    else                  seg = {lsb, seed_q};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      seed_q  <= '0;
      lsbs_q  <= '0;
      cnt_q   <= '0;
      bedge_q <= '0;
      seg_neg <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          seed_q  <= seed_in;
          lsbs_q  <= lsbs_in;
          cnt_q   <= un_in[NB-1:L];
          bedge_q <= un_in[L-1:0];
          seg_neg <= a_neg ^ b_neg;
          if (un_in[NB-1:L] != '0)      state <= S_FULL;
          else if (un_in[L-1:0] != '0)  state <= S_MIXED;
          else                          done  <= 1'b1;   // product 0
        end
        S_FULL: if (take && last_full) begin
          if (bedge_q != '0) state <= S_MIXED;
          else begin
            state <= S_IDLE;                        // bEdge all '0': ET
            done  <= 1'b1;
          end
        end
        S_MIXED: if (take) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A segment offered must stay stable until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (seg_valid && !seg_ready) |=> (seg_valid && $stable(seg) && $stable(seg_neg));
  endproperty
  a_hold: assert property (p_hold);

endmodule
