// pfc_encoder: Pseudo-Fractal Compression (PFC) of one binary operand.
//
// A P-bit segment of the 2^NB-bit stochastic number (SN) of a value always
// starts with the same P-1 bits (the seed); only the last bit of a segment
// changes from segment to segment. With L = log2(P), seed position p
// (0..P-2) carries BN bit B_k with k = trailing zeros of p+1, so the seed
// depends only on B_0..B_(L-1) and is produced by pure wiring. The remaining
// BN bits B_L..B_(NB-1) form the LSBs field, from which the SN 1-bit
// generator picks the last bit of each segment. PFC = {seed, LSBs}: for
// NB = 6 and P = 8 that is the 10-bit code of 7 seed bits and 3 LSBs.
//
// Interface: bn[NB-1:0] (bn[NB-1] = B_0, the most significant bit).
// seed[p] is SN position p of every segment; lsbs[i] = B_(L+i).
// Timing: purely combinational.
//
// The mapping and the seed/LSBs split follow the paper's equation and
// algorithm exactly; the port order of the bit vectors is this design's choice.
module pfc_encoder #(
  parameter int unsigned NB = trsc_pkg::NBITS,
  parameter int unsigned P  = trsc_pkg::SEG,
  localparam int unsigned L  = $clog2(P),
  localparam int unsigned NL = NB - L
) (
  input  logic [NB-1:0]  bn,
  output logic [P-2:0]   seed,
  output logic [NL-1:0]  lsbs
);

  // A segment has to be shorter than the whole SN, and P a power of two.
  if (NB <= L) begin : g_chk_nb
    $error("pfc_encoder: NB must exceed log2(P)");
  end
  if ((1 << L) != P) begin : g_chk_p
    $error("pfc_encoder: P must be a power of two");
  end

  // Hard-wired seed: position p takes B_k, k = ctz(p+1) < L.
  for (genvar p = 0; p < P - 1; p++) begin : g_seed
    localparam int unsigned K = trsc_pkg::ctz(p + 1, 32);
    assign seed[p] = bn[NB-1-K];
  end

  // LSBs field: B_L .. B_(NB-1).
  for (genvar i = 0; i < NL; i++) begin : g_lsb
    assign lsbs[i] = bn[NB-1-L-i];
  end

endmodule
