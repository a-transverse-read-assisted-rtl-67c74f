// tr_bank: TR bank of the LD-SC MAC (behavioural model of racetrack memory).
//
// Models the racetrack bank that replaces accumulative parallel counters: P
// tracks, each cut into NPART partitions (parts) of D data domains, with an
// access port between neighbouring parts. Partition g of all P tracks forms
// group g, which stores whole P-bit segments (one bit per track) and is
// modelled by part_group. A transverse read senses the number of ones in a
// part in one operation; two neighbouring parts share a boundary domain and
// cannot be read at the same time. The bank therefore serves the NVEC = 2
// interleaved vectors in ping-pong: vector v owns the partitions of parity v
// (interleaving data placement), so one TR operation reads every part of one
// vector at once, and the two vectors take turns. When both request, the one
// not served last wins.
//
// Track layout used by the controllers: partitions 0..NPART/2-1 hold
// positive products, NPART/2..NPART-1 negative ones; inside each half,
// vector v uses the partitions whose index has parity v.
//
// Interface: per vector v a push port (push_valid, push_grp = partition
// index, push_seg); per partition seal and clear. tr_req[v] with tr_mask[v]
// (partitions to read) asks for a TR; tr_gnt[v] pulses when it is accepted
// and tr_done[v] pulses TR_CYC cycles later (TR_CYC >= 2), when cnt is
// valid; a request waiting behind the other vector is granted in that
// cycle. cnt stays valid until the partitions are cleared or written again.
// written[g] is high once partition g holds D domains of data.
//
// Sizes and latencies follow the paper (32 partitions, 5 data domains, TR
// 5 cycles); the request/grant handshake is this design's choice.
module tr_bank #(
  parameter int unsigned P         = trsc_pkg::SEG,
  parameter int unsigned D         = trsc_pkg::DOMAINS,
  parameter int unsigned NPART     = trsc_pkg::NPART,
  parameter int unsigned WRITE_CYC = trsc_pkg::WRITE_CYC,
  parameter int unsigned SHIFT_CYC = trsc_pkg::SHIFT_CYC,
  parameter int unsigned TR_CYC    = trsc_pkg::TR_CYC,
  localparam int unsigned NVEC = 2,
  localparam int unsigned GW   = $clog2(NPART),
  localparam int unsigned CW   = $clog2(D + 1),
  localparam int unsigned TW   = $clog2(TR_CYC + 1)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [NVEC-1:0]                 push_valid,
  input  logic [NVEC-1:0][GW-1:0]         push_grp,
  input  logic [NVEC-1:0][P-1:0]          push_seg,
  input  logic [NPART-1:0]                seal,
  input  logic [NPART-1:0]                clear,
  output logic [NPART-1:0]                written,
  input  logic [NVEC-1:0]                 tr_req,
  input  logic [NVEC-1:0][NPART-1:0]      tr_mask,
  output logic [NVEC-1:0]                 tr_gnt,
  output logic [NVEC-1:0]                 tr_done,
  output logic [NPART-1:0][P-1:0][CW-1:0] cnt
);

  if (TR_CYC < 2) begin : g_chk_tr
    $error("tr_bank: TR_CYC must be at least 2");
  end

  // ---- storage -----------------------------------------------------------
  for (genvar g = 0; g < NPART; g++) begin : g_grp
    logic         push;
    logic [P-1:0] seg;
    logic [CW-1:0] nq_unused;
    always_comb begin
      push = 1'b0;
      seg  = '0;
      for (int v = 0; v < NVEC; v++)
        if (push_valid[v] && push_grp[v] == GW'(g)) begin
          push = 1'b1;
          seg  = push_seg[v];
        end
    end
    part_group #(.P(P), .D(D), .WRITE_CYC(WRITE_CYC), .SHIFT_CYC(SHIFT_CYC)) u_grp (
      .clk, .rst_n,
      .push     (push),
      .push_seg (seg),
      .seal     (seal[g]),
      .clear    (clear[g]),
      .written  (written[g]),
      .nq       (nq_unused),
      .cnt      (cnt[g])
    );
  end

  // ---- ping-pong TR scheduling -------------------------------------------
  logic          busy;
  logic          cur;       // vector being read
  logic          last;      // vector served last
  logic [TW-1:0] tmr;
  logic          pick;
  logic          go;

  always_comb begin
    go   = !busy && (tr_req != '0);
    if (tr_req == 2'b11) pick = !last;
    else                 pick = tr_req[1];
    tr_gnt = '0;
    if (go) tr_gnt[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      cur     <= 1'b0;
      last    <= 1'b1;
      tmr     <= '0;
      tr_done <= '0;
    end else begin
      tr_done <= '0;
      if (go) begin
        busy <= 1'b1;
        cur  <= pick;
        last <= pick;
        tmr  <= TW'(TR_CYC - 2);
      end else if (busy) begin
        if (tmr == '0) begin
          busy         <= 1'b0;
          tr_done[cur] <= 1'b1;
        end else tmr <= tmr - 1'b1;
      end
    end
  end

  // Neighbouring parts are never sensed together, and only written parts
  // are read.
  for (genvar v = 0; v < NVEC; v++) begin : g_chk
    a_no_neighbours: assert property (@(posedge clk) disable iff (!rst_n)
      tr_gnt[v] |-> ((tr_mask[v] & (tr_mask[v] >> 1)) == '0));
    a_read_written: assert property (@(posedge clk) disable iff (!rst_n)
      tr_gnt[v] |-> ((tr_mask[v] & ~written) == '0));
  end

endmodule
