// segment_merger: asynchronous write-in of one vector's segments.
//
// All MAC units of one dot product share the group queues of the TR bank.
// Segments are taken first come, first served: one per cycle, granted
// round-robin among the MACs that offer one, and placed into the queue of the
// group currently being filled for the product's sign (positive and negative
// products live in separate halves of the track). When a queue holds DOMAINS
// segments the next group of that sign is opened, so the output of one MAC
// can spill into further queues and a queue left part-full by one MAC is
// topped up by others. When every group of a sign is used, segments of that
// sign are held back (blocked) until the controller has read the round out
// with TR and issued clear.
//
// Interface: open enables grants; clear (one cycle) empties the allocation
// state for a new round. mac_valid/mac_ready is a valid/ready handshake per
// MAC. push_* is a one-cycle write into group push_idx of half push_neg.
// used[s] is the bitmap of groups of half s that hold data (the free-part
// bitmap of the TR bank); full[s] is high when half s has no free group.
// Timing: ready is combinational from valid; all state updates on clk.
//
// The first-come-first-served sharing of queues follows the paper; the
// round-robin order and one segment per cycle per vector are this design's
// choices.
module segment_merger #(
  parameter int unsigned NMAC = trsc_pkg::NMAC,
  parameter int unsigned P    = trsc_pkg::SEG,
  parameter int unsigned D    = trsc_pkg::DOMAINS,
  parameter int unsigned GPS  = trsc_pkg::NPART / 4,    // groups per sign
  localparam int unsigned GW  = $clog2(GPS + 1),
  localparam int unsigned IW  = $clog2(GPS),
  localparam int unsigned MW  = (NMAC > 1) ? $clog2(NMAC) : 1,
  localparam int unsigned DW  = $clog2(D + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 open,
  input  logic                 clear,
  input  logic [NMAC-1:0]      mac_valid,
  input  logic [NMAC-1:0][P-1:0] mac_seg,
  input  logic [NMAC-1:0]      mac_neg,
  output logic [NMAC-1:0]      mac_ready,
  output logic                 push_valid,
  output logic                 push_neg,
  output logic [IW-1:0]        push_idx,
  output logic [P-1:0]         push_seg,
  output logic [1:0][GPS-1:0]  used,
  output logic [1:0]           full,
  output logic                 blocked
);

  logic [1:0][GW-1:0] cur;     // group being filled, per sign
  logic [1:0][DW-1:0] fill;    // segments in that group
  logic [MW-1:0]      ptr;     // round-robin start
  logic [MW-1:0]      sel;
  logic               found;

  assign full[0] = (cur[0] == GW'(GPS));
  assign full[1] = (cur[1] == GW'(GPS));

  always_comb begin
    found   = 1'b0;
    sel     = '0;
    blocked = 1'b0;
    for (int k = 0; k < NMAC; k++) begin
      int unsigned i;
      i = (int'(ptr) + k) % NMAC;
      if (mac_valid[i] && full[mac_neg[i]]) blocked = open;
      if (!found && mac_valid[i] && !full[mac_neg[i]]) begin
        found = 1'b1;
        sel   = MW'(i);
      end
    end
    found     = found && open;
    mac_ready = '0;
    if (found) mac_ready[sel] = 1'b1;
    push_valid = found;
    push_neg   = mac_neg[sel];
    push_seg   = mac_seg[sel];
    push_idx   = cur[mac_neg[sel]][IW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur  <= '0;
      fill <= '0;
      used <= '0;
      ptr  <= '0;
    end else if (clear) begin
      cur  <= '0;
      fill <= '0;
      used <= '0;
      ptr  <= '0;
    end else if (found) begin
      ptr <= (sel == MW'(NMAC - 1)) ? '0 : sel + 1'b1;
      used[push_neg][push_idx] <= 1'b1;
      if (fill[push_neg] == DW'(D - 1)) begin
        fill[push_neg] <= '0;
        cur[push_neg]  <= cur[push_neg] + 1'b1;
      end else begin
        fill[push_neg] <= fill[push_neg] + 1'b1;
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) (mac_ready & (mac_ready - 1'b1)) == '0);

endmodule
