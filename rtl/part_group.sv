// part_group: one group of transverse-read parts plus its segment queue.
//
// Behavioural model of racetrack hardware. A group is the same partition on P
// parallel tracks; part b (on track b) holds bit b of every segment written
// into the group, in D data domains that lie between two constant-'0'
// domains (TR distance 7 = 5 data + 2 boundary domains). Segments arrive in
// the group's input queue (depth D) at up to one per cycle and are written
// into the track one at a time: WRITE_CYC cycles to write the domain under
// the access port, then SHIFT_CYC cycles to shift it into the part. After
// seal, queue slots that received no segment are written as all-zero
// segments, so the group always ends with D domains written. The domains are
// modelled as flip-flops; cnt[b] is the transverse-read value of part b, the
// number of '1' domains in it, which the real device senses as resistance.
//
// Interface: push/push_seg enqueue a segment (at most D per use); seal
// requests zero padding; clear (one cycle) empties the group for reuse.
// written is high once all D domains hold data. nq is the queue fill level.
// Timing: with segments arriving back to back, written rises
// 2 + D*(WRITE_CYC+SHIFT_CYC) cycles after the first push (22 by default);
// cnt is combinational.
//
// The domain count, write/shift latencies and zero padding follow the paper;
// the queue depth equal to D and the write-then-shift order are this
// design's choices.
module part_group #(
  parameter int unsigned P         = trsc_pkg::SEG,
  parameter int unsigned D         = trsc_pkg::DOMAINS,
  parameter int unsigned WRITE_CYC = trsc_pkg::WRITE_CYC,
  parameter int unsigned SHIFT_CYC = trsc_pkg::SHIFT_CYC,
  localparam int unsigned DW = $clog2(D + 1),
  localparam int unsigned CW = $clog2(D + 1),
  localparam int unsigned TW = $clog2(((WRITE_CYC > SHIFT_CYC) ? WRITE_CYC : SHIFT_CYC) + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 push,
  input  logic [P-1:0]         push_seg,
  input  logic                 seal,
  input  logic                 clear,
  output logic                 written,
  output logic [DW-1:0]        nq,
  output logic [P-1:0][CW-1:0] cnt
);

  typedef enum logic [1:0] {W_IDLE, W_WRITE, W_SHIFT} wstate_e;

  logic [D-1:0][P-1:0] q;        // input queue
  logic [P-1:0][D-1:0] dom;      // data domains of each part
  logic [DW-1:0]       ndom;     // domains written so far
  logic                sealed;
  wstate_e             ws;
  logic [TW-1:0]       tmr;
  logic                avail;    // a domain can be started now
  logic [P-1:0]        wdata;

  assign written = (ndom == DW'(D));
  assign avail   = !written && ((ndom < nq) || sealed);
  assign wdata   = (ndom < nq) ? q[ndom] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nq     <= '0;
      ndom   <= '0;
      sealed <= 1'b0;
      ws     <= W_IDLE;
      tmr    <= '0;
      q      <= '0;
      dom    <= '0;
    end else if (clear) begin
      nq     <= '0;
      ndom   <= '0;
      sealed <= 1'b0;
      ws     <= W_IDLE;
      tmr    <= '0;
    end else begin
      if (push) begin
        q[nq] <= push_seg;
        nq    <= nq + 1'b1;
      end
      if (seal) sealed <= 1'b1;
      unique case (ws)
        W_IDLE: if (avail) begin
          ws  <= W_WRITE;
          tmr <= TW'(WRITE_CYC - 1);
        end
        W_WRITE: begin
          if (tmr == '0) begin
            ws  <= W_SHIFT;
            tmr <= TW'(SHIFT_CYC - 1);
          end else tmr <= tmr - 1'b1;
        end
        W_SHIFT: begin
          if (tmr == '0) begin
            for (int b = 0; b < P; b++) dom[b] <= {dom[b][D-2:0], wdata[b]};
            ndom <= ndom + 1'b1;
            // next segment follows back to back when it is already there
            if ((ndom + 1'b1 < DW'(D)) && ((ndom + 1'b1 < nq) || sealed || seal)) begin
              ws  <= W_WRITE;
              tmr <= TW'(WRITE_CYC - 1);
            end else ws <= W_IDLE;
          end else tmr <= tmr - 1'b1;
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  // Transverse read: number of ones in the D data domains of every part.
  always_comb begin
    for (int b = 0; b < P; b++) begin
      cnt[b] = '0;
      for (int d = 0; d < D; d++) cnt[b] = cnt[b] + CW'(dom[b][d]);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> (nq < DW'(D)));

endmodule
