// tr_mac_top: LD-SC MAC assisted with transverse read, two interleaved vectors.
//
// One processing unit of the in-racetrack DNN architecture. Each of the two
// vectors has NMAC PFC multipliers (pfc_snm) that turn operand pairs into
// stochastic segments; a segment merger writes them first come, first served
// into the group queues of a shared TR bank (asynchronous write-in); a vector
// controller collects them with one synchronous transverse read per round,
// sums the part counts in a tree adder and accumulates the signed dot
// product. The vectors own alternate partitions of every track, so the TR
// bank serves them in ping-pong without reading two neighbouring parts at
// once. The memory-side controller (tr_ctrl) decodes TRS/TRE/TRVC/TRW/TRRW,
// holds the status registers and writes finished dot products to the result
// bank over the internal bus.
//
// Ports: instruction and status-register ports of tr_ctrl; act/wgt are the
// operand vectors fetched from the activation and weight banks (magnitudes
// and sign bits, sampled in the cycle the vector starts); bus_* is the write
// port to the result bank; part_bitmap shows which TR partitions hold data;
// active (between TRS and TRE), vec_busy, wb_pending (TRRW waiting),
// vec_done/vec_result, rounds and stalls are observation outputs. The
// multipliers' done pulses and the merger's per-sign full flags are not
// needed at this level (the controller works from busy and blocked) and are
// left unread.
// Typical sequence: write sIMB=1, TRS, TRVC v, TRW v, TRRW v, wait for the
// bus write, TRE.
//
// Timing: one 255x255 product takes 34 cycles from TRW to vec_done, five of
// them on one vector 49 cycles (the merger takes one segment per cycle per
// vector). Results appear on the bus 2 cycles after vec_done if sIMB = 1.
//
// Paper vs own: the dataflow (PFC multipliers, asynchronous write-in,
// synchronous TR, ping-pong interleaving, same-signed tree adders, the five
// instructions and six status registers) follows the paper; two vectors per
// TR bank, 16 multipliers per vector, the per-sign partition halves and the
// handshakes are this design's choices. The storage banks, the host
// processor and the shared internal bus are not part of this module; their
// signals are ports.
module tr_mac_top #(
  parameter int unsigned NB        = trsc_pkg::NBITS,
  parameter int unsigned P         = trsc_pkg::SEG,
  parameter int unsigned D         = trsc_pkg::DOMAINS,
  parameter int unsigned NPART     = trsc_pkg::NPART,
  parameter int unsigned NMAC      = trsc_pkg::NMAC,
  parameter int unsigned WRITE_CYC = trsc_pkg::WRITE_CYC,
  parameter int unsigned SHIFT_CYC = trsc_pkg::SHIFT_CYC,
  parameter int unsigned TR_CYC    = trsc_pkg::TR_CYC,
  localparam int unsigned NVEC = 2,
  localparam int unsigned GPS  = NPART / 4,
  localparam int unsigned GW   = $clog2(NPART),
  localparam int unsigned IW   = $clog2(GPS),
  localparam int unsigned CW   = $clog2(D + 1),
  localparam int unsigned SW   = $clog2(P * D + 1) + $clog2(NPART / 2) + 1,
  localparam int unsigned AW   = 20
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // instruction and status registers
  input  logic                               instr_valid,
  input  logic [31:0]                        instr,
  input  logic [31:0]                        rs1_val,
  input  logic [31:0]                        rs2_val,
  output logic                               illegal,
  input  logic                               sr_we,
  input  logic [2:0]                         sr_addr,
  input  logic [31:0]                        sr_wdata,
  output logic [31:0]                        sr_rdata,
  // operands fetched from the activation and weight banks
  input  logic [NVEC-1:0][NMAC-1:0][NB-1:0]  act,
  input  logic [NVEC-1:0][NMAC-1:0]          act_neg,
  input  logic [NVEC-1:0][NMAC-1:0][NB-1:0]  wgt,
  input  logic [NVEC-1:0][NMAC-1:0]          wgt_neg,
  // result bank write port (internal bus)
  output logic                               bus_we,
  output logic [31:0]                        bus_addr,
  output logic [31:0]                        bus_wdata,
  // observation
  output logic [NPART-1:0]                   part_bitmap,
  output logic                               active,
  output logic [NVEC-1:0]                    vec_busy,
  output logic [NVEC-1:0]                    wb_pending,
  output logic [NVEC-1:0]                    vec_done,
  output logic [NVEC-1:0][AW-1:0]            vec_result,
  output logic [NVEC-1:0][7:0]               rounds,
  output logic [NVEC-1:0][7:0]               stalls
);

  // ---- controller ----------------------------------------------------------
  logic [NVEC-1:0] vec_start, tr_enable;

  tr_ctrl #(.AW(AW)) u_ctrl (
    .clk, .rst_n,
    .instr_valid, .instr, .rs1_val, .rs2_val, .illegal,
    .sr_we, .sr_addr, .sr_wdata, .sr_rdata,
    .active, .vec_start, .tr_enable,
    .vec_done, .vec_result,
    .bus_we, .bus_addr, .bus_wdata, .wb_pending
  );

  // ---- TR bank -------------------------------------------------------------
  logic [NVEC-1:0]                 push_valid;
  logic [NVEC-1:0][GW-1:0]         push_grp;
  logic [NVEC-1:0][P-1:0]          push_seg;
  logic [NVEC-1:0][NPART-1:0]      seal_v, clear_v, tr_mask;
  logic [NPART-1:0]                written;
  logic [NVEC-1:0]                 tr_req, tr_gnt, tr_done;
  logic [NPART-1:0][P-1:0][CW-1:0] cnt;

  tr_bank #(.P(P), .D(D), .NPART(NPART), .WRITE_CYC(WRITE_CYC),
            .SHIFT_CYC(SHIFT_CYC), .TR_CYC(TR_CYC)) u_bank (
    .clk, .rst_n,
    .push_valid, .push_grp, .push_seg,
    .seal   (seal_v[0] | seal_v[1]),
    .clear  (clear_v[0] | clear_v[1]),
    .written,
    .tr_req, .tr_mask, .tr_gnt, .tr_done,
    .cnt
  );

  assign part_bitmap = tr_mask[0] | tr_mask[1];

  // ---- per-vector datapath -------------------------------------------------
  for (genvar v = 0; v < NVEC; v++) begin : g_vec
    logic [NMAC-1:0]         mac_busy, mac_valid, mac_ready, mac_neg, mac_done;
    logic [NMAC-1:0][P-1:0]  mac_seg;
    logic                    mac_start;
    logic                    open, merge_clear, blocked;
    logic [1:0][GPS-1:0]     used;
    logic [1:0]              full;
    logic                    pv, pneg;
    logic [IW-1:0]           pidx;
    logic [P-1:0]            pseg;
    logic                    add_valid, add_out_valid;
    logic signed [SW-1:0]    add_sum;
    logic signed [AW-1:0]    result;

    for (genvar m = 0; m < NMAC; m++) begin : g_mac
      pfc_snm #(.NB(NB), .P(P)) u_mac (
        .clk, .rst_n,
        .start     (mac_start),
        .a         (act[v][m]),
        .a_neg     (act_neg[v][m]),
        .b         (wgt[v][m]),
        .b_neg     (wgt_neg[v][m]),
        .busy      (mac_busy[m]),
        .seg_valid (mac_valid[m]),
        .seg_ready (mac_ready[m]),
        .seg       (mac_seg[m]),
        .seg_neg   (mac_neg[m]),
        .done      (mac_done[m])
      );
    end

    segment_merger #(.NMAC(NMAC), .P(P), .D(D), .GPS(GPS)) u_merge (
      .clk, .rst_n,
      .open, .clear(merge_clear),
      .mac_valid, .mac_seg, .mac_neg, .mac_ready,
      .push_valid(pv), .push_neg(pneg), .push_idx(pidx), .push_seg(pseg),
      .used, .full, .blocked
    );

    // sign half, then the partitions of parity v
    assign push_valid[v] = pv;
    assign push_grp[v]   = GW'(pneg) * GW'(NPART / 2) + GW'(2) * GW'(pidx) + GW'(v);
    assign push_seg[v]   = pseg;

    vector_ctrl #(.NMAC(NMAC), .NPART(NPART), .VEC(v), .SW(SW), .AW(AW)) u_vctrl (
      .clk, .rst_n,
      .start       (vec_start[v]),
      .tr_enable   (tr_enable[v]),
      .mac_start, .mac_busy,
      .open, .merge_clear, .used, .blocked,
      .seal        (seal_v[v]),
      .clear       (clear_v[v]),
      .written,
      .tr_req      (tr_req[v]),
      .tr_mask     (tr_mask[v]),
      .tr_gnt      (tr_gnt[v]),
      .tr_done     (tr_done[v]),
      .add_valid, .add_out_valid, .add_sum,
      .busy        (vec_busy[v]),
      .done        (vec_done[v]),
      .result      (result),
      .rounds      (rounds[v]),
      .stalls      (stalls[v])
    );
    assign vec_result[v] = result;

    tree_adder #(.NG(NPART), .P(P), .D(D)) u_add (
      .clk, .rst_n,
      .in_valid  (add_valid),
      .cnt       (cnt),
      .use_mask  (tr_mask[v]),
      .out_valid (add_out_valid),
      .sum       (add_sum)
    );
  end

endmodule
