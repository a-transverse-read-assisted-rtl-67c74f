// vector_ctrl: round controller and accumulator of one vector (dot product).
//
// Runs "asynchronous write-in with synchronous TR" for the vector that owns
// partitions of parity VEC. On start it launches all MAC units and opens the
// segment merger; MACs then write their segments whenever they are ready,
// without waiting for each other. A round ends when every MAC has finished
// (last round) or when a MAC is blocked because all groups of its sign are
// used (a stall; the MACs wait with their segments). The controller then
// seals the used groups (partial queues are padded with zero segments),
// waits until they are written, requests one synchronous TR over all used
// partitions, passes the counts to the tree adder and adds the signed result
// to the accumulator. The groups are cleared and, if MACs still have
// segments, the next round starts. After the last round, result holds the
// dot product (the sum of the LD-SC product counts, signed) and done is high.
//
// Interface: start (one cycle) begins a dot product; the MAC operands must be
// valid in that cycle. tr_enable gates the TR request (set by the TRVC
// instruction). Merger, bank and adder ports connect as in tr_mac_top.
// Observation outputs: rounds (TR rounds of the last dot product) and stalls
// (rounds ended by a blocked MAC). seal, clear and tr_mask are full-width
// partition masks, so their bits for partitions of the other vector's
// parity are constant 0 in this instance.
//
// The round structure follows the paper; the rule "end the round at the
// first blocked segment" is this design's choice.
module vector_ctrl #(
  parameter int unsigned NMAC  = trsc_pkg::NMAC,
  parameter int unsigned NPART = trsc_pkg::NPART,
  parameter int unsigned VEC   = 0,
  parameter int unsigned SW    = 14,    // width of the tree adder result
  parameter int unsigned AW    = 20,    // accumulator width
  localparam int unsigned GPS  = NPART / 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    tr_enable,
  // MACs
  output logic                    mac_start,
  input  logic [NMAC-1:0]         mac_busy,
  // segment merger
  output logic                    open,
  output logic                    merge_clear,
  input  logic [1:0][GPS-1:0]     used,
  input  logic                    blocked,
  // TR bank
  output logic [NPART-1:0]        seal,
  output logic [NPART-1:0]        clear,
  input  logic [NPART-1:0]        written,
  output logic                    tr_req,
  output logic [NPART-1:0]        tr_mask,
  input  logic                    tr_gnt,
  input  logic                    tr_done,
  // tree adder
  output logic                    add_valid,
  input  logic                    add_out_valid,
  input  logic signed [SW-1:0]    add_sum,
  // result
  output logic                    busy,
  output logic                    done,
  output logic signed [AW-1:0]    result,
  output logic [7:0]              rounds,
  output logic [7:0]              stalls
);

  typedef enum logic [2:0] {
    V_IDLE, V_FILL, V_SEAL, V_WAIT_WR, V_TR_REQ, V_WAIT_TR, V_WAIT_ADD, V_CLEAR
  } vstate_e;
  vstate_e state;
  logic    last;

  // Local group (sign s, index i) sits in partition s*NPART/2 + 2*i + VEC.
  logic [NPART-1:0] used_g;
  always_comb begin
    used_g = '0;
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < GPS; i++)
        used_g[s * (NPART / 2) + 2 * i + VEC] = used[s][i];
  end

  assign mac_start   = (state == V_IDLE) && start;
  assign open        = (state == V_FILL);
  assign merge_clear = (state == V_CLEAR);
  assign seal        = (state == V_SEAL)  ? used_g : '0;
  assign clear       = (state == V_CLEAR) ? used_g : '0;
  assign tr_req      = (state == V_TR_REQ) && tr_enable;
  assign tr_mask     = used_g;
  assign add_valid   = (state == V_WAIT_TR) && tr_done;
  assign busy        = (state != V_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= V_IDLE;
      last   <= 1'b0;
      done   <= 1'b0;
      result <= '0;
      rounds <= '0;
      stalls <= '0;
    end else begin
      unique case (state)
        V_IDLE: if (start) begin
          state  <= V_FILL;
          done   <= 1'b0;
          result <= '0;
          rounds <= '0;
          stalls <= '0;
        end
        V_FILL: begin
          if (mac_busy == '0) begin
            last  <= 1'b1;
            state <= V_SEAL;
          end else if (blocked) begin
            last   <= 1'b0;
            stalls <= stalls + 1'b1;
            state  <= V_SEAL;
          end
        end
        V_SEAL: state <= (used_g == '0) ? V_CLEAR : V_WAIT_WR;
        V_WAIT_WR: if ((written & used_g) == used_g) state <= V_TR_REQ;
        V_TR_REQ:  if (tr_gnt) state <= V_WAIT_TR;
        V_WAIT_TR: if (tr_done) state <= V_WAIT_ADD;
        V_WAIT_ADD: if (add_out_valid) begin
          result <= result + AW'(add_sum);
          rounds <= rounds + 1'b1;
          state  <= V_CLEAR;
        end
        V_CLEAR: begin
          if (last) begin
            state <= V_IDLE;
            done  <= 1'b1;
          end else state <= V_FILL;
        end
        default: state <= V_IDLE;
      endcase
    end
  end

endmodule
