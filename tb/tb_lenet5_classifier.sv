// tb_lenet5_classifier: the LeNet-5 classifier (fully connected layers
// 400-120, 120-84, 84-10) run on one full-size TR MAC unit.
//
// The layer sizes are LeNet-5's standard ones. Every output neuron is a dot
// product longer than the 16 multipliers of a vector, so the testbench acts
// as the host: it cuts each dot product into chunks of 16 terms, runs one
// chunk per TRW on vector 0 (even neurons) and vector 1 (odd neurons) at the
// same time, collects both results from the result bus (TRRW) and adds the
// chunks in 32 bits. ReLU and saturation to 8 bits give the next layer's
// activations. Activations follow the skew of real classifiers (about half
// zero, most of the rest small); weights are signed, up to 127 in magnitude.
//
// Every chunk result is compared with the exact LD-SC count of the reference
// package, and every layer output with the reference layer, so the chain is
// checked end to end. The cycle count of each layer is printed.
//
// Paper vs own: the network and the LD-SC arithmetic are what the paper
// evaluates; the chunking, ReLU/saturation scaling and data distribution are
// this testbench's choices. The printed cycles are for one unit; the paper's
// latency table assumes an array of such units and is not comparable
// one-to-one. Runs the top at its default parameters.
module tb_lenet5_classifier;
  import trsc_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NB = NBITS, NM = NMAC;
  localparam int NL = 3;
  localparam int IN_SZ  [NL] = '{400, 120, 84};
  localparam int OUT_SZ [NL] = '{120, 84, 10};

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_valid = 0;
  logic [31:0] instr = '0, rs1_val = '0, rs2_val = '0;
  logic        illegal;
  logic        sr_we = 0;
  logic [2:0]  sr_addr = '0;
  logic [31:0] sr_wdata = '0, sr_rdata;
  logic [1:0][NM-1:0][NB-1:0] act = '0, wgt = '0;
  logic [1:0][NM-1:0]         act_neg = '0, wgt_neg = '0;
  logic        bus_we;
  logic [31:0] bus_addr, bus_wdata;
  logic [NPART-1:0] part_bitmap;
  logic        active;
  logic [1:0]  vec_busy, wb_pending, vec_done;
  logic [1:0][19:0] vec_result;
  logic [1:0][7:0]  rounds, stalls;

  tr_mac_top dut (.clk, .rst_n, .instr_valid, .instr, .rs1_val, .rs2_val, .illegal,
                  .sr_we, .sr_addr, .sr_wdata, .sr_rdata, .act, .act_neg, .wgt, .wgt_neg,
                  .bus_we, .bus_addr, .bus_wdata, .part_bitmap, .active, .vec_busy,
                  .wb_pending, .vec_done, .vec_result, .rounds, .stalls);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // result bus: address 0 = vector 0, 4 = vector 1
  int writes = 0;
  logic [1:0][31:0] got;
  always @(posedge clk) if (rst_n && bus_we) begin
    writes++;
    got[bus_addr[2]] = bus_wdata;
  end

  task automatic issue(input logic [2:0] f3, input logic [31:0] r1, input logic [31:0] r2);
    instr = {7'd0, 5'd2, 5'd1, f3, 5'd0, OPC_CUSTOM0};
    rs1_val = r1; rs2_val = r2; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
  endtask

  // network state
  int unsigned x [400];            // current layer input (8-bit)
  int unsigned y [120];            // current layer output
  int          wmag [120][400];    // weights, signed
  int          acc [2];
  int          exp_chunk [2];
  int          cyc_layer, rounds_total, stall_total, chunks;

  initial begin : main
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    sr_we = 1; sr_addr = SR_SIMB; sr_wdata = 1;
    @(negedge clk);
    sr_we = 0;
    issue(OP_TRS, 0, 0);
    issue(OP_TRVC, 0, 0);
    issue(OP_TRVC, 0, 1);

    for (int i = 0; i < 400; i++)
      case ($urandom_range(0, 9))
        0, 1, 2, 3, 4: x[i] = 0;
        5, 6, 7:       x[i] = $urandom_range(1, 40);
        8:             x[i] = $urandom_range(41, 127);
        default:       x[i] = $urandom_range(128, 255);
      endcase

    for (int l = 0; l < NL; l++) begin
      for (int o = 0; o < OUT_SZ[l]; o++)
        for (int i = 0; i < IN_SZ[l]; i++)
          wmag[o][i] = int'($urandom_range(0, 127)) * (($urandom_range(0, 1) != 0) ? -1 : 1);
      cyc_layer = 0;
      rounds_total = 0;
      stall_total = 0;
      chunks = 0;
      for (int o = 0; o < OUT_SZ[l]; o += 2) begin
        int ref_sum [2];
        acc = '{0, 0};
        ref_sum = '{0, 0};
        for (int k0 = 0; k0 < IN_SZ[l]; k0 += NM) begin
          int n0;
          for (int v = 0; v < 2; v++) begin
            exp_chunk[v] = 0;
            for (int m = 0; m < NM; m++) begin
              int k, w, c;
              bit live;
              k = k0 + m;
              live = (k < IN_SZ[l]) && (o + v < OUT_SZ[l]);
              w = live ? wmag[o + v][k] : 0;
              act[v][m]     = live ? NB'(x[k]) : '0;
              act_neg[v][m] = 1'b0;
              wgt[v][m]     = NB'(w < 0 ? -w : w);
              wgt_neg[v][m] = (w < 0);
              c = int'(ldsc_count(act[v][m], wgt[v][m], NB));
              exp_chunk[v] += (w < 0) ? -c : c;
            end
          end
          n0 = writes;
          issue(OP_TRW, 0, 0);
          issue(OP_TRW, 0, 1);
          issue(OP_TRRW, 32'h0, 32'h0);
          issue(OP_TRRW, 32'h4, 32'h1);
          cyc_layer += 4;
          while (writes < n0 + 2 && cyc_layer < 10_000_000) begin
            @(negedge clk);
            cyc_layer++;
          end
          for (int v = 0; v < 2; v++) begin
            chk($signed(got[v]) == exp_chunk[v],
                $sformatf("layer %0d neuron %0d chunk %0d: got %0d exp %0d", l, o + v, k0 / NM,
                          $signed(got[v]), exp_chunk[v]));
            acc[v] += $signed(got[v]);
            ref_sum[v] += exp_chunk[v];
            rounds_total += rounds[v];
            stall_total += stalls[v];
          end
          chunks++;
        end
        for (int v = 0; v < 2; v++)
          if (o + v < OUT_SZ[l]) begin
            chk(acc[v] == ref_sum[v], $sformatf("layer %0d neuron %0d sum", l, o + v));
            y[o + v] = (acc[v] <= 0) ? 0 : (acc[v] > 255 ? 255 : acc[v]);
          end
      end
      $display("layer %0d (%0d -> %0d): %0d chunk pairs, %0d cycles, %0d TR rounds, %0d stalls",
               l, IN_SZ[l], OUT_SZ[l], chunks, cyc_layer, rounds_total, stall_total);
      for (int i = 0; i < OUT_SZ[l]; i++) x[i] = y[i];
    end
    $write("class scores:");
    for (int i = 0; i < 10; i++) $write(" %0d", y[i]);
    $write("\n");
    issue(OP_TRE, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
