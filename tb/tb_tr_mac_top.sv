// tb_tr_mac_top: end-to-end test of the TR-assisted LD-SC MAC at full size.
//
// Runs the default configuration (8-bit operands, 64-bit segments, 32
// partitions of 5 domains, 16 multipliers per vector, two vectors) through
// the instruction interface the way software would: set sIMB, TRS, TRVC for
// both vectors, then per dot product TRW and TRRW for each vector, and
// finally TRE. Every dot product written to the result bus is compared with
// a reference that builds the low-discrepancy SN bit by bit (tb_ref_pkg), at
// the address given by the TRRW instruction.
//
// Scenarios: a single worst-case multiplication (255 x 255) and five of them
// on one vector, whose latencies are measured and printed; a result held
// back while sIMB = 0; random signed dot
// products with zeros, small and large operands on both vectors at once;
// all-large operands that overflow one sign half (stall and extra rounds);
// an illegal instruction.
//
// Mechanism counters (observed in the design, not in the stimulus): zero
// products, early termination of zero segments, mixed segments, products
// without a mixed segment (bEdge = 0), zero padding at seal, stalls,
// multi-round dot products, both vectors requesting TR in the same cycle,
// negative results, write-back waiting for sIMB, illegal instructions. The
// test fails if any of them never occurs.
//
// Paper vs own: the arithmetic (exact LD-SC counts) and the mechanisms
// follow the paper; the measured latencies are printed for comparison with
// the paper's 32 and 34 cycles, not checked against them, because this design
// writes a fifth (zero) domain and merges one segment per cycle per vector.
// No parameter overrides: this is the full-size run.
module tb_tr_mac_top;
  import trsc_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NB = NBITS, P = SEG, NM = NMAC;

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
  logic [1:0]  vec_done, vec_busy, wb_pending;
  logic        active;
  logic [1:0][19:0] vec_result;
  logic [1:0][7:0]  rounds, stalls;

  tr_mac_top dut (.clk, .rst_n, .instr_valid, .instr, .rs1_val, .rs2_val, .illegal,
                  .sr_we, .sr_addr, .sr_wdata, .sr_rdata, .act, .act_neg, .wgt, .wgt_neg,
                  .bus_we, .bus_addr, .bus_wdata, .part_bitmap, .active, .vec_busy, .wb_pending, .vec_done, .vec_result,
                  .rounds, .stalls);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  // ---- mechanism counters --------------------------------------------------
  int n_zero = 0, n_et = 0, n_mixed = 0, n_nomixed = 0, n_pad = 0, n_stall = 0;
  int n_multi = 0, n_pingpong = 0, n_neg = 0, n_simb_wait = 0, n_illegal = 0;
  int n_segs = 0;

  for (genvar v = 0; v < 2; v++) begin : g_mon
    for (genvar m = 0; m < NM; m++) begin : g_m
      int  cnt_seg = 0;
      bit  last_mixed = 0;
      always @(posedge clk) if (rst_n) begin
        if (dut.g_vec[v].g_mac[m].u_mac.seg_valid && dut.g_vec[v].g_mac[m].u_mac.seg_ready) begin
          cnt_seg++;
          n_segs++;
          last_mixed = (dut.g_vec[v].g_mac[m].u_mac.state == 2'd2);
          if (last_mixed) n_mixed++;
        end
        if (dut.g_vec[v].g_mac[m].u_mac.done) begin
          if (cnt_seg == 0) n_zero++;
          else begin
            if (cnt_seg < (1 << NB) / P) n_et++;
            if (!last_mixed) n_nomixed++;
          end
          cnt_seg = 0;
          last_mixed = 0;
        end
      end
    end
  end
  for (genvar g = 0; g < NPART; g++) begin : g_pmon
    always @(posedge clk)
      if (rst_n && dut.u_bank.seal[g] && dut.u_bank.g_grp[g].u_grp.nq != DOMAINS) n_pad++;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.tr_req == 2'b11) n_pingpong++;
    if (illegal) n_illegal++;
    for (int v = 0; v < 2; v++)
      if (wb_pending[v] && vec_done[v] && !dut.u_ctrl.stale[v] && !dut.u_ctrl.simb)
        n_simb_wait++;
  end

  // ---- result bus monitor ----------------------------------------------------
  int writes = 0;
  logic [31:0] exp_data [logic [31:0]];
  always @(posedge clk) if (rst_n && bus_we) begin
    writes++;
    if (!exp_data.exists(bus_addr)) chk(0, $sformatf("unexpected write at %h", bus_addr));
    else begin
      chk(bus_wdata == exp_data[bus_addr],
          $sformatf("result at %h: got %0d exp %0d", bus_addr, $signed(bus_wdata),
                    $signed(exp_data[bus_addr])));
      if ($signed(bus_wdata) < 0) n_neg++;
      exp_data.delete(bus_addr);
    end
  end

  // ---- instruction helpers ---------------------------------------------------
  task automatic issue(input logic [2:0] f3, input logic [31:0] r1, input logic [31:0] r2,
                       input logic [11:0] imm = 12'd0, input logic [6:0] opc = OPC_CUSTOM0);
    instr = {imm[11:5], 5'd2, 5'd1, f3, imm[4:0], opc};
    rs1_val = r1; rs2_val = r2; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
  endtask

  task automatic sr_write(input logic [2:0] a, input logic [31:0] d);
    sr_we = 1; sr_addr = a; sr_wdata = d;
    @(negedge clk);
    sr_we = 0;
  endtask

  function automatic logic [31:0] expected(input int v);
    int s = 0;
    for (int m = 0; m < NM; m++) begin
      int c = int'(ldsc_count(act[v][m], wgt[v][m], NB));
      s += (act_neg[v][m] ^ wgt_neg[v][m]) ? -c : c;
    end
    return 32'(s);
  endfunction

  // Random operand: zero, small, mid or large.
  function automatic logic [NB-1:0] rnd_op();
    case ($urandom_range(0, 5))
      0:       return '0;
      1:       return NB'($urandom_range(1, 63));
      2:       return NB'($urandom_range(64, 127) & ~32'd63);   // multiple of 64
      3:       return NB'($urandom_range(192, 255));
      default: return NB'($urandom);
    endcase
  endfunction

  task automatic wait_writes(input int n, input int limit, output int cyc);
    cyc = 0;
    while (writes < n && cyc < limit) begin
      @(negedge clk);
      cyc++;
    end
    chk(writes >= n, $sformatf("%0d bus writes within %0d cycles", n, limit));
  endtask

  int lat_done, lat_wr, lat5;
  initial begin
    int cyc;
    int unsigned base;
    int n0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    sr_write(SR_SIMB, 1);
    issue(OP_TRS, 0, 0);
    issue(OP_TRVC, 0, 0);
    issue(OP_TRVC, 0, 1);

    // ---- 1. single worst-case multiplication: latency --------------------
    act[0][0] = 8'd255; wgt[0][0] = 8'd255;
    exp_data[32'h100] = expected(0);
    issue(OP_TRRW, 32'h100, 32'h0);
    issue(OP_TRW, 0, 0);
    lat_done = 0;
    while (!(vec_done[0] && !dut.u_ctrl.stale[0]) && lat_done < 1000) begin
      @(negedge clk);
      lat_done++;
    end
    wait_writes(1, 100, lat_wr);
    lat_wr += lat_done;
    $display("latency 255x255 on one MAC: %0d cycles from TRW to result, %0d to bus write",
             lat_done, lat_wr);
    chk(vec_result[0] == 20'(ldsc_count(255, 255, NB)), "single product value");
    chk(rounds[0] == 1 && stalls[0] == 0, "single product in one round");

    // ---- 1b. five worst-case multiplications on one vector --------------
    for (int m = 0; m < 5; m++) begin
      act[0][m] = 8'd255; wgt[0][m] = 8'd255;
    end
    exp_data[32'h180] = expected(0);
    issue(OP_TRW, 0, 0);
    issue(OP_TRRW, 32'h180, 32'h0);
    lat5 = 1;
    while (!(vec_done[0] && !dut.u_ctrl.stale[0]) && lat5 < 1000) begin
      @(negedge clk);
      lat5++;
    end
    wait_writes(2, 100, cyc);
    $display("latency 5 x (255x255) on one vector: %0d cycles from TRW to result", lat5);
    chk(rounds[0] == 1, "five products in one round");
    act[0] = '0; wgt[0] = '0;

    // ---- 2. write-back waits for sIMB ----------------------------------
    sr_write(SR_SIMB, 0);
    act[1] = '0; wgt[1] = '0;
    for (int m = 0; m < NM; m++) begin
      act[1][m] = rnd_op(); wgt[1][m] = rnd_op();
      act_neg[1][m] = 1'($urandom); wgt_neg[1][m] = 1'($urandom);
    end
    exp_data[32'h204] = expected(1);
    issue(OP_TRW, 0, 1);
    issue(OP_TRRW, 32'h200, 32'h1, 12'd4);
    repeat (400) @(negedge clk);
    chk(writes == 2, "no write while the bus belongs to the CPU");
    sr_write(SR_SIMB, 1);
    wait_writes(3, 10, cyc);

    // ---- 3. random dot products on both vectors ------------------------
    base = 32'h1000;
    for (int it = 0; it < 60; it++) begin
      bit big;
      big = (it % 10 == 9);            // every tenth: all-large operands
      for (int v = 0; v < 2; v++)
        for (int m = 0; m < NM; m++) begin
          act[v][m] = big ? NB'($urandom_range(200, 255)) : rnd_op();
          wgt[v][m] = big ? NB'($urandom_range(200, 255)) : rnd_op();
          act_neg[v][m] = big ? 1'b0 : 1'($urandom);
          wgt_neg[v][m] = (big && v == 0) ? 1'b0 : 1'($urandom);
        end
      exp_data[base]     = expected(0);
      exp_data[base + 4] = expected(1);
      n0 = writes;
      issue(OP_TRW, 0, 0);
      issue(OP_TRW, 0, 1);
      issue(OP_TRRW, base, 32'h0);
      issue(OP_TRRW, base, 32'h1, 12'd4);
      wait_writes(n0 + 2, 3000, cyc);
      if (vec_done[0]) begin
        n_stall += stalls[0] + stalls[1];
        if (rounds[0] > 1) n_multi++;
        if (rounds[1] > 1) n_multi++;
      end
      if (big) chk(stalls[0] > 0, "all-large vector stalls");
      base += 8;
    end
    chk(exp_data.num() == 0, "every expected result was written");

    // ---- 4. illegal instruction, end of session -------------------------
    issue(OP_TRS, 0, 0, 12'd0, 7'b0110011);
    issue(OP_TRE, 0, 0);
    repeat (3) @(negedge clk);
    chk(!active, "TRE closes the session");

    $display("segments %0d, zero products %0d, early-terminated %0d, mixed %0d, no-mixed %0d",
             n_segs, n_zero, n_et, n_mixed, n_nomixed);
    $display("zero-padded seals %0d, stalls %0d, multi-round %0d, ping-pong waits %0d",
             n_pad, n_stall, n_multi, n_pingpong);
    $display("negative results %0d, sIMB waits %0d, illegal %0d, bus writes %0d",
             n_neg, n_simb_wait, n_illegal, writes);
    chk(n_zero > 0, "zero products occur");
    chk(n_et > 0, "early termination occurs");
    chk(n_mixed > 0, "mixed segments occur");
    chk(n_nomixed > 0, "products without a mixed segment occur");
    chk(n_pad > 0, "zero padding occurs");
    chk(n_stall > 0, "stalls occur");
    chk(n_multi > 0, "multi-round dot products occur");
    chk(n_pingpong > 0, "both vectors request TR together");
    chk(n_neg > 0, "negative results occur");
    chk(n_simb_wait > 0, "write-back waits for sIMB");
    chk(n_illegal > 0, "illegal instruction flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
