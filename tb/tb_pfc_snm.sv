// tb_pfc_snm: PFC stochastic-number multiplier.
//
// Default size (8-bit operands, 64-bit segments): every product of a set of
// edge cases and random operands is streamed out; the segments are compared
// one by one with segments cut from the reference SN and UN (SN AND UN), the
// number of segments with counter + (bEdge != 0), the sign with a_neg^b_neg,
// and, with ready held high, the cycle count (one segment per cycle, at most
// 4 per multiplication). Random back-pressure is applied in a second pass.
// A 5-bit instance with 4-bit segments reproduces the worked example
// SN = 10011, UN = 10010: 4 full segments plus one mixed segment 1,0,0,0.
//
// Paper vs own: segment contents, early termination and the 4-segment
// worst case follow the paper; the valid/ready timing checked here is this
// design's own interface.
module tb_pfc_snm;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start = 0, a_neg = 0, b_neg = 0, ready = 1;
  logic [7:0]  a = 0, b = 0;
  logic        busy, sv, sneg, done;
  logic [63:0] seg;
  pfc_snm dut (.clk, .rst_n, .start, .a, .a_neg, .b, .b_neg, .busy,
               .seg_valid(sv), .seg_ready(ready), .seg, .seg_neg(sneg), .done);

  logic        start5 = 0;
  logic [4:0]  a5 = 0, b5 = 0;
  logic        busy5, sv5, sneg5, done5;
  logic [3:0]  seg5;
  pfc_snm #(.NB(5), .P(4)) dut5 (.clk, .rst_n, .start(start5), .a(a5), .a_neg(1'b0),
               .b(b5), .b_neg(1'b1), .busy(busy5), .seg_valid(sv5), .seg_ready(1'b1),
               .seg(seg5), .seg_neg(sneg5), .done(done5));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Expected segment j of SN(max) AND UN(min), P = 64.
  function automatic logic [63:0] exp_seg(input int unsigned x, input int unsigned y, input int j);
    int unsigned sv_, uv_;
    logic [63:0] r;
    sv_ = (x >= y) ? x : y;
    uv_ = (x >= y) ? y : x;
    for (int p = 0; p < 64; p++) r[p] = sn_bit(sv_, 8, 64 * j + p) && ((64 * j + p) < uv_);
    return r;
  endfunction

  task automatic run_one(input int unsigned x, input int unsigned y, input bit xn, input bit yn,
                         input bit bp);
    int n, cyc, ones, nexp;
    bit seg_ok;
    @(negedge clk);
    a = 8'(x); b = 8'(y); a_neg = xn; b_neg = yn; start = 1;
    @(negedge clk);
    start = 0;
    n = 0; cyc = 0; ones = 0; seg_ok = 1;
    while (!done) begin
      ready = bp ? 1'($urandom_range(0, 1)) : 1'b1;
      #1;
      if (sv && ready) begin
        if (seg != exp_seg(x, y, n)) seg_ok = 0;
        chk(sneg == (xn ^ yn), "sign");
        ones += $countones(seg);
        n++;
      end
      @(negedge clk);
      cyc++;
      if (cyc > 100) break;
    end
    nexp = nsegs(x, y, 64);
    chk(seg_ok, $sformatf("segments of %0d x %0d", x, y));
    chk(n == nexp, $sformatf("segment count %0d x %0d: %0d vs %0d", x, y, n, nexp));
    chk(ones == ldsc_count(x, y, 8), $sformatf("product count %0d x %0d", x, y));
    if (!bp) chk(cyc == nexp, $sformatf("cycles %0d x %0d = %0d", x, y, cyc));
    chk(n <= 4, "at most 4 segments");
    ready = 1;
  endtask

  initial begin
    int unsigned ex[12] = '{0, 1, 63, 64, 65, 127, 128, 191, 192, 200, 254, 255};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ex[i]) foreach (ex[j]) run_one(ex[i], ex[j], i[0], j[1], 0);
    for (int t = 0; t < 300; t++)
      run_one($urandom_range(0, 255), $urandom_range(0, 255), 1'($urandom), 1'($urandom), 0);
    for (int t = 0; t < 200; t++)
      run_one($urandom_range(0, 255), $urandom_range(0, 255), 1'($urandom), 1'($urandom), 1);

    // worked example, 5-bit operands, 4-bit segments
    begin
      logic [3:0] got[$];
      @(negedge clk);
      a5 = 5'b10011; b5 = 5'b10010; start5 = 1;
      @(negedge clk); start5 = 0;
      while (!done5) begin
        if (sv5) got.push_back(seg5);
        @(negedge clk);
      end
      chk(got.size() == 5, "example: 4 full + 1 mixed segment");
      // bit order: seg5[0] is the first SN bit of the segment
      if (got.size() == 5) begin
        chk(got[0] == 4'b0101 && got[1] == 4'b1101 && got[2] == 4'b0101 && got[3] == 4'b1101,
            "example full segments 1010,1011,1010,1011");
        chk(got[4] == 4'b0001, "example mixed segment 1000");
      end
      chk(sneg5 == 1'b1, "example sign");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
