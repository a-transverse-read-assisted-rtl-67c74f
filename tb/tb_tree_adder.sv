// tb_tree_adder: TR-count adder at the default size (32 groups x 64 parts).
//
// Random part counts (0..5) and random use masks are applied back to back,
// one per cycle; each result must arrive exactly three cycles after its
// input and equal (sum of used positive groups) - (sum of used negative
// groups), computed here with a plain loop. Extremes (all counts 5 in one
// half only) check the width of the signed result.
//
// Paper vs own: the 3-cycle latency and the positive-minus-negative
// structure follow the paper; the stage split is this design's.
module tb_tree_adder;
  localparam int NG = 32, P = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                       in_valid = 0;
  logic [NG-1:0][P-1:0][2:0]  cnt;
  logic [NG-1:0]              use_mask;
  logic                       out_valid;
  logic signed [13:0]         sum;
  tree_adder dut (.clk, .rst_n, .in_valid, .cnt, .use_mask, .out_valid, .sum);

  int exp_q[$];
  int sent_at[$];
  int cycle = 0;
  always @(posedge clk) cycle++;

  always @(negedge clk) if (rst_n && out_valid) begin
    int e, t;
    checks += 2;
    if (exp_q.size() == 0) begin
      failures += 2;
    end else begin
      e = exp_q.pop_front();
      t = sent_at.pop_front();
      if (int'(sum) != e) begin
        failures++;
        $display("FAIL sum %0d expected %0d", sum, e);
      end
      if (cycle - t != 3) begin
        failures++;
        $display("FAIL latency %0d", cycle - t);
      end
    end
  end

  initial begin
    cnt = '0; use_mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 60; t++) begin
      int e;
      e = 0;
      for (int g = 0; g < NG; g++) begin
        use_mask[g] = 1'($urandom);
        for (int b = 0; b < P; b++) begin
          if (t == 0)      cnt[g][b] = (g < NG / 2) ? 3'd5 : 3'd0;
          else if (t == 1) cnt[g][b] = (g < NG / 2) ? 3'd0 : 3'd5;
          else             cnt[g][b] = 3'($urandom_range(0, 5));
        end
        if (t < 2) use_mask[g] = 1'b1;
        if (use_mask[g])
          for (int b = 0; b < P; b++) e += (g < NG / 2) ? int'(cnt[g][b]) : -int'(cnt[g][b]);
      end
      in_valid = 1;
      exp_q.push_back(e);
      sent_at.push_back(cycle);
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
