// tb_sn_lsb_gen: SN 1-bit generator.
//
// First the 5-bit example with 4-bit segments: LSB field (c,d,e) = (0,1,1)
// must give the last-bit column 0,1,0,1,0,1,0,0. Then random LSB fields of a
// 3-bit generator are compared with the SN definition, and last_full with
// the UN counter.
//
// Paper vs own: the worked example's column is the paper's; the random
// comparison against the definition is this testbench's. One step per clock.
module tb_sn_lsb_gen;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  logic [2:0] lsbs, counter, acc;
  logic lsb, last_full;
  always #5 clk = ~clk;

  sn_lsb_gen #(.NL(3)) dut (.clk, .rst_n, .clear, .step, .lsbs, .counter, .acc, .lsb, .last_full);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    bit exp_col [8] = '{0, 1, 0, 1, 0, 1, 0, 0};
    lsbs = 3'b110; counter = 3'd4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int j = 0; j < 8; j++) begin
      chk(lsb == exp_col[j], $sformatf("example column bit %0d", j));
      chk(last_full == (j == 3), $sformatf("last_full at %0d", j));
      step = 1; @(negedge clk); step = 0;
    end
    // random fields: last bit of segment j of the 2^(2+3)-bit SN (P = 4)
    for (int t = 0; t < 40; t++) begin
      int unsigned v;
      v = $urandom_range(0, 31);
      lsbs = {3{1'b0}};
      lsbs[0] = v[2]; lsbs[1] = v[1]; lsbs[2] = v[0];   // B_2, B_3, B_4
      counter = 3'($urandom_range(1, 7));
      clear = 1; @(negedge clk); clear = 0;
      for (int j = 0; j < 8; j++) begin
        chk(lsb == sn_bit(v, 5, 4 * j + 3), $sformatf("v=%0d seg %0d", v, j));
        chk(last_full == (j + 1 == int'(counter)), "last_full compare");
        chk(acc == 3'(j), "accumulator");
        step = 1; @(negedge clk); step = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
