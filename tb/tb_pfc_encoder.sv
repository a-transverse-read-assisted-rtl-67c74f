// tb_pfc_encoder: exhaustive check of the PFC split.
//
// For every 8-bit value the seed must equal the first 63 bits of its 256-bit
// stochastic number and the LSBs must be B_6, B_7; the concatenated segments
// {seed, last bit} must rebuild the whole SN. The 6-bit / 8-bit-segment
// example (10-bit PFC: 7-bit seed, 3 LSBs) is checked the same way.
//
// Paper vs own: the PFC rule and the 6-bit example are the paper's; the
// exhaustive sweep and the reference model are this testbench's. No clock:
// the block is combinational, checked after a 1-time-unit settle.
module tb_pfc_encoder;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0]  bn8;
  logic [62:0] seed8;
  logic [1:0]  lsb8;
  pfc_encoder dut8 (.bn(bn8), .seed(seed8), .lsbs(lsb8));

  logic [5:0]  bn6;
  logic [6:0]  seed6;
  logic [2:0]  lsb6;
  pfc_encoder #(.NB(6), .P(8)) dut6 (.bn(bn6), .seed(seed6), .lsbs(lsb6));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    for (int v = 0; v < 256; v++) begin
      bit ok_seed, ok_rebuild;
      bn8 = 8'(v);
      #1;
      ok_seed = 1;
      for (int p = 0; p < 63; p++) if (seed8[p] != sn_bit(v, 8, p)) ok_seed = 0;
      chk(ok_seed, $sformatf("seed of %0d", v));
      chk(lsb8 == {bit'((v >> 0) & 1), bit'((v >> 1) & 1)}, $sformatf("lsbs of %0d", v));
      // rebuild: segment j ends with B_(6+ctz(j+1)) taken from the LSB field
      ok_rebuild = 1;
      for (int j = 0; j < 4; j++) begin
        bit last;
        last = (j == 0 || j == 2) ? lsb8[0] : (j == 1) ? lsb8[1] : 1'b0;
        for (int p = 0; p < 64; p++) begin
          bit b;
          b = (p < 63) ? seed8[p] : last;
          if (b != sn_bit(v, 8, 64 * j + p)) ok_rebuild = 0;
        end
      end
      chk(ok_rebuild, $sformatf("rebuild of %0d", v));
    end
    for (int v = 0; v < 64; v++) begin
      bit ok_seed;
      bn6 = 6'(v);
      #1;
      ok_seed = 1;
      for (int p = 0; p < 7; p++) if (seed6[p] != sn_bit(v, 6, p)) ok_seed = 0;
      chk(ok_seed, $sformatf("6-bit seed of %0d", v));
      // LSBs are d, e, f: B_3, B_4, B_5
      chk(lsb6 == {bit'(v & 1), bit'((v >> 1) & 1), bit'((v >> 2) & 1)},
          $sformatf("6-bit lsbs of %0d", v));
    end
    chk($bits({seed6, lsb6}) == 10, "PFC of a 6-bit BN with 8-bit segments is 10 bits");
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
