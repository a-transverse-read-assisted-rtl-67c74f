// tb_tr_ctrl: instruction decoder, status registers and result write-back.
//
// Checked: status-register reset values and write/read of all six
// registers; TRW is ignored outside a TRS..TRE session; TRW gives a one-cycle
// vec_start for vector rs2[0]; TRVC raises tr_enable of that vector and TRE
// drops both; TRRW waits for a result and for sIMB = 1, then writes it once
// at rs1 + offset (S-type offset, negative offsets included) with sign
// extension; a result older than the last TRW is not written; two ready
// vectors are written in consecutive cycles; a wrong major opcode is flagged
// as illegal and has no effect.
//
// Paper vs own: the IR[14:12] codes, register names and the sIMB rule
// follow the paper; opcode, operand fields, reset values and the stale-result
// rule are this design's. One instruction per cycle, checked at negedge.
module tb_tr_ctrl;
  import trsc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        instr_valid = 0;
  logic [31:0] instr = '0, rs1_val = '0, rs2_val = '0;
  logic        illegal;
  logic        sr_we = 0;
  logic [2:0]  sr_addr = '0;
  logic [31:0] sr_wdata = '0, sr_rdata;
  logic        active;
  logic [1:0]  vec_start, tr_enable, wb_pending;
  logic [1:0]  vec_done = '0;
  logic [1:0][19:0] vec_result = '0;
  logic        bus_we;
  logic [31:0] bus_addr, bus_wdata;

  tr_ctrl dut (.clk, .rst_n, .instr_valid, .instr, .rs1_val, .rs2_val, .illegal,
               .sr_we, .sr_addr, .sr_wdata, .sr_rdata, .active,
               .vec_start, .tr_enable, .vec_done, .vec_result, .bus_we, .bus_addr,
               .bus_wdata, .wb_pending);

  int writes = 0;
  logic [31:0] last_addr, last_data;
  always @(posedge clk) if (rst_n && bus_we) begin
    writes++;
    last_addr = bus_addr;
    last_data = bus_wdata;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  function automatic logic [31:0] enc(input logic [2:0] f3, input logic [11:0] imm,
                                      input logic [6:0] opc = OPC_CUSTOM0);
    return {imm[11:5], 5'd2, 5'd1, f3, imm[4:0], opc};
  endfunction

  task automatic issue(input logic [2:0] f3, input logic [31:0] r1, input logic [31:0] r2,
                       input logic [11:0] imm = 12'd0, input logic [6:0] opc = OPC_CUSTOM0);
    instr = enc(f3, imm, opc); rs1_val = r1; rs2_val = r2; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
  endtask

  task automatic sr_write(input logic [2:0] a, input logic [31:0] d);
    sr_we = 1; sr_addr = a; sr_wdata = d;
    @(negedge clk);
    sr_we = 0;
  endtask

  initial begin
    logic [31:0] vals[6];
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    sr_addr = SR_TRD;   #1 chk(sr_rdata == 7, "TRD resets to 7");
    sr_addr = SR_PS;    #1 chk(sr_rdata == 64, "PS resets to 64");
    sr_addr = SR_SIMB;  #1 chk(sr_rdata == 0, "sIMB resets to 0");
    sr_addr = SR_NUMTRB;#1 chk(sr_rdata == 1, "numTRB resets to 1");
    for (int a = 0; a < 6; a++) begin
      vals[a] = $urandom;
      sr_write(3'(a), vals[a]);
    end
    for (int a = 0; a < 6; a++) begin
      sr_addr = 3'(a);
      #1 chk(sr_rdata == ((a == SR_SIMB) ? {31'b0, vals[a][0]} : vals[a]), $sformatf("status register %0d", a));
    end
    @(negedge clk);
    sr_write(SR_SIMB, 0);
    sr_addr = SR_SIMB;
    #1 chk(sr_rdata == 0, "sIMB cleared");

    // outside a session
    issue(OP_TRW, 0, 1);
    #1 chk(vec_start == 0, "TRW ignored before TRS");
    issue(OP_TRS, 0, 0);
    chk(active, "TRS opens the session");
    issue(OP_TRW, 0, 1);
    #1 chk(vec_start == 2'b10, "TRW starts vector 1");
    @(negedge clk);
    chk(vec_start == 0, "vec_start is one cycle");
    issue(OP_TRVC, 0, 0);
    chk(tr_enable == 2'b01, "TRVC enables vector 0");

    // write-back of vector 0 at 0x100 - 4
    vec_result[0] = 20'hFFFFB;   // -5
    issue(OP_TRRW, 32'h100, 32'h0, 12'hFFC);
    chk(wb_pending == 2'b01, "TRRW pending");
    repeat (3) @(negedge clk);
    chk(writes == 0, "no write before the result is ready");
    vec_done[0] = 1;
    repeat (3) @(negedge clk);
    chk(writes == 0, "no write while sIMB = 0");
    sr_write(SR_SIMB, 1);
    repeat (2) @(negedge clk);
    chk(writes == 1 && last_addr == 32'hFC && last_data == 32'hFFFFFFFB, "result written at rs1+offset");
    repeat (3) @(negedge clk);
    chk(writes == 1 && wb_pending == 0, "written once");

    // stale result: TRW then TRRW while the old result is still shown
    issue(OP_TRW, 0, 0);
    issue(OP_TRRW, 32'h200, 32'h0, 12'd8);
    repeat (3) @(negedge clk);
    chk(writes == 1, "old result not written after a new TRW");
    vec_done[0] = 0;
    repeat (3) @(negedge clk);
    vec_result[0] = 20'd77;
    vec_done[0] = 1;
    repeat (2) @(negedge clk);
    chk(writes == 2 && last_addr == 32'h208 && last_data == 77, "new result written");

    // both vectors ready together
    vec_result[1] = 20'd9; vec_done[1] = 1;
    issue(OP_TRRW, 32'h300, 32'h0, 12'd0);
    issue(OP_TRRW, 32'h400, 32'h1, 12'd0);
    repeat (4) @(negedge clk);
    chk(writes == 4, "both vectors written");

    // illegal encoding
    issue(OP_TRE, 0, 0, 12'd0, 7'b0110011);
    #1 chk(illegal, "wrong opcode flagged");
    chk(active, "illegal instruction has no effect");
    issue(OP_TRE, 0, 0);
    chk(!active && tr_enable == 0, "TRE closes the session");
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
