// tr_ctrl: memory-side controller of the TR-based valid-bits collection.
//
// Decodes the five instructions of the RISC-V extension and keeps the status
// registers of the TR unit:
//   TRS  (IR[14:12]=000)  open a TR session (collection starts)
//   TRE  (001)            close it; TR permission of both vectors is dropped
//   TRVC (010) rs2,off(rs1)  allow the TR/accumulate phase of vector rs2[0]
//   TRW  (011) rs2,off(rs1)  start writing the SN segments of vector rs2[0]
//                            into the TR bank (launches its MACs)
//   TRRW (100) rs2,off(rs1)  write the binary result of vector rs2[0] to the
//                            storage bank at address rs1+offset
// Status registers (written through the sr_* port, read combinationally):
//   0 TRBA   TR bank address        1 numTRB  number of TR banks
//   2 TRD    TR distance (reset 7)  3 PS      parallelism of a segment (64)
//   4 sIMB   internal bus state: 0 CPU, 1 internal memory operations
//   5 BPTRP  pointer to the TR-part bitmap
// A TRRW is held pending until its vector has a result and sIMB = 1; then
// the result is written over the internal bus (bus_we for one cycle). A
// result that predates the last TRW of its vector is never written. If both
// vectors are ready in the same cycle they are served in alternate cycles.
//
// Interface timing: instructions are accepted one per cycle when
// instr_valid is high; vec_start is a one-cycle pulse in the following cycle.
// Only IR[14:12] and the register names come from the paper. Operand fields
// use the RISC-V S-type layout (rs1 IR[19:15], rs2 IR[24:20], offset
// {IR[31:25],IR[11:7]}), the major opcode is custom-0, rs2[0] selects the
// vector, and the register reset values are this design's choices. PS, TRD,
// TRBA and numTRB are held for software; the datapath is built for the
// default configuration and does not reconfigure from them.
module tr_ctrl #(
  parameter int unsigned AW = 20,
  localparam int unsigned NVEC = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // instruction port
  input  logic                         instr_valid,
  input  logic [31:0]                  instr,
  input  logic [31:0]                  rs1_val,
  input  logic [31:0]                  rs2_val,
  output logic                         illegal,
  // status registers
  input  logic                         sr_we,
  input  logic [2:0]                   sr_addr,
  input  logic [31:0]                  sr_wdata,
  output logic [31:0]                  sr_rdata,
  // datapath control
  output logic                         active,
  output logic [NVEC-1:0]              vec_start,
  output logic [NVEC-1:0]              tr_enable,
  input  logic [NVEC-1:0]              vec_done,
  input  logic [NVEC-1:0][AW-1:0]      vec_result,
  // internal memory bus towards the result bank
  output logic                         bus_we,
  output logic [31:0]                  bus_addr,
  output logic [31:0]                  bus_wdata,
  output logic [NVEC-1:0]              wb_pending
);

  import trsc_pkg::*;

  logic [31:0] trba, numtrb, trd, ps, bptrp;
  logic        simb;

  logic [2:0]  f3;
  logic [31:0] imm, ea;
  logic        vsel;
  logic        ok;
  assign f3   = instr[14:12];
  assign imm  = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign ea   = rs1_val + imm;
  assign vsel = rs2_val[0];
  assign ok   = instr_valid && (instr[6:0] == OPC_CUSTOM0) && (f3 <= 3'b100);

  logic [NVEC-1:0][31:0] wb_addr;
  logic                  wb_last;
  logic [NVEC-1:0]       wb_ready;
  logic                  wb_go;
  logic                  wb_sel;
  logic [NVEC-1:0]       stale;    // result still from the previous TRW

  always_comb begin
    wb_ready = wb_pending & vec_done & ~stale & {NVEC{simb}};
    wb_go    = (wb_ready != '0);
    if (wb_ready == 2'b11) wb_sel = !wb_last;
    else                   wb_sel = wb_ready[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trba       <= '0;
      numtrb     <= 32'd1;
      trd        <= 32'd7;
      ps         <= 32'd64;
      simb       <= 1'b0;
      bptrp      <= '0;
      active     <= 1'b0;
      vec_start  <= '0;
      tr_enable  <= '0;
      wb_pending <= '0;
      wb_addr    <= '0;
      wb_last    <= 1'b1;
      bus_we     <= 1'b0;
      bus_addr   <= '0;
      bus_wdata  <= '0;
      illegal    <= 1'b0;
      stale      <= '0;
    end else begin
      stale <= stale & vec_done;
      vec_start <= '0;
      bus_we    <= 1'b0;
      illegal   <= instr_valid && !ok;
      if (sr_we) begin
        unique case (sr_addr)
          SR_TRBA:   trba   <= sr_wdata;
          SR_NUMTRB: numtrb <= sr_wdata;
          SR_TRD:    trd    <= sr_wdata;
          SR_PS:     ps     <= sr_wdata;
          SR_SIMB:   simb   <= sr_wdata[0];
          SR_BPTRP:  bptrp  <= sr_wdata;
          default: ;
        endcase
      end
      // write-back over the internal bus
      if (wb_go) begin
        bus_we             <= 1'b1;
        bus_addr           <= wb_addr[wb_sel];
        bus_wdata          <= 32'(signed'(vec_result[wb_sel]));
        wb_pending[wb_sel] <= 1'b0;
        wb_last            <= wb_sel;
      end
      if (ok) begin
        unique case (f3)
          OP_TRS: active <= 1'b1;
          OP_TRE: begin
            active    <= 1'b0;
            tr_enable <= '0;
          end
          OP_TRVC: if (active) tr_enable[vsel] <= 1'b1;
          OP_TRW: if (active) begin
            vec_start[vsel] <= 1'b1;
            stale[vsel]     <= 1'b1;
          end
          OP_TRRW: begin
            wb_pending[vsel] <= 1'b1;
            wb_addr[vsel]    <= ea;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (sr_addr)
      SR_TRBA:   sr_rdata = trba;
      SR_NUMTRB: sr_rdata = numtrb;
      SR_TRD:    sr_rdata = trd;
      SR_PS:     sr_rdata = ps;
      SR_SIMB:   sr_rdata = {31'b0, simb};
      SR_BPTRP:  sr_rdata = bptrp;
      default:   sr_rdata = '0;
    endcase
  end

endmodule
