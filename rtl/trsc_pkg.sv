// trsc_pkg: shared constants, types and helper functions of the TR-assisted
// LD-SC MAC.
//
// The defaults describe the main configuration: 8-bit operands (a 256-bit
// stochastic number), 64-bit segments (a 63-bit seed), transverse-read parts of
// 5 data domains, 32 partitions per racetrack, and write/shift/TR latencies of
// 2/2/5 cycles. The number of MAC units per vector and the instruction-field
// placement beyond IR[14:12] are this design's own choices.
//
// Bit convention used throughout: B_k is bit k of the binary number counted
// from the most significant end (B_0 has weight 1/2). A stochastic number S of
// an n-bit value has S_p = B_k where k is the number of trailing zeros of p+1
// (equivalently p = 2^(k+1)*i + 2^k - 1); the last position 2^n-1 is always 0.
package trsc_pkg;

  // ---- datapath sizes -----------------------------------------------------
  parameter int unsigned NBITS      = 8;   // binary operand length
  parameter int unsigned SEG        = 64;  // segment parallelism P
  parameter int unsigned DOMAINS    = 5;   // data domains per part (TRD = 7)
  parameter int unsigned NPART      = 32;  // partitions per racetrack
  parameter int unsigned NMAC       = 16;  // MAC units per vector
  parameter int unsigned NVEC       = 2;   // interleaved vectors per TR bank

  // ---- racetrack timing (cycles) -------------------------------------------
  parameter int unsigned WRITE_CYC  = 2;
  parameter int unsigned SHIFT_CYC  = 2;
  parameter int unsigned TR_CYC     = 5;

  // ---- instruction set (IR[14:12]) -----------------------------------------
  typedef enum logic [2:0] {
    OP_TRS  = 3'b000,   // TR-based valid-bits collection starts
    OP_TRE  = 3'b001,   // TR-based valid-bits collection ends
    OP_TRVC = 3'b010,   // execute TR-based valid-bits collection
    OP_TRW  = 3'b011,   // write SN result to the TR bank
    OP_TRRW = 3'b100    // write binary TR result to a storage bank
  } tr_op_e;

  // RISC-V custom-0 major opcode carries the extension.
  parameter logic [6:0] OPC_CUSTOM0 = 7'b0001011;

  // ---- status register addresses -------------------------------------------
  typedef enum logic [2:0] {
    SR_TRBA   = 3'd0,
    SR_NUMTRB = 3'd1,
    SR_TRD    = 3'd2,
    SR_PS     = 3'd3,
    SR_SIMB   = 3'd4,
    SR_BPTRP  = 3'd5
  } sr_addr_e;

  // Number of trailing zeros of x (x > 0); returns w when x == 0.
  function automatic int unsigned ctz(input int unsigned x, input int unsigned w);
    int unsigned r;
    r = w;
    for (int i = w - 1; i >= 0; i--)
      if (x[i]) r = i;
    return r;
  endfunction

endpackage
