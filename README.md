# Stochastic-computing dot products collected by transverse read in racetrack memory

This is a register-transfer description of one processing unit of a
racetrack-memory (RTM) accelerator for neural networks. The unit computes signed
8-bit dot products with **low-discrepancy stochastic computing (LD-SC)**.

In stochastic computing, a product of two numbers is the number of `1` bits
left after ANDing two bit streams. Counting those bits, the "valid bits", is
normally done with large parallel counters. This unit uses the memory instead:

- it writes the product bit streams, in 64-bit pieces, straight into
  racetrack partitions;
- it then counts all the `1`s of many products at once with a
  **transverse read (TR)**. A TR is one access that senses how many domains of
  a short stretch of nanowire are magnetised as `1`.

Three ideas make this fast. Each has its own module:

1. **Compressed stream generation (PFC).** A 256-bit stochastic number is
   never stored. It is regenerated on demand, 64 bits per cycle, from a
   hard-wired 63-bit "seed" and two leftover bits. Runs of zeros are skipped
   (early termination). An 8-bit product therefore needs at most 4 segments
   and usually fewer.
2. **Asynchronous write-in, synchronous TR.** Each multiplier pushes its
   segments into shared group queues as soon as they exist, without waiting
   for the slowest multiplier. Only the read is synchronised: one TR per round
   over every partition the vector uses.
3. **Interleaved placement with ping-pong TR.** Two neighbouring partitions
   share a boundary domain and cannot be sensed together. The two vectors
   therefore own alternate partitions. Each TR reads every partition of one
   vector, and the two vectors take turns.

All modules are synthesizable SystemVerilog-2017 except the racetrack bank,
which is a behavioural model of the memory array. Its counting is exact and
cycle-accurate to the latencies below, but it is a model, not a circuit.

## Configuration

| quantity | value | origin |
|---|---|---|
| operand width `NB` | 8 bits, sign-magnitude | paper |
| segment length `P` (parallelism) | 64 bits, seed 63 bits, ≤ 4 segments per product | paper |
| data domains per partition `D` | 5 (TR distance 7 = 5 data + 2 constant-0 guards) | paper |
| partitions per track `NPART` | 32 | paper (256-domain track / TR distance) |
| tracks per bank | 64 (= `P`, one segment bit per track) | paper |
| write / shift / TR latency | 2 / 2 / 5 cycles | paper |
| tree adder latency | 3 cycles | paper |
| multipliers per vector `NMAC` | 16 | this design |
| vectors sharing one TR bank | 2 | this design (ping-pong pair) |
| result width | 20 bits signed, sign-extended to 32 on the bus | this design |

All of these are parameters with these defaults (`rtl/trsc_pkg.sv` and each
module's header). The paper's clock is 1 GHz. Nothing here depends on it.

## 1. Low-discrepancy numbers and their compression

### The stream

An `NB`-bit value `v = B0 B1 … B(NB-1)` (B0 is the MSB) becomes a stream of
`2^NB` bits `S_0 … S_(2^NB-1)`. Bit `S_q` is the value bit with index
`k = ctz(q+1)`, the number of trailing zeros of `q+1`. If `k ≥ NB`, the bit is
0 (only the last position).

So `B0` appears at every even position, `B1` every fourth, and so on. This
places the `1`s as evenly as possible, and the first `u` bits of the stream
contain very close to `u·v/2^NB` ones.

### The product

The larger operand is turned into the stream. The smaller one, `u`, is
treated as a unary number: "the first `u` positions". The product count is

    count(a, b) = Σ_{q < min(a,b)} S_q(max(a,b))   ≈ a·b / 2^NB

The unit returns exactly this count, so a dot product comes out scaled by
`1/2^NB` relative to the integer dot product. This is inherent to LD-SC. The
testbenches compare against this exact count, never against `a·b`.

### Pseudo-fractal compression (`pfc_encoder`, `sn_lsb_gen`)

Split the stream into 64-bit segments (`L = log2 P = 6`). For positions
`p < 63` inside a segment, `ctz(p+1) < 6`, so the first 63 bits of *every*
segment are the same. This is the **seed**, `seed[p] = B_ctz(p+1)`, and it uses
only `B0…B5`.

Only the last bit of segment `j` differs between segments. It is
`B_(6 + ctz(j+1))`, which takes `B6` for even `j` and `B7` for `j = 1`, or 0
at `j = 3`. These two bits are the **LSBs**.

- `pfc_encoder` is pure wiring: `seed[p] = bn[NB-1-ctz(p+1)]` and
  `lsbs[i] = bn[NB-1-L-i]`.
- `sn_lsb_gen` holds the segment index `j`. It selects the last bit with the
  lowest set bit of `j+1`, and flags the last full-`1` unary segment.

Worked example with small numbers (5-bit operands, `P = 4`, as in the test of
`pfc_snm`): seed = first three stream bits, LSBs = the remaining three value
bits. Segments `0101, 1101, 0101, 1101, 0001` come out for a product whose unary
operand covers four full segments and one partial segment.

## 2. Turning one product into segments (`pfc_snm`, `ung`)

The unary operand `u` is split into two parts:

- `u >> L`: the number of **full** unary segments, all `1`. Each gives a stream
  segment unchanged: seed plus the right LSB. No AND gate is needed.
- `bEdge = u mod P`: the **mixed** segment. `ung` turns `bEdge` into a
  thermometer mask `seg[b] = (b < bEdge)`. The segment is `seed & mask`. The
  mask's top bit is always 0, so the LSB never enters a mixed segment.

Everything after that is zero and is never produced (**early termination**):

- if `bEdge = 0`, the mixed segment is skipped too;
- if `u = 0`, no segment is produced at all and `done` pulses directly.

`pfc_snm` is a three-state machine (`IDLE`, `FULL`, `MIXED`). On `start` it
latches:

- the seed and LSBs of the larger operand;
- the full-segment count and `bEdge` of the smaller one;
- the product sign (XOR of the operand signs).

It offers one segment per cycle on a valid/ready handshake, and the segment
and its sign hold while `seg_ready` is low. The number of segments is
`ceil(min(a,b) / 64)`: 0 to 4 for 8-bit operands.

## 3. Asynchronous write-in (`segment_merger`, `part_group`)

### Groups and queues

A **group** is one partition index taken across all 64 tracks. Segment bit
`b` goes to track `b`, so one write puts a whole segment in one domain
column.

Each group has a 5-entry input queue. Once a queue holds data, the group
repeats a write (2 cycles) and a shift (2 cycles) for each of its 5 domains.
After 5 domains it raises `written`.

When the round is **sealed**, missing entries are written as all-zero
segments. They add no `1`s, so the count is unchanged.

### Merging

Per vector, `segment_merger` takes at most one segment per cycle from the
multipliers, round-robin among those with a segment ready. It places the
segment in the group currently being filled for that segment's sign.

- Positive and negative products go to different groups.
- Each sign has `NPART/4 = 8` groups per vector.
- A group is closed after 5 segments and the next one is opened.

A multiplier's segments may therefore spread over several groups, and one
group may hold segments of several multipliers. This is the "first come,
first served" sharing: no queue is left half-empty while segments are waiting.

If a segment's sign half has no free group left, that multiplier is
**blocked** and keeps its segment.

### Partition map

| partitions | contents |
|---|---|
| 0 … 15 | positive products |
| 16 … 31 | negative products |
| even index inside a half | vector 0 |
| odd index inside a half | vector 1 |

Local group `i` of sign `s` for vector `v` is partition `16·s + 2·i + v`.

### Write timing

A group's first domain write starts 2 cycles after its first push. One
register holds the queue and one cycle starts the writer. The group is
therefore `written` 22 cycles after its first segment:

    2 + 5 × (2 write + 2 shift) = 22 cycles

`part_group` models the domains as a 5-stage shift register per track. The
two constant-0 guard domains of the 7-domain TR window are not stored.

## 4. Synchronous transverse read, ping-pong (`tr_bank`)

A vector asks for a TR with a partition mask, and the bank grants it when
idle. `tr_done` pulses 5 cycles after the grant (`TR_CYC`). The per-part
counts (0…5 ones per track per partition) then stay valid until the
partitions are cleared.

If both vectors are waiting, the one not served last wins. A waiting request
is granted in the same cycle the other TR finishes, so back-to-back TRs
alternate with no gap.

Because a vector's partitions all have the same parity:

- a TR never senses two neighbouring parts at once, which an assertion
  checks;
- one TR reads a vector's whole round.

The contiguous alternative would need two TRs per vector and would leave the
bus idle half the time.

## 5. Summing and rounds (`tree_adder`, `vector_ctrl`)

`tree_adder` adds the counts of the masked partitions in three registered
stages:

1. each group's 64 part counts (≤ 320);
2. the same-sign sums of the positive and the negative half;
3. a signed subtraction.

Its result is valid 3 cycles after the TR result.

`vector_ctrl` runs the rounds of one dot product:

    FILL -> SEAL -> WAIT_WRITTEN -> TR_REQ -> WAIT_TR -> WAIT_ADD -> CLEAR -> (FILL | IDLE)

- `FILL` starts all 16 multipliers, which then push freely.
- The round ends in one of two ways:
  - all multipliers are idle, which makes it the last round;
  - a multiplier is blocked by a full sign half, which is a **stall**.
- The used groups are then sealed. Once they are all written, one TR reads
  them, the tree-adder output is added to the accumulator, and the groups are
  cleared.
- After a stall the blocked multipliers simply continue in the next round.

With 16 multipliers and 8 groups × 5 domains = 40 segments per sign, a vector
whose products are all large and of one sign (16 × 4 = 64 segments) needs two
rounds. Typical data, with many small or zero operands, finish in one.

## 6. Instruction interface (`tr_ctrl`)

Five instructions are selected by `IR[14:12]`. This design uses the custom-0
major opcode and RISC-V S-type fields: `rs1` in IR[19:15], `rs2` in
IR[24:20], offset `{IR[31:25], IR[11:7]}`. `rs2[0]` selects the vector.

| IR[14:12] | name | effect here |
|---|---|---|
| 000 | TRS | open a TR session |
| 001 | TRE | close it; TR permission of both vectors dropped |
| 010 | TRVC rs2, off(rs1) | allow the TR/accumulate phase of vector rs2 |
| 011 | TRW rs2, off(rs1) | start vector rs2: its multipliers sample the operands and start writing |
| 100 | TRRW rs2, off(rs1) | write the vector's result to address rs1+offset once it is ready |

TRW and TRVC are ignored outside a session. Any other encoding raises
`illegal` for one cycle and has no effect.

The status registers are written and read through a separate port:

| index | register | meaning |
|---|---|---|
| 0 | TRBA | TR bank address |
| 1 | numTRB | number of TR banks (reset 1) |
| 2 | TRD | TR distance (reset 7) |
| 3 | PS | segment parallelism (reset 64) |
| 4 | sIMB | internal-bus owner: 0 = CPU, 1 = memory operations |
| 5 | BPTRP | pointer to the TR-partition bitmap |

TRRW is deferred until three things hold:

- the vector is done;
- its result is newer than its last TRW;
- sIMB = 1.

The result is then driven on `bus_we/bus_addr/bus_wdata` for one cycle. If
both vectors become writable together, they go out in consecutive cycles.

TRBA, numTRB, TRD, PS and BPTRP are stored for software but do not
reconfigure the datapath, which is fixed at elaboration. `part_bitmap` shows
which partitions are in use.

A typical sequence:

    write sIMB = 1
    TRS
    TRVC v0 ; TRVC v1
    loop: present operands ; TRW v0 ; TRW v1 ; TRRW v0, addr0 ; TRRW v1, addr1
    TRE

Operands (`act`, `wgt` and their sign bits) must be stable from TRW until the
cycle after it, when the multipliers latch them.

Issue TRRW after the TRW of the same vector. A TRRW that comes first, while
the previous result of that vector is still shown, writes that previous
result at once.

## 7. Timing

| step | cycles |
|---|---|
| TRW to multiplier start | 1 |
| segments out of one multiplier | ≤ 4, one per cycle |
| queue to first domain write | 2 |
| 5 domains written and shifted | 20 |
| TR | 5 |
| tree adder | 3 |
| controller state changes | ~3 |

Measured in the full-size testbench, one 255 × 255 product on a single
multiplier takes **34 cycles from TRW to the result** and 36 to the bus write.

The paper's own figure for a worst-case multiplication is 32 cycles. It
counts 16 write cycles for the 4 segments, while this design also writes the
fifth, zero-padded domain and spends cycles on the queue register and the
request/grant handshake.

More multiplications in the same round add no TR time: one TR reads all
groups. They do add write-in time, because the merger accepts one segment per
cycle per vector. The groups then fill one after another, and each starts
writing as soon as its first segment arrives.

Five 255 × 255 products on one vector (20 segments, 4 groups) take **49
cycles** from TRW to the result. The paper quotes 34 cycles for five
multiplications plus their addition. That figure assumes every multiplier
writes its segments at the same time. A merger with several push ports per
cycle would close most of this gap; it is not built here.

## 8. Where this departs from the paper or fills gaps

- **Behavioural memory.** Domain writes, shifts and TR sensing are modelled
  digitally (`part_group`, `tr_bank`). No current sensing, pinning or shift
  faults are modelled.
- **Own choices where the paper is silent:**
  - the merger's round-robin arbiter;
  - separate groups per sign, with a fixed split into positive and negative
    partition halves;
  - ending a round at the first blocked segment;
  - the valid/ready and request/grant handshakes;
  - 16 multipliers per vector;
  - the 20-bit accumulator;
  - the opcode and operand layout;
  - register reset values;
  - the meaning of TRVC as "TR allowed".
- **Fixed configuration.** The reconfiguration of parallelism (4…64) and
  operand length through PS is not built. The modules are parameterised, and
  the encoder is also tested at 6-bit operands with `P = 8`, but a different
  configuration means re-elaborating.
- **Not built:**
  - the activation, weight and result banks;
  - the internal bus and its arbitration;
  - the host RISC-V processor;
  - the array of processing units;
  - the analog TR sensing circuit;
  - the matrix-multiplication mapping, which is software.

  The top exposes their signals as ports instead.
- **Long dot products.** One TRW computes up to 16 terms per vector. Longer
  dot products, such as the 400 to 25088 terms of the LeNet-5 to VGG-19
  classifier layers, are run as chunks of 16 and added by software. Each
  chunk result (|x| ≤ 4080) fits easily.

## 9. Files and simulation

`rtl/` has one module or package per file:

| file | contents |
|---|---|
| `trsc_pkg` | shared constants, opcodes, `ctz` |
| `pfc_encoder`, `sn_lsb_gen`, `ung`, `pfc_snm` | multiplier |
| `segment_merger` | write-in distribution |
| `part_group`, `tr_bank` | racetrack model |
| `tree_adder`, `vector_ctrl` | collection and rounds |
| `tr_ctrl` | instructions and registers |
| `tr_mac_top` | one processing unit, two vectors |

`tb/` has one self-checking testbench per module, plus `tb_ref_pkg`. That
package builds streams bit by bit from the definition in section 1 and is
shared by the testbenches. Each testbench prints
`TB_RESULT checks=N failures=M`.

`tb_tr_mac_top` runs the unit at its default size through the instruction
interface. It checks 123 dot-product results and counts every mechanism:

- zero products, early termination, mixed and mixed-free products;
- zero padding, stalls, multi-round dot products;
- simultaneous TR requests, negative results;
- write-back waiting for sIMB, illegal instructions.

It fails if any of them never happens.

`tb_lenet5_classifier` runs a workload: the three fully connected layers of
LeNet-5 (400→120→84→10), with the testbench acting as the host. It does the
following:

- cuts every neuron's dot product into chunks of 16 terms;
- runs an even and an odd neuron on the two vectors at once;
- adds the chunk results read from the bus;
- applies ReLU and 8-bit saturation to form the next layer's input.

All 3732 chunk results and all neuron sums match the reference exactly. One
unit needs 87,618 cycles for the whole classifier, about 47 cycles per pair
of chunks. Larger classifiers (AlexNet, VGG-19, ResNet-18, SqueezeNet,
Inception-V3) use the same path with longer dot products and are not
simulated at full size.

Example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
        rtl/trsc_pkg.sv tb/tb_ref_pkg.sv tb/tb_tr_mac_top.sv --top-module tb_tr_mac_top
    ./obj_dir/Vtb_tr_mac_top

The same command with another `tb_*` file runs the other tests. The
sub-module tests use reduced sizes where the full size would make exhaustive
checks slow: 8 tracks and 8 partitions for the bank, 4 multipliers for the
merger and the round controller.

The full unit synthesises to about 11.5 k word-level cells and 24 k flip-flop
bits. Most of the flip-flops are the modelled racetrack domains: 32 partitions
× 64 tracks × 5 domains, plus the queues.
