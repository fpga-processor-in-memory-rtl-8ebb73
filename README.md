# PiCaSO: a bit-serial processing-in-memory overlay, in SystemVerilog

PiCaSO turns the block RAMs of an ordinary FPGA into a SIMD array of bit-serial
processors without modifying the RAMs. Each BRAM is configured 16 bits wide and
feeds 16 one-bit ALUs. Every ALU owns one bit column of the BRAM, which acts as
its private 1024-bit register file. Operands are stored "corner-turned": word
`j` of a BRAM holds bit `j` of some variable for all 16 PEs. An N-bit
operation therefore walks through N words, LSB first.

The design does not try to beat custom compute-in-BRAM proposals at raw
arithmetic. It wins on reductions and on clock speed:

* **Zero-copy reduction inside a block.** An operand multiplexer (OpMux) can
  offer an ALU the bit of another PE in the same block. Four *fold* steps add
  the upper half of the 16 lanes onto the lower half, then the upper quarter
  onto the lower quarter, and so on. After them PE 0 holds the block sum, and no
  data was ever copied between columns.
* **A binary-hopping network between blocks.** Each block has a small network
  node. A receiver block adds, bit by bit, the stream sent by a transmitter
  block 2^L positions away. Nodes in between forward the stream with a
  one-cycle register. Transfer and addition overlap.
* **Pipelining.** Optional registers sit after the register file, after the
  OpMux and after the ALU. With all three enabled (the "Full-Pipe"
  configuration, PiCaSO-F, the default here), the slowest stage is the BRAM
  itself.

This repository holds RTL for the processing block, the network and a tile of
4 x 4 blocks (256 PEs). It also holds an instruction sequencer that the
published description implies but does not detail. All of it is written from
the PiCaSO paper (FPL 2023, "FPGA Processor In Memory Architectures (PIMs):
Overlay or Overhaul?"). Where the paper is silent, the choices are this
implementation's own. They are listed below and in each file's header.

## Module map

| file | what it is |
|---|---|
| `rtl/picaso_pkg.sv` | shared constants (16 PEs, 1024 bits per PE), op-code and OpMux encodings, micro-op and instruction structs |
| `rtl/fa_s.sv` | one-bit full adder/subtractor: ADD, SUB, CPX (pass X), CPY (pass Y) |
| `rtl/op_encoder.sv` | Conf code to op-code, including Booth radix-2 recoding |
| `rtl/bs_alu.sv` | one PE's ALU: encoder, 2-bit op-code register, FA/S, carry/borrow flip-flop |
| `rtl/opmux.sv` | operand multiplexer: A-OP-B, A-FOLD-1..4, A-OP-NET, 0-OP-B |
| `rtl/regfile.sv` | 16 x 1024 dual-port BRAM model |
| `rtl/pe_block.sv` | register file, OpMux, 16 ALUs and the three optional pipeline registers |
| `rtl/net_node.sv` | network node: level/direction register, role decoder, RX mux, capture register, TX mux |
| `rtl/picaso_ctrl.sv` | sequencer: expands instructions into per-cycle micro-operations |
| `rtl/picaso_top.sv` | ROWS x COLS tile: blocks, mesh of nodes, sequencer, host port |

## The block pipeline and its timing

This is the part that everything else depends on.

```
  issue    stage 1        stage 2           stage 3              stage 4
  uop ---> BRAM read ---> [RF reg] --A,B--> OpMux --> [Op reg] --X,Y--> 16 ALUs --> [ALU reg] --> port B write
                                   NET ---->
```

Bracketed registers exist when `RF_PIPE`, `OP_PIPE` or `ALU_PIPE` is 1.
The sequencer sends one micro-operation (`uop_t`) per cycle to every block:

* **Read fields** act in the cycle they arrive. Port A is read-only. Port B
  reads or writes.
* **Execute fields** (`exec_t`) travel down the pipeline with the data: the
  OpMux configuration, the ALU Conf, `op_load` and `alu_en`. The OpMux
  configuration acts at stage 2 and the ALU fields act at stage 3.
* **Write fields** act at once. They store whatever the ALU output register
  holds.

The ALU output register only loads when a valid bit passes (`alu_en`). A result
therefore stays available until the next one arrives.

The read-to-write latency is `LAT = 1 + RF_PIPE + OP_PIPE + ALU_PIPE`, which is
4 for Full-Pipe and 1 for Single-Cycle.

The two BRAM ports set the throughput:

* **Two-operand operations (ADD, SUB, copies, MULT) take 2 cycles per bit.**
  In one cycle both ports read X and Y. In the other cycle port B writes an
  earlier result. The sequencer reads on every other cycle. It writes
  `WB2 = LAT` cycles later if LAT is odd, else `LAT + 1`, so writes always
  fall in the read-free cycles. With Full-Pipe, WB2 = 5, and the ALU output
  register holds the bit for the extra cycle.
* **One-operand operations (fold, network accumulate) take 1 cycle per bit.**
  Port A reads every cycle and port B writes every cycle, LAT cycles after the
  matching read.

The RF-Pipe-only and Op-Pipe-only settings (LAT = 2, no ALU register) are
rejected at elaboration. With them a two-operand write would always collide
with a read. The paper evaluates them only for area and frequency.

Single-Cycle (LAT = 1) runs every instruction except MULT. The multiplication
schedule below depends on a read landing before the write of the same
position, and needs WB2 >= 3. An assertion fires if a MULT starts with a
shorter latency.

## Bit-serial ALU and Booth multiplication

`bs_alu` loads its op-code register on an `op_load` cycle and clears the
carry/borrow flip-flop in the same cycle. Later cycles with `en` push one
(x, y) bit pair through the FA/S.

Conf `0xx` selects an op-code directly: 000 ADD, 001 CPX, 010 CPY, 011 SUB.
Conf `1xx` recodes the operand pair YX in Booth fashion. YX = 01 gives +Y and
YX = 10 gives -Y, where the op is SUB and the FA/S computes X - Y. YX = 00 and
11 give a no-op, implemented as CPX.

Signed MULT of an N-bit multiplicand M (`src1`) and an N-bit multiplier Q
(`src2`) into a 2N-bit product P (`dst`) runs N iterations. Iteration i works
as follows:

1. **Recoding slot.** Port A reads q_(i-1) as X and port B reads q_i as Y. The
   Op-Encoder decides +M, -M or nothing, and the op-code register keeps that
   decision for the rest of the iteration.
2. **N+1 bit slots.** Slot k computes `P[i+k] = P[i+k] op M[min(k, N-1)]`. The
   last slot, k = N, re-reads the top bit of the old partial product and M's
   sign bit, which sign-extends the sum by one bit. This works because a read
   happens 5 cycles before the write of the same position would overwrite it.
   The partial product after iteration i never needs more than N+i+1 bits, so
   one extension bit per iteration is enough.

Iteration 0 uses OpMux mode 0-OP-B (X = 0). The product area therefore never
has to be cleared, and q_(-1) = 0 comes for free.

The cost is N x (N+2) two-cycle slots = **2N^2 + 4N** cycles. The paper
reports 2N^2 + 2N for the same Booth scheme. It does not say how the
multiplier bits reach the Op-Encoder without a slot of their own, so this
design spends one slot per iteration on it (see *Departures*).

## Reduction: folds and the hopping network

**Folds (OpMux).** A-FOLD-f sets X = A and gives lane i < 16/2^f the A bit of
lane i + 16/2^f as Y. The other lanes get Y = 0. FOLD 1, 2, 3, 4 in that order
leaves the sum of all 16 lanes in PE 0. Lanes with Y = 0 simply rewrite their
own value.

**Network node roles.** The node stores a 3-bit level L and a direction. Its
position p along that direction sets its role:

| condition | role |
|---|---|
| p mod 2^(L+1) = 0 | receiver (R) |
| p mod 2^(L+1) = 2^L | transmitter (T) |
| otherwise | pass-through (P) |

For 8 nodes in a row this gives `RTRTRTRT`, `RPTPRPTP` and `RPPPTPPP` for
L = 0, 1, 2.

**Node datapath.**

* The RX mux picks the link facing the transmitters (east for a westward
  reduction, south for a northward one).
* A capture register samples the RX link every cycle and drives NET.
* TX sends the block's own register-file bit in a transmitter and the
  captured bit otherwise. TX drives all four outgoing links.

A bit therefore reaches the receiver's NET 2^L cycles after the transmitter
sent it.

**A network step (NET L).** All blocks get the same micro-operations:

1. Transmitter blocks read bit k on port A at issue cycle k+1. That bit (PE 0,
   after the RF stage) goes out on TX, so the A bus feeds the network node as
   in the block diagram.
2. Receiver blocks read their own bit k on port A 2^L cycles later, just as
   the transmitted bit arrives on NET, and add the two with OpMux A-OP-NET (NET
   enters lane 0).
3. Only receiver blocks store the result: writes are gated by the role.

Transmitter and receiver reads both use port A, but never in the same block.
Only receivers write, through port B.

**A full row reduction** of q = 16 x COLS values is FOLD 1..4 followed by NET
levels 0..log2(COLS)-1 with direction `DIR_WEST`. PE 0 of the column-0 block
then holds the row sum. NET levels with `DIR_NORTH` then reduce column 0 into
block (0,0).

## Instructions and cycle counts

`instr_t` = {op, dst, src1, src2, width N, level, dir}. One instruction runs at
a time. `done` pulses once all results are written. Start to done is the issue
length plus 6 cycles at Full-Pipe: 1 to start, LAT to drain and 1 for done.

| instruction | effect (per PE) | issue cycles | paper |
|---|---|---|---|
| ADD / SUB | dst = src1 +/- src2 | 2N | 2N |
| CPX / CPY | dst = src1 / src2 | 2N | - |
| MULT | dst[2N] = src1 x src2, signed | 2N^2 + 4N | 2N^2 + 2N |
| FOLD f | dst = src1 + src1 of lane i + 16/2^f | N + 1 | N + 4 per step |
| NET L | receivers: dst = src1 + src1 of the transmitter | 1 + 2^L + N | N + 4 per jump, plus hops |

Measured end to end, a 128-column, 32-bit accumulation takes 280 cycles
(4 folds and 3 jumps). The paper gives 259. A 16-column, 8-bit accumulation
takes 60 cycles, where the paper gives 48.

## Top-level interface

`picaso_top #(ROWS=4, COLS=4, RF_PIPE=1, OP_PIPE=1, ALU_PIPE=1)`:

* `start`, `instr`, `busy`, `done`: the instruction port.
* `host_en`, `host_we`, `host_row`, `host_col`, `host_addr`, `host_wdata`,
  `host_rdata`: the host port. It reads or writes one already corner-turned
  16-bit word of one block. It may only be used while `busy` is low, which an
  assertion checks. Read data appears one cycle after the read.

Data reaches the array only through this port. Converting parallel words to
the bit-sliced layout is left to the host side.

## Departures from the paper and open points

* **MULT takes 2N^2+4N cycles**, against the paper's 2N^2+2N. The extra
  cycles are one read slot per Booth iteration for the multiplier bits.
* **MULT needs the Full-Pipe latency.** Its sign-extension step relies on the
  5-cycle gap between a read and the write of the same bit. In Single-Cycle
  mode MULT is not supported; the other instructions are.
* **Fold and network steps cost N+7 cycles start to done**, against the
  paper's N+4, because instructions do not overlap. The next instruction waits
  for all writes of the previous one.
* **The sequencer, micro-operation format, instruction format, host port and
  port roles of the BRAM** are this implementation's own. The paper gives only
  the operations and their costs.
* **The network direction field** (W/N/E/S) is an addition. The paper shows
  only row reduction toward column 0. The level register is 3 bits, as drawn,
  so one direction spans at most 256 blocks.
* **NET feeds lane 0 only.** It carries one bit per block, and reductions end
  in PE 0.
* **Not built:**
  * The shift register (Shift-In/Shift-Out) drawn inside the network node:
    the text never says what it is for or how wide it is.
  * Fold pattern (b) (adjacent pairs), which the paper mentions for CNNs but
    does not list as an OpMux configuration.
  * The comparison designs: SPAR-2, CCB, CoMeFa and the proposed CoMeFa
    modification.
* **Reset** is synchronous and active high. It clears control state only, not
  the register files.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=<n>
failures=<m>`. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/picaso_pkg.sv tb/tb_picaso_top.sv \
          --top-module tb_picaso_top -o sim && ./obj_dir/sim
```

| testbench | covers |
|---|---|
| `tb_fa_s`, `tb_op_encoder` | exhaustive truth tables |
| `tb_bs_alu` | random serial ADD/SUB/copies, with and without idle cycles; Booth recoding |
| `tb_opmux` | all seven configurations, random operands |
| `tb_regfile` | random dual-port traffic against an array model |
| `tb_pe_block` | a block driven by hand-written micro-ops: ADD/SUB with the 2-cycle schedule, FOLD-1 at LAT = 4, network add as receiver and as non-receiver, transmit timing |
| `tb_net_node` | role patterns for levels 0-2 and all directions, 2^L hop delay |
| `tb_picaso_ctrl` | issue lengths, write timing, port-B conflicts, NET offsets, Booth loads |
| `tb_picaso_top` | full 4 x 4 tile at default parameters: ADD, SUB, MULT on all 256 PEs, then a 256-product multiply-accumulate through folds, row and column network levels; counts Booth +/-/no-op steps, fold levels, R/T/P roles and hops |
| `tb_workloads` | 1 x 8 array: 128-column, 32-bit accumulation, and 16-column MAC at 4, 8, 16 bits, with cycle counts |
| `tb_single_cycle` | 2 x 2 array in the Single-Cycle configuration (no pipeline registers): SUB, ADD, folds and network levels, with cycle counts |

Verilator has only two logic states. Testbenches therefore write every
register-file word they later read.
