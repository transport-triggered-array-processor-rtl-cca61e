# A transport-triggered processor array for pixel-level vision

Low-level vision (local binary patterns, small convolutions, pooling) works on
small pixel neighbourhoods, and on a conventional processor most of its energy
goes into fetching instructions and moving pixels to and from memory. This
design avoids the memory round trips by giving every pixel its own small
processor: a 2-D mesh of tiny processing elements (PEs), each holding one pixel
and wired directly to its eight neighbours. The PEs are transport-triggered
(TTA) cores, so the program moves values between function units explicitly and
can pass a value from one PE to the next with a single move, without extra
hardware. Many slow, low-voltage PEs working in parallel make up for a low
clock rate; between frames the array can sleep.

This RTL follows the architecture of the paper "Transport Triggered Array
Processor for Vision Applications" (Safarpour, Hautala, Bordallo Lopez,
Silven). The paper gives the architecture, the PE's unit set and the
neighbour unit's operations. Its encodings, memories and control signals are
not published, so those parts are this design's own. The section
[Where this RTL departs from or adds to the paper](#where-this-rtl-departs-from-or-adds-to-the-paper)
lists every such choice.

## The array

`tta_array` is a `ROWS x COLS` mesh (default 10 x 11 = 110 PEs, the size of
the published FPGA prototype). PE `[r,c]` sits in row `r` and column `c`, with
`[0,0]` at the top-left and row 0 on the north side. Each PE:

* has a **Shared register**. Only its eight neighbours can read it: the PE
  itself can write it but not read it back.
* reads the Shared registers of its neighbours N, NE, E, SE, S, SW, W, NW
  (direction numbers 0 to 7, clockwise from north).
* knows its own **X index (column)** and **Y index (row)**. Programs use them
  to give PEs different roles without any extra hardware: non-overlapping
  pooling windows, idle PEs, groups.

```
 west_in[r] ──► PE[r,0] ◄──► PE[r,1] ◄──► ... ◄──► PE[r,COLS-1] ──► east_out[r]
                  ▲ ╲ ╱         ▲ ╲ ╱                   ▲
                  ▼ ╱ ╲         ▼ ╱ ╲                   ▼
               PE[r+1,0] ◄──► PE[r+1,1] ...     (every PE sees all 8 neighbours)
```

**Image in, results out.** The west inputs of column 0 are the ports
`west_in[ROWS]`. Outside the array, a column of ADCs (or a column buffer)
drives them with one image column at a time. A *pass* is the two-move
sequence "read West neighbour, write it to own Shared register". One pass
shifts the whole image one column east and takes in a new column at the west
edge. After `COLS` passes the array holds a new image, which is the fewest
cycles a full reload can take. Results leave the same way: the Shared
registers of the last column are the ports `east_out[ROWS]`, towards an output
memory. Neighbour inputs that fall outside the array on the north, south and
east edges read 0.

**Instruction memories.** There are `NUM_IMEM` (default 2) instruction
memories. The input `pe_imem_sel[r][c]` chooses which one each PE runs. All PEs
start together. PEs that share a memory execute the same instruction in the
same cycle (SIMD), each on its own data. Each PE still has its own program
counter and its own read port, so one PE can branch on its own data without
stopping the others. Programs that must stay in step with their neighbours
branch only on values that are the same in every PE.

**Control.**

| port | meaning |
|---|---|
| `imem_we`, `imem_wsel`, `imem_waddr`, `imem_wdata` | write one 23-bit instruction word into memory `imem_wsel` (one per cycle) |
| `start` | one-cycle pulse: every PE restarts at address 0 |
| `done` | high when every PE has halted (also after reset) |
| `sleep` | freezes the whole array, like a gated clock; state is kept |

A PE halts when it executes a taken jump to its own address (`stop: -> jump stop`).

## The processing element

`tta_pe` is a pruned TTA core with a single move bus and these units:

| unit | module | operations / contents |
|---|---|---|
| ALU | `tta_alu` | add, sub, eq, gt (signed), gtu (unsigned) |
| LOGIC | `tta_logic` | and, ior, xor |
| SHIFT | `tta_shift` | shl, shr (arithmetic), shru (logical); amount = in2[3:0] |
| neighbour unit (SFU) | `tta_sfu` | read_neighbour d, read_index 0/1 (X/Y), write_shared |
| boolean RF | `tta_boolrf` | 2 x 1 bit; bool.0 is the guard |
| RF | `tta_rf` | 4 x 16 bit |
| GCU | `tta_gcu` | jump, call; program counter, return address RA |
| bus / decoder | `tta_bus` | one move per cycle, 16-bit short immediate, guard |

Data is 16 bits wide.

### How a transport-triggered program runs

A TTA instruction does not name an operation. It names one **move**: copy a
value from a source port to a destination port. Some destination ports are
**trigger ports**. Writing one starts an operation on that unit, and the
opcode is part of the destination name. An addition is three moves:

```
RF.1 -> ALU.in2          operand 2 is latched
RF.3 -> ALU.in1t.add     operand 1 arrives on the trigger port: ALU computes RF.3 + RF.1
ALU.out -> RF.3          result is read back (next cycle)
```

Every unit computes `out = in1t <op> in2`: the trigger operand comes first. A
result is available to the very next instruction (latency 1) and stays in the
unit's output register until the unit is triggered again. Operand registers
also keep their values, so a constant in `in2` can serve many triggers. Since
results are plain registers on the bus, the program can chain units directly
without going through the register file (the "exposed bypass"). For example,
`SFU.out -> SFU.write_shared` passes a neighbour's value straight on.

Each cycle the PE fetches one instruction from its selected memory
(asynchronous read), decodes it and performs the move. The destination is
written at the clock edge. A move to GCU.jump sets the next PC: there are no
delay slots.

### Instruction word (23 bits)

| bits | field | meaning |
|---|---|---|
| 22 | guard | 1: the move happens only if bool.0 = 1, otherwise it is squashed (a no-op) |
| 21:17 | dst | destination port (table below) |
| 16 | imm | 1: the source is the 16-bit short immediate in [15:0] |
| 15:0 | src | the immediate, or a source port number in [3:0] |

Sources: 0 ALU.out, 1 LOGIC.out, 2 SHIFT.out, 3 SFU.out, 4 bool.0, 5 bool.1,
6 to 9 RF.0 to RF.3, 10 GCU.ra. A boolean register reads as 0 or 1.

Destinations: 0 ALU.in2, 1 to 5 ALU.in1t.{add, sub, eq, gt, gtu}, 6 LOGIC.in2,
7 to 9 LOGIC.in1t.{and, ior, xor}, 10 SHIFT.in2, 11 to 13
SHIFT.in1t.{shl, shr, shru}, 14 SFU.read_neighbour, 15 SFU.read_index,
16 SFU.write_shared, 17 and 18 bool.0 and bool.1 (bit 0 of the value), 19 to 22
RF.0 to RF.3, 23 GCU.jump, 24 GCU.call, 31 no-op. Codes 25 to 30 do nothing.

`tta_pkg` has assembler functions that build these words:
`mv(S_RF0, D_ALU_ADD)` is "RF.0 -> ALU.in1t.add", `mi(5, D_SFU_RDNB)` is
"5 -> SFU.read_neighbour", and a third argument of 1 sets the guard.

### The neighbour unit

It has one trigger port on the bus and one output port on the bus, plus the
external links: eight neighbour inputs and the Shared register output.

* `d -> SFU.read_neighbour` (d = 0 to 7) samples the neighbour's Shared
  register in the trigger cycle. `SFU.out` holds it from the next cycle.
* `0 -> SFU.read_index` gives X and `1 -> SFU.read_index` gives Y.
* `v -> SFU.write_shared` stores v. The neighbours see it from the next cycle.

All PEs of a group move in the same cycle, so a pass (read W, then write
Shared) moves every pixel one step east at once: every read happens before
any write.

## Programming the array

The test programs (`tb/tta_prog_pkg.sv`) all share one frame, which is also a
reasonable way to use the array for a whole frame:

1. **Load.** A loop of `COLS` passes. Each pass takes 9 cycles: the pass
   itself plus a counter in RF.0 and a guarded jump back. After the loop,
   `SFU.out` still holds the last value read, which is the PE's own pixel. It
   is copied to RF.1, because the PE cannot read its own Shared register.
2. **Kernel.** Every PE computes the result for its pixel from RF.1 and its
   neighbours, then writes the result to its Shared register.
3. **Unload.** The same loop of passes pushes the results out through
   `east_out`.
4. **Stop.** A jump to itself.

**LBP** (local binary pattern). For each direction `d`, bit `d` of the code is
1 when the neighbour is at least as large as the centre. Each direction takes
nine moves:

```
d          -> SFU.read_neighbour
SFU.out    -> ALU.in2
RF.1       -> ALU.in1t.gtu          centre > neighbour ?
ALU.out    -> bool.0
(1<<d)     -> RF.2
?bool.0 0  -> RF.2                  guarded: clear the weight
RF.2       -> LOGIC.in2
RF.3       -> LOGIC.in1t.ior
LOGIC.out  -> RF.3                  code |= weight
```

Clearing RF.3 first and writing it to the Shared register at the end gives
2 + 8 x 9 = **74 cycles**. The test bench checks this count, and it equals the
published LBP cycle count. The kernel uses three of the four registers and
bool.0.

**Convolution.** With binary weights, the kernel is a sum of the window (34
cycles). There is no multiplier, so the integer-weight version calls a
shift-and-add subroutine once per tap (`imm -> GCU.call`, return with
`GCU.ra -> GCU.jump`). Its loop runs while the weight is non-zero. The
weights are immediates that every PE shares, so all PEs branch the same way
and stay in lockstep.

**Max-pooling and idle PEs.** For a `k x k` window with stride `k`, only the
PEs whose indices satisfy `X mod k = t` and `Y mod k = t` compute. For k = 2,
t = 0 (the window's top-left PE). For k = 3, t = 1 (the window's centre PE).
There is no divider, so `mod k` is a fixed number of guarded subtractions.
The count is fixed so that every PE runs the same instruction stream. The
result is written with a move guarded by the "active" flag. Idle PEs skip that
write and keep their pixel.

**Groups.** With `pe_imem_sel`, some PEs can run, for example, LBP from memory 0
while the others run a box filter from memory 1. Neighbours read each
other's Shared registers, so programs that run side by side need the same
timing. The test bench pads the shorter kernel with leading no-ops so that
both groups write their results in the same cycle.

## Timing summary

| event | cycles |
|---|---|
| any instruction | 1 (one move) |
| FU result after trigger | readable by the next instruction |
| jump / call | target executes in the next cycle, no delay slot |
| neighbour sees a write_shared | next cycle |
| image load (COLS columns) | 9 x COLS + 1 with the loop above, 2 x COLS if fully unrolled |
| `start` to first instruction | 1 |

The published cycle counts come from the authors' own programs. These are the
counts of the programs in `tb/tta_prog_pkg.sv`, kernel only, without load and
unload:

| operation | published | this RTL, test programs |
|---|---|---|
| LBP 3x3 | 74 | 74 |
| 3x3 conv., binary weights | 56 | 34 (box sum) |
| 3x3 conv., integer weights | 1553 | about 400 to 530 with random weights 0 to 15 |
| max-pooling 3x3 | 271 | 75 (4 x 5 array) to about 100 (10 x 11 array; the index test grows with the array) |

## Parameters

| module | parameter | default | note |
|---|---|---|---|
| `tta_array` | `ROWS`, `COLS` | 10, 11 | 110 PEs as in the FPGA prototype. The architecture is meant to scale from 3 x 3 up to 128 x 128. |
| `tta_array` | `NUM_IMEM` | 2 | number of shared instruction memories |
| `tta_array` | `IMEM_DEPTH` | 2048 | words per memory (PC width = log2) |
| `tta_sfu`/`tta_pe` | `IDX_W` | 8 | index width, enough for 128 x 128 |
| `tta_rf`, `tta_boolrf` | `NREGS` | 4, 2 | as in the paper's pruned core |

The PEs are generic. Each gets its indices as constant inputs and its links
from the array, so changing `ROWS`/`COLS` needs no other edit. Each memory
has one read port per PE (`ROWS*COLS` ports). That is the simplest
description of "shared by all PEs". A real implementation would broadcast one
read to lockstepped PEs.

## Files

| file | content |
|---|---|
| `rtl/tta_pkg.sv` | types, instruction encoding, assembler functions |
| `rtl/tta_alu.sv`, `tta_logic.sv`, `tta_shift.sv` | function units |
| `rtl/tta_sfu.sv` | neighbour unit with the Shared register and indices |
| `rtl/tta_rf.sv`, `tta_boolrf.sv` | register files |
| `rtl/tta_gcu.sv` | program counter, jump, call, halt |
| `rtl/tta_bus.sv` | instruction decoder and source selection |
| `rtl/tta_pe.sv` | one PE |
| `rtl/tta_imem.sv` | instruction memory |
| `rtl/tta_array.sv` | the array (top) |
| `tb/tb_*.sv` | self-checking test benches, one per module |
| `tb/tta_prog_pkg.sv` | test programs and reference results |
| `tb/tb_tta_array.sv` | end-to-end test on a 4 x 5 array |
| `tb/tb_tta_array_full.sv` | the same test on the default 10 x 11 array |

## Simulating

Every test bench prints `TB_RESULT checks=N failures=M` and stops by itself
(each has a watchdog). With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/tta_pkg.sv tb/tta_prog_pkg.sv rtl/tta_array.sv tb/tb_tta_array.sv \
    --top-module tb_tta_array
./obj_dir/Vtb_tta_array
```

For a unit test, use `rtl/tta_pkg.sv rtl/<module>.sv tb/tb_<module>.sv`.
The unit benches compare against models written independently of the RTL:
random operands for the FUs, and an instruction-level model of the whole PE
that runs random programs, compared every cycle. The array benches run LBP, box
sum, integer convolution, max-pooling 2x2 and 3x3, the 4 x 4 example with
the published 2 x 2 result (7 8 / 8 5), and two mixed-group runs. They make
the array sleep at random cycles, and they check that each mechanism (all
eight directions, index reads, data passing, guards, jumps, calls, returns,
halts, sleep, the second memory) occurs at least once. The default-size bench
takes about 1.5 minutes to build and under a second to run.

To write a new program, build a queue of `instr_t` with `mv`/`mi` (see
`tta_prog_pkg::build`), write it through the `imem_*` ports and pulse `start`.

## Where this RTL departs from or adds to the paper

Taken from the paper: the mesh with eight-neighbour links, the Shared register
readable only by neighbours, the X/Y indices in the neighbour unit, its three
operations with direction numbers 0 to 7 (N first) and index numbers 0/1
(X/Y), shared instruction memories with per-PE selection, the image entering
the first column and rippling through, the unit set, the 4 x 16-bit and
2 x 1-bit register files, the 23-bit instruction with a 16-bit short
immediate, the single bus, and the 10 x 11 size.

Inconsistencies in the source, and the reading used here:

* The unit table lists the ALU as add/eq/gtu and puts shifts in the logic
  unit. The core diagram shows add/sub/eq/gt/gtu and a separate shifter with
  shl/shr/shru. The diagram is followed.
* The register file has 4 registers, but the published LBP excerpt uses
  RF.5 and RF.6. Four registers are built. The LBP here needs only three.
* The published LBP excerpt prints several moves per line. A single bus
  carries one move per cycle. The single bus of the core diagram is built,
  and the 74-cycle LBP count matches it.

This design's own choices (not given in the source):

* The instruction field layout, the port numbering, and the guard (only
  "bool.0 set"). A 1-bit guard is what 23 bits leave after a 5-bit
  destination and a flagged 16-bit immediate.
* Latency 1 for all units, no jump delay slots, combinational instruction
  fetch, and a single-cycle move.
* Each PE has its own PC and memory port. The paper has PEs run "a single
  instruction stream" but draws a GCU in each core.
* Halting by a jump to self, and the `start`, `done` and `sleep` signals.
  Sleep is modelled as a clock enable. The paper only says that the array is
  clock gated between frames.
* Memory depth 2048: large enough for the longest published kernel
  (1553 cycles) even as straight-line code. `NUM_IMEM = 2`: the paper says
  "multiple" memories.
* Out-of-array neighbours read 0, except west of column 0, which is
  `west_in`.
* Asynchronous active-low reset clears all registers. Memory contents are
  not reset.
* The test programs (loops, LBP, convolution, pooling) are written for this
  RTL. Only the LBP cycle count can be compared one-to-one with the source.

Not built: the image sensor, the column ADCs, the fovea window multiplexer
(which feeds a small array from a larger sensor) and the output memory. They
are analog or given only by name, and the array exposes `west_in` and
`east_out` where they connect. The power and area figures of the FPGA and
28 nm implementations cannot be reproduced from RTL. The same goes for their
near-threshold operating points.
