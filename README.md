# A 4 x 4 PE / 4 x 2 MOB CGRA for GEMM at the edge

This is SystemVerilog RTL for a small coarse-grained reconfigurable array (CGRA)
meant to speed up the matrix multiplications (GEMM) inside transformer models
on low-power edge devices. Its main idea is a division of labour. Sixteen
processing elements (PEs) only compute. Eight memory operation blocks (MOBs)
only move data between memory and the array. All of them talk to their
neighbours over a mesh torus that has no switches or routers: a tile reads its
neighbours' output registers directly, and the grid wraps around at its edges.

The array sits in a small subsystem next to a host processor. A context memory
holds the kernels' configuration. A memory controller loads that
configuration into every tile and then runs the kernel. A shared L1 memory,
reached through an interconnect, is where the host and the CGRA exchange
matrices.

The block structure, the array sizes and layout, the torus, the split between
PEs and MOBs, the 4 KiB context memory and the role of the memory controller
come from the published description of the architecture. That description
gives no instruction set, widths, timing, memory sizes or protocols. Every
such detail below was chosen for this implementation, and the section
"Choices made here" lists them.

## The grid

The tiles form a 6 x 4 grid. Rows 0, 2, 3 and 5 are PEs. Rows 1 and 4 are
MOBs:

```
          col 0   col 1   col 2   col 3
 row 0     PE      PE      PE      PE      tiles  0.. 3
 row 1     MOB     MOB     MOB     MOB     tiles  4.. 7   (MOB 0..3)
 row 2     PE      PE      PE      PE      tiles  8..11
 row 3     PE      PE      PE      PE      tiles 12..15
 row 4     MOB     MOB     MOB     MOB     tiles 16..19   (MOB 4..7)
 row 5     PE      PE      PE      PE      tiles 20..23
```

Tile (r, c) has index `r*4 + c`, and configuration writes use that number.
Each tile has one 32-bit output register. Its four links are:

- north: row (r-1) mod 6
- south: row (r+1) mod 6
- west: column (c-1) mod 4
- east: column (c+1) mod 4

Because of the wrap, row 0 and row 5 are neighbours, and so are columns 0
and 3. Every PE row therefore touches a MOB row or the wrap:

- rows 0 and 2 sit directly on either side of MOB row 1;
- rows 3 and 5 sit on either side of MOB row 4;
- row 5 also reaches row 0 through the wrap.

A link is a plain wire. The instruction of the receiving tile picks which
neighbour it listens to. So a hop always costs exactly one step, and no
arbitration happens inside the array.

## Lock-step execution and the global stall

A kernel is a loop body of `STEPS` instructions per tile (1 to 16). The body
is repeated `ITERS` times. The memory controller drives one step counter
`pc`, and every tile executes its own instruction for step `pc` in the same
cycle. The program is a static schedule, like a VLIW program spread over
24 tiles. A producer and its consumer agree on the step at which a value
appears on a link.

Only the MOBs can hold the schedule up. A MOB that accesses L1 in the current
step raises `stall` until the interconnect grants its request. While any MOB
stalls, no tile executes: PEs keep their registers, MOBs keep their pointers,
and `pc` does not move. A MOB whose request was granted in a stalled cycle
remembers that, and does not issue the request again.

With this rule a schedule gives the same results whatever the memory
contention. The contention changes only the number of cycles. A stall-free
step takes one cycle.

## Instructions

Every tile executes one 32-bit instruction word per step:

| bits    | field    | meaning |
|---------|----------|---------|
| 31:28   | `op`     | operation, see below |
| 27:24   | `src_a`  | operand a source |
| 23:20   | `src_b`  | operand b source |
| 19      | `wr_out` | write the result to the output register (the links) |
| 18      | `wr_rf`  | PE: write the result to register `rf_idx` |
| 17:16   | `rf_idx` | PE: register index 0..3 |
| 15:0    | `imm`    | signed immediate, or address offset for a MOB |

The operand sources are:

- 0..3: the N, E, S or W neighbour;
- 4..7: PE registers R0..R3;
- 8: the tile's own output register;
- 9: the PE accumulator;
- 10: the sign-extended immediate;
- 15: zero.

**PE operations.** A 32-bit word is also read as four signed 8-bit lanes,
lane 0 in bits 7:0.

| op | name  | effect |
|----|-------|--------|
| 0  | NOP   | nothing |
| 1  | ADD   | res = a + b |
| 2  | SUB   | res = a - b |
| 3  | MUL   | res = a * b, low 32 bits |
| 4  | DOTP  | res = sum over the 4 lanes of a[i]*b[i], in 32 bits |
| 5  | MAC   | acc += DOTP(a, b); res = a, so the PE can forward a |
| 6  | MOV   | res = a |
| 7  | ACCRD | res = acc; acc = 0 |

The result goes to the output register if `wr_out` is set, and to a register
if `wr_rf` is set. A result written at step s is on the links from step s+1.

**MOB operations.** Each MOB has a 16-bit pointer `ptr`. Addresses are 32-bit
word addresses in L1.

| op | name   | effect |
|----|--------|--------|
| 0  | NOP    | nothing |
| 1  | LOAD   | out <- L1[ptr + imm] |
| 2  | STORE  | L1[ptr + imm] <- a |
| 3  | MOV    | out <- a (if `wr_out`) |
| 4  | SETPTR | ptr <- imm |
| 5  | ADDPTR | ptr <- ptr + imm |

With a fixed offset per LOAD and one ADDPTR per loop body, each LOAD walks
through a row of a matrix, one word per iteration.

### Load timing

Load timing is the one subtle rule of the schedule. **Data loaded at step s is
on the MOB's links from step s+2**, however long the array stalls in between.

The L1 returns read data one cycle after the grant. That data is written into
the output register at the end of step s+1, not earlier. If it arrives while
the array is stalled, a two-entry buffer in the MOB holds it. This makes the
timing independent of when the grant came.

At step s+1 the links still carry the old value. That old value is what lets a
MOB alternate loads every step. In the schedule below, the B word loaded at
step 0 is read at step 2. The A word loaded at step 1 overwrites it at the end
of step 2.

If step s+1 is a MOV, the load writeback wins over it. A load issued in the
very last step of a kernel is not written back.

## Kernels: descriptor, configuration, run

The host writes a kernel as a descriptor into the 4 KiB context memory
(1024 words):

```
word 0       header: [4:0] STEPS   [8] CLEAR   [31:16] ITERS
word 1..     STEPS x 24 instruction words: step 0 for tiles 0..23, step 1 for tiles 0..23, ...
```

A kernel of 16 steps takes 385 words, so the context memory holds two such
kernels, or several shorter ones.

The host pulses `start` with the descriptor's address. The memory controller
then works in order:

1. It reads the header and then one instruction word per cycle.
2. For each word, it turns the word's position into a (tile, slot) pair and
   writes the word over a broadcast configuration bus into that tile's
   context store.
3. It pulses `clear` if CLEAR is set. `clear` zeroes every output register,
   register file, accumulator and pointer. The programs stay.
4. It raises `run` and steps `pc` through the loop, moving on only when the
   array completes a step.
5. It pulses `done`.

The timing is:

- configuration: 24·STEPS + 3 cycles after `start`;
- clear: one more cycle, if CLEAR is set;
- run: STEPS·ITERS cycles plus the stall cycles.

A header with STEPS = 0, STEPS > 16 or ITERS = 0 ends at once, with `done`
and `error`.

When CLEAR is off, the accumulators and registers survive from one kernel to
the next. This is how a computation kernel hands its results to a separate
store kernel.

## Shared L1 and its interconnect

The shared L1 has 8 banks of 1024 words, 32 KiB in all. The low three bits of
a word address select the bank. The interconnect has nine masters: MOB 0..7
(row 1, then row 4) and the host. Each bank has a round-robin arbiter, so
masters that hit different banks are all served in the same cycle. Masters
that collide on a bank take turns, and none waits more than nine cycles.

All masters use the same protocol:

- hold `req` (with `we`, `addr`, `wdata`) until `gnt`, which comes in the
  same cycle when the bank is free;
- for a read, `rvalid` and `rdata` arrive in the next cycle.

## Worked example: a block of GEMM

`tb/tb_cgra_system.sv` computes C = A x B with 8-bit signed elements. It
tiles C into 4 x 4 blocks. The memory layout is:

- A is stored row-major, four elements of a row per word: A[i][kw] at
  `A_BASE + i*K/4 + kw`;
- B is stored column-major in the same way;
- C is stored as 32-bit integers.

For one block, the PE in grid column j computes column j of the block. The
grid rows map to matrix rows like this:

| PE grid row | C row of the block |
|-------------|--------------------|
| 0           | 0                  |
| 2           | 1                  |
| 3           | 2                  |
| 5           | 3                  |

Each PE is output-stationary: its accumulator holds one element of C.

The GEMM kernel has 5 steps and runs for K/4 iterations, one per packed
k-word, with CLEAR set. These are the instructions of column j:

| step | MOB (1,j) | MOB (4,j) | PE (0,j) | PE (2,j) | PE (3,j) | PE (5,j) |
|------|-----------|-----------|----------|----------|----------|----------|
| 0 | LOAD B col j | LOAD A row 2 | | | | |
| 1 | LOAD A row 0 | LOAD A row 3 | | | | |
| 2 | LOAD A row 1 | ADDPTR 1 | MOV S → R0, out (B) | MOV N → R0, out (B) | MOV S → R1 (A row 2) | |
| 3 | ADDPTR 1 | | MAC S (A row 0), R0 | | MAC R1, N (B from PE 2) | MAC N (A row 3), S (B from PE 0, across the wrap) |
| 4 | | | | MAC N (A row 1), R0 | | |

The B word reaches:

- rows 0 and 2 from MOB row 1 directly;
- row 3 from row 2;
- row 5 from row 0, over the torus wrap.

The A words reach rows 0 and 2 from MOB row 1, and rows 3 and 5 from MOB
row 4.

A drain kernel (3 steps, 1 iteration, no CLEAR) then stores the block:

- step 0: every PE runs ACCRD, and the MOBs reset their pointers;
- steps 1 and 2: each MOB stores its northern PE, then its southern PE, into C.

The host rewrites the two descriptors with new base offsets for each block.

This schedule does one dot product of four 8-bit pairs per PE every five
steps. It shows how the parts work together; it is not tuned for speed. For
an 8 x 64 x 8 GEMM (four blocks) the whole run takes about 3800 cycles. That
includes the host writing 776 descriptor words and the stalls from all
eight MOBs often hitting the same bank. Because of those conflicts, the
stall-free lower bound of 5·K/4 cycles per block is not reached.

## Choices made here

These points were decided for this implementation. None comes from the
architecture description:

- **Data format.** 32-bit words that also hold four signed 8-bit lanes. The
  operation set. A 4-entry register file and a 32-bit accumulator per PE.
- **Program storage.** 16 instruction slots per tile. The instruction
  encoding.
- **Execution.** Lock-step execution with a global stall on L1 contention.
  The load timing rule.
- **Kernels.** The descriptor format, configuration at one word per cycle,
  and the loop sequencing in the memory controller.
- **MOBs.** Pointer + offset addressing.
- **Memory system.** L1 size (32 KiB), 8 banks, word interleaving, per-bank
  round-robin, and the request/grant protocol.
- **Host access to the context memory.** A direct port.
- **Torus scope.** The torus spans all 24 tiles, MOBs included. The
  description speaks both of direct communication between neighbouring PEs
  and of direct communication between PEs and MOBs, and a grid that
  alternates PE and MOB rows needs both.
- **Reset.** Asynchronous and active-low for control state and contexts. The
  memory arrays have no reset.

These parts are not modelled:

- **The host, the L2 memory and the SoC bus.** The host's connections are
  ports of `cgra_system`. Nothing is said about the L2 and the bus beyond
  their names.
- **Power.** The architecture aims at ultra-low power, and nothing in this RTL
  is specific to power: no clock gating and no power domains.

## Files

| file | contents |
|------|----------|
| `rtl/cgra_pkg.sv` | widths, grid constants, instruction/operand enums, `instr_t`, L1 request/response and configuration-bus structs, `dotp4()` |
| `rtl/pe.sv` | processing element |
| `rtl/mob.sv` | memory operation block |
| `rtl/cgra_array.sv` | 6 x 4 grid, torus wiring, global stall |
| `rtl/context_memory.sv` | 4 KiB two-port context memory |
| `rtl/memory_controller.sv` | descriptor loader and kernel sequencer |
| `rtl/l1_interconnect.sv` | 9-master, 8-bank crossbar with round-robin arbiters |
| `rtl/l1_memory.sv` | 8 x 1024-word banked L1 |
| `rtl/cgra_system.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

Each testbench prints `TB_RESULT checks=N failures=M`. Each has a watchdog.
The system testbench also counts the mechanisms it is meant to exercise:

- array stalls;
- host requests held back by the CGRA;
- kernel reconfiguration;
- clears;
- transfers across the torus wrap;
- a rejected descriptor.

It fails if any of them never happened.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/cgra_pkg.sv tb/tb_cgra_system.sv --top-module tb_cgra_system
./obj_dir/Vtb_cgra_system
```

Replace `tb_cgra_system` with any other testbench to run it. The system
testbench runs the top at its default parameters in a few seconds.

To change the GEMM size, edit `M`, `N` and `K` in the testbench. M and N must
be multiples of 4, K a multiple of 4. Everything must fit the L1 address map
used there: A at word 0, B at 0x400, C at 0x800.

To write your own kernels, build the instruction words with
`cgra_pkg::make_instr`, lay them out as described under "Kernels", and check
the load timing rule.
