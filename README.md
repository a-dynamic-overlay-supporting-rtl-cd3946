# A dynamic overlay of tiles with run-time loaded operators

An FPGA overlay lets a programmer build an accelerator without running
synthesis, placement and routing. This design follows the dynamic overlay of
Aklah, Ma and Andrews, "A Dynamic Overlay Supporting Just-In-Time Assembly to
Construct Customized Hardware Accelerators". It is a 2D mesh of identical
tiles. Each tile holds one partially reconfigurable (PR) region. At run time a
pre-built operator bitstream (a multiplier, an adder, ...) is written into the
region. Each tile also has a small controller that runs a program from the
tile's own instruction memory. The program routes data through the mesh,
branches, and starts vector operations on whatever operator the region holds.

An accelerator is therefore put together from parts at run time:

1. Pick the tiles.
2. Download an operator into each computing tile.
3. Load each tile's program and data.
4. Start the tiles.

Results flow from producing tiles to consuming tiles. They pass through
"pass-through" tiles where the two are not neighbours. Because any tile can
take any operator, the producer and the consumer can always be placed next to
each other. That placement is the point of the dynamic overlay. A static
overlay has fixed operators, so its data may have to cross several tiles.

The SystemVerilog here models the whole mesh, tile and controller as
synthesizable logic. The PR region is the exception: it is a behavioural
stand-in for "a region holding operator f".

## Mesh and links

`dynamic_overlay` is a `ROWS x COLS` mesh (3 x 3 by default, the size that was
evaluated). Every pair of neighbours is joined by two links, one in each
direction. A link (`overlay_pkg::link_t`) carries one 32-bit word per clock and
a valid bit. There is no back-pressure. The links on the edge of the mesh are
ports of the top module. Row 0 is the north edge and column 0 the west edge.
Tile (r, c) has index `r*COLS + c` in every per-tile port.

## Inside a tile

```
          Inst BRAM ──> Controller ──────────────┐ (selects)
                           │                     │
     Data BRAM 0 <──>      v      <──> R1..R4    │
     Data BRAM 1 <──>  PR region                 │
                        ^      │ result          v
 Nr,Er,Sr,Wr ─> In Mux ─> Buffer ──(bypass)──> Out Mux ─> Ns,Es,Ss,Ws
```

| part | module | role |
|---|---|---|
| In Mux | `in_mux` | takes one of the four incoming links, or none |
| Buffer | `tile_buffer` | 16-word FIFO behind the In Mux |
| PR region | `pr_region` | the loaded operator; reads both data BRAMs, writes D0, reads and writes R1..R4 |
| Out Mux | `out_mux` | drives each outgoing link from the PR result, the bypassed word, or nothing |
| R1..R4 | `reg_file` | four registers, shared by the PR region and the controller |
| Inst BRAM | `inst_bram` | 1024 x 32 program memory |
| Data BRAM x 2 | `data_bram` | 4096 x 32 each, true dual port |
| Controller | `tile_controller` | instruction interpreter; owns all mux settings |
| tile | `overlay_tile` | wires the above together |

## Consume and bypass: how words move through a tile

This is the part of the design that most needs explaining. Every word that
arrives on the selected input link goes into the buffer. What happens to it
next depends on two settings of the controller:

* **consume** (`OP_CONS 1`): the buffer feeds the PR region. A word leaves the
  buffer only when the running operator asks for one (`in_ready`). A
  reduction that is not running yet leaves the words waiting in the buffer.
* **bypass** (any output set to `SRC_BUF`): the head word leaves the buffer in
  the clock it becomes visible. It goes to every output set to `SRC_BUF`. This
  is how a pass-through tile forwards a stream.
* **both**: the word is consumed, and a copy goes out on the bypass outputs in
  the same clock.

An output set to `SRC_PR` carries the PR region's result stream instead. The
four outputs are set independently, so one stream can fan out to several
neighbours.

Latency: a word pushed at clock edge *k* is at the buffer head after *k*. It
is popped and registered by the Out Mux at *k+1*. A pass-through tile
therefore adds exactly **two clocks** to a stream, and its throughput stays
one word per clock. Links have no flow control, so a buffer that fills, with
nobody draining it, drops words. It then raises the sticky `overflow` flag.
Programs must set up the routes before a producer starts, and must drain what
they receive.

A tile's routes stay set after it halts. `OP_ICLR` turns them off, but it does
not empty the buffer. Suppose a producer is left with an old output still
selected, and a neighbour is left listening with consume set. That neighbour
collects stray words, and its next reduction reads them first. A program
should therefore begin with `OP_ICLR` and select only the routes it needs.

## The PR region and reconfiguration

On a real device the PR region is empty fabric, and a bitstream is written into
it through the FPGA's configuration port. `pr_region` models this:

* `cfg_load` with `cfg_op` starts a download. For `PR_CYCLES` clocks the
  region is blank: `op_id = OPK_NONE` and `cfg_busy` is high. After that
  `op_id = cfg_op`. The default of 125000 clocks is the reported overhead of
  about 1.25 ms, at an assumed 100 MHz clock.
* The operators are `OPK_MUL`, `OPK_ADD`, `OPK_SUB`, `OPK_MIN` and `OPK_MAX`,
  all on 32-bit integers. MIN and MAX compare as signed numbers.
* `VM_MAP n`: out[i] = f(D0[i], D1[i]) for i < n. One result per clock. The
  first result comes two clocks after start.
* `VM_MAP n` with the stream option: out[i] = f(x[i], D1[i]), where x[i] is
  the i-th word of the buffer stream. Each result is produced in the clock its
  word arrives. With the store option the result is also written to D0[i].
  A tile can therefore transform a passing stream and keep a copy of it.
  D1 is read one index ahead, so each D1 operand is ready when its stream
  word arrives.
* `VM_RED n`: acc = R[r]; then acc = f(acc, x) for n inputs; at the end
  R[r] = acc. Each x comes from the buffer stream, or from D0[i] with one per
  clock.

The original overlay uses regions of two sizes: a quarter of them hold
8 DSP / 964 FF / 1228 LUT, the rest 4 DSP / 156 FF / 270 LUT. The sizes matter
only for which operators fit, so they are not modelled. The real
floating-point operators (sqrtf, sin, cos, log) and their pipeline depths are
not modelled either.

## Controller and instructions

The source counts 42 instructions in four groups: 22 interconnect, 6
branching, 2 vector and 12 memory/register. It defines none of them. The
encoding below is this design's own. It keeps the four groups, and it fills
the branching and vector groups to the counts given. Instruction word:
`[31:26]` opcode, `[25:24]` ra (or direction), `[23:22]` rb, `[21:0]` operand.
Registers R1..R4 are numbered 0..3.

| group | opcode | effect |
|---|---|---|
| interconnect | `OP_NOP` 0 | nothing |
| | `OP_IN` 1 | operand[2]=1: input off; else In Mux takes link operand[1:0] (0 N, 1 E, 2 S, 3 W) |
| | `OP_OUT` 2 | output ra takes source operand[1:0] (0 off, 1 PR, 2 buffer) |
| | `OP_ICLR` 3 | input off, all outputs off, consume off |
| | `OP_CONS` 4 | consume = operand[0] |
| branching | `OP_JMP` 8 | pc = operand[9:0] |
| | `OP_BEQ/BNE/BLT/BGE` 9-12 | compare R[ra] with R[rb] (signed for LT/GE), branch to operand[9:0] |
| | `OP_HALT` 13 | stop; `halted` goes high |
| vector | `OP_VMAP` 16 | start `VM_MAP` with n = operand[15:0]; operand[16]=1 takes x from the stream, operand[17]=1 also stores to D0 |
| | `OP_VRED` 17 | start `VM_RED` into R[ra] with n = operand[15:0]; operand[16]=1 reduces the stream |
| memory/register | `OP_LI` 24, `OP_ADDI` 25 | R[ra] = imm16, R[ra] += imm16 (sign-extended) |
| | `OP_MOV` 26 | R[ra] = R[rb] |
| | `OP_LD` 27, `OP_ST` 28 | R[ra] from/to data BRAM operand[20] (0 = D0), address operand[19:0] |

Timing:

* Each instruction takes two clocks, fetch and execute.
* `OP_LD` takes three.
* A vector instruction waits in execute while the region is downloading or
  busy (the `stall` output). It then starts the region and waits for its
  `done`.
* The interconnect settings stay as set until changed, even across a halt and
  restart. A pass-through tile can therefore halt and keep forwarding.

`overlay_pkg::mk_insn(op, ra, rb, operand)` builds an instruction word.

## Example: a dot product

The evaluated workload is a vector multiply followed by a sum (the
"VMUL & Reduce" pattern), on 16 KBytes of data. With a multiplier in tile 0
and an adder in tile 1 (east of it):

```
tile 1: OP_ICLR; OP_IN W; OP_CONS 1; OP_LI R2,0; OP_VRED R2,stream,4096; OP_HALT
tile 0: OP_ICLR; OP_OUT E<-PR; OP_VMAP 4096; OP_HALT
```

1. Download `OPK_MUL` into tile 0 and `OPK_ADD` into tile 1.
2. Write A into tile 0's D0 and B into its D1.
3. Start tile 1, then tile 0.

R2 of tile 1 then holds sum A[i]*B[i] (modulo 2^32). At default sizes the run
takes 4096 + 14 clocks from the producer's start to the consumer's halt. With
one or two pass-through tiles in between it takes 2 or 4 clocks more.

## Branching that steers data

A branch can choose where a stream goes, because routes are set by
instructions. For example, tile 4 below loads a flag from its D0 and compares
it with zero. It then bypasses the stream arriving from the west either east
or south:

```
OP_ICLR; OP_IN W; OP_LD R1,D0[10]; OP_LI R2,0; OP_BEQ R1,R2,7;
OP_OUT E<-buffer; OP_JMP 8; OP_OUT S<-buffer; OP_HALT
```

Operators for both outcomes can be placed in advance, one on each side.
Only the chosen side then receives data.

## Parameters (top level)

| parameter | default | origin |
|---|---|---|
| `ROWS`, `COLS` | 3, 3 | the evaluated 3 x 3 overlay |
| `IDEPTH` | 1024 | assumed (one 36 Kbit BRAM) |
| `DDEPTH` | 4096 | assumed: a 16 KByte vector of 32-bit words per data BRAM |
| `BUF_DEPTH` | 16 | assumed |
| `PR_CYCLES` | 125000 | 1.25 ms reconfiguration at an assumed 100 MHz |

The word width (32) is `overlay_pkg::W`.

## What follows the source and what does not

Taken from the source:

* the mesh with N-E-S-W links in both directions;
* the contents of a tile and how they connect;
* three BRAMs per tile (one for instructions, two for data) and four registers;
* consume or bypass at each tile;
* a controller that sets the interconnect and runs four groups of instructions;
* run-time operator download with its overhead;
* the 3 x 3 size and the 16 KByte workload.

This design's own choices:

* the instruction set and its encoding, and the two-clock instruction timing;
* the link format without back-pressure, the FIFO buffer and its overflow
  rule;
* registered Out Mux outputs;
* the memory depths and the 32-bit word;
* the integer operators and their one-clock latency;
* the host port.

Not built:

* 24 of the 42 counted instructions;
* speculation beyond placing both outcomes in advance: a started tile cannot
  be cancelled, so a consumer on the branch not taken waits forever;
* the ARM-side run-time interpreter that compiles programs and drives
  downloads;
* the device's configuration port.

The testbenches check each block against independent models. They run the dot
product at full size in all three placements, and they exercise every
mechanism listed above. No timing or area figures of a real device are
claimed. The published execution times come from an FPGA implementation and
include data transfer from the host processor. They are not reproduced here.

## Files and simulation

`rtl/` holds one unit per file: `overlay_pkg.sv` first, then `in_mux`,
`tile_buffer`, `out_mux`, `reg_file`, `inst_bram`, `data_bram`, `pr_region`,
`tile_controller`, `overlay_tile` and `dynamic_overlay` (the top). `tb/` has
`tb_<module>.sv` for each. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself. For example:

```
verilator --binary --timing --assert -Irtl rtl/overlay_pkg.sv \
    tb/tb_dynamic_overlay.sv --top-module tb_dynamic_overlay -o tb
./obj_dir/tb
```

`tb_dynamic_overlay` runs the full-size mesh with its default parameters. It
finishes in about a second of wall-clock time on a workstation.
