# CRAM-ER: an error-resilient spintronic compute-in-memory dot-product macro

A computational RAM (CRAM) computes inside its memory array. Every cell is an
STT-MRAM magnetic tunnel junction (MTJ) with two access transistors (a "2T1M"
cell). Two cells of a row drive current through a third cell of the same row.
That third cell, preset to 0, switches to 1 unless both inputs are 1. This is a
NAND gate, and its result is stored where it was computed. The same operation
is applied to the same columns of every row at once, so a 1024-row array does
1024 gate evaluations per write pulse.

Two problems limit CRAM for neural-network work. First, MTJ switching is
probabilistic, and a multi-bit multiply-accumulate needs hundreds of
sequential NANDs, so gate errors pile up. Second, every NAND is an MRAM write,
so long accumulations are slow. CRAM-ER addresses both problems:

* **Multiply in CRAM, accumulate mostly in CRAM, finish in CMOS.** Every row
  multiplies its own weight and input. The products are then added pairwise
  between rows for a few tree levels inside the array. A small error-free
  CMOS adder tree adds what is left. With the default two in-array levels,
  three quarters of the additions run in CRAM and one quarter in CMOS. This
  is the "CRAM-ER(25%)" point, the best accuracy/area trade-off.
* **Selective error correction.** For each in-array addition only the final
  carry, the bit that matters most, is produced three times. A per-row
  majority voter (MAJ3) writes the majority back as the corrected carry.

This RTL builds the digital side of that macro: the array as a digital model,
the micro-program that does the arithmetic with NANDs, the EC voters, the CMOS
adder tree and the controller. The MTJ physics, including the random errors,
is not modelled. Errors enter through a per-row input.

## Interface and use

`cram_er_top` (defaults: `ROWS=1024`, `COLS=64`, `Q=4`, `LEVELS=2`):

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset of control state |
| `host_we`, `host_addr`, `host_wdata` | in | 1, 10, 64 | write one row (ignored while `busy`) |
| `host_re`, `host_rdata` | in/out | 1, 64 | read one row; data one cycle later |
| `start` | in | 1 | compute one dot product |
| `busy`, `done` | out | 1 | busy until the one-cycle `done` pulse |
| `result` | out | 18 | sum over all rows of `W*X`, valid at `done` |
| `sw_err` | in | 1024 | row r's NAND output switches the wrong way this cycle |

Load each row with the 4-bit unsigned weight in bits `[3:0]` and the 4-bit
unsigned input in bits `[7:4]`. Put zeros in the rows you do not use. Pulse
`start`. Cells other than `[7:0]` are scratch and are overwritten. `done`
rises `prog_len(Q,LEVELS) + log2(ROWS>>LEVELS) + 1` cycles after the edge
that samples `start`. With the defaults that is 321 + 8 + 1 = 330 cycles.
One cycle stands for one MRAM write pulse. The device considered has 3 ns
pulses, so one pass takes about 1 us.

Set `LEVELS=1` or `LEVELS=3` for the 50 % and 12.5 % CMOS-tree variants. The
row must be wide enough, which an elaboration-time assertion checks.

## The micro-program (cram_pkg.sv)

All arithmetic is a fixed sequence of row-parallel micro-operations:

| op | effect in every row r |
|---|---|
| `OP_CLR o` | cell o := 0 |
| `OP_NAND a b o` | cell o := NAND(a, b) (preset and pulse in one cycle) |
| `OP_MOVE a o rowdist` | cell o := cell a of row r + 2^rowdist (if that row exists) |
| `OP_EC o` | cell o := MAJ3 of the row's three carry-copy cells |

`gen_op(Q, L, n)` is a constant function that returns operation n. The
controller turns it into a ROM when the design is elaborated. The sequence
runs as follows:

1. **Zero column.** `Z` is cleared. It is the carry-in of every first adder.
2. **Array multiplier.** Row 0 of partial products, `W & X[0]`, goes straight
   into the product field `P`. Each AND is two NANDs, the second with both
   inputs on the same cell. For j = 1..Q-1, the partial products `W & X[j]`
   are formed and added into `P[j +: Q]` by a Q-bit ripple-carry adder. Its
   carry-out lands in `P[j+Q]`. A 4x4 product costs 140 NANDs.
3. **In-array tree levels** `lvl = 1..LEVELS`. The operand width is
   w = 2Q + lvl - 1. First, w MOVEs copy the partial sum of row r + 2^(lvl-1)
   into row r. Then a w-bit ripple-carry adder adds the two. The final
   carry's last NAND is issued three times, into carry-copy cells C0, C1 and
   C2. Then `OP_EC` writes their majority as the sum's top bit. A row whose
   index is not a multiple of 2^lvl computes garbage that is never used.
4. The rows `0, 4, 8, ...` now hold 10-bit partial sums in the output-bit
   field. The sense amps feed them to the 256-input adder tree.

Every full adder is the 9-NAND network below. `T0..T4` are scratch cells.
`s` may share a cell with `a`, and `co` with `c`, which makes the
multiplier's in-place accumulation and the carry chaining work:

```
T0=n(a,b)  T1=n(a,T0)  T2=n(b,T0)  T3=n(T1,T2)        // T3 = a^b
T4=n(T3,c) T1=n(T3,T4) T2=n(c,T4)  s=n(T1,T2)  co=n(T4,T0)
```

A whole 4-bit MAC with two in-array levels costs 297 NANDs, 17 MOVEs and
2 EC writes (321 cycles).

Column layout of a 64-bit row for Q=4, L=2 (defaults):

| columns | content |
|---|---|
| 0-3 | weight W |
| 4-7 | input X |
| 8 | zero Z |
| 9-15 | scratch T0-T6 |
| 16-19 | partial products PP (later the level-2 moved operand) |
| 20-27 | product P |
| 28-35 | level-1 moved operand |
| 36-45, 46-55 | sum buffers SR0, SR1 (level 1 writes SR0, level 2 writes SR1) |
| 56-58 | carry copies C0-C2 |

The sense amps sit on columns 36-58, the "output bits".

## Errors and what EC covers

A NAND follows the truth table of the device. An error can occur only when
at least one input is 1. Input 00 is driven hard enough to be treated as
error-free. An error gives the opposite output. `sw_err[r]` applies one such
error to row r in the cycle it is high. CLR, MOVE and EC writes are taken as
error-free. EC protects only the final carry of each in-array addition. An
error elsewhere passes through to the result. The end-to-end testbench shows
both cases: an error on a carry copy is voted away, and an error on a sum bit
moves the result by one.

## Blocks

| file | role |
|---|---|
| `rtl/cram_pkg.sv` | op encoding, column layout, micro-program generator |
| `rtl/cram_array.sv` | ROWS x COLS cell array, row-parallel op execution, host port, sense-amp view |
| `rtl/ec_maj3.sv` | per-row MAJ3 carry voter |
| `rtl/adder_tree.sv` | pipelined CMOS binary adder tree, one register level per tree level |
| `rtl/cram_controller.sv` | ROM sequencer: program, tree start, done |
| `rtl/cram_er_top.sv` | the macro: array, 1024 EC voters, tree taps, tree, controller |

The array is a register model: 65,536 flip-flops with a shared one-hot column
decoder and two per-row read multiplexers. It is not a memory macro, because
every micro-operation touches every row.

## What follows the source design and what is this design's own

Taken from the source design:
- the 1024x64 array;
- 4-bit unsigned weights and inputs;
- NAND-only logic with the preset-0 truth table;
- 9-NAND full adders, ripple-carry adders and an array multiplier;
- pairwise accumulation between rows;
- triplicated final carry with per-row MAJ3 EC;
- a CMOS adder tree for the last quarter of the additions;
- the device error model (input 00 error-free, other inputs with rate delta).

Choices made here, where the source gives no detail:
- the column layout;
- one cycle per micro-operation, with the preset folded into the NAND cycle;
- the row-parallel MOVE between rows, and error-free CLR/MOVE/EC writes;
- AND built from two NANDs;
- carry copies made by repeating the adder's last NAND (not whole independent
  carry chains);
- the ROM sequencer;
- the host row port, with access blocked while busy;
- the tree pipelining and all reset and handshake behaviour;
- one dot product of length up to ROWS per pass.

Not built:
- the MTJ cell and the sense amplifiers as circuits;
- signed or floating-point modes;
- several independent dot products per pass;
- accumulation across passes (dot products longer than 1024 need the host to
  add partial results);
- the accuracy-driven parts of the source, such as error-aware fine-tuning of
  the network, which are software.

## Workloads

The evaluated networks use 4-bit weights and activations. LeNet-5 (longest dot
product about 400) and ResNet-20 (576) fit in one pass per output. ResNet-18
(4608) and ViT-Base MLP layers (3072) need 5 and 3 passes per output, added
outside the macro. Weights are not resident: each pass loads its own 1024
operand pairs. These sizes are the usual shapes of those networks.

## Testbenches

Each is self-checking and prints `TB_RESULT checks=N failures=M`:

- `tb/ec_maj3_tb.sv`: all 8 input patterns.
- `tb/adder_tree_tb.sv`: 16-input tree, 40 input sets with gaps. Checks the
  sums and the 4-cycle latency.
- `tb/cram_array_tb.sv`: 8x16 array, 600 random micro-operations with random
  errors and conflicting host writes. Checks against a reference array after
  every operation.
- `tb/cram_controller_tb.sv`: runs the program on a reference array in the
  testbench. Checks the group sums, EC correction of an injected carry error,
  the program length, NAND/MOVE/EC counts and the handshake.
- `tb/cram_er_top_tb.sv`: full default size, four passes: ideal with a
  latency check, corrected carry error, uncorrected sum error, and a host
  write while busy.

Run one with Verilator, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module cram_er_top_tb -y rtl +libext+.sv rtl/cram_pkg.sv tb/cram_er_top_tb.sv
./obj_dir/Vcram_er_top_tb
```
