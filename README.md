# PIMBALL in SystemVerilog: binary neurons computed inside spintronic memory

PIMBALL computes binary neural networks (BNNs) inside an STT-MRAM array
instead of next to it. Every cell is a magnetic tunnel junction (MTJ) behind one
access transistor (the 1T1M cell). The same cells that store the weights and
activations also act as the inputs and outputs of logic gates. To fire a gate, the
peripheral circuits put a chosen voltage across a few input cells and one output
cell that share a bitline. The current that flows depends on the input cells'
resistances, so the output cell switches or not according to a truth table.
Because the bitline is shared by all cells of a column and the wordlines are
shared along rows, one gate fired on a set of rows acts in **every selected
column at once**. The array is a SIMD machine whose lanes are its 1024 columns.

A BNN fits this well. Inputs and weights are single bits, so a multiplication is
an XNOR. A neuron is a popcount of XNORs, followed by batch normalisation and a
threshold. Everything reduces to NAND/NOT/COPY gates. This RTL maps one output
neuron to one column:

- the column holds that neuron's weights and threshold and a copy of every input;
- a hardware sequencer issues the gate sequence;
- all 1024 neurons of a layer come out together.

Layers sit in separate tiles. A transfer engine moves one layer's outputs into
the next tile. The tiles then work on different images at the same time.

What the RTL models is the digital side: the cell array as bit storage with
the *logical* behaviour of gates, the wordline and bitline selection, a
command-level tile interface, the neuron sequencer, the inter-tile transfer and
the top level. The analog part is not modelled: the voltages that select a gate,
MTJ switching and sense amplifiers.

## The array and its gates (`pim_array`, `wl_latch`, `bl_select`)

A tile is `ROWS x COLS` cells, 1024 x 1024 (128 KB) by default. It is stored as
`logic [COLS-1:0] mem [ROWS]`. The array is *transposed* with respect to a
classic memory: logic runs down a column, between rows.

**Gates are conditional switching of a preset output.** An output cell is first
written to a preset value. The fired gate can then only move it the other way:

| gate | preset | output switches when        | result            |
|------|--------|-----------------------------|-------------------|
| NAND | 0      | any input is 0              | NAND of inputs    |
| NOR  | 0      | all inputs are 0            | NOR of inputs     |
| NOT  | 0      | its single input is 0       | NOT               |
| COPY | 1      | its single input is 0       | copy              |

So a gate is always two steps: a preset of the output row, then the fire. The
sequencer issues them as separate commands. A fire without the preset gives the
OR of the old value and the gate result, just as the real device would.
`pim_pkg::gate_preset()` gives the preset per gate.

**Row selection is latched.** The wordline latches (`wl_latch`) take one row
address per command and keep it raised until a clear. A gate with k inputs
therefore needs k+1 latch commands. **Column selection** (`bl_select`) takes
ranges lo..hi, which add up, until cleared. A gate acts only on the selected
columns. The others keep their contents.

**The parity rule.** In the 1T1M cell, even rows hang on one bitline of the
column pair (BLO) and odd rows on the other (BLE). A gate needs its inputs on
one bitline and its output on the other. So all inputs of a gate must be rows of
one parity, and the output must be a row of the other parity. `pim_array` checks
this on every fire. It needs exactly one output row and at least one input row;
NOT and COPY need exactly one input. It raises `err_o` and writes nothing for a
gate that breaks the rule. The rule shapes the whole data layout (next section).

Timing is one command per clock; the read data is registered. The paper gives
gate and access latencies in nanoseconds. Counting commands is this design's
stand-in for them.

## Computing a neuron in a column (`bnn_sequencer`)

This is the core of the design and the least obvious part.

### Row layout

Rows are used in pairs, called *slots*: slot s is row 2s (even) and row 2s+1
(odd). A value that lives in slot s sits in one of the two rows. The sequencer
keeps one parity bit per slot that says which row. With `NMAX = 128` (the largest
fan-in), `PW = clog2(NMAX)+1` popcount bits, `TW = PW+1` comparand bits and
`REG = NMAX + PW + 1`:

| slots                      | content                                         |
|----------------------------|-------------------------------------------------|
| 0 .. REG-1                 | region A: inputs x_i (row 2i), later XNORs and popcount operands |
| REG .. REG+NMAX-1          | weights w_i (row 2(REG+i)), one per column      |
| next REG slots             | region B: popcount operands (ping-pong with A)  |
| next TW slots              | threshold bits t_j, LSB first (even rows)       |
| next 7                     | scratch S0..S6 for one adder or borrow step     |
| next 1                     | carry                                           |
| next 3                     | FIX0..FIX2, targets of parity copies            |
| next 1                     | a constant 0                                    |
| row after that (even)      | output neuron y                                 |

At the default size the output row is 846 of 1024. For a fully-connected layer
the inputs are the same in every column (the transfer engine duplicates them).
A convolutional layer uses the same sequence with different inputs per column:
- each column stands for one filter at one position;
- its inputs are the window of input bits that the filter covers there;
- positions over the edge hold 0s;
- its weights are that filter's bits.

The host writes such per-column inputs with ordinary row writes. Weights and
thresholds differ per column. A run overwrites the inputs and keeps weights and thresholds,
so one tile can take image after image.

### The gate sequence

After `start_i` the sequencer samples the fan-in `n_in_i` (1..NMAX), the
batch-norm shift `bn_shift_i` and the column range. It then:

1. Selects the columns and writes 0 into the constant slot.
2. **XNOR.** For each i it computes p_i = XNOR(x_i, w_i) as
   NAND(NAND(x,w), NAND(NOT x, NOT w)). That is 2 NOT + 3 NAND = 5 gates. The
   result overwrites x_i.
3. **Popcount.** An adder tree adds the n one-bit values pairwise, level by
   level, alternating between regions A and B. Each addition is ripple carry:
   - bit 0 uses a half adder of 4 NAND + 1 NOT;
   - every further bit uses a 9-NAND full adder;
   - the final carry becomes the new top bit.
   When a level has an odd count, the last operand is moved to the next level
   by COPY gates, and a 0 is appended as its top bit. The result P has PW bits.
4. **Batch normalisation and the affine step.** The affine step turns the match
   count into a ±1 sum: 2P − n. With a shift-only batch normalisation, the
   comparand is V = (2P) >> bn_shift. No gate is spent on V: it is just the
   choice of rows read as V's bits, with the constant 0 where no bit of P lands.
   The −n and the additive batch-norm term are folded into the threshold by
   whoever writes it: T = threshold + n − bias.
5. **Threshold.** A ripple-borrow chain computes V − T. Each bit costs one NOT
   and four NANDs, using a 3-input NAND for the borrow. One NOT of the final
   borrow then gives y = (V ≥ T) in the output row. That is 5·TW + 1 gates.

### Paying for the parity rule

Every gate's output row is chosen as the opposite parity of its inputs. This
works as long as all inputs of a gate agree. Often they do not. For example, a
carry produced on an odd row may need to meet an operand bit on an even row.
Before such a gate the sequencer moves the odd one out with a COPY into a FIX
slot, flipping its parity. These *parity copies* are counted separately
(`fixes_o`) from the gates of the algorithm (`gates_o`).

They are not negligible:

| fan-in n | algorithm gates | parity copies | share of extra gates |
|----------|-----------------|---------------|----------------------|
| 16       | 285             | 108           | 38 %                 |
| 127      | 2392            | 887           | 37 %                 |
| 128      | 2401            | 889           | 37 %                 |

The paper states that the effect of the parity rule is negligible for BNNs. With
this layout and gate order, it is not. A smarter layout might remove many of the
copies. This design does not attempt that.

### Cost per gate

Each gate is five or six commands:

1. FIXCHK, a cycle to look at the input parities;
2. preset;
3. wordline clear;
4. k+1 wordline latches;
5. fire.

A full-size 128-input layer takes about 25,000 clock cycles for all 1024
neurons.

## Tiles, transfer and pipelining (`pim_tile`, `dup_xfer`, `pimball_top`)

`pim_tile` wraps one array with its latches and decodes one `tile_ctl_t` command
per cycle:

- fire a gate on the latched rows and selected columns, with the input parity in `in_odd`;
- write a row under a mask;
- read a row (data returned one cycle later with `rvalid_o`);
- latch a wordline, or clear all latched wordlines;
- add a column range, or clear the column selection;
- preset a row on the selected columns.

`dup_xfer` is the communication between layers. A layer's outputs are one row
of its tile, one bit per column. The next layer needs each of those bits as a
whole row, because every column must see every input. In DUP mode the engine:

1. reads the source row once;
2. writes n rows of the destination tile, at rows dst_row + 2i. Row i is
   filled with bit (src_col + i) in every column. The stride of 2 keeps the
   inputs on even rows.

COPY mode moves one row unchanged. DUP keeps the engine busy for n+4 cycles and
COPY for 5. The read and the writes are strictly sequential.

`pimball_top` (default `NT = 2` tiles) gives each tile its own sequencer and
shares one transfer engine and one host port. Each cycle, each tile is owned
by, in this order:

1. its sequencer, while that sequencer is busy;
2. the transfer engine, while a transfer is busy that uses this tile as source
   or destination;
3. otherwise the host.

`host_ready` drops while the addressed tile belongs to someone else. Sequencers
run independently, so tile 0 can compute image B while tile 1 computes
image A. This is the layer pipelining the paper relies on for throughput.
`tile_err` reports parity-rule violations; `tile_gates`, `seq_gates`,
`seq_fixes` and `seq_cycles` give counts for performance studies.

## Where this departs from the paper, and what is missing

- **Only group size g = 1.** The paper can spread one neuron over g rows (here,
  columns) and merge the partial popcounts. It does so for fan-ins larger than
  one column holds. That is not built. With the doubled rows of the parity
  layout, a 1024-row column holds at most about 155 inputs, and NMAX is 128.
  Therefore none of the paper's benchmark networks runs end to end:
  - FC MNIST layers have fan-in 784 to 2048;
  - CIFAR-10 convolutions have fan-in 576 to 4608;
  - AlexNet is far larger;
  - of BioNET, only the convolutions of layers 1 and 3 (fan-in 12 and 128) fit,
    and the pooling that follows them is missing.
- **No max-pooling, no multi-bit inputs or outputs, no in-array
  multiplication.** These are needed for the 8-bit first layers, the 16-bit and
  10-bit output layers, and XNOR-Net's scaling.
- **Full adder.** The paper describes a 5-step NAND/NOT full adder in one place
  and says "9n steps" with NAND only in another. A 5-step version with 2-input
  gates is not possible, so this design uses the 9-NAND full adder.
- **Borrow formula.** The paper's prose subtracts the threshold from the value
  and takes the sign. Its printed borrow formula, read literally, computes
  threshold − value. This design follows the prose (y = V ≥ T). The gate count,
  5 per bit + 1, is the same.
- **Odd operands** in the popcount tree are zero-extended, not sign-extended as
  the paper writes. The popcounts are non-negative, so the two are meant the
  same way.
- **XNOR** uses the paper's NAND/NOT form (5 gates), not its 4-NOR form,
  because the paper's evaluation restricts itself to NAND, NOT and COPY.
- **Sequencing in hardware.** The paper leaves the issuing of gates to software
  that is aware of the hardware. Here a finite-state machine per tile does it.
  The cycle counts are therefore this design's own, one command per clock.
- **Analog and peripheral circuits** are out of scope: MTJs, the gate voltage
  ranges, the bitline drivers, the sense amplifiers and the host link. The
  array is a register file with the logical gate behaviour.
- The 2048 x 2048 tile size the paper also evaluates is a parameter change
  (`ROWS`, `COLS`). NMAX can then grow to about 325.

## Files and how to simulate

| file | role |
|------|------|
| `rtl/pim_pkg.sv` | gate and command types, `tile_ctl_t`, default size |
| `rtl/wl_latch.sv` | latched wordline set |
| `rtl/bl_select.sv` | column (bitline) range selection |
| `rtl/pim_array.sv` | cell array: read, masked write, gate fire, parity check |
| `rtl/pim_tile.sv` | one tile: command decode around the three above |
| `rtl/bnn_sequencer.sv` | per-tile neuron engine (XNOR, popcount, BN, threshold) |
| `rtl/dup_xfer.sv` | inter-tile row read and duplicating write |
| `rtl/pimball_top.sv` | NT tiles + sequencers + transfer engine + host port |
| `tb/tb_<module>.sv` | self-checking test of each module |
| `tb/tb_pimball_top.sv` | two-layer, two-image end-to-end test at a reduced size |
| `tb/tb_pimball_full.sv` | the same test with the top at its default size |

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself
through a watchdog. To run one with Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal \
  rtl/pim_pkg.sv rtl/wl_latch.sv rtl/bl_select.sv rtl/pim_array.sv \
  rtl/pim_tile.sv rtl/bnn_sequencer.sv rtl/dup_xfer.sv rtl/pimball_top.sv \
  tb/tb_pimball_full.sv --top-module tb_pimball_full -Mdir obj
./obj/Vtb_pimball_full
```

### What the tests check

- The **unit tests** compare against reference models written in the
  testbench:
  - `tb_pim_array` checks every gate type, random inputs, both parities,
    illegal gates, and that unselected columns and rows stay untouched;
  - `tb_bnn_sequencer` runs 8 random neurons on a 256 x 32 tile, each with its
    own fan-in, shift and column range. Four runs use inputs duplicated across
    columns (fully connected). Four give every column its own inputs
    (convolution). It checks every output bit. It also
    checks the exact gate count: 5n for XNOR + the adder tree + 5·TW+1.
- The **end-to-end tests**:
  1. load two layers of weights and thresholds;
  2. push image A through layer 0, duplicate the outputs into tile 1, and run
     layer 1;
  3. run image B in tile 0 *at the same time*, then send it through layer 1;
  4. check all results against a reference network.

  They count each mechanism and fail if one never happened:
  - host stalls;
  - overlapping computation in two tiles;
  - DUP and COPY transfers;
  - parity copies;
  - odd operands in the adder tree;
  - a non-zero batch-norm shift;
  - the parity error flag.

  The full-size run uses two 1024 x 1024 tiles, 127 and 128 inputs, and 1024
  neurons per layer. It finishes in about 12 s of simulation time on a desktop
  machine. Per layer it reports about 2400 gates, 890 parity copies and 25,000
  cycles.
