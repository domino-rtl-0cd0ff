# Domino: computing on the move in a mesh of compute-in-memory tiles

Domino runs a neural network without a central controller and without moving weights. Every
layer's weights sit permanently in the crossbars of a rectangular group of tiles, called a
*block*. Input feature maps stream through the block. Partial sums are added while they travel
from tile to tile. By the time a result leaves the last tile of the block, it has been summed,
activated and pooled.

Packets on the network carry only payload: no header, no address, no tail. Every router knows
what to do with each packet because it runs a short, periodic program written into it before
inference. The program's period follows from the layer shape; the paper gives p = 2(P+W) for
convolutions. So once the first packet reaches a router, that router's behaviour is fixed step
by step, and control signals never cross the chip.

This repository holds synthesizable SystemVerilog for that architecture:

- the input buffer;
- the mesh of tiles;
- each tile's two routers;
- the router instruction set;
- a functional model of the analog crossbar.

It also holds self-checking testbenches, one per module plus an end-to-end run of the whole chip on a reduced mesh.

## The mesh and its two networks

`domino_top` is an input buffer plus an `AR × AC` mesh of `domino_tile`s (default 30 × 30 = 900
tiles). Each tile connects to its four neighbours through two independent networks:

- **IFM network**: input feature maps. Each tile's end of it is the *Rifm* router.
- **OFM network**: partial sums, group sums and finished outputs. Each tile's end of it is the
  *Rofm* router.

A link carries one packet per step with a valid strobe. A packet is `NC` (IFM) or `NM` (OFM)
8-bit lanes, 256 each by default.

At the mesh edges:

- The input buffer feeds the west edge of every row.
- Results leave at the east and south edges (`ofm_east_*`, `ofm_south_*`).
- All other edge inputs are tied to zero.

`mac_fire` shows which crossbars computed in a step. `any_overflow` and `any_underflow` collect
the Rofm buffer error flags.

The input buffer (`input_buffer`) has one queue per mesh row, each with 64 entries. Each entry is
a packet or a *bubble*: a valid bit that is 0. After `start`, all rows send entry i in the step
i+1 after `start`. Bubbles space the packets to match the schedule of the layer being fed.

## Rifm: keep, forward, decide

`rifm` accepts the stream from one configured port, stores the packet in its buffer (`NC` bytes,
one per crossbar row), and forwards it to any set of ports in the same step. It also decides
whether the local crossbar computes on this packet.

There is no control in the packet, so that decision comes from counting. Received packets
advance:

- a column counter, which wraps at `col_len`;
- a row counter, which advances when the column counter wraps and itself wraps at `row_len`.

The MAC fires when (column, row) lies inside the window `[col_lo, col_hi] × [row_lo, row_hi]`.
This is how a tile holding tap (i, j) of a K×K filter skips the image positions where that tap
falls outside the image. The same mechanism skips the fifth vector in the end-to-end test.

With `shift_units = k > 0`, a packet does not replace the buffer. Instead:

- the buffer moves up by k·64 rows;
- the packet's low k·64 rows enter at the bottom.

The buffer then holds several consecutive input vectors of a layer with fewer than `NC`
channels, so one crossbar can hold several filter taps.

The *shortcut* hands the raw packet to Rofm without a MAC. It is used for residual connections.
Timing: a packet present at a clock edge is in the buffer after that edge. In the step that
follows, `out_valid`, `pe_en` and `sc_valid` are high.

## The crossbar PE (behavioural)

The real PE is analog:

- a 1T1R ReRAM crossbar with one cell per weight bit;
- current mirrors that weight the bit lines k/8 … k;
- two integrators merged by 16:1 charge sharing;
- an 8-bit SAR ADC per column.

The input is applied bit-serially.

`pe_crossbar` stands in for all of this with the ideal digital result of one step:
`out[m] = sat8((Σ_c x[c]·w[c][m]) >>> ADC_SHIFT)`. Inputs are unsigned bytes and weights are
signed bytes. `ADC_SHIFT` is 8 by default, one halving per input bit. The result appears one
step after `en`. Weights are written one crossbar row per clock. The model does not reproduce
analog error or the real ADC transfer curve.

## Rofm: a router steered by a periodic program

Rofm is where the data-flow is decided. It has the following parts:

- a receive multiplexer;
- two input registers (`in0` from a neighbour port; `in1` from the own PE or the shortcut);
- a three-input adder (`in0 + in1 + buffer head`, per lane, signed, saturating);
- the Rofm buffer, a 64-entry FIFO of packets (16 KiB);
- a computation unit for activation and pooling;
- an output register that drives any subset of the four ports.

A counter indexes a 128-entry table of 16-bit instructions. The counter starts with the first
packet that reaches the Rofm, from any source. The entry at index 0 belongs to that first step,
and the counter then wraps at the configured period.

### Instruction format

Bit positions follow the published format. The meaning of the bits inside each field is this
design's own.

| bits | C-type (opcode 0) | M-type (opcode 1) |
|---|---|---|
| 15:11 Rx | [4] take port → in0, [3:2] which port, [1] take PE → in1, [0] take shortcut → in1 | same |
| 10:7 Sum | [3] add in0, [2] add in1, [1] add buffer head, [0] push `in1` as is instead of the sum | Func [5:4] op: bypass / ReLU / max / average |
| 6:5 Buffer | [1] pop head, [0] push | Func [3] pool across time, [2] first of a window, [1] ReLU after pooling, [0] operand = buffer head (and pop it) instead of in0 |
| 4:1 Tx | one bit per port: E, W, N, S | same |

### Two-step execution

An instruction fetched in step t does two things:

- In step t, its Rx field loads the input registers.
- In step t+1, its Sum, Buffer and Func fields act on those registers, and the result goes into
  the output register.

The result is on the links in step t+2. Each neighbour can take it with an instruction fetched
in that step. A packet therefore advances one hop every two steps, which is where the factor 2
in the schedule periods comes from.

### Pooling and activation

The computation unit pools in one of two ways:

- **Pairwise.** It combines `in0` and `in1`, for results of one window that arrive from two
  neighbours.
- **Across time.** It uses a per-lane pool register, for results that leave the same tile one
  after another. `first` restarts the window.

Average pooling multiplies the sum by `avg_mul` and shifts it right by `avg_shift`. These are
per-router configuration; 64 and 8 give ¼.

### Worked example: the end-to-end test

The end-to-end test maps a fully connected layer, 4:1 max pooling across time and ReLU on a
block of 3 × 2 tiles. Tile (t, a) holds slice t of the inputs for output group a. Vectors arrive
8 steps apart, and the schedule period is 32.

| kk = step mod 8 | tile 0 | tile 1 | tile 2 |
|---|---|---|---|
| 0 | take PE, send it south | take PE, push it | take PE, push it |
| 2 | | take north, add head, pop, send south | |
| 4 | | | take north, add head, pop, push sum |
| 5 | | | M: max over time on head (pop), ReLU; send south in the 4th round only |

Each block column emits `relu(max_v sat(sat(p0+p1)+p2))` exactly once.

## Configuration

Before inference, a bus writes one item per clock to the tile at (`cfg_row`, `cfg_col`).
`cfg_target` selects the item:

- a crossbar row of weights (`cfg_addr` = row);
- a schedule-table entry (`cfg_addr` = index);
- the Rofm register: period, average-pooling scale;
- the Rifm register: ports, MAC window, shift, shortcut.

The types are in `domino_pkg`.

## Sizes

| parameter | default | origin |
|---|---|---|
| crossbar `NC × NM` | 256 × 256 × 8 b | paper (512 kb array, ADC 8 b × 256) |
| Rifm buffer | 256 B | paper |
| shift step | 64 rows | paper |
| Rofm buffer | 64 × 256 B = 16 KiB | paper |
| schedule table | 128 × 16 b | paper |
| mesh `AR × AC` | 30 × 30 | paper's 900-array configuration; VGG-16/-19 need 50 × 50 (2500 arrays) |
| `ADC_SHIFT` | 8 | this design |
| input buffer depth | 64 per row | this design (not specified) |

### Capacity

A 256 × 256 array holds 65,536 weights, so the 900-tile default holds about 59 M weights. By the
standard weight counts of these networks:

| network | weights | arrays needed | fits |
|---|---|---|---|
| VGG-11 (CIFAR-10) | about 9.2 M | at least 141 | in 900 |
| ResNet-18 (CIFAR-10) | about 11.2 M | at least 171 | in 900 |
| ResNet-50 | about 25.6 M | at least 391 | in 900 |
| VGG-16 | about 138 M | at least 2106 | needs `AR = AC = 50` |
| VGG-19 | about 144 M | at least 2193 | needs `AR = AC = 50` |

The weight counts are general knowledge, not from the paper.

## Where this RTL departs from the paper

- **Whole packets per step.** The paper moves 64-bit flits at 640 MHz and steps instructions at
  10 MHz. Here one clock is one step, and a whole packet of `NM` lanes moves in it. The
  registers and adders are widened to match.
- **Instruction bit meanings, Rifm controller, shortcut, buffer.**
  - The meaning of the bits inside each instruction field is this design's own.
  - The Rifm controller's counter-and-window form is this design's own.
  - The shortcut carries the first `NM` rows of the Rifm buffer.
  - The Rofm buffer is a FIFO that reads zero when empty.
- **No M-type write into the Rofm buffer.** The paper's tile figure shows the computation unit
  writing into the buffer. Here M-type results go only to the ports.
- **FC layers use C-type instructions.** The paper mentions "FC layer control" in the M-type
  field. Here FC layers use ordinary C-type sums, and M-type has no separate FC mode.
- **Activation is ReLU.** The paper does not name the activation function.
- **Sign and overflow.** Unsigned inputs, signed weights and saturating 8-bit sums are this
  design's choices.
- **Analog PE.** The PE is a functional model (see above).
- **No compiler.** The compiler that produces tables and Rifm settings is not included. The
  testbenches write hand-derived tables.

## Files and simulation

| file | what it is |
|---|---|
| `rtl/domino_pkg.sv` | types, instruction structs, config structs, `sat8` |
| `rtl/domino_top.sv` | input buffer and mesh |
| `rtl/domino_tile.sv` | Rifm, PE and Rofm of one tile |
| `rtl/rifm.sv` | IFM router |
| `rtl/pe_crossbar.sv` | crossbar model |
| `rtl/rofm.sv` | OFM router |
| `rtl/rofm_sched.sv` | schedule table and counter |
| `rtl/rofm_buffer.sv` | partial-sum FIFO |
| `rtl/rofm_cu.sv` | activation and pooling |
| `rtl/input_buffer.sv` | west-edge input streams |
| `tb/tb_<module>.sv` | one self-checking test per module |
| `tb/domino_e2e.svh` | the end-to-end scenario |
| `tb/tb_domino_top.sv` | the scenario on a 4 × 3 mesh with 16 × 16 crossbars |

Each testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_domino_top \
  rtl/domino_pkg.sv $(ls rtl/*.sv | grep -v domino_pkg) tb/tb_domino_top.sv
./obj_dir/Vtb_domino_top
```

The largest configuration simulated end to end is the one in `tb_domino_top`: a 4 × 3 mesh of 16 × 16 crossbars with ADC shift 4. `domino_e2e.svh` is written for any size (the block sits in the south-east corner), but at the default 30 × 30 mesh of 256 × 256 crossbars the generated C++ model needs more memory to compile than 16 GiB. The default-size top has been linted and elaborated, not simulated.
