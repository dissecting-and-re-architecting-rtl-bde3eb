# A 3D-NAND flash die that computes matrix-vector products in place

Generating one token of a large language model reads every weight once. If the weights live in an
SSD, moving them to a processor costs far more than the arithmetic. This design removes that move
for the weight-stationary part of the model. Every plane of a 3D-NAND die computes dot products
inside its cell array. A tree of small reconfigurable processing units (RPUs) sits between the
planes and the die's I/O and adds up partial sums on their way out. Only input vectors go into the
die and only finished output words come out.

The RTL models one such die at its full size:

- 256 planes.
- Each plane has 256 bitline-select rows × 2048 bitlines × 128 wordline layers of 4-bit (QLC) cells.
- One 64-bit word link in each direction.

The analog cell array is a behavioural model. Everything around it is synthesizable
SystemVerilog: decoders, ADCs, shift-adder, page buffer, sequencer, RPUs and the H-tree.

## 1. Computing in a NAND plane

### 1.1 Bitline summation

In a 3D-NAND plane a bitline (BL) runs vertically through many strings. Each string hangs off the
BL through a bitline-select (BLS) transistor and is a stack of cells, one per wordline (WL)
layer. For a normal read:

- One BLS row is opened.
- The target WL layer gets the read voltage and every other layer the pass voltage.
- Each BL's current shows the state of one cell.

The PIM mode opens **many** BLS rows at once, all on the same target layer. The current on a BL
is then the sum of the currents of the selected cells. Each BLS is gated by one input bit
`x[n][b]`, so BL `j` carries

    level[j] = Σ_n x[n][b] · cell[n][layer][j]

This is a binary-input × 4-bit-weight dot product in one sensing step.

- In this design the 256 BLS rows form two **row groups** of 128 rows, each group being 32 blocks
  of 4 BLSs. One PIM pass uses one group, so `N_ACT = 128` inputs.
- `wl_decoder` drives the read level on one layer of those 32 blocks.
- `bls_decoder` drives each of the 128 BLSs with the current bit of its input.

### 1.2 8-bit weights in two cells

A QLC cell holds 4 bits, so an 8-bit weight `w` uses a neighbouring pair of bitlines:

- The even BL holds `w[7:4]`.
- The odd BL holds `w[3:0]`.

With the 4:1 column multiplexer, one column-mux quarter `m` covers BLs `m·512 … m·512+511` and
gives 256 weights per input row. A **unit tile** is therefore 128 inputs × 256 outputs, and
weight `(n, k)` of quarter `m` lives at

    row    = group·128 + n
    BL     = m·512 + 2k     (high nibble)   and   m·512 + 2k + 1   (low nibble)
    layer  = any of 128 (one tile per layer, per group, per quarter: 1024 tiles per plane)

### 1.3 Bit-serial inputs, ADC, shift-add

8-bit inputs are applied one bit per step, LSB first. For each bit `b`:

1. The 512 selected bitlines are precharged and sampled.
2. 512 SAR ADCs convert them to 9 bits. The largest level is 128 × 15 = 1920 and does not fit
   9 bits, so the ADC step is 4 cell units: `code = min(511, level >> 2)`.
3. The shift adder forms, for each output `k`,

       acc[k] += ((code[2k] << 4) + code[2k+1]) << b

After 8 steps `acc[k]` is an INT32 approximation of `Σ_n x[n] · w[n][k]`.

- It is exact when every partial level is a multiple of 4 and below 2044.
- In general the error per step and nibble is below one ADC step (4).

`tb/tb_pkg.sv` contains the exact reference model (`ref_pim`), which the testbenches compare
against bit for bit. The 256 results (1 KiB) are written into the page buffer. The page buffer has
the size of one QLC wordline of a row, 2048 × 4 bits. They are read out through the H-tree like a
page.

### 1.4 Timing of a pass

`pim_plane_ctrl` sequences the pass. The WL is decoded once and held. Each input bit then runs
BLS decode and precharge, sample, ADC, accumulate, and discharge. At 250 MHz:

| phase | cycles | parameter |
|---|---|---|
| WL decode (once) | 100 | `T_DECWL` |
| per bit: BLS decode + precharge | 20 | `T_PRE` (includes `T_DECBLS` = 8) |
| per bit: sample, ADC start | 1 + 1 | – |
| per bit: 9-bit SAR conversion | 10 | `ADC_BITS`+1 |
| per bit: shift-add | 2 | `T_ACCUM` |
| per bit: BL/BLS discharge | 16 | `T_DIS` |
| latch results into page buffer | 2 | – |

A pass takes 100 + 8·(20+1+1+10+2+16) + 2 = **502 cycles ≈ 2.0 µs**. The individual phase
lengths are this design's choice. Only the ≈2 µs total was the target.

The other operations have these latencies:

- A page read takes `T_DECWL + T_PRE + T_DIS + 3` cycles.
- Programming takes `T_DECWL + T_PROG + 1` cycles, where `T_PROG = T_PROG_SLC = 200` for SLC
  (`BPC = 1`) and `19 × T_PROG_SLC` for QLC.

## 2. The H-tree and its RPUs

The 256 planes are the leaves of a binary tree with 255 RPUs as its inner nodes. Each branch is a
64-bit word link with valid/ready handshake and a `last` bit. At 250 MHz such a link moves 2 GB/s,
the die's bus bandwidth, so the tree is never slower than the pins it feeds.

Node numbering follows a heap:

- Node 1 is the root RPU.
- Node `i` has children `2i` and `2i+1`.
- Plane `p` is node `256 + p`.
- An RPU at node `i` works on header level `LEVEL = 8 − clog2(i+1)`. The RPUs just above the
  planes are level 0 and the root is level 7. So plane `p`'s address bit `L` is the choice taken
  by the RPU at level `L`.

### 2.1 Downward: unicast, broadcast, scatter

A packet is a header word, an argument word and `len` payload words (`rtl/pim_pkg.sv`):

| header field | bits | meaning |
|---|---|---|
| `op` | 63:60 | `OP_PIM`, `OP_READ_OUT`, `OP_PROGRAM`, `OP_READ`, `OP_LOAD` |
| `addr` | 59:52 | target plane index |
| `bcast` | 51:44 | per level: 1 = send to both children, 0 = follow `addr[L]` |
| `up_mode` | 43:20 | per level (3 bits each): how the RPU combines the upward streams |
| `len` | 15:0 | payload words |

| argument field | bits | meaning |
|---|---|---|
| `count`, `offset` | 47:40, 39:32 | page-buffer words to read out (`offset` is also where `OP_LOAD` writes) |
| `mux` | 25:24 | column-mux quarter |
| `group` | 16 | row group of a PIM pass |
| `layer`, `row` | 14:8, 7:0 | WL layer, BLS row |

What a plane does with each command:

- **`OP_PIM`** takes 16 input words and runs one pass.
- **`OP_PROGRAM`** takes one page and programs it.
- **`OP_READ`** senses a page into the page buffer.
- **`OP_LOAD`** writes its payload into the page buffer at `offset` without touching the cells.
  This is how an operand that changes every token, the query or the scores, reaches a plane.
- **`OP_READ_OUT`** streams `count` page-buffer words upward.

Setting the low `k` bits of `bcast` reaches the aligned group of `2^k` planes that contains
`addr`. Setting all eight bits reaches the whole die.

- Inputs for a row-wise split are scattered by sending one `OP_PIM` packet per plane, with a
  different payload each time.
- Inputs shared by all planes of a column-wise split are broadcast once.

Downward routing is combinational. A broadcast advances only when both children accept, so a busy
plane stalls only the branches that lead to it.

A plane starts its pass as soon as its own payload has arrived, while the next packet is already
streaming to other planes. This is how the input transfer and the PIM passes overlap.

### 2.2 Upward: stream mode and ALU mode

Each RPU takes its upward mode from the last `OP_READ_OUT` header that passed through it, at
index `up_mode[LEVEL]`. So one read-out command sets up the whole tree for the results that
follow.

| mode | kind | result |
|---|---|---|
| `UP_PASS` | stream | forwards child `addr[L]` |
| `UP_CONCAT` | stream | child 0's packet, then child 1's |
| `UP_ADD` | ALU | two INT32 lanes added pairwise (reduces partial sums of a row-wise split) |
| `UP_VVM` | ALU | Σ of 8 INT8×INT8 products per word pair, accumulated over the packet; one word (lane 0) out |
| `UP_VSM` | ALU | child 0's first word carries a scalar in byte 0; each 8-element INT8 word of child 1 is scaled into the 256-bit product register and sent as 4 words |

Every RPU has one output register, so the tree is a pipeline of depth 8 on the upward side.

### 2.3 Mapping the model's matrix products

These mappings are what the testbenches exercise. They are not enforced by the hardware.

- **Row-wise split (long input, e.g. 4K×1K).** The input is cut into 128-element slices. The
  slices go to planes that share an `UP_ADD` subtree. The RPUs add the partial sums on the way
  out.
- **Column-wise split (wide output, e.g. 1K×4K).** The same input slice is broadcast to planes
  holding different 256-column tiles. The results are concatenated (`UP_CONCAT`).
- **QK^T (attention scores).** The KV cache is stored as ordinary pages, with no PIM, in a die
  with `BPC = 1` (SLC). Planes are used in sibling pairs:
  - `OP_LOAD` broadcasts `q` into the page buffer of every even plane.
  - Every odd plane senses a page that holds key rows.
  - With `UP_VVM` at level 0 and `UP_CONCAT` above, one read-out returns one score per plane
    pair, in order.
- **SV.** Each round:
  - `OP_LOAD` scatters one score `S[l]` into each even plane.
  - The odd planes sense the matching value rows.
  - With `UP_VSM` at level 0 and `UP_ADD` above, one partial `S·V` vector comes out per round.
    The rounds are summed outside the die.

Layer norm, softmax and activations run on processors outside the die and are not part of this
RTL.

## 3. Files

| file | content |
|---|---|
| `rtl/pim_pkg.sv` | word, packet and mode types |
| `rtl/wl_decoder.sv`, `rtl/bls_decoder.sv` | row/layer selection |
| `rtl/nand_cell_array.sv` | behavioural cell array with BL summation and column mux |
| `rtl/sar_adc_bank.sv`, `rtl/shift_adder.sv`, `rtl/page_buffer.sv` | plane read-out chain |
| `rtl/pim_plane_ctrl.sv`, `rtl/pim_plane.sv` | sequencer and complete plane |
| `rtl/rpu.sv`, `rtl/htree.sv` | processing units and tree |
| `rtl/flash_pim_die.sv` | top: `N_PLANES` planes under one H-tree |
| `tb/tb_pkg.sv` | packet builders and the PIM reference model |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_flash_pim_die.sv` | end to end on a 4-plane die with small planes |
| `tb/tb_flash_pim_die_full.sv` | end to end at the default size (256 full planes) |
| `tb/tb_smvm_workloads.sv`, `tb/tb_dmvm_workloads.sv` | weight-stationary and attention products at their evaluated sizes |

## 4. How far to trust it

Every testbench ends with a line `TB_RESULT checks=N failures=M`. All pass with 0 failures.

- **Plane level.** The PIM results are compared word for word with `ref_pim`, for random weights
  and inputs, all four mux quarters and both row groups.
- **`tb_flash_pim_die`.** Runs 36 programs, 3 page reads, 5 PIM passes and 3 page-buffer loads on a small die. It counts
  each mechanism and fails if one never happens:
  - scatter, broadcast, page-buffer load, overlap of inbound transfer with a running pass, and
    back-pressure stalls;
  - all five RPU modes.
- **`tb_flash_pim_die_full`.** Uses the top with no parameter overrides. It:
  - broadcast-programs a weight tile into all 256 planes;
  - scatters inputs to every plane and runs the PIM passes;
  - reads out with `UP_ADD` at every level and checks the die-wide sum.

  The first result appears about 516 cycles after the last input word. Building it needs about
  1 GB and 2–3 minutes; it runs in seconds.

- **`tb_smvm_workloads`.** Runs three matrix-vector products of 8-bit operands on a die of 128
  full-size planes:
  - (1×1K)·(1K×1K) with a fully random matrix, programmed page by page into 32 planes;
  - (1×1K)·(1K×4K) and (1×4K)·(4K×1K) on all 128 planes.

  For the two larger products, one random tile is broadcast into every plane, because 2 M
  cycles of programming through one link is too slow to simulate. Inputs are random in every
  case. From the first input word to the last output word the three products take 1602, 5158
  and 3622 cycles. Most of that is link time: 18 input words per plane and 128 output words per
  column tile, around one 502-cycle pass. Only the program time is shortened in this test.

- **`tb_dmvm_workloads`.** Runs QK^T and SV of one attention head, with head dimension 128 and
  context lengths 256, 512 and 1024. It uses a 64-plane SLC die at full plane size and the
  pairing above.
  - QK^T takes 1628, 2916 and 5492 cycles.
  - SV takes 2632, 5264 and 10528 cycles.
  - Every score and output element matches the reference.

The cell model is ideal. Current is exactly proportional to the cell value, with no variation,
read disturb or BL capacitance limit. Accuracy figures from this RTL therefore show only the ADC
quantisation.

## 5. Departures and own choices

- **Fixed groups.** Row groups are fixed halves of the block array, and column quarters follow the
  mux. Which blocks may be combined is this design's choice.
- **ADC step.** Set to 4 cell units (`LSB_SHIFT = 2`) so that the 9-bit ADC covers a 128-row sum.
  A different ADC transfer function can be set with `LSB_SHIFT`.
- **Phase timings and program time.** These are parameters with chosen defaults. The SLC/QLC
  program-time ratio of 19 is kept.
- **Links.** Modelled as 64-bit words at 250 MHz instead of the die's 8-bit pins at 1000 MT/s.
  The bandwidth is the same and there is no I/O PHY.
- **RPU multipliers.** There are 8 per RPU, matching eight 8-bit elements per 64-bit word.
  - The original description speaks of INT16 multipliers and of attention computed in INT16.
    Here this is read as INT8 operands with 16-bit products, accumulated in INT32.
  - Widening the operands to 16 bits would halve the elements per word. The change would be
    confined to `rpu.sv`.
- **Command format.** The packet format, the per-level mode configuration and the heap numbering
  are this design's own.
- **Unsigned operands.** Inputs and weights in the plane are unsigned 8-bit codes. Zero-point or
  sign correction is left to the host. The RPU's VVM/VSM treat their INT8 operands as signed.
- **Page-buffer load.** `OP_LOAD` writes operands into a page buffer without programming. The
  original design says only that the query is broadcast and the scores scattered to the planes'
  page buffers. The command itself is this design's addition.
- **SLC vs. QLC.** One parameter (`BPC`) selects between the two die kinds. The package that mixes
  SLC and QLC dies, the channel controller, the SSD processors and the high-voltage WL drivers are
  not modelled.
- **Evaluation size.** Some evaluations of the original architecture use 64 planes per die, but
  the die here has 256 (`N_PLANES`).

## 6. Simulating and changing it

With plain Verilator (5.x):

```sh
verilator --binary --timing --assert -Wno-fatal \
  rtl/pim_pkg.sv tb/tb_pkg.sv -Irtl -Itb tb/tb_flash_pim_die.sv \
  --top-module tb_flash_pim_die -Mdir obj_die
./obj_die/Vtb_flash_pim_die
```

Replace the testbench name to run any other testbench. The full-size one takes a few minutes to
compile.

- **Resizing.** Every size is a parameter of `flash_pim_die`: `N_PLANES` (a power of two, up to
  256), `N_ROW`, `N_COL`, `N_STACK`, `BLS_PER_BLK`, `N_ACT`, `COL_MUX`, `BPC`, `ADC_BITS`,
  `LSB_SHIFT` and the `T_*` timings. `N_ROW` must equal 2·`N_ACT`, and `N_COL/COL_MUX` must be
  even. The small testbenches show consistent reduced sets.
- **The cell array.** It stores only programmed pages, in an associative array, so memory grows
  with what a test writes, not with the plane size.
