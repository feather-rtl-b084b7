# FEATHER: a reduction network that reorders on the way out

A DNN accelerator works fastest when each layer uses its own dataflow: which
loop dimensions are spread over the PEs, which tensor stays put, and in what
shape. Changing dataflow between layers has a hidden cost. The next layer
wants its input activations (iActs) laid out across the buffer banks in a
different way from how the previous layer wrote them. If the layout is wrong,
the PEs either wait on bank conflicts or the data has to be shuffled in a
separate step, on chip or through DRAM.

FEATHER avoids the separate step by doing the reordering inside the reduction.
Partial sums from the PE array have to be added across columns anyway. The
network that adds them is a small multistage switch network (BIRRD). Each
switch can pass, swap or add its two inputs. With a suitable per-cycle
configuration the same pass that sums the partial sums also delivers each
finished output to the buffer bank, and the line, where the next layer wants
it. Many iActs reduce to few oActs, so after reduction there are fewer values
to place, and they can usually be placed without bank conflicts. The
stationary buffer is ping-ponged: a layer reads one set and writes the other,
and the next layer reads the other set in the new layout with no copy in
between.

This repository holds synthesizable SystemVerilog for that datapath in its
16x16, int8 configuration:

- the PE array (NEST);
- the reduction/reorder network (BIRRD);
- the output buffer, the requantizer, the zero-point/scale store;
- the ping-pong stationary and streaming buffers;
- the instruction buffer;
- a controller;
- a minimal post-processing engine.

It also holds a self-checking testbench for each block and one for the whole
design.

## The datapath at a glance

```
            StrB (weights, ping/pong, one AW-byte bank)
                 |  one line per cycle into the PEs' shadow weight registers
                 v
 StaB set S  ---bank j ---> NEST column j ---column bus j---> BIRRD in j
 (AW banks x 1 B)          (AH PEs per column)                    |
                                                                  v
 StaB set ~S <--bank j--- QM lane j (int32->int8) <--- OB bank j <-- BIRRD out j
        ^                                                  (32-bit adder)
        |  per-wave write line and BIRRD configuration from the instruction buffer
```

Everything is AW lanes wide: stationary-buffer bank j, NEST column j, BIRRD
port j, OB bank j, QM lane j and the write-back bank j. There is no
distribution network between the buffer and the PEs. Bank j is wired straight
to column j. That works only because the previous layer already wrote its
outputs in the order this layer reads them.

Default sizes (`feather_top` parameters):

| parameter | default | meaning |
|---|---|---|
| `AW`, `AH` | 16, 16 | NEST columns and rows; BIRRD has `AW` ports |
| `DW`, `ACCW` | 8, 32 | operand width, partial-sum width |
| `SDEPTH` | 1024 | lines per stationary-buffer set (16 KiB per set) |
| `WDEPTH` | 512 | lines per streaming-buffer set (two full weight loads) |
| `IDEPTH` | 1024 | instructions (one per wave) |
| `OB_DEPTH` | 64 | partial-sum entries per output-buffer bank |
| `QSHIFT` | 16 | fraction bits of the fixed-point scale |

The array shape, operand and accumulator widths come from the published 16x16
28 nm configuration. The buffer depths and the scale format are this design's
choices. `AW` must be a power of two (4 or more). `AW = 4` selects a
three-stage network, described below.

## NEST: local reduction first, then take turns on the bus

Each PE holds `AH` weights in an active register bank. It also has a second,
shadow bank that can be loaded while the active bank computes. iActs enter
row 0 of each column and move down one row per cycle. Each iAct carries a small
control bundle:

- a weight index;
- *first* and *last* flags that delimit a group of `AH` beats.

A PE computes `(x - zx) * (w[idx] - zw)` on 9-bit operands, giving an 18-bit
product. It adds the product into a 32-bit accumulator. The first beat clears
the accumulator, and the last beat latches the group's sum for one cycle.

Row r sees the same stream one cycle after row r-1. So the rows of a column
finish their groups in consecutive cycles, and each takes its one-cycle turn on
the column's single output bus. In steady state every PE multiplies every cycle
and the bus is never claimed twice. An assertion checks this. The `AW` bus
values of one cycle are one **wave**. The rows produce one wave per cycle, and
each wave goes through BIRRD with its own configuration.

Timing: when the last iAct of a group enters row 0 at cycle t, row r drives its
bus at cycle t+1+r.

Weights load one streaming-buffer line per cycle into weight slot k of all the
PEs of row r, in the shadow bank. A full load is `AH*AH` = 256 cycles. A
`swap` pulse then makes the shadow bank active in every PE at once. Because of
the shadow bank, the next layer's weights can load while the current layer
runs.

**Bypass.** In bypass the PE array is skipped. The iActs (registered and
sign-extended to 32 bits) go directly onto the column buses. BIRRD then only
reorders and/or adds them. This is how a pure layout change or a plain
cross-lane sum is done.

## BIRRD: two butterflies back to back

BIRRD has `2*log2(AW)` stages of `AW/2` two-input switches (8 stages of 8
switches at AW = 16). Switch k of a stage owns ports 2k and 2k+1. Output port j
of stage i connects to input port `rev(j, b)` of stage i+1. Here `rev`
reverses the low b bits of j and leaves the rest as they are, and
`b = min(log2 AW, 2 + i, 2*log2 AW - i)`. The last stage's outputs are the
network outputs.

This wiring is two butterfly networks mirrored about the middle. It can route
any single permutation. Routing several inputs to one output is the reverse of
a multicast, and it becomes a reduction: the values are added where their paths
meet. For the 4-input network the two middle stages are merged, giving 3 stages.
This design links them with 2-bit reversals between every pair of stages.
`feather_pkg::birrd_link` computes all the links, so no table is stored.

Each switch (an "Egg") takes a 2-bit operation:

| code | name | left out | right out |
|---|---|---|---|
| 00 | PASS | left in | right in |
| 01 | SWAP | right in | left in |
| 10 | ADD_LEFT | left + right | right in |
| 11 | ADD_RIGHT | left in | left + right |

With an add, the output that does not get the sum passes on the input from its
own side. Every value carries a valid bit, and an invalid input adds as zero.
Each Egg registers its outputs, so BIRRD has a latency of `NSTAGES` cycles and
takes a new wave every cycle. The configuration word of a wave travels down the
pipeline with the wave. So a different configuration per cycle works without
any stalls.

Configuration layout: Egg k of stage s is controlled by bits
`cfg[2*(s*AW/2 + k) +: 2]`. That is `2*log2(AW)*AW` = 128 bits at AW = 16.

BIRRD is only the switch fabric. Finding configurations for a given reduction
and destination pattern is done offline; the usual method is a Benes-style
multicast routing algorithm, with search as a fallback. That software is not
part of this repository. The testbenches use random configurations checked
against a behavioural model of the network. The small convolution example
instead finds its two configurations by searching all 4096 settings of the
4-input network.

## Instructions: one per wave

A program is a list of instructions in the instruction buffer, one per wave.
The controller counts waves (cycles with any valid column bus) and reads entry
`ib_base + wave_number` in the cycle the wave leaves NEST. Fields, from the LSB:

| bits (AW=16) | field |
|---|---|
| `[127:0]` | BIRRD configuration |
| `[137:128]` | stationary-buffer line the wave's results are written to; its low `log2(OB_DEPTH)` bits also pick the output-buffer entry |
| `[138]` | `acc`: add to the stored OB entry (otherwise overwrite) |
| `[139]` | `last`: the sum is final, so requantize it and write it back |
| `[155:140]` | lane mask: output lane j is kept only if bit j is set |

Every valid BIRRD output lane j whose mask bit is set writes bank j of the
destination line. The mask is needed because an add leaves a copy of one
operand on the switch's other output. Without the mask, those copies would
land in banks that other waves fill. A wave
therefore places up to `AW` results into `AW` different banks of one line. The
layout of the next layer is fixed by which lane each result is steered to and
by the line number in each wave's instruction.

Reductions too large for one wave are finished in the output buffer. The first
wave of a group overwrites an entry. Later waves accumulate into it. The wave
marked `last` sends entry + input on through the QM.

## Buffers

- **Stationary buffer (StaB).** Two sets of `AW` one-byte-wide banks.
  - The datapath reads the selected set one full line per cycle.
  - The write-back goes to the other set. Each bank has its own write enable
    and address.
  - An off-chip port can write lines (with a bank mask) and read lines. It may
    not write the set being written back or read the set being streamed; both
    rules are checked by assertions.
  - Reads are synchronous (one cycle).
- **Streaming buffer (StrB).** Two sets of one `AW`-byte-wide bank. The weight
  loader reads one set while the off-chip port fills the other.
- **ZP/scale store.** A small register file with four parameters per lane:
  - the iAct zero point (used by NEST column j);
  - the weight zero point (used by NEST column j);
  - the output zero point (used by QM lane j);
  - a 32-bit scale (used by QM lane j).
  
  It is written one field at a time.
- **Output buffer (OB).** `AW` banks of 32-bit entries, each bank with its own
  adder (see above). It takes one cycle.
- **Quantization (QM).**
  `y = clamp_int8(((x * scale + 2^(QSHIFT-1)) >>> QSHIFT) + zp)`. This is a
  fixed-point multiplier with round-half-up. It takes one cycle.

## Running a layer

The top level takes two kinds of command. They can overlap.

1. **Weight load.** Pulse `wload_start` with `w_set` and `w_base`. The loader
   copies `AH*AH` StrB lines into the shadow weights. `wload_busy` is high
   while it runs.
2. **Layer.** Pulse `start` with these arguments:
   - `op`: `OP_CONV`, `OP_BYPASS` or `OP_FE`;
   - `swap_weights`;
   - `flip`;
   - `num_lines` (1 to `SDEPTH`);
   - `rd_base`, `rd_cnt`, `rd_stride`, `ib_base`;
   - for `OP_FE` only: `fe_op`, `fe_win` and `fe_dst_base`.

   The controller does the following, in order:
   - If `swap_weights` is set and a load is still running, it waits, with
     `wait_stall` high, then swaps the weights in.
   - It streams `num_lines` StaB lines, one per cycle, with weight index
     `t mod AH`. A group is `AH` lines. The read addresses come from a loop
     nest, described below.
   - It waits for the pipeline to drain. The drain time is
     `DRAIN = AH + NSTAGES + 6` cycles.
   - If `flip` is set, it flips the StaB ping-pong select (output
     `stab_sel`). It then pulses `done`.

   After a flip, the next layer reads the oActs that were just written. A layer
   that needs several weight tiles over the same iActs is issued as several
   commands. Only the last of them sets `flip`.

Latency of one wave from the column bus to the StaB write is `NSTAGES + 2`
cycles (BIRRD, OB, QM). The first wave appears `AH + 2` cycles after the first
line is read. A conv layer of `n` lines costs about `n + AH + NSTAGES + DRAIN`
cycles. It does `n * AW * AH` MACs, so long layers run at close to 256 MACs per
cycle.

The weight load is hidden only when a layer lasts at least `AH*AH` cycles.
Otherwise the next `swap_weights` layer stalls for the rest of the load; this
is the stall that `wait_stall` reports.

### Read address loop nest

Convolutions re-read the same iAct lines for overlapping windows. So the read
address is produced by a four-level loop nest rather than a plain counter.

- Levels 0, 1 and 2 run `rd_cnt[0..2]` iterations each. A count of 0 or 1 turns
  the level off.
- Level 3 runs until `num_lines` lines have been read.
- When level k steps, it adds `rd_stride[k]` to the address where its current
  iteration started, and the lower levels start over from there.

Example: iActs are stored channel-last, one line per (h, w), with `W` lines per
row. A 2x2 window over this layout is `rd_cnt = {2, 2, Q}` and
`rd_stride = {1, W, 1, W}`. It reads lines 0, 1, W, W+1, 1, 2, W+1, W+2, and so
on.

Plain sequential reads are `rd_cnt = {1, 1, 1}` with `rd_stride[3] = 1`.

## Post-processing engine

`OP_FE` streams StaB lines through a line-wise engine and writes the results to
line `fe_dst_base + n` of the other set:

- **ReLU** clamps each byte at the lane's output zero point.
- **BatchNorm** is folded to a per-lane fixed-point multiply-add-saturate. It
  uses the lane's scale and zero point.
- **MaxPool** takes the element-wise maximum of `fe_win` consecutive lines.

The published design says only that separate ReLU, BatchNorm and max-pool
engines exist and that they share the on-chip buffers. This engine is the
simplest unit that does those three jobs. It should be read as a placeholder,
not as a reconstruction.

## Where this RTL departs from, or adds to, the published design

- **Configuration width.** The published block diagram gives the instruction
  width as `AW*(2*log2 AW - 1) + log D` bits. The stage count in the text
  (`2*log2 AW` stages of `AW/2` two-bit switches) needs `AW*2*log2 AW` bits.
  This RTL follows the stage count.
- **Added instruction fields.** The instruction carries one destination line
  (the `log D` field), as the diagram suggests. The two OB control bits and the
  lane mask are this design's additions.
- **`flip`.** The `flip` bit on a layer command is this design's addition. It
  lets several weight tiles run over the same iActs.
- **Read address generator.** The loop-nest read address generator is this
  design's own. Only its effect, a strided read trace, is shown in the
  published example.
- **Per-bank write addresses.** Write addresses can differ between banks only
  from wave to wave. Within one wave, all lanes write the same line.
- **Broadcast.** The optional broadcast function in the switches (writing one
  sum to several banks) is not built.
- **Controller.** The controller, the command interface, the drain time and
  the wave-counting instruction fetch are all this design's own. The published
  controller is only named.
- **Off-chip memory.** DRAM, tile sequencing and DMA are outside the design.
  Their side of every buffer is a top-level port. A layer larger than one
  buffer set has to be run tile by tile by the host.
- **Operand roles.** Only the weight-stationary role is built: the register
  file holds StrB data and StaB data streams. Mappings with a different
  stationary operand per column need the roles swapped by software placing
  data accordingly.
- **Signedness and reset.** iActs, weights and zero points are signed int8.
  Reset is asynchronous and active-low, and clears the control state, weights,
  accumulators and the ZP/scale store. The memories are not reset.
- **Other layer types.** Average pooling is meant to run as a convolution.
  Activations such as hard-swish, GELU and softmax are not described and not
  built.
- **FPGA array size.** The FPGA variant has 1296 PEs. That is not a
  power-of-two array, so this BIRRD cannot be built at that size.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block
against a model computed independently in the testbench, checks the latencies
stated above, and prints `TB_RESULT checks=<n> failures=<m>`.

| testbench | what it covers |
|---|---|
| `tb_nest_pe` | zero-point MAC groups, result timing, reloading the shadow bank during compute |
| `tb_nest` | 4x4 array: `AH*AH` weight load, swap, per-row bus timing, bypass |
| `tb_birrd_egg` | all four switch functions with valid bits |
| `tb_birrd` (+`tb_birrd_lane`) | 16-, 8- and 4-input networks against a link-by-link model: random per-wave configurations, `NSTAGES` latency, tag side band |
| `tb_output_buffer` | overwrite/accumulate/last sequences |
| `tb_quant_module` | rounding and saturation |
| `tb_zp_scale_buffer`, `tb_stationary_buffer`, `tb_streaming_buffer`, `tb_instruction_buffer` | storage, ping-pong selection, masked and per-bank writes |
| `tb_feather_controller` | load/stream/stall/drain sequencing |
| `tb_functional_engine` | ReLU, BatchNorm, MaxPool |
| `tb_feather_top` | end-to-end test at full default size |
| `tb_feather_conv_example` | a complete small convolution on a 4x4 instance |
| `tb_feather_layout_switch` | a convolution that changes the output layout on a 4x4 instance |

`tb_feather_conv_example` runs the convolution used in the published
walk-through:

- a 4x4 input with 2 channels, 2x2 kernels and 16 output channels;
- the mapping is weight stationary;
- each column holds one (input channel, output-channel slot) pair, and each row
  holds a group of kernels;
- BIRRD does a 4:2 reduction and writes a channel-last output layout;
- the weights come in two tiles, and the second tile's load is hidden behind
  the first.

All 144 oActs are compared with a direct convolution.

`tb_feather_layout_switch` runs the published layout-switch example:

- the iAct is 8x8 with 4 channels, stored channel-last;
- there are 4 output channels;
- the four channels are spread over the columns and the kernels over the rows;
- each wave is reduced 4:1 and its single oAct is steered into a row-major
  layout with four W positions per line;
- the loop nest generates the strided read trace.

The test checks the full read sequence, all 196 oActs, that untouched banks
are left alone, and the layer time.

`tb_feather_top` runs four layers:

1. a 48-line convolution that must wait for its weights and uses OB
   accumulation;
2. a bypass reorder, during which the next weights load in the background;
3. a ReLU pass, issued as two commands with no ping-pong flip in between;
4. a second convolution, whose weights loaded behind layers 2 and 3 and which
   must not stall.

A model in the testbench follows every step. At the end both StaB sets are read
back through the off-chip port and compared line by line. The test also counts
how often each mechanism happened and fails if any never did:

- stalls;
- hidden weight loads;
- bypass waves;
- post-processing lines;
- add operations in BIRRD;
- reordering waves;
- lanes dropped by the write mask;
- commands without a flip;
- OB accumulations;
- ping-pong swaps;
- weight swaps.

Simulating with Verilator 5 (from the repository root):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/feather_pkg.sv tb/tb_feather_top.sv --top-module tb_feather_top
./obj_dir/Vtb_feather_top
```

Replace the testbench name to run another block's test. The top-level build
takes about half a minute, and the simulation takes seconds. `nest.sv` gets one
lint warning about `rst_n` being used both as an asynchronous reset and in an
assertion's disable condition; the assertion adds no hardware.

What the tests do not establish:

- **Timing.** The published 500 MHz clock in 28 nm has not been checked; only
  function has been simulated. The longest combinational paths are:
  - the PE's 9x9 multiply followed by the 32-bit add;
  - the Egg adder;
  - the output-buffer adder;
  - the quantizer's 32x32 multiply.
- **Four-state behaviour.** The simulations are two-state. The design resets
  all control state but not the memories. Software must write every line a
  layer reads.
- **Real routing.** Apart from the two small examples, BIRRD programs are
  random.
  Whether a particular reduction and layout pattern can be routed is a property
  of the network and its routing software, not of this RTL.
