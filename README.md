# A multi-PU systolic GEMM accelerator with a URAM weight column

This RTL describes an INT8 inference engine for convolutional and fully
connected layers on an HBM-equipped UltraScale+ FPGA, sized for an Alveo U50.
Every layer is run as a matrix product: a weight matrix of N x M bytes times an
activation matrix of M x P bytes. A convolution becomes such a product through
IM2COL. The engine does not rearrange the feature map itself. It issues one
HBM read command per kernel position, so the memory mover delivers the IM2COL
columns already in order.

The work is spread over ten identical-in-kind **processing units (PUs)**. Each
PU owns:

- one column of 64 URAM blocks, which holds its weights and biases;
- a 64-row systolic array of multiply-add cells;
- two 256-bit AXI ports into HBM.

Weights are not all resident on chip. While one tile of weights is being
computed, the next is written into another region of the same URAM column.
An external scheduler decides when each tile is loaded.

Two PU flavours exist. Both have 64 rows (`R_SA = 64`) and an 8-byte row-block
(`R_g = 8`). They differ only in the number of array columns (`C_SA`):

| flavour | `C_SA` | URAM word use                    | placement                     |
|---------|--------|----------------------------------|-------------------------------|
| PU2x    | 8      | one 8-byte entry per 72-bit word | 3 in the upper SLR, 2 in the lower |
| PU1x    | 4      | two 4-byte entries per word      | 2 in the upper SLR, 3 in the lower |

## Clocks

There is one clock in the RTL: the *fast* clock `clk`. The paper's design runs
it at 600 MHz.

The AXI side runs at the *system* clock, which is half the fast clock and
synchronous to it. The system clock is modelled as a strobe, `sys_ce`. It is
high on every other fast cycle, and `accel_top` generates it.

Reset is synchronous and active low (`rst_n`). Control state is reset; data pipelines and memories are not, so outputs are undefined until the first clock edge with `rst_n` low.

All 256-bit stream ports move a word only on a cycle with `sys_ce` high. So a
256-bit port carries 16 bytes per fast cycle at most. The datapath inside the
PU moves `C_SA` bytes (activations) and `R_g` bytes (results) every fast cycle.

## One PU, front to back (`rtl/pu.sv`)

```
 ADM I/O cmds <- im2col_gen                         ADM params -> stream_width_down 256->128
 ADM I/O in   -> act_buffer (A/B) --C_SA B/cycle--> systolic_array <-- uram_weights (64 x 4096 x 72)
                                                          |
                              scale_merge (shift, saturate, R_g-byte chunks per row-block)
                                                          |
                                      aggregator (per-block FIFO + shift-up chain)
                                                          |
                                         wrb (wave reorder buffer, in-order read)
                                                          |
     ADM params residual -> stream_width_down 256->64 -> FIFO ---+
                                                          |      |
                             act_func (ReLU) -> residual_add -> act_func (ReLU)
                                                          |
                                        stream_width_up 64->256 -> ADM I/O out
```

### The loop nest (`pu_ctrl`)

A layer is described by:

- `m_bytes` = M;
- `p_cols` = P;
- `b_w` = ceil(N / R_SA), the number of *weight sections*;
- `w_base`, the URAM entry where the layer's weights start.

Let RM = M / C_SA be the number of *rounds*. `pu_ctrl` runs this loop nest:

```
for p in 0..P-1:                 # one activation column (buffer half)
  for b in 0..B_W-1:             # one 64-row weight section
    for t in 0..RM-1:            # one round per fast cycle
      read buffer entry t  (C_SA activation bytes)
      read URAM entry w_base + b*RM + t  (C_SA weight bytes per row)
```

Each (p, b) pair is one **wave**. A wave yields 64 output bytes, one per row.
The buffer half holding column p is used B_W times and then released. Meanwhile,
the other half is being filled with column p+1. With enough columns in flight,
the array is fed one round per cycle with no gaps.

### Systolic timing (`systolic_array`, `uram_weights`)

Activations enter at the bottom of each column. They move up one row per cycle,
as on the DSP48E2 cascade.

Column c gets its activation byte c cycles late. The read address of the URAM
column also moves up one row per cycle. So row r reads its weights r cycles
after row 0, and they meet the activations that arrive at the same moment.

Within a row, the partial sum moves one column to the right per cycle:

- column 0 adds the bias, shifted left by `bias_shift`, on the first round of a wave;
- the last column keeps a 32-bit accumulator across all RM rounds.

Row r of a wave finishes C_SA + r cycles after the wave's last round was issued.
So results come out staggered, one row per cycle.

### Row-blocks, FIFOs and the aggregator

The 64 rows form 64 / R_g = 8 *row-blocks*. For each row, `scale_merge`:

1. shifts the accumulator right arithmetically by `out_shift`, a power-of-two scale;
2. saturates it to INT8;
3. delays it by the right amount so that the 8 bytes of a block leave together.

The result is one R_g-byte chunk per block, one cycle after the block's last
row. Each chunk is tagged with its block number and wave number.

Each block has a shallow FIFO. The `aggregator` is a chain of registers, one
per block lane, that shifts chunks upward. A lane takes the chunk from the lane
below if there is one, otherwise the head of its own FIFO. The top lane writes
one chunk per cycle into the WRB.

A wave makes 8 chunks. When M is small, a wave lasts fewer cycles than that,
so chunks of different waves mix in the chain. Short layers therefore reach the
WRB out of order.

### Wave reorder buffer (`wrb`)

The WRB has room for `WRB_WAVES` (4) waves of 8 chunks, each with a valid bit.
Writes may arrive in any order: the chunk's tag picks the slot. Reads follow
strict wave and block order, one chunk per cycle.

When the last chunk of a wave is read, the WRB returns a *wave credit* to
`pu_ctrl`. `pu_ctrl` does not start a wave without a credit. The aggregator
FIFOs are as deep as the number of credits, so no FIFO can overflow, whatever
the backpressure from the output. This is the only flow control in the
datapath: output backpressure stalls reads from the WRB, which stalls issue.

### Post-processing

The stages run in this order on R_g-byte chunks:

1. ReLU (`relu1`);
2. residual addition (`res_en`);
3. a second ReLU (`relu2`);
4. packing into 256-bit output words.

The residual adder is R_g / 4 SIMD units. Each unit has four 12-bit lanes, as
a DSP48E2 in FOUR12 mode would. The sums are saturated back to INT8.

Residual bytes arrive on the params port. They are split 256 -> 64 bits and
held in a 16-chunk FIFO until the matching result chunk arrives.

Each output column is N bytes, row 0 first. The first chunk goes into the least
significant bits of the output word.

## Weights and the URAM column (`uram_weights`)

Each systolic row has one URAM block of 4096 x 72 bits:

- bits 63:0 hold the weight entries;
- the spare ninth byte (bits 71:64), which holds ECC in the vendor's default use, holds the row's bias.

A PU2x stores one 8-byte entry per word. A PU1x stores two 4-byte entries, with
entry e in word e/2, half e%2.

A load command `wl_cmd_t` has three fields: `base_word`, `n_words` and
`is_bias`. The params stream is split to 128 bits per fast cycle. For each URAM
word, the loader sends 32 such 128-bit words, one per row pair j:

- bits 63:0 are row j's data, sent on the lower cascade (rows 0..31);
- bits 127:64 are row j+32's data, sent on the upper cascade (rows 32..63).

Each cascade is a register chain one stage per block, as the URAM write
cascade is. A write reaches block j after j cycles.

Reads and writes use separate ports. A load can therefore fill one region while
a layer computes from another. That overlap is what the weight scheduler
relies on. Keeping the two regions disjoint is the caller's job. `wl_busy`
stays high until the last write has left the cascade.

## IM2COL command generation (`im2col_gen`)

Feature maps sit in HBM in height-width-channel order. For a convolution with
kernel k, stride s and padding pad, each output pixel (ho, wo) is one IM2COL
column. The generator emits one read command per kernel position (kh, kw):

- **address**: `in_base + ((ho*s+kh-pad)*Wi + (wo*s+kw-pad)) * Ci`, with length Ci bytes;
- **padding positions**: the address of a zero-filled region (`zero_base`), with the same length.

The column therefore holds M = k*k*Ci bytes in (kh, kw, c) order. The weights
must be laid out in the same order.

In linear mode (`im2col = 0`, for FC layers and pre-arranged matrices), the
generator emits one command of M bytes per column at `in_base + p*M`.

Ci and M must be multiples of 32. That is one 256-bit beat, the fill grain of
the activation buffer.

## The multi-PU top (`accel_top`, `coord_bus`)

`accel_top` instantiates the ten PUs, numbered as follows:

- 0-2: PU2x, upper SLR;
- 3-4: PU1x, upper SLR;
- 5-7: PU1x, lower SLR;
- 8-9: PU2x, lower SLR.

Each PU's ports are brought out as arrays. The HBM, the DataMovers and the AXI
interconnect are outside this RTL.

Layer instructions (`layer_cfg_t`) enter through the coordination bus with a
target PU number:

- each PU has a 4-entry instruction queue;
- the bus reaches the upper-SLR PUs through two register stages, and their `done` pulses come back through two more;
- the sender may only send when the target queue has a credit (`instr_ready`).

Coordination between PUs beyond this (flow control, synchronization) is not
part of this RTL.

## Instruction fields (`accel_pkg`)

| field | meaning |
|-------|---------|
| `im2col` | 1 = IM2COL commands, 0 = linear columns |
| `in_base`, `zero_base` | HBM byte address of the input map, and of a zero region of at least Ci bytes |
| `m_bytes`, `p_cols`, `b_w`, `w_base` | M, P, ceil(N/64), first URAM entry of the layer |
| `hi`, `wi`, `ci`, `ho`, `wo`, `k`, `s`, `pad` | convolution geometry |
| `bias_shift`, `out_shift` | power-of-two scaling: `y = sat8((sum + bias<<bias_shift) >>> out_shift)` |
| `relu1`, `res_en`, `relu2` | post-processing selection |

Output addresses are not in the instruction. The PU emits an ordered stream of
N x P bytes, and whatever drives the write side of the DataMover places it in
memory.

## Where this RTL departs from, or goes beyond, the published design

- **Modelled parts.** The DSP48E2 and URAM288 primitives are written as
  behavioural `always_ff` logic with the same structure: cascades, one register
  per cell, C-port chaining. A vendor flow would map them; the RTL does not
  instantiate primitives.
- **Padding.** It is done by reading a zero region. The published design only
  says that arbitrary padding is supported.
- **Channel count.** IM2COL needs Ci to be a multiple of 32. A first layer with
  three channels must be prepared as an IM2COL matrix by the host and run in
  linear mode, with M padded to a multiple of 32. For example, 7x7x3 = 147 is
  padded to 160.
- **Sizes not given by the source design.** These are the depths of the
  activation buffer (256 words per half, 8 KB), the WRB (4 waves), the
  aggregator FIFOs (4), the residual FIFO (16) and the instruction queues (4);
  the number of SLR crossing stages (2); the 32-bit accumulator; and all
  instruction and command formats.
- **Fixed-point details.** Rounding is truncation by arithmetic shift. The
  residual is added at the output scale.
- **Not built.** These are left out: the instruction controllers, inter-PU flow
  control, and the weight-transfer scheduling algorithm. The scheduling
  algorithm is an offline heuristic; the hardware only has to allow loading
  during compute, and it does.

## Capacity at the default sizes

- **Weights.** Each PU stores 64 x 4096 x 8 B = 2 MiB. One 64 x M weight tile
  takes M/8 entries on a PU2x; a PU1x stores two entries per word, so the tile
  takes the same number of words. A 3x3x512 layer (M = 4608) therefore needs
  576 entries per tile, and 7 such tiles fit. The whole 3x3x512x512 layer (8
  tiles) does not fit, so it must be run tile by tile with loads overlapped. Neither
  ResNet-18 nor ResNet-50 fits statically, which is why loads run during
  compute.
- **Activation columns.** A buffer half holds 8 KB, which is enough for every
  ResNet-18/50 IM2COL column (at most 4608 bytes).

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

`tb/pu_driver.sv` pairs a behavioural HBM/DataMover model (`tb/adm_model.sv`)
with a bit-exact reference of the layer arithmetic. It runs two layers on a PU:

- a two-section GEMM with ReLU and output backpressure;
- a padded 3x3 convolution through IM2COL with residual addition.

The weights for the second layer are loaded while the first one computes.

The driver is used by three benches:

- `tb_pu`: one PU at its default size;
- `tb_accel_top`: a reduced system with four PUs and 16-row arrays;
- `tb_accel_top_full`: the full ten-PU system with every parameter at its default.

The system benches count how often each mechanism happened, and fail if any
count is zero. The mechanisms are: ping-pong swaps, out-of-order WRB writes,
credit stalls, zero-padding commands, loads during compute, output
backpressure, residual additions, and instructions crossing the SLR registers.

Simulation with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_pu \
    rtl/accel_pkg.sv tb/tb_pu.sv -Mdir obj_pu -o sim
obj_pu/sim +verilator+rand+reset+2
```

The package must come first. Other modules are found through `-Irtl -Itb`.
The full ten-PU bench takes several minutes to compile and under a second to
run.
