# F-BFQ: a matrix-multiply accelerator that switches between block floating-point variants

Quantized LLMs stored in the GGUF "K-quant" formats do not use a single number
format throughout a model. One model can mix layers whose weights are Q2_K
(2-bit) with layers that are Q3_K (3-bit). The activations are quantized to
Q8_K on the fly. An accelerator built for one variant has to give the other
layers back to the CPU. F-BFQ avoids this: one datapath computes the dot
products of both weight variants against Q8_K inputs. A control register picks
the variant per layer, so nothing has to be reconfigured between layers.

The shared part is integer arithmetic on blocks of 16 values. What differs
between the variants is small: how a weight is decoded, how block scales are
applied, and whether a per-block minimum term is subtracted. That small part
sits in two scalar units placed side by side. A multiplexer picks the result
of the unit that matches the current layer.

This repository holds synthesizable SystemVerilog for the accelerator, from
its input stream down to the multiply-accumulate lanes. There is also a
self-checking testbench for every module and one that runs the whole design.

## Number formats

Each format packs 256 values into a *super-block* (SB). The super-block is
split into 16 *blocks* of 16 values. Every block carries its own small
integer scale. The super-block carries one or two floating-point scales. The
bytes below are little-endian.

| Variant | Bytes | Contents |
|---|---|---|
| Q2_K (weights) | 84 | `scales[16]`: low nibble = block scale, high nibble = block min; `qs[64]`: 2-bit weights; `d`: fp16 SB scale; `dmin`: fp16 SB min |
| Q3_K (weights) | 110 | `hmask[32]`: one high bit per weight; `qs[64]`: low 2 bits; `scales[12]`: sixteen 6-bit block scales; `d`: fp16 SB scale |
| Q8_K (inputs)  | 292 | `d`: fp32 scale; `qs[256]`: int8 values; `bsums[16]`: int16 sum of each block |

Weight `i` of block `b` is found like this. Let `n = b/8`, `j = (b%8)/2` and
`l = 16*(b%2) + i`. The low two bits are at bit `2j` of `qs[32n + l]`. For
Q3_K the high bit is bit `4n + j` of `hmask[l]`. A Q3_K weight equals
`low2 - 4` when that bit is clear and `low2` when it is set, so it lies in
[-4, 3]. A Q2_K weight is `low2`, in [0, 3].

Each Q3_K block scale has six bits. The low four bits come from the nibbles
of `scales[0..7]`. The top two bits come from `scales[8..11]`. The value used
is the stored value minus 32.

The dot product of one weight super-block with one input super-block is:

    Q3_K:  d * y.d * sum_b (sc_b - 32) * dot_b
    Q2_K:  d * y.d * sum_b (sc_b & 15) * dot_b  -  dmin * y.d * sum_b (sc_b >> 4) * bsum_b

Here `dot_b` is the integer dot product of block `b` and `bsum_b` is the sum
of that block's inputs. The Q8_K input carries `bsum_b` precomputed, so the
Q2_K minimum costs one multiply per block, not sixteen.

## The command stream

The host drives the accelerator with one 32-bit AXI-Stream (`s_axis_*`).
Instructions and data share it. An instruction word is one-hot in its low
five bits:

| Opcode | Meaning | Operand words that follow |
|---|---|---|
| `0x01` CONFIG  | set the configuration registers | 4: `weight_type` (bit 0: 0 = Q2_K, 1 = Q3_K), `k_sb`, `m_rows`, `n_cols` |
| `0x02` LOAD_W  | load the weight tile | `m_rows * k_sb` super-blocks |
| `0x04` LOAD_I  | load the input tile | `n_cols * k_sb` super-blocks |
| `0x08` MATMUL  | compute `m_rows x n_cols` dot products of depth `k_sb` SBs and add them to the output buffer | none |
| `0x10` STORE   | send the output buffer on `m_axis_*` and clear it | none |

A word may have several bits set. They then run in ascending order. For
example, `0x0F` configures, loads both tiles and multiplies. Each operation
finishes before the next one starts.

A super-block is sent as its GGUF bytes, packed little-endian into 32-bit
words. It is then padded with zero bytes to a multiple of `N` words, where
`N` is the number of FIFOs (default 4). With `N = 4` a Q2_K SB takes 24
words, a Q3_K SB 28 and a Q8_K SB 76. In a tile, the SBs of weight row `m`
come in depth order, and the rows come one after another. The input columns
are laid out the same way.

Results leave on `m_axis_*` as float32 words, in row-major order (`m` outer,
`n` inner). `tlast` is set on the last word. The output buffer accumulates.
Sending several MATMULs with different depth slices of the same tile, then one
STORE, gives the sum over the whole depth. This is how a host splits a long
reduction dimension into tiles. The end-to-end testbench does exactly this.

## Data path

```
s_axis --> instruction decoder --(operand words)--> data loader
               |  config regs                         |  word j -> FIFO j mod N
               v                                      v
           scheduler                    N weight FIFOs    N input FIFOs
               |  commands (m, n)                 \          /
               v                                   v        v
  +------------------- Dynamic Super-Block Processor -------------------+
  |  SB loader: FIFO reader -> bit slicer -> data mapper                 |
  |        |                                    |                        |
  |  SB weight cache                      SB input cache                 |
  |  (w_high, w_low, w_scales,            (i_data, i_bsums, i_scales)    |
  |   sb_scales, sb_mins)                                                |
  |        \_____________ sequencer _____________/                       |
  |                          |                                           |
  |  vector compute unit: vector engine -> Q2 / Q3 scalar units -> mux -> Acc |
  +----------------------------------|-----------------------------------+
                                     v
                       scheduler output buffer --> m_axis
```

**Instruction decoder** (`fbfq_instr_decoder`). Reads instruction words,
holds the configuration registers and hands operand words to the data loader.
It starts the scheduler for MATMUL and STORE. Before a LOAD starts, it waits
until the FIFOs and the SB loader are empty. This keeps a cache from being
restarted while the data of the previous load is still arriving.

**Data loader** (`fbfq_data_loader`). Writes successive operand words to
FIFO 0, 1, ..., N-1, 0, ... of the weight or input side. If the next FIFO is
full, it holds the stream.

**Data FIFOs** (`fbfq_fifo`). First-word-fall-through, 512 words deep by
default.

**SB loader** (`fbfq_sb_loader`). Waits until a whole super-block is present
across the N FIFOs. It pops N words per cycle, so a Q3_K SB takes 7 cycles
and a Q8_K SB 19. N copies of the combinational bit slicer
(`fbfq_bit_slicer`) then cut the buffered bytes into block rows. Each cycle,
the mapper writes N rows (blocks `g*N .. g*N+N-1`) into the cache, so an SB
takes `16/N` write cycles. The SB's scales are written with the first group. The variant comes from the
`weight_type` register for the weight side, and is always Q8_K on the input
side. If both sides have a complete SB waiting, weights go first. Counters of
stored SBs tell the scheduler when a tile is complete.

**SB caches** (`fbfq_sb_weight_cache`, `fbfq_sb_input_cache`). Separate
arrays, one per field. Each array is split into N partitions: block `b` lives
in partition `b mod N`, at group address `{sb, b / N}`. One read therefore
returns N consecutive blocks. Reads are registered, with one cycle of
latency. The weight row is 56 bits: 16 x 2-bit `w_high`,
16 x 1-bit `w_low` and the 8-bit block scale. For Q3_K, `w_high` holds the
low two bits of each weight and `w_low` holds the `hmask` bit. The input row
is 144 bits: 16 x int8 plus the int16 block sum. By default each cache holds
256 SBs.

**Sequencer** (inside `fbfq_dsbp`). A command `(m, n)` reads the
`(16/N) * k_sb` group pairs of weight row `m` and input column `n`, one pair
per cycle. It marks the first and last group of each SB and of the whole
product.

**Vector compute unit** (`fbfq_vcu`). Has N lanes, one per cache partition,
and four pipeline stages.
1. In each lane, the vector engine (`fbfq_vector_engine`) multiplies 16
   decoded weights by 16 int8 inputs and sums them into a 16-bit `dot_b`.
2. Each lane's scalar units (`fbfq_q2_scalar`, `fbfq_q3_scalar`) accumulate
   their integer sums over the blocks that lane sees in an SB.
3. After the SB's last group, the N lane sums are added. The result is
   converted to float32 and multiplied by the fp16 SB scale(s) and the fp32
   input scale. The
   `weight_type` multiplexer is here. For Q2_K the min term is subtracted.
4. The SB term is added to the float32 accumulator.

The result is ready three clock edges after the edge that takes the last row.

**Scheduler** (`fbfq_scheduler`). On MATMUL it waits until the caches hold
`m_rows * k_sb` weight SBs and `n_cols * k_sb` input SBs. It then issues one
DSBP command per output, row-major. Each result is added (float32) into a
1024-entry output buffer. An entry is used as-is if it was empty, and added
to otherwise. On STORE it streams the `m_rows * n_cols` entries out, obeys
`m_axis_tready` and clears them.

## Timing

There is one clock and one asynchronous active-low reset. With N = 4, the
DSBP consumes one weight SB and one input SB every 4 cycles: 64
multiply-accumulates per cycle. A command takes `(16/N) * k_sb` cycles of
cache reads plus 4 cycles of pipeline, and commands run back to back.

Loading is limited by the 32-bit stream: one word per cycle. The SB loader
needs `words/N + 16/N + 1` cycles per SB, which is 12 for Q3_K and 24 for
Q8_K. That is less than the 28 and 76 cycles the stream takes to deliver
them, so the loader never holds the stream up.

## Arithmetic

- Integer block math is exact: `dot_b` fits in 16 bits and the per-SB sums
  in 32.
- Floating point is IEEE float32, computed by the small functions in
  `fbfq_fp_pkg`. Multiplications and additions truncate toward zero.
  Subnormals are flushed to zero, and there are no NaN or infinity cases
  (they cannot occur for finite model data). Results therefore differ from a
  round-to-nearest CPU reference in the last bits. The testbenches compare
  against a double-precision model with a relative tolerance of about 1e-5.
- The order of summation matches the GGUF CPU kernel: integer per SB, float
  across SBs.

## Parameters

| Parameter | Default | Where |
|---|---|---|
| `N` | 4 | FIFOs per side, cache partitions and VCU lanes (blocks per cycle); divides 16, at most 8 |
| `FIFO_DEPTH` | 512 | words per FIFO |
| `W_SB_CAP` | 256 | weight SBs held (e.g. 11 rows x 22 SBs for a 5632-deep layer) |
| `I_SB_CAP` | 256 | input SBs held (e.g. 6 tokens x 22 SBs) |
| `OUT_CAP` | 1024 | entries in the output buffer (`m_rows * n_cols` must not exceed it) |

The host tiles larger layers. It chooses `m_rows` so that `m_rows * k_sb`
fits in `W_SB_CAP`, and splits `k_sb` when a single row is too deep. The
hardware does not stop a host that breaks these limits. Instead, simulation
assertions flag it: cache overflow in the SB loader, an output tile larger
than `OUT_CAP` in the scheduler, and `k_sb = 0` in the DSBP.

## Where this design departs from, or fills in, the published description

The published description gives the block diagram, the opcodes, the buffer
names and widths, and the split into a vector engine plus per-variant scalar
units. The following are this design's own choices or differ from it:

- **Stream width, N, depths and capacities** are not given. They are 32 bits,
  4, 512 words, 256 SBs per cache and 1024 outputs.
- **The CONFIG operand format** (four words) and the **padding of SBs** to N
  words are invented here. So is the **execution of combined opcode bits in
  ascending order**.
- **Input scale width.** The text calls the Q8_K super-block scale 16 bits,
  but the buffer diagram gives `i_scales` 32 bits. GGUF stores it as fp32,
  and that is what is used here.
- **`w_low` / `w_high`.** The diagram's widths (1 and 2 bits) are kept. The
  1-bit field therefore holds the Q3_K high bit, and the 2-bit field holds
  the low bits.
- **Parallelism.** The description says the N FIFOs let the processor do N
  operations at once. Here an "operation" is taken to be one 16-value block.
  N sets the FIFO count, the number of cache partitions and the number of
  vector engine / scalar unit lanes. N must divide 16 and be at most 8.
- **Output accumulation** across MATMULs until STORE is how this design reads
  "the scheduler accumulates the output". The description does not say how
  results are combined.
- **Float rounding** is truncation, not round-to-nearest.
- **The host driver, the DMA engine and DRAM** are outside this RTL. The top
  exposes plain AXI-Stream ports where the DMA would connect. The testbench
  plays the driver.
- The 200 MHz clock of the FPGA implementation has not been checked.
  Synthesis and timing analysis have not been run; only simulation has. The
  float multiply and add each sit in a single pipeline stage, which may need
  splitting for that frequency.

## Files

- `rtl/fbfq_pkg.sv`: constants, opcodes, the configuration struct, the row
  types of the caches and the SB word counts.
- `rtl/fbfq_fp_pkg.sv`: fp16 to float32, int to float32, float32 multiply
  and add.
- `rtl/fbfq_*.sv`: one module per block, as named above. `fbfq_top` is the
  top level.
- `tb/fbfq_tb_pkg.sv`: the reference model. It generates random but valid
  Q2_K/Q3_K/Q8_K super-blocks, decodes them independently of the RTL (Q3_K
  scales with the GGUF mask method) and computes dot products in double
  precision.
- `tb/tb_<module>.sv`: one self-checking testbench per module. Each ends by
  printing `TB_RESULT checks=<n> failures=<n>`.

`tb_fbfq_top` runs the full design at its default parameters. It runs a Q3_K
layer, then switches to Q2_K. The Q2_K layer is configured, loaded and
multiplied with one combined `0x0F` instruction. A second depth tile is then
accumulated before STORE. Throughout, the input stream is throttled and
`m_axis_tready` is toggled. The testbench counts the variant switch, the
combined opcode, the accumulation, input stalls and output stalls, and fails
if any of them never happened.

`tb_fbfq_workloads` runs layer tiles the size a host would send for GPT-2
(depths 768 and 3072), and for TinyLlama and MobileLLaMA (depths 2048 and
5632). Each tile fills the weight cache with whole rows and uses a 6-token
input. It checks every output, and checks that MATMUL runs at the full rate
of the DSBP. The measured rate is about 63 multiply-accumulates per cycle
against a peak of 64. The whole model is not simulated. The host would
repeat such tiles for every layer.

## Simulating

With Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl -Itb \
        rtl/fbfq_pkg.sv rtl/fbfq_fp_pkg.sv $(ls rtl/fbfq_*.sv | grep -v _pkg) \
        tb/fbfq_tb_pkg.sv tb/tb_fbfq_top.sv --top-module tb_fbfq_top
    ./obj_dir/Vtb_fbfq_top

The packages must come first. The full-design run builds in well under a
minute and simulates in a fraction of a second.

Swap `tb_fbfq_top` for any other testbench to check one block. Each
testbench has a watchdog that ends the run with a failure if it hangs.
