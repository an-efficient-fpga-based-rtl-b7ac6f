# A single-engine Swin Transformer accelerator in SystemVerilog

This design runs every part of a Swin Transformer on one matrix-multiply
engine: the patch-embedding convolution, the Q/K/V and projection layers,
the attention products Q·Kᵀ and P·V, patch merging and the feed-forward
network. Around that engine sit two nonlinear units that need no floating
point and no divider: a softmax unit and a GELU unit. Both work in the log2
domain, with a shift-and-add exponential and a leading-one-detector
logarithm. Layer normalisation is assumed to have been replaced by batch
normalisation, which is then folded into the weights and biases of the
preceding linear layer. The hardware therefore only needs a bias add and a
residual (shortcut) add.

All data are 16-bit two's-complement fixed point with 10 fraction bits
(Q6.10). Everything works on one 7×7 attention window at a time, which is
49 tokens, written M² = 49 below.

## Data layout: everything is a 49-row matrix

The engine always computes a 49 × 32 output tile:

    Out[49 × 32] = A[49 × C_I] · B[C_I × 32]  (+ bias) (+ shortcut)

It takes one input channel per cycle (c_i = 1), so one tile takes C_I
cycles. The operands are stored so that each cycle reads exactly one word:

| storage | one word holds | lanes |
|---|---|---|
| FIB (feature input buffer) | one channel of the 49 window tokens (a column of X) | 49 |
| weight buffer | one input channel's weights for 32 output channels | 32 |
| bias buffer | the 32 biases of one output tile | 32 |
| mask buffer | one row of the 49 × 49 shifted-window attention mask | 49 |
| ILB banks (4 × 4096 words) | a column of an intermediate matrix (Q, K, FFN hidden, …) or a row of a transposed one | 49 |
| attention-weight bank | 49 × 49 registers: written by row, read by column | 49 |

For a weight matrix W with C_I inputs and C_O outputs, tile t uses weight
words `b_base + t·C_I + k` for k = 0 … C_I−1.

### Transposes

Attention needs three layouts that a column-only store does not give. Each
has its own mechanism:

* **Row-mode drain.** The output buffer can be read as 49-lane columns or
  as 32-lane rows. In row mode, tile t writes its row i into lanes
  32t … 32t+31 of ILB word `dst_base + i`. This stores V_h and the score
  matrix S with one token per word.
* **Kᵀ as the B operand (`B_ILB_T`).** K is stored by columns, so ILB word c
  is K[:, c], a row of Kᵀ. Tile t of the score product takes lanes
  32t … 32t+31 of that word and pads the lanes above 48 with zeros. Two
  tiles therefore cover the 49 score columns. The same selection feeds V rows
  as B for P·V.
* **Attention-weight bank.** The softmax writes P one row at a time. The
  MMU reads P back one column at a time as its A operand.

## Matrix multiplication unit (`mmu`, `mmu_pe`, `mmu_accum`)

The unit has 32 processing elements (`mmu_pe`) with 49 multipliers each,
1568 in total. Each cycle, the A column is broadcast to all 32 PEs and PE j
takes element j of the B word.

The pipeline is:
1. A-buffer and B-buffer registers.
2. The PE product register.
3. The accumulation array (`mmu_accum`): 49 × 32 accumulators, 40 bits
   wide, cleared by the `first` flag.

`busy` falls three cycles after the last operand. After that, the
controller finalises one column per cycle. It adds the bias and the
optional shortcut column, each scaled to the accumulator's 20 fraction
bits. It then rounds half-up to 10 fraction bits, saturates to 16 bits and
writes the result into the output buffer.

`dsu` (data selection unit) runs the C_I feed loop. It addresses the A
source (FIB, an ILB bank or the attention bank) and the B source (the
weight buffer or `B_ILB_T`), then aligns the registered buffer outputs for
the MMU.

## Softmax compute unit (`scu`, `fmu`, `eu`, `du`)

The softmax is computed as

    softmax(x)_i = 2^( log2 e^(x_i − x_max) − log2 Σ e^(x_j − x_max) )

It runs in four stages over a 49-lane row:

1. **Find max (`fmu`).** A pipelined comparator tree over groups of 32,
   16 and 1 elements. The 16-group's maximum meets x₄₈ first, then the
   32-group's maximum. The latency is 6 cycles.
2. **Exponential (`eu`).** Each lane computes e^(x_i − x_max) with the EU
   in base-e mode:
   * Multiply by log2 e ≈ 1.0111b = v + v/2 − v/16, using shifts and adds.
   * Split the result into an integer part and a fraction.
   * Look up 2^frac in an 8-segment piecewise-linear table indexed by
     fraction bits 9..7. This table is this design's choice: chords of 2^f
     with 14-bit slopes and offsets.
   * Shift by the integer part.
3. **Sum and log-divide.** An adder tree forms Σ. Each lane's DU gives
   log2(dividend) − log2(Σ). Each log2 is the leading-one position plus the
   bits below the leading one, read as a fraction.
4. **Exponential again.** The same EU, now in base-2 mode, raises 2 to
   that exponent.

Each lane has one EU, shared by stages 2 and 4. The unit therefore takes
one row at a time: `out_valid` rises 11 clock edges after the edge that
accepts the row. With `mask_en`, the shifted-window mask row is added to the
scores, with saturation, before stage 1.

## GELU compute unit (`gcu`, `gcu_fcu`)

GELU(x) ≈ x · sigmoid(1.702 x) is rewritten as x / (1 + 2^s(x)), where
s(x) = −2·log2 e·√(2/π)·(x + 0.044715 x³).

`gcu_fcu` evaluates s(x) with two multiplications (for x³) and shift-adds:
* 0.044715 ≈ 2⁻⁵ + 2⁻⁶;
* 2·log2 e·√(2/π) ≈ 10.0101b.

Then, per lane:
1. The EU gives 2^s.
2. The DU, with its "add one" input set, gives log2|x| − log2(1 + 2^s).
3. The EU gives the quotient.
4. The sign of x is restored.

The unit processes one 49-lane output column in 4 cycles. It sits between
the output buffer and the ILB, so GELU is applied while an FFN tile drains.

## Control and instructions (`control_unit`)

The accelerator executes a stream of 4 instructions. The fields of each are
defined in `swin_pkg::instr_t`.

| opcode | effect |
|---|---|
| `OP_LOAD` | External memory → FIB, weight, bias, mask or an ILB bank, `lanes` elements per word (`mru`). |
| `OP_STORE` | ILB bank → external memory (`mwu`). |
| `OP_MATMUL` | For each of `n_tiles` tiles: run the C_I feed loop, wait for the pipeline, finalise with bias and shortcut (`SC_FIB`: the block input, for the attention residual; `SC_ILB`: an ILB bank, for the FFN residual), then drain to an ILB bank by columns (optionally through the GCU) or by rows (`row_mode`). |
| `OP_SOFTMAX` | For `n_words` rows: read the ILB row and mask row, run the SCU, and write the attention bank. |

One window of a Swin block (C channels, heads of 32) is the following
sequence, exactly as the end-to-end testbench runs it:
1. LOAD X, the weights, the biases and the mask.
2. Q and K, each with bias, stored as columns.
3. For each head h:
   * V_h, stored as rows;
   * S = Q_h · K_hᵀ, with B from `B_ILB_T`, 2 tiles, stored as rows;
   * SOFTMAX with the mask;
   * O_h = P · V_h, with A from the attention bank.
4. Y = O·W_o + b_o + X, using the FIB shortcut.
5. H = GELU(Y·W₁ + b₁).
6. Z = H·W₂ + b₂ + Y, using the ILB shortcut.
7. STORE.

Patch embedding has the same shape: 4×4×3 = 48 input channels of 49
patches, so it is an ordinary MATMUL with A from the FIB. Patch merging is
a MATMUL whose 4C input channels are loaded into an ILB bank.

### External memory bus

The external memory is a vendor controller and is not part of this
design. The top exposes two ports:
* a read request/response port: valid/ready requests of one element
  address each, with in-order responses;
* a write port with valid/ready.

Elements are 16 bits. Word w, lane l of a transfer is element
`ext_addr + w·lanes + l`. `tb/ext_mem_model.sv` is a behavioural model that
adds latency and random back-pressure.

## Timing summary

| unit | latency / rate |
|---|---|
| `fmu` | 6 cycles, one vector per cycle |
| `mmu` | C_I cycles per 49 × 32 tile, +3 cycles to drain the pipeline, +32 finalise cycles |
| `scu` | 11 edges from accept to `out_valid`, one row at a time |
| `gcu` | 4 edges from accept to `out_valid`, one column at a time |
| `buf_ram`, `attn_buffer` | registered read, 1 cycle |

One window of the C = 32 block (one head) takes 5615 cycles of compute
instructions, and one window of a Swin-T stage-1 block (C = 96, 3 heads)
takes 10552. Loads and stores are not counted. At c_i = 1, the peak is
1568 MAC per cycle.

## Where this design departs from, or fills in, the source description

* **Number format.** Fix16 comes from the source. The Q6.10 split is
  chosen here so that the EU table index falls on fraction bits 9..7.
* **Exponential table.** The slope and offset values, and the saturating
  left shift for positive exponents, are this design's choice.
* **Log approximation.** The DU computes log2(m·2^w) ≈ w + (m − 1). The
  original sentence swaps the roles of w and m.
* **Softmax dividend.** The dividend fed to the DU is the stage-2 EU output,
  e^(x_i − x_max). This is a reading of the dataflow; the source does not
  print it.
* **Accumulation count.** The accumulator runs for C_I/c_i cycles. One
  sentence of the source says C_I/c_o; the figure caption's C_I/c_i is
  followed.
* **Buffer sizes.** The source gives no buffer depths, bank counts or
  memory bus. These are the defaults here:
  * FIB: 1024 words;
  * weights: 4096 words;
  * bias: 128 words;
  * mask: 256 words;
  * ILB: 4 banks × 4096 words.
* **Instruction set.** The instruction set and the transpose mechanisms
  (row drain, `B_ILB_T`, the transposing attention bank) are this design's.
  The source only says that the ILB is a collection of buffers and that the
  MMU serves all the linear layers.
* **Unit sharing.** One EU per lane is reused in both exponential stages of
  the SCU and GCU. The source's DSP count of 49 for the softmax suggests
  this, but the schedule is this design's.
* **Batch normalisation.** BN is not a unit. It is assumed to be folded
  into the bias (and the weights) before loading.
* **Patch merging.** The gather of the 2×2 neighbours is done by how the
  data are laid out in external memory and loaded; there is no dedicated
  hardware for it.
* **Not built.** The external memory controller and DRAM, and the host that
  issues instructions.

## Sizes the defaults can hold

These are the three models the source evaluates, at 224 × 224:
* Swin-T and Swin-S: C = 96;
* Swin-B: C = 128.

The later stage widths (8C at most) are standard Swin values, not numbers
from the source. At 8C, the weights needed per output tile (k_len = 4·8C),
the FIB channels (8C) and the FFN hidden width (4·8C) all fit the default
depths. Swin-B stage 4 fills the weight buffer, the FIB and an ILB bank
exactly. Whole FFN layers do not fit the weight buffer at once: they are
issued one tile per MATMUL, with a LOAD in between.

## Verification

Each unit has a self-checking testbench in `tb/`. Each compares the unit
against integer reference models in `tb/ref_pkg.sv`: bit-exact for the
datapath, and within a tolerance against real-valued exp, softmax and GELU.
Where a latency is specified, the testbench checks it.

The end-to-end tests build the whole accelerator at its default parameters,
drive the instruction sequence above through `tb/ext_mem_model.sv`, and
compare every stored element with a bit-exact model of the block:
* `tb_swin_acc_top` runs one head with C = 32, and also checks the score
  matrix S.
* `tb_swin_acc_full` runs Swin-T stage 1: C = 96, 3 heads, hidden width 384.

The two tests count:
* bias adds;
* both shortcut sources;
* Kᵀ padding tiles;
* row drains;
* GELU columns;
* masked softmax rows;
* read and write stalls.

Each must occur. The DSU, MRU, MWU and control unit are tested through
the end-to-end test.

To simulate with plain Verilator (the package files come first):

    verilator --binary --timing --assert rtl/swin_pkg.sv tb/ref_pkg.sv \
      $(ls rtl/*.sv | grep -v swin_pkg) tb/ext_mem_model.sv \
      tb/tb_swin_acc_top.sv --top-module tb_swin_acc_top -o tb
    ./obj_dir/tb

A unit test needs only `rtl/swin_pkg.sv`, `tb/ref_pkg.sv`, the unit's files
and its testbench.
