# A dense/sparse convolution accelerator for ReLU diffusion models

A diffusion model runs the same U-Net dozens to hundreds of times, once per
denoising time step. If the network uses ReLU instead of SiLU, many of its
activation channels come out mostly zero. Which channels are mostly zero
changes slowly from one time step to the next. This accelerator uses that fact.

Every input channel of every layer is tagged **dense** or **sparse**. A
dense processing element (DPE) handles the dense channels with a plain
multiply-accumulate array. A sparse processing element (SPE) handles the
sparse channels and feeds only nonzero activations to its multipliers. The
two partial sums are then added. The tags do not come from software. While
a layer's outputs are post-processed, a small counter measures each output
channel's share of zeros. The result re-tags that channel for the next layer,
and it is used from then on. The re-tagging happens on every time step by
default, or every N time steps if configured. Weights are always dense.
Activations are 4-bit unsigned after ReLU (8-bit in sensitive layers).
Weights are 4-bit signed (8-bit in sensitive layers), with a floating-point
(FP8) scale factor.

The RTL is SystemVerilog-2017 and synthesizable. It is checked with
Verilator 5 and with the slang front end of Yosys. The default configuration
has one DPE and one SPE with 128 multipliers each. The channel-type threshold
is 30 % zeros.

## Block diagram

```
            host ports (descriptors, buffer load/unload, table preset)
                 |
 +---------------v-------------------------------------------------+
 | controller: time step, layer, output channel k, pass sequencing |
 +---+--------------------------+--------------------------+-------+
     | start / pp_row / pass    | channel-table write      |
 +---v------------+     +-------v-------------+     +------v--------------+
 | ds_pe 0 (DPE)  |---->| ds_pe 1 (SPE)       |     | channel_info_table  |
 |  addr_gen      | psum|  ...                |     | [layer][channel]    |
 |  operand_buffer| row |  psum_router (tail) |     |   1 = sparse        |
 |  dense_dist /  |chain|  ppu + sparsity_det |     +---------------------+
 |  sparse_dist   |     |          |          |
 |  vector_mac    |     |          | output rows (dense or compressed)
 |  accum_buffer  |     |          v          |
 +-------+--------+     +----------+----------+
         | reads               reads | writes
 +-------v--------------------------v-------------------------------+
 | global_buffer: activation rows (576 b) + weight kernels (72 b)   |
 +------------------------------------------------------------------+
```

| File | Part |
|---|---|
| `rtl/sqdm_pkg.sv` | sizes, `act_word_t`, `layer_desc_t`, padding helpers |
| `rtl/sqdm_top.sv` | the whole accelerator |
| `rtl/controller.sv` | time-step / layer / channel sequencer |
| `rtl/channel_info_table.sv` | per-layer dense/sparse tag of every channel |
| `rtl/global_buffer.sv` | activation and weight memories, one read port per PE plus a host port |
| `rtl/ds_pe.sv` | one processing element, dense or sparse by configuration |
| `rtl/addr_gen.sv` | sparsity-aware address generator |
| `rtl/operand_buffer.sv` | kernel register, R-row input window, bitmap expansion |
| `rtl/dense_dist.sv`, `rtl/sparse_dist.sv` | distribution networks |
| `rtl/vector_mac.sv` | 126 multipliers and the column reduction |
| `rtl/accum_buffer.sv` | P x Q partial sums of one output channel |
| `rtl/psum_router.sv` | add-and-forward link of the partial-sum chain |
| `rtl/ppu.sv` | ReLU, FP8 scaling, UINT4/INT8 saturation, output format |
| `rtl/sparsity_detector.sv` | zero counter and `> 30 %` compare |

## Data layout: channel last

A layer is a 2-D convolution with C input channels, K output channels, an
H x W input and an R x S kernel (R, S <= 3). "Same" zero padding can be
enabled per layer.

**Activations.** One global-buffer word holds one row of one channel. It
has 64 bytes of data and a 64-bit nonzero bitmap. The word for channel c,
row h is at `act_base + c*H + h`. Width is innermost (inside the word),
then height, and the channel is outermost. A PE can therefore fetch exactly
the channels it owns, in any order, one row per read. Rows come in two
formats:

* dense: byte i is column i, and the bitmap marks the nonzero columns;
* compressed: the nonzeros are packed from byte 0 in column order. The value
  for column i is byte `popcount(bitmap[i-1:0])`. Bytes above the nonzero
  count are zero.

Every row of a channel uses the format of that channel's tag. The tag is
stored in the channel information table of the layer that reads the
channel.

**Weights.** One word holds a whole R x S kernel of INT8 or INT4 values.
Byte `r*3+s` is kernel element (r, s), in the low nibble for 4-bit layers.
The kernel for output channel k and input channel c is at
`wt_base + c*K + k`, so the input channel is outermost. When a PE walks
input channels, the weight addresses stay aligned with the activation
addresses.

**Layer descriptor** (`layer_desc_t`):
* sizes `c_in`, `k_out`, `h_in`, `w_in`, `r`, `s`;
* the three base addresses;
* input precision `prec` and output precision `out_prec` (`PREC_4` =
  UINT4 x INT4, `PREC_8` = INT8 x INT8);
* `relu_en`, and `scale_fp8`, an E4M3 scale;
* `out_dense`, which forces the outputs to be stored dense and skips
  detection, for example for the last layer;
* `pad`.

The output is P x Q, with P = H - R + 1 without padding and P = H with
padding.

## Inside a processing element

Every PE has the same hardware. `cfg_sparse` selects which distribution
network feeds the multipliers, and which channel tag the address generator
looks for. For output channel k, a PE runs this loop:

1. **Clear** the P accumulator rows.
2. **Next channel.** `addr_gen` finds the next input channel whose tag
   matches this PE. If several PEs share a type, channels are dealt
   round-robin by rank.
3. **Weights.** One read loads the kernel (2 cycles).
4. **Window.** Rows `-pad .. R-1-pad` are read into the R-row sliding
   window of `operand_buffer`. Padding rows are not read; zeros are shifted
   in instead. Compressed rows are expanded back to column positions as they
   arrive. The bitmap is kept as the "index" of each value.
5. **Compute** each output row p:
   * Dense PE: `dense_dist` walks the window in fixed segments of 42
     columns, taking R * ceil(W/42) cycles.
   * Sparse PE: `sparse_dist` packs the next 42 nonzero values of the whole
     window onto the lanes, taking ceil(nnz/42) cycles. An all-zero window
     takes no compute cycle, and `stat_skipped_windows` counts it.
   * Each lane carries one activation with its (row, column). It drives 3
     multipliers, one per kernel column, so 126 of the 128 multipliers are
     used.
   * `vector_mac` adds each product into output column
     `q = col - s + pad`. `accum_buffer` adds the 64-column result into
     row p. The window then slides down one row (one read).
6. Go to step 2 until no channel is left, then raise `done`.

Reads take one cycle and are pipelined. Fetch and compute do not overlap. A
run of one PE takes:

    P + 2 + sum over owned channels of [ 2 + (R + 2)
                                         + sum over rows p of ((p>0 ? 3 : 0) + 1 + max(1, compute cycles)) ]

The PE testbench checks this count exactly.

**Arithmetic.**
* 4-bit layers multiply a UINT4 activation (0..15) by an INT4 weight
  (-8..7).
* 8-bit layers multiply INT8 by INT8.
* Accumulators are 32-bit signed.

## Partial-sum chain and post-processing

The PEs form a chain of `psum_router`s. PE 0 is the head and PE NUM_PE-1 is
the tail. After all PEs finish channel k, the controller streams
accumulator rows 0..P-1, one per cycle, into the head. Each router registers
`incoming row + its own PE's row`. Only the head uses the controller's row
index. Every other PE reads the row whose index arrives from the previous
router, so the rows stay aligned however long the chain is. The tail
therefore sees the complete dense + sparse sum.

The tail PE's `ppu` processes each row in one registered stage:
1. **ReLU**, if enabled.
2. **Scale.** Multiply by `(8+m) * 2^(e-10)`, the value of the E4M3 byte
   (subnormal: `m * 2^-9`), and round half up.
3. **Saturate**, to [0,15] for 4-bit outputs or to [-128,127] for 8-bit
   outputs.
4. **Format.** Set the bitmap and write the row in dense or compressed
   form to `out_base + k*P + p`.

## Temporal sparsity detection and the update schedule

The detector is a set of per-column `== 0` tests and a counter. At the end of
a channel it compares the count with the threshold:
`sparse = zeros * 100 > 30 * P * Q`. The comparison is strict.

A channel's tag has to be known before its rows are written, because the tag
decides the row format. So on a **sparsity-update time step** the
controller makes two passes over the accumulator for each output channel:

1. **Detect pass.** The rows go through ReLU, scaling and saturation, and
   the detector counts zeros. The result is written to the channel table as
   the tag of input channel k of layer L+1.
2. **Write pass.** The rows are stored in the format just chosen.

On other time steps, the write pass alone runs, in the stored tag's format.

The update steps are those with `t mod update_period == 0`. With
`update_period = 1`, every time step is an update step. This is the
configuration the design targets. Longer periods trade tagging accuracy for
fewer detect passes.

Layers with `out_dense` set skip detection and are always written dense. The
host presets the tags of the first layer's input (layer 0 of the table)
through `h_ct_*`.

The controller counts the following, and `sqdm_top` brings the counts out:
* `stat_updates`: channels classified;
* `stat_to_sparse`: channels whose tag changed from dense to sparse;
* `stat_to_dense`: channels whose tag changed from sparse to dense;
* `stat_reused`: channels written with a stored tag.

Each PE also counts the channels it processed, its MAC cycles and its
skipped windows.

## Host interface and a run

While `busy` is low, the host does the following:
1. Write the layer descriptors (`desc_we/desc_idx/desc_wdata`).
2. Load weights and the input activations through `h_w_*` / `h_a_*`, and
   preset the layer-0 tags with `h_ct_*`.
3. Set `num_layers`, `num_steps`, `update_period` and `pe_sparse`. The
   default `pe_sparse` is `2'b10`: PE 0 dense, PE 1 sparse.
4. Pulse `start`.

The controller then runs every layer in order, once per time step.
`timestep` shows the current step. Results are read back through
`h_a_re/h_a_raddr`, with the data one cycle later. The arithmetic between
time steps is not in this RTL. That covers the sampler update that turns
the network output into the next input, and the noise schedule.

## Sizes

| Parameter | Default | Meaning |
|---|---|---|
| `NUM_PE` (top) | 2 | PEs on the chain (1 dense + 1 sparse) |
| `MULTS` | 128 | multipliers per PE (126 used: 42 lanes x 3) |
| `SPARSITY_THRESHOLD_PCT` | 30 | zero share above which a channel is sparse |
| `W_MAX`, `H_MAX` | 64 | largest row width and number of rows |
| `R_MAX`, `S_MAX` | 3 | largest kernel |
| `C_MAX` | 1024 | largest channel count |
| `L_MAX` | 64 | layers per model |
| `ACT_DEPTH` | 32768 | activation words (one row each) |
| `WT_DEPTH` | 65536 | weight words (one kernel each) |

**Workloads.** The channel widths below are those of the published EDM and
EDM2 models.
* EDM on CIFAR-10 (32 x 32, up to 256 channels): one 3 x 3 layer fits
  completely. Its 256 x 256 kernels exactly fill the weight memory.
* EDM on AFHQv2 and FFHQ (64 x 64): one 3 x 3 layer fits completely.
* EDM2 on ImageNet (64 x 64 latent, up to 768 channels): activations fit,
  but a 768 x 768 layer has nine times more kernels than the weight memory
  holds. The host has to split such a layer into output-channel groups.
* A whole network never fits at once. Weights are loaded layer by layer.

## How far this follows the published design

Taken from the published design:
* the block set: controller, D/S PE array with routers, global buffer;
* inside each PE: address generator with a channel-type table, weight and
  input/index buffers, dense/sparse MAC, accumulation buffer, and a PPU with
  ReLU, scaling and a sparsity detector;
* the channel-last layout, and the nonzero + bitmap storage of sparse
  channels;
* 1 DPE + 1 SPE with 128 multipliers each;
* the 30 % threshold and the per-time-step update;
* the UINT4/INT4 and 8-bit formats.

Choices of this design, where the published description gives no detail:
* **Distribution networks.** The flexible tree (dense) and Benes-style
  (sparse) networks are replaced by a fixed segment walk and a
  rank-of-nonzero packer. These give the same work per cycle for
  convolution windows, but not the same flexibility for other shapes.
* **Reduction.** Products are summed by output column.
* **Router.** A registered add-and-forward chain, not a configurable
  network.
* **Scale factors.** There is **one FP8 scale per layer**. The published
  format uses fine-grained (per-block) scale factors and, for 8-bit layers,
  per-block shared exponents. Their storage and use are not built here.
* **Schedule.** Detect pass before write pass; one output channel at a
  time; no overlap of fetch and compute.
* **Global buffer.** Dedicated ports, with no bank conflicts modelled.
* **Channel types.** Only two are stored: dense and sparse. The published
  block diagram hints at further types, but it does not define them.
* **Detector.** There is one zero counter, reused for each output channel in
  turn. The published drawing shows one counter per output channel. Here the
  output channels are finished one at a time, so a single counter is enough.
* Zero padding.
* The host interface.
* **Not built:** the attention, embedding and skip-connection layers of the
  U-Net, and the sampler between time steps.

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/sqdm_pkg.sv \
              tb/tb_sqdm_top.sv --top-module tb_sqdm_top -Mdir obj
    ./obj/Vtb_sqdm_top +verilator+rand+reset+2

`tb_sqdm_top` runs the top at its default parameters, so it is the
full-size test. It takes well under a second. It builds a two-layer model:
1. an 8-bit 10 x 10 convolution, C = 4 to K = 6;
2. a padded 4-bit 8 x 8 convolution, 6 to 4, stored dense.

It runs the model three times:
* two time steps with an update every second step, so the second step
  reuses the stored tags;
* one time step with the sign of layer 0's weights flipped, so that tags
  change;
* the same as the second run, over two time steps with an update on every
  step.

It checks every stored output row, in its expected format, against a
reference convolution computed in the testbench. It also checks each PE's
MAC-cycle, skipped-window and channel counts, and the controller's
statistics, against that reference. Finally, it
requires each mechanism to occur at least once:
* dense and sparse channels;
* skipped zero windows;
* dense-to-sparse and sparse-to-dense changes;
* reuse of stored tags;
* saturation;
* compressed output rows.

`tb/tb_workload_edm.sv` uses the same reference and checks at the row size
of the 64 x 64 EDM models. It runs two zero-padded 3 x 3 layers, 4 to 8 and
8 to 8 channels, at the full 64-column width, so each dense row takes two
42-lane segments. The channel counts are cut down from the real model's 128
so that the run takes seconds. The 32 x 32 level of the CIFAR-10 model uses
the same datapath with one segment per row.

The block testbenches use random stimulus with `$urandom` and independent
reference models. `tb_ds_pe` also checks the exact cycle count above.
