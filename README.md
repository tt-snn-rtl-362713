# A multi-cluster accelerator for tensor-train decomposed spiking convolutions

Training a spiking neural network (SNN) with backpropagation through time is
expensive: every convolution runs once per timestep, and all activations must
be kept for the backward pass. Tensor-train (TT) decomposition makes the
convolutions smaller. A 3x3 convolution with weights `W` (O x I x 3 x 3)
becomes four sub-convolutions with TT rank `R`:

```
w(1): 1x1, I -> R     w(2): 3x1, R -> R     w(3): 1x3, R -> R     w(4): 1x1, R -> O
```

In the *parallel TT* (PTT) form, `w(2)` and `w(3)` both act on the output of
`w(1)`. Their results are added, and `w(4)` is applied to the sum:

```
PTT:  y_t = [ (x_t * w1 * w2) + (x_t * w1 * w3) ] * w4
HTT:  y_t =   (x_t * w1) * w4                  (half timesteps)
```

The combined kernel is a 3x3 cross, which sees both the vertical and the
horizontal neighbours. The *half TT* (HTT) form drops the two middle
sub-convolutions in chosen timesteps, normally the later ones. `y_t` drives
leaky integrate-and-fire (LIF) neurons.

A layer-by-layer accelerator cannot exploit the fact that `w(2)` and `w(3)`
are independent. This design gives each sub-convolution its own 32-PE
systolic cluster and runs clusters 2 and 3 side by side:

```
                  filter buffer 144 kB (4 banks: w1 | w2 | w3 | w4)
                    |            |            |            |
input spike   -> cluster 1 -> output -+-> cluster 2 -+-> adder -> cluster 4 -> LIF units -> MemP buffer 32 kB
buffer 32 kB     (OS, spike   buffer  |   (WS, 3x1)  |   array    (OS, 8-bit           \-> output spike
                  PEs)        32 kB   +-> cluster 3 -+             MACs)                    buffer 32 kB
                                          (WS, 1x3)
              OS = output-stationary, WS = weight-stationary
```

The RTL covers the **forward pass of one decomposed layer over all of its
timesteps**: spikes in, spikes and membrane potentials out. The backward pass
is not included (see "What is not here").

## Arithmetic

| quantity | format |
|---|---|
| input / output spikes | 1 bit |
| weights of all four TT cores | 8-bit signed |
| accumulators, partial sums, `y`, membrane potential | 16-bit signed |
| operands of clusters 2-4 | 8-bit signed, re-quantised |

The 16-bit result of cluster 1 is re-quantised into 8-bit operands for
clusters 2 and 3: arithmetic right shift by `cfg.sh1`, then saturation to
[-128, 127]. The saturating sum of clusters 2 and 3 is re-quantised the same
way for cluster 4, with `cfg.sh23`. Accumulators inside the arrays wrap in
two's complement. The adder array and the LIF update saturate.

The LIF units work in Q8.8. The paper's leak `tau_m = 0.25` is an
arithmetic shift right by 2. Its threshold `V_th = 0.5` is `cfg.vth = 128`.
For each neuron and timestep:

```
u'  = (t == 0 || u_prev >= vth) ? 0 : u_prev     // reset after a spike
u   = sat16( (u' >>> 2) + y )
spk = (u >= vth)
```

The MemP buffer keeps `u` before the reset, because that is what a backward
pass needs. The reset is worked out again when the value is read at the next
timestep.

## The clusters

All four clusters have 32 PEs.

**Cluster 1 (`os_cluster_spike`, 4x8 `spike_pe`).**
- Output-stationary: row `r` is pixel `r` of a 4-pixel tile, column `c` is
  rank channel `c` of an 8-channel rank tile.
- Spikes enter from the left and weights from the top, one input channel `k`
  per cycle. The cluster skews them itself: row `r` is delayed by `r`
  cycles, column `c` by `c` cycles.
- Its input is binary, so a PE has no multiplier. It adds the weight when
  the spike is 1.
- Once `busy` falls (`ROWS+COLS-1` cycles after the last operand), four
  `drain` cycles shift the accumulators down and out of the bottom row.
  Pixel 3 comes out first.

**Cluster 4 (`os_cluster_mac`, 4x8 `mac_pe`).** Same structure as cluster 1,
with 8x8-bit multipliers. Rows are the 4 pixels, columns 8 output channels,
and the reduction runs over the `R` rank channels.

**Clusters 2 and 3 (`ws_cluster`, 8x4 `ws_pe`).** This is the least obvious
part of the design.
- PE `(r, c)` handles input rank channel `chunk*8 + r` and output rank
  channel `grp*4 + c`.
- Its 32-byte scratch pad holds the weights of every `(grp, chunk, tap)`
  triple it serves, at index `sel = (grp*NCHUNK + chunk)*3 + tap`, where
  `NCHUNK = R/8` and `NGRP = R/4`.
- All of `w(2)` (or `w(3)`) therefore stays in the array for the whole
  layer. This bounds the rank: `3 * (R/4) * (R/8) <= 32` gives **R <= 16**.

For each output pixel and group, the controller sends `3 * NCHUNK` steps,
one per cycle. Each step carries:
- the 8 activations of one neighbour pixel (one tap) and one rank chunk, read
  from the output buffer;
- its `sel` index;
- `first`/`last` flags.

The neighbour pixels are the rows above and below for cluster 2 (3x1
kernel) and the columns left and right for cluster 3 (1x3 kernel). At the
image edge the tap is replaced by zeros (zero padding of 1, stride 1).

Inside the array:
- Activations move right and partial sums move down.
- An accumulator under each column adds the steps from `first` to `last`.
- De-skew registers line the four columns up.

A finished vector of 4 outputs leaves `ROWS+COLS` cycles after its last step
went in. Both clusters get the same control, so they finish together. The
adder array (`adder_array`) adds them lane by lane and writes the result into
one of two 4-pixel by 16-channel staging buffers. A tag `{pixel, group}` that
travels with the data tells the staging buffer where each result goes.

The scratch pads are filled from the `w2`/`w3` banks, one PE row per cycle,
right after `start`. This fill runs while cluster 1 streams its first tiles,
so its SRAM reads are hidden. At rank 16, a core fills only 192 of the 9,216 words of its
filter bank, so those two 36 kB banks stay mostly empty. The 36 kB `w(1)`
and `w(4)` banks hold `I*R` and `R*O` bytes, which bounds `I` and `O` at
2,304 for rank 16 (the 10-bit `cin`/`cout` fields stop at 1,023).

## How a layer runs

`ttsnn_ctrl` finishes all timesteps of a layer before the next layer. Inside
a layer, three state machines run at the same time, one per stage. Each pair
of neighbouring stages is joined by a double buffer with a full flag per
buffer:

```
 stage 1: cluster 1 --> output buffer --> stage 2: clusters 2/3 + adder --> staging --> stage 3: cluster 4 + LIF
                        half 0 | half 1     (or HTT copy)                    buf 0|buf 1
                        (timestep parity)                                    (tile parity)
```

1. **Cluster 1, per timestep `t`.** It waits until output-buffer half `t%2`
   is empty. Then, for every rank tile and pixel tile, it runs `I`
   streaming cycles, a wait for the array to empty, and 4 drain cycles. The
   drain writes the re-quantised `o = x_t * w1` into that half, one 16-byte
   word per pixel. Then the half is marked full.
2. **Clusters 2/3, per full half and per 4-pixel tile.** This stage waits
   until its staging buffer is empty.
   - **Full timestep** (`cfg.half_mask[t] == 0`): clusters 2 and 3 take
     `4 * NGRP * 3 * NCHUNK` steps, and the adder array fills the staging
     buffer.
   - **Half timestep** (`half_mask[t] == 1`): clusters 2 and 3 are skipped.
     Two reads copy `o` of the tile into the staging buffer.

   The staging buffer is then marked full, and the stage moves to the other
   buffer. After the last tile, the output-buffer half is marked empty. The
   first timestep also waits for the scratch-pad fill.
3. **Cluster 4, per full staging buffer.** For each 8-channel output tile:
   `R` streaming cycles, a wait, then 4 drain cycles. Each drained row goes
   to the LIF units together with the MemP word of the same neurons at
   `t-1`. Two cycles later the new spikes and potentials are written. Then
   the staging buffer is marked empty.

So cluster 1 computes timestep `t+1` while clusters 2/3 read timestep `t`,
and clusters 2/3 fill tile `n+1` while cluster 4 works on tile `n`. The
exchange between stages is one tile (or one timestep) late, not element by
element. `done` rises once all three stages are idle and the last result
is written.

Measured cycle counts. For comparison, the last column gives the count when
the three stages take turns instead of overlapping, with the same tiling:

| layer (H x W, I -> R -> O, T) | schedule | cycles | stages in turn |
|---|---|---|---|
| 4x8, 16 -> 16 -> 16, T=4 | F F H H | 3,481 | 6,039 |
| 4x4, 8 -> 8 -> 8, T=2 | F F | 460 | 717 |
| 2x6, 12 -> 16 -> 24, T=4 | H F H F | 1,478 | 2,587 |
| 8x8, 64 -> 16 -> 32, T=6 | F F F F H H | 17,699 | 35,401 |
| 8x8, 64 -> 16 -> 32, T=6 | all F | 17,808 | 38,889 |

F = full (PTT) timestep, H = half (HTT) timestep.

With `I = 64`, cluster 1 is the slowest stage. The pipelined layer time is
then set by cluster 1, and HTT saves little time. It still skips all the
work of clusters 2 and 3 in half timesteps. With the stages run one after
another, HTT saved 9% of the cycles in the 8x8 example.

## Host interface and buffer layouts

`ttsnn_top` has no parameters. The layer comes from `cfg` (`layer_cfg_t` in
`ttsnn_pkg`): `h`, `w`, `cin`, `rank`, `cout`, `tsteps`, `half_mask`,
`sh1`, `sh23`, `vth`. While `busy` is low, the host loads the buffers and
then pulses `start`. `done` rises when the last result is written. Every
read port returns data one cycle after the address.

Statistics outputs, valid after `done`:

| output | counts |
|---|---|
| `cnt_full_t`, `cnt_half_t` | timesteps run in full and in half form |
| `cnt_overlap` | cycles of the scratch-pad fill that overlapped cluster 1 |
| `cnt_pipe` | cycles in which cluster 4 streamed while cluster 1 or clusters 2/3 also streamed |
| `cnt_pipe_ob` | cycles in which cluster 1 streamed while clusters 2/3 also streamed |
| `cycles` | cycles of the layer |

Index notation: `NPT = H*W/4`, `p` = pixel in raster order, `pt` = tile of
4 pixels, `ot` = tile of 8 output channels.

| buffer | word | address | content |
|---|---|---|---|
| input spikes (`insp_wr_*`) | 4 bits | `(t*NPT + pt)*I + k` | bit `r` = spike of pixel `4*pt + r`, input channel `k` |
| filter bank 0, `w(1)` | 8 bytes | `rt*I + k` | byte `j` = `w1[k][8*rt + j]` |
| filter banks 1/2, `w(2)`/`w(3)` | 4 bytes | `sel*8 + r` | byte `j` = tap `tap` of output channel `4*grp + j`, input channel `8*chunk + r` |
| filter bank 3, `w(4)` | 8 bytes | `ot*R + k` | byte `j` = `w4[k][8*ot + j]` |
| output spikes (`spk_rd_*`) | 8 bits | `(t*H*W + p)*(O/8) + ot` | bit `j` = output channel `8*ot + j` |
| MemP (`memp_rd_*`) | 8 x 16 bits | same as output spikes | potentials before reset, Q8.8 |

Limits at the default sizes:

| limit | reason |
|---|---|
| `R` = 8 or 16 | pad smaller ranks with zero weights; 16 is the scratch-pad bound |
| `H*W` a multiple of 4, at most 1024 | one half of the output buffer |
| `O` a multiple of 8 | cluster 4 column tile |
| `T <= 8` | `TMAX` |
| `T*H*W*I/4 <= 65536` | input spike buffer |
| `T*H*W*O/8 <= 2048` | MemP buffer |

## Sizes: this RTL against the paper

| item | paper | RTL |
|---|---|---|
| clusters x PEs | 4 x 32 | 4 x 32 (4x8, 8x4, 8x4, 4x8) |
| scratch pad / PE | 32 bytes | 32 bytes, used in clusters 2/3 |
| global buffers | 272 kB (144 kB filter + 4 x 32 kB) | 272 kB, same split |
| accumulator / multiplier | 16 / 8 bits | 16 / 8 bits |
| `tau_m`, `V_th` | 0.25, 0.5 | shift by 2, 128 in Q8.8 |
| clock, process | 400 MHz, 28 nm | not modelled |

A coarse word-level synthesis of `ttsnn_top` (yosys, memories kept as
memories) gives:
- 2,810 cells, of which 731 are multi-bit registers and 110 are multipliers;
- 72 memories with 2,244,608 bits: the 272 kB of buffers plus 64 scratch pads
  of 32 bytes.

## Where this departs from the paper, and what is not here

Choices the paper leaves open, made here:
- the array shapes;
- tiling into 4 pixels, 8 rank channels and 8 output channels;
- the scratch-pad layout and the column accumulators of clusters 2/3;
- the double buffers between the stages and their full/empty flags;
- re-quantisation by shift and saturation;
- Q8.8;
- buffer word widths and layouts;
- an asynchronous active-low reset;
- one-cycle SRAM reads.

Departures and omissions:
- **Overlap between clusters.** The paper says the output buffer and the
  adder results are consumed "instantly". Here they are consumed one
  timestep or one 4-pixel tile later, through the double buffers described
  above. Element-by-element forwarding would need all three stages to run
  at the same rate, which differs from layer to layer.
- **Backward pass.** The BPTT dataflow is taken from earlier SNN training
  accelerators and not described, so it is not implemented. The MemP and
  spike buffers keep every timestep so that a backward pass could use them.
- **Batch normalisation and layer chaining.** Batch normalisation between
  layers and moving spikes from one layer's output to the next layer's input
  are left to the host. The off-chip DRAM is not modelled.
- **Large layers.** Ranks above 16 and layers larger than the buffers would
  need the host to split the layer and reload weights. The RTL has no
  support for that. None of the ResNet18 ranks (24-186) and 2 of the 32
  ResNet34 ranks (12 and 16) fit the rank limit.
- **The LIF input.** As printed, the neuron equation sums the weights times
  `H(u_i - V_th)`, the neuron's own spike. This design takes the input term
  to be the layer's convolution result `y`, the output of cluster 4, as the
  architecture text describes.

## Simulating

Every testbench checks its block against a model computed inside the
testbench, prints `TB_RESULT checks=N failures=M`, and stops itself through
a watchdog if the block hangs. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/ttsnn_pkg.sv \
          tb/tb_ttsnn_top.sv --top-module tb_ttsnn_top -o sim && obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_ttsnn_top` | whole layer at default sizes, five layers (FFHH rank 16; PTT rank 8; HFHF rank 16, 24 outputs; two one-timestep, one-tile layers); every spike and potential compared; checks that full and half timesteps, the overlapped weight fill, cluster 4 overlapping an earlier stage, cluster 1 overlapping clusters 2/3, zero padding, saturation, spikes and resets all occur |
| `tb_workload_htt_arrangements` | the four placements of two half timesteps among four (FFHH, HHFF, HFHF, FHFH) on a rank-16 tile, 8x8 pixels, 32 -> 32 channels; 10,089 to 10,198 cycles each |
| `tb_workload_resnet34_tile` | a rank-16 ResNet34 layer tile, 8x8 pixels, 64 -> 32 channels, T=6, with HTT at t=5,6 and with PTT |
| `tb_spike_pe`, `tb_mac_pe`, `tb_ws_pe` | single PEs, cycle by cycle |
| `tb_os_cluster_spike`, `tb_os_cluster_mac` | random matrix products and exact busy latency |
| `tb_ws_cluster` | random multi-step outputs, exact `ROWS+COLS` latency |
| `tb_adder_array`, `tb_lif_array` | the merge and the neuron update, including saturation and reset |
| `tb_gbuf_sram`, `tb_filter_buffer` | masked writes, all read ports |

The layer benches share `tb/tb_layer_common.svh`, which holds the reference
model and the load/run/compare task. To try another layer shape, add a
`run_layer(H, W, I, R, O, T, half_mask, sh1, sh23)` call.
