# Fluid Batching NPU with an exit-aware preemptive scheduler

An early-exit network attaches small classifiers ("exits") partway along a
deep backbone. A sample whose classifier is confident enough leaves at that
exit, and the rest continue. Batching such a network on an edge accelerator
runs into a problem. A batch of eight may start full, but after two or three
exits only one or two samples are left. The accelerator then runs the deepest
and most expensive layers almost empty, while new requests wait in the queue.

This design attacks the problem from two sides.

* **In the accelerator.** A GEMM engine is made efficient at whatever batch
  size is active at the moment. Two mechanisms do this:
  * *Fluid Batching* lays the samples of a batch out differently for each
    layer.
  * *Stackable PEs* change the shape of the processing array for each layer.
* **In the scheduler.** At each exit the scheduler can pause the surviving
  samples. It then runs a fresh batch from the queue up to the same exit and
  merges the two groups, so the rest of the network runs with a fuller
  batch. It does this only when its latency table says the oldest sample will
  still meet its latency target (SLO).

The RTL has two layers:

* The whole serving loop, in `fluid_batching_system`. It covers the request
  queue, batch formation, the scheduler, batch control, the GEMM engine and
  the exit decisions.
* The building blocks, each with its own self-checking testbench.

## 1. The GEMM engine and its shape

Every layer is treated as a matrix product. A sample's `R x P` input matrix
times the layer's `P x C` weight matrix gives the sample's `R x C` output:

* For a convolution, `R` is the number of output pixels, `P` is
  kernel × kernel × input channels, and `C` is the number of output channels.
* For a fully-connected layer, `R = 1`.

The engine (`npu_core`) has these parts:

* `T_C` processing elements (PEs). Each is a multiply-add tree over `T_P`
  inputs.
* A row tile of `T_R` rows, streamed through the PEs one row per cycle.
* Tile buffers for inputs (`T_R x T_P`), weights (`T_P x T_C`) and outputs
  (`T_R x T_C` 32-bit accumulators).

The defaults `<T_R,T_P,T_C> = <4652,7,128>` are the design point for
ResNet-50 on a Zynq ZC706. Other design points are parameter overrides:

| Workload and platform | `<T_R,T_P,T_C>` |
|---|---|
| ResNet-50 on ZCU104 | `<6832,10,172>` |
| Inception-v3 on ZC706 | `<2742,4,225>` |
| Inception-v3 on ZCU104 | `<6832,10,172>` |

### Stackable PEs (`stackable_pe_pair`)

The PEs are built in pairs. The pair mode `k` is chosen per layer and sets
the effective engine shape:

| k   | effective shape                    | what the pair does                                        |
|-----|------------------------------------|-----------------------------------------------------------|
| 1   | `<T_R, T_P, T_C>`                  | two independent dot products of length `T_P`               |
| 2   | `<T_R/2, 2·T_P, T_C/2>`            | the shared adder joins both trees into one of length `2·T_P` |
| 1/2 | `<T_R/2, floor(T_P/2), 2·T_C>`     | each tree is cut in half, giving four dot products of length `floor(T_P/2)` |

What each mode suits:

* `k = 2` suits layers with long dot products and few output channels.
* `k = 1/2` suits layers with short dot products and many channels. An
  example is the first convolution, whose `P` is small.

With an odd `T_P`, one lane sits idle when `k = 1/2`. The row tile is halved
for both `k = 2` and `k = 1/2`, so every mode fits the same buffers.

Inside the engine, the mode decides three things:

* which PE and lane each weight is written to;
* how an input row's `T_Pe` values fan out to the lanes;
* how pair outputs map to output columns.

Here `T_Pe` is the effective P-tile width of the current mode.

### Fluid Batching (`fb_dma_agen`)

Most accelerators batch by stacking the samples' input matrices on top of
each other ("R-batching"). A few place them side by side ("P-batching").
Fluid Batching allows any mix of the two, per layer. For `B_act` active
samples and a chosen row factor `B_R`:

```
R_hat = B_R · R                rows of the formed matrix
B_P   = B_act − B_R + 1        column blocks
```

* Row block `rb` and column block `cb` hold sample `s = rb + cb·B_R`.
* A cell with `s ≥ B_act` is empty and reads as zero.
* Inside a column block, the sample's `P` columns are padded with zeros up to
  the next multiple of the P-tile width, so no P-tile mixes two samples.

The two extremes are ordinary batching:

* `B_R = B_act` is pure R-batching.
* `B_R = 1` gives one row block and `B_act` column blocks.

For four samples with `B_R = 2`, the result is the 2×2 arrangement below.
Each sample still gets its own `R x C` output.

```
            cb = 0        cb = 1
rb = 0   | sample 0 |  | sample 2 |
rb = 1   | sample 1 |  | sample 3 |
```

The address generator is combinational. Given a position in the formed
matrix (`r_hat`, `cb`, `col`), it returns:

* the sample;
* the sample's own row;
* a valid flag (a real element, not padding or an empty cell);
* the word address `base[s] + row·row_len + col`.

The engine uses the same logic in reverse to scatter output rows back to each
sample.

**Toeplitz formation.** A convolution's `R x P` input matrix is never
stored. Each layer descriptor carries a convolution geometry:

* kernel size `K`, stride and zero padding;
* input height, width and channel count;
* output width.

With this geometry the generator forms each element of the matrix on the
fly from the sample's stored feature map. Feature maps are kept
pixel-major with channels innermost, which is exactly the `R x C` layout in
which the engine writes its outputs. Element `(r, p)` of the matrix is
found as follows:

* row `r` is output pixel `(oy, ox) = (r / out_w, r mod out_w)`;
* column `p` is kernel tap `ky = p / (K·in_c)`, `kx = (p / in_c) mod K` on
  channel `ci = p mod in_c`;
* the element reads input pixel `(oy·stride + ky − pad, ox·stride + kx − pad)`,
  channel `ci`;
* taps that land in the padding are invalid and read as zero.

A geometry with `K = 0` means the input is already a dense `R x P` matrix.
Fully-connected layers and exit heads use this, as a flattened view of an
earlier output.

### Engine loop and timing

For one layer the loop nest, outermost first, is:

1. row tile (`T_Re` rows of `R_hat`)
2. column block `cb`
3. output-column tile (`T_Ce` columns)
4. P-tile (`T_Pe` columns of P)

Each P-tile costs:

* weight load: `T_Pe·nc` cycles;
* input load: `nr·T_Pe + 2` cycles;
* compute: `nr` cycles, accumulating into the output tile.

Here `nr` and `nc` are the rows and columns actually present in the tile.
After the last P-tile, the `nr·nc` results are requantised to Q8.8 and
written out at one word per cycle. The layer adds two more cycles overall.
`tb_npu_core` checks this formula exactly.

The memory port moves one 16-bit word per cycle:

* `mem_re`, `mem_we`, `mem_addr` and `mem_wdata` are registered.
* Read data must arrive one cycle after the memory sees `mem_re`.

The engine does not overlap transfers with compute. Double-buffered tiles
are not built (see §6).

## 2. Fluid Batching Engine: who decides `<B_R, k>`

`fluid_batching_engine` combines a small control unit (`fbe_cu`) with the
Fluid Batching Control Block (`fbcb`).

**FBCB.** The FBCB is a table with one row per layer and one column per batch
size `1..B_MAX`.

* Each entry holds `B_R − 1` in `ceil(log2 B_MAX)` bits and `k` in 2 bits.
* `B_P` is not stored; it is derived as `B_act − B_R + 1`.
* The table is filled through a write port with offline-optimised policies.
* After reset every entry is R-batching with `k = 1`.
* A `B_R` larger than the batch size is clamped.

**CU.** The control unit keeps four registers:

* `B_act`, the active batch size;
* `l`, the current layer;
* `B_old` and `l_old`, the size and resume layer of a parked batch.

These two values address the FBCB, whose read is combinational. Its events
and responses are:

| Event | Response |
|---|---|
| `start` | load a fresh batch |
| `layer_done` | advance `l` |
| `exit_evt` with `B_exit` | subtract the samples that left |
| `preempt` | park the current batch (`B_old ← B_act`, `l_old ← l`) and start a new batch of `B_incr` samples at layer 0 |
| exit at layer `l_old − 1` while parked | merge (`B_act ← B_act − B_exit + B_old`); the merged batch continues from `l_old` |

A second `preempt` while parked is refused and flagged on `preempt_err`, so
preemption never nests.

## 3. The preemptive scheduler (`preemptive_scheduler`)

The scheduler is a state machine. It works in clock cycles, using a
free-running time counter and a latency table (`exit_latency_lut`). Entry
`LAT[e][b]` is the measured time to run the layers from exit `e−1` to
exit `e` with batch size `b`. The table is loaded at configuration time.

**Starting a batch.** When the scheduler is idle and requests are queued, it
takes `min(N_Q, B_MAX)` of them and lets the batch run to the first exit.

**At an intermediate exit `i`.** Let `B_rem` be the number of samples left.
If there is room and the queue is not empty, the scheduler tries a backfill:

```
B_incr     = min(N_Q, B_MAX − B_rem)
T_overhead = Σ_{e≤i} LAT[e][B_incr] + Σ_{e>i} LAT[e][B_rem + B_incr]
T_slack    = T_SLO − (now − arrival time of the oldest active sample)
```

`T_overhead` has two parts:

* the time to bring the new samples up to exit `i`;
* the time to run the merged batch from there to the end.

The two sums are accumulated over `N_EXITS` cycles, using the table's two
read ports.

What happens next depends on the criterion:

* **`T_overhead < T_slack`: preempt.** The survivors are parked, and the new
  batch runs from layer 0. Its own exits on the way can still remove samples.
  When it reaches exit `i`, the two batches merge. The check is then made
  again at the same exit, so several backfills can happen at one exit.
* **Otherwise: proceed.** The batch moves on to the next exit.

**At the last exit** every remaining sample completes, and the scheduler
returns to idle.

`n_preempt` and `n_decline` count the decisions.

## 4. The serving loop (`fluid_batching_system`)

The top level connects the blocks as follows.

* **`request_fifo`** holds each request's sample ID with its arrival time.
  Its occupancy is `N_Q`.
* **`batch_formation_buffer`** holds the active batch and the parked batch:
  * the sample IDs and arrival times;
  * the activation *slot* of each sample;
  * the arrival time of the oldest active sample.

  On an exit it removes the leaving samples, reports them (`cmpl_*`) and
  compacts the rest. On a merge it puts the parked samples in front.
  Samples can complete out of order. Each completion carries its sample ID
  and exit number, so the receiver can reorder them.
* **The layer table** (`ltab`) has one descriptor per layer. A descriptor
  holds:
  * `R`, `P` and `C`;
  * the weight address;
  * whether the input is the request image or another layer's output, and
    which layer;
  * whether the layer is an exit head, and which exit;
  * the convolution geometry used for Toeplitz formation.
* **The layer runner** is a small state machine inside the top. For each
  layer it:
  1. takes `<B_R, k>` from the engine;
  2. issues the layer to `npu_core` with per-sample input and output base
     addresses;
  3. advances the CU.

  After an exit head it stops. It then hands the heads' confidences to
  **`exit_decision`** and waits for the scheduler.
* **`exit_decision`** marks a sample as exiting when its confidence is at
  least `THRESH`. The default is 205/256 ≈ 0.8 in Q8.8. At the final exit
  every sample leaves. The confidence is the first output word of the exit
  head. No softmax is computed: the head is expected to produce its top-1
  probability there.

### Memory map

Memory outside the top is reached through the `mem_*` port. The layout is:

| Data | Address |
|---|---|
| Image of request ID `n` | `img_base + n << IMG_LOG2` |
| Output of layer `l` for activation slot `q` | `act_base + q << SLOT_LOG2 + l << REGION_LOG2` |
| Weights of layer `l` | the layer table's `w_base` |

Each in-flight sample owns one of `B_MAX` slots. The slot is freed when the
sample completes. A parked batch therefore keeps its activations in memory
while the new batch runs, and no checkpoint copy is needed. The default
region of 2^20 words holds ResNet-50's largest activation (112×112×64).
Inception-v3 needs `REGION_LOG2 = 21`.

### Monitoring outputs

The top also brings out:

* the time counter;
* `B_act`, the layer and the current policy;
* exit, merge and park events;
* the decision counters;
* the engine's busy and compute cycle counts, from which utilisation can be
  computed;
* the CU's parked-batch registers and `preempt_err`.

## 5. Configuration before use

Before sending requests, fill these tables:

| Table | Port | Contents |
|---|---|---|
| Layer table | `lt_*` | one descriptor per layer |
| FBCB | `fbcb_*` | `<B_R, k>` per layer and batch size (offline DSE result) |
| Latency table | `lat_*` | cycles per subnet and batch size (offline profile) |

Then set `t_slo` in cycles, for example 400 ms × 150 MHz = 60,000,000.

Requests are pushed with `req_push`/`req_id`. Results appear on
`cmpl_valid`/`cmpl_mask`/`cmpl_id`/`cmpl_exit`.

The FBCB default of `N_LAYERS = 62` rows is sized for a 4-exit ResNet-50.
A 4-exit Inception-v3 needs about 104 rows.

## 6. Where this RTL departs from, or goes beyond, the published design

**Scheduler in hardware.** The published system runs the scheduler on the
SoC's host processor. Here it is a state machine, so that the whole loop can
be simulated in RTL. The algorithm and criterion are unchanged.

**Guard padding.** The published dimension formula pads `P` by `P mod T_P`.
That sum is not generally a multiple of `T_P`, so this RTL pads to the next
multiple of the P-tile width instead.

**Derivation of `B_P`.** One sentence of the source describes this
derivation differently, as `B_act − B_P`. The dimension formula above is
followed.

**Toeplitz matrices.** The source describes the layer matrices both as
stored in memory and as formed by the DMA. This RTL forms a convolution's
input matrix in the DMA from the stored feature map. It also accepts a
stored dense matrix (`ksz = 0`).

**Non-GEMM layers are not built.** These are pooling, residual additions and
the exit heads' softmax.

**No double buffering.** Tile loads and compute alternate; they do not
overlap. Results are exact, but cycle counts are longer than an
overlapped engine's.

**Number formats.** Data are 16-bit fixed point. The Q8.8 split, the 32-bit
accumulator and the saturating requantisation are this design's choices.

**Behaviour the source does not specify.** These choices are this design's
own:

* the handshakes;
* the reset contents;
* the queue depth of 32;
* the slot-based memory map;
* the one-word-per-cycle memory port;
* the behaviour when a batch empties completely at an intermediate exit (the
  scheduler goes idle);
* the behaviour when no request is queued at an exit (the batch proceeds).

## 7. Verification and simulation

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one
compares against an independent model and ends with a line
`TB_RESULT checks=N failures=M`. Notable ones:

| Testbench | What it checks |
|---|---|
| `tb_npu_core` | Random layers at a small engine size (`<8,3,4>`, B_MAX 4), across every `k`, every `B_R` and batch sizes 1..4. Every second layer is a convolution with random kernel, stride and padding, formed on the fly. Outputs are compared with a software GEMM, along with the exit confidences and the exact cycle count. |
| `tb_fb_dma_agen` | Sweeps the whole formed matrix for random batches and convolution geometries. Every element must be addressed exactly once, and padding must read as zero. |
| `tb_fbe_cu` | Replays a scenario with `B_max = 8`: a batch of 2 loses one sample at an exit, 4 new samples are preempted in, one of them exits, and the merge gives 4. |
| `tb_fluid_batching_system` | An 8-layer, 4-exit model at engine size `<8,3,4>`: 48 requests with a loose and then a tight SLO. Every completed sample's exit and output are checked against a reference model of the network. It counts, and requires at least one of each: batch starts, early exits, preemptions, declined preemptions, exits during catch-up, merges, full batches, each `k`, R-, P- and mixed batching, and a 3×3 zero-padded convolution whose Toeplitz matrix the DMA forms. |
| `tb_fluid_batching_system_full` | The same test with the top at its default parameters (`<4652,7,128>`, 62 layers, B_MAX 8). It runs in seconds, because only the rows and columns that exist are moved. |
| `tb_npu_core_resnet50` | The engine at its default size (`<4652,7,128>`, B_MAX 8) runs two ResNet-50 layer shapes. The first is the final 2048→1000 fully-connected layer with a full batch of 8 under R-batching: 2,213,706 cycles, matching the formula. The second is a stage-4 3×3 padded convolution on a 7×7 map, with channels cut to 16→32 to keep the reference quick, run with batch 3, `B_R = 2` and `k = 2`. Outputs are checked against a reference GEMM. |

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/fb_pkg.sv tb/tb_fluid_batching_system.sv \
    --top-module tb_fluid_batching_system
./obj_dir/Vtb_fluid_batching_system
```

The package `rtl/fb_pkg.sv` must come first on the command line. Testbenches
drive every input and reset every register. They also run correctly with
Verilator's randomised initial values
(`+verilator+rand+reset+2`).

What has not been shown:

* a whole ResNet-50 or Inception-v3 inference (only the two layer shapes above are simulated at full size);
* timing closure at the published clock frequencies;
* synthesis of the full-size engine. Its 595,456-entry output accumulator
  buffer is large for a flip-flop synthesis flow and would map to block RAM
  on an FPGA.
