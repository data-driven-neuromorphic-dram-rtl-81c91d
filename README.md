# Sparse CNN and RNN accelerators that skip zeros and small changes

Neural-network accelerators spend most of their energy moving numbers in and
out of DRAM, and most of those numbers are useless. After a ReLU, well over
half the activations of a convolutional layer are exactly zero (*spatial*
sparsity). In a recurrent network driven by a slowly changing signal, most
hidden units change very little from one time step to the next (*temporal*
sparsity). This RTL holds two accelerators that use each kind of sparsity:

* **NullHop**, a CNN layer engine. Feature maps travel in compressed form: a
  bitmap of non-zero positions plus a list of the non-zero values. They are
  never decompressed. Every zero activation costs no multiply and no clock
  cycle. 128 MAC units compute up to 128 output maps at once. Max pooling,
  ReLU and re-compression happen on the way out, so the output can feed the
  next layer directly.
* **DeltaRNN**, a GRU engine. At each step it compares every input and
  hidden element with the last value it passed on. Only changes of more than
  a threshold θ are propagated. Each one adds its delta times one weight
  column into stored pre-activations. Weight columns of units that did not
  change are never read.

The two engines are independent. `sparse_accel_top` places them side by side;
they share only the clock and the asynchronous active-low reset. External
memory (DRAM for NullHop, DDR3 for DeltaRNN) is not part of the RTL. Its
traffic appears as valid/ready streams on the top's ports.

All SystemVerilog is IEEE 1800-2017 and synthesizable. Parameter defaults are
the full-size configuration:

| | Default | Origin |
|---|---|---|
| NullHop MAC units | 128, in 8 clusters of 16 | published architecture |
| Kernel bank per MAC | 2304 × 16 bit (4.5 KB) | published architecture |
| Pixel memory | 262144 × 16 bit (512 KB) | published architecture |
| Data width | 16 bit | published architecture |
| Accumulator | 32 bit | own choice |
| Widest image row | 256 pixels | own choice |
| Largest kernel | 7 × 7, stride 1, same padding | own choice |
| DeltaRNN hidden units | 768 | published network (768-unit DeltaGRU) |
| DeltaRNN inputs | 768 | own choice |
| DeltaRNN multipliers | 128 | own choice |
| RNN number format | Q8.8 data, Q16.16 pre-activations | own choice |

## Part 1: NullHop

### The compressed feature-map format

A feature map of W × H pixels and C channels is sent pixel by pixel in
row-major order. Each pixel is split into groups of 16 channels. Each group is
one 16-bit **sparsity-map (SM) word** followed by the non-zero values of that
group:

* Bit *i* of the SM word is 1 when channel 16·g + *i* is non-zero.
* The non-zero values follow in ascending channel order.

A pixel whose channels are all zero therefore costs ⌈C/16⌉ words. A dense
pixel costs C + ⌈C/16⌉ words. The output of a layer uses the same format, so
it can be streamed straight back in as the next layer's input.

Before the pixels, the same input bus carries the layer's kernels. For each
output map m = 0 … out_ch−1 it sends one bias word and then C·K·K weights in
(channel, ky, kx) order. Weight (c, ky, kx) of map m is stored at address
(c·K + ky)·K + kx of MAC m's kernel bank.

The layer is described by `nh_cfg_t` (in `nh_pkg`):

* width, height
* in_ch, out_ch (1 to 128)
* ksize (1 to 7, odd)
* pool: 2×2 max pooling on or off
* relu: on or off
* shift: the output is sat16(acc >>> shift). The bias is scaled to match,
  bias <<< shift.

### Data path

```
 in bus ─► nh_idp ──────────────────────────► nh_ccm ───────────────────► nh_pre ─► out bus
          input tracker                       pixel allocator             requantise
          IDP manager ─► pixel memory ring ─► 8 × nh_controller           2×2 max pool
          (kernel words go straight to the    16 × (kernel bank + MAC)    ReLU
           kernel banks)                                                  SM + NZ encoder
```

* **`nh_input_tracker`** parses the bus. It tells kernel words from SM words
  and non-zero values, counts the set bits of each SM word, and marks the
  first word of every pixel and the last word of every row. It also supplies
  the row and column of each word.
* **`nh_idp_manager`** writes pixel words into the pixel memory. The memory
  is used as a ring.
  * A pointer table stores, for each pixel of the last PT_ROWS (8) input rows,
    the address of its first word. The compute core can therefore jump to any
    pixel of a recent row.
  * The manager counts complete rows (`rows_done`).
  * It drops `in_ready` when a write would overwrite a row the compute core
    has not released (`release_row`). The bus then stalls.
* **`nh_pixel_allocator`** walks the output pixels. For each output pixel it
  visits the K × K input window in (ky, kx) order:
  * It waits until the rows it needs are buffered.
  * It looks up the pixel's start address.
  * It reads the SM words and the non-zero values.
  * It broadcasts each non-zero value as a beat {value, kernel address,
    last}. The kernel address is (c·K + ky)·K + kx.

  Window positions outside the image (padding) produce nothing. Zero values
  are never read or broadcast. When the last row that any later window can
  touch has been passed, that row is released to the manager.
* **`nh_controller`** (8 of them) each serve 16 MACs. A controller decodes
  kernel writes for its maps and drives its banks' read port from the beat's
  kernel address. It delays the beat by one cycle to match the bank read.
  A controller whose maps are all ≥ out_ch is disabled, so a pass can use 16,
  32 … 128 maps.
* **`nh_mac`** multiplies the value by its weight and accumulates. On the
  last beat of an output pixel it presents the sum and reloads
  bias <<< shift.
* **`nh_pre`** takes the 128 sums of one output pixel and works in order:
  1. It saturates each sum to 16 bits after the shift.
  2. With pooling on, it keeps a running maximum over the four pixels of a
     2×2 block.
  3. It applies ReLU.
  4. It serialises the result as SM words plus non-zero values.

  When the pooling unit cannot accept another result vector, it holds off
  the compute core (`pre_ready`).

### The pixel ring and window order

The compute core reads every input pixel up to K² times, once per window
position. The input bus, though, delivers each word only once per pass. That
is why pixels are buffered on chip. With 128 maps per pass, a layer with ≤ 128
output maps reads its input exactly once. For more maps, the host repeats the
layer with the next group of kernels.

The ring lets a layer of any height pass through a buffer that needs to hold
only about K + 1 compressed rows. Two limits follow:

* One compressed row must fit in `WORDS`.
* Rows older than PT_ROWS cannot be looked up.

With pooling on, output pixels are visited in 2×2 block order rather than
row-major. A pooled pixel is then complete after four consecutive results, and
only one running maximum per map is needed. Non-pooled layers use row-major
order. Pooling on the fly means only a quarter of the conv outputs are ever
written out.

### Timing

Compute for one output pixel takes 2 cycles plus, for each window position,
3 cycles plus one per word read, or 1 cycle if the position is outside the
image. The words read are the SM words and the non-zero values. A zero pixel
therefore costs only its SM words, and an all-zero group costs one cycle.
`tb_nh_pixel_allocator` checks this count cycle-exactly.

Kernel loading takes one bus word per cycle. MAC results appear one cycle
after the last beat. The output encoder emits one word per cycle when
`out_ready` is high.

The counters `nz_beats`, `sm_words`, `pix_out` and `words_out` report the work
actually done. Comparing `nz_beats` with W·H·C·K² gives the fraction of
multiplies that were skipped.

## Part 2: DeltaRNN

### Delta encoding

For a step t, x(t) arrives on the `x` stream (n_x elements). h(t−1) is read
from the activation pipeline's own h memory once the previous step has
finished. `drnn_input_encoding` goes through x(t) and then h(t−1), one element
per cycle:

* It keeps a reference, the last value passed on, for every element.
* If |v − ref| > θ, it emits an event {delta = v − ref, index} and sets
  ref = v.
* Otherwise it emits nothing and keeps the reference.

Index j stands for x_j and index NX + j for h_j. The event values form the
non-zero value list (NZVL) and the indices the non-zero index list (NZ1L). An
end-of-step event closes the step. `clear` resets all references to zero,
which starts a sequence.

### Matrix-vector product over deltas

The GRU needs four pre-activation vectors:

* r: reset gate, from x and h
* u: update gate, from x and h
* cx: candidate, input part
* ch: candidate, hidden part

The last two are kept apart because the reset gate multiplies only the hidden
part. `drnn_mxv_unit` stores these four vectors, M(t), in Q16.16. They persist
across steps. Each step adds only the contributions of the deltas, which gives
the same result as a full product of the current inputs.

Each weight column has 3·NH rows: r, u and then the candidate block. The
column is split into NCH = 3·NH/NPE chunks of NPE weights, each one BRAM word
wide (NPE × 16 bit). Lane l of word (col·NCH + k) holds row k·NPE + l of
column col.

For each event, `drnn_mxv_ctrl` reads the NCH chunks of column `index`, one per
cycle. It passes the delta and the target gate alongside, with the chunk
delay. Chunks in the candidate block go to cx for x columns and to ch for h
columns. The MxV unit multiplies the delta by the NPE weights and adds the
products to the M entries. A step with s events costs s·NCH cycles. Columns of
elements that did not change are never read. That saving in weight traffic is
the point of the design.

### Activation pipeline

After the end-of-step event the controller starts `drnn_act_pipeline` and
waits for it to finish. The pipeline takes 4 cycles per hidden unit and uses
multiplier 0 of the MxV unit, which is idle by then. For each unit j it
computes:

```
r = hsig(M_r[j])        u = hsig(M_u[j])
c = htanh(M_cx[j] + r·M_ch[j])
h(t)[j] = c + u·(h(t−1)[j] − c)
```

* hsig(x) = clamp(x/4 + ½, 0, 1)
* htanh(x) = clamp(x, −1, 1)
* M_cx and M_ch are truncated and saturated from Q16.16 to Q8.8 before use.
  Products are Q16.16 and are shifted back by 8 bits.

The new h is written to the h memory and sent out on the `h` stream. The
output shares the multiplier with the MxV unit.

### Loading a network

Weights are written through `w_wr_*` in the BRAM layout above. Biases are
written through `m_wr_*` as the initial contents of M (Q16.16). Because M
accumulates, the biases must be reloaded, and `clear` pulsed, at the start of
each sequence.

## Where this design departs from the published one

* **NullHop:**
  * Several details are this design's own choices, not published ones: the
    SM group size (16 channels), the word order, the kernel preamble on the
    data bus, the pixel ring with pointer table, the window visiting order,
    and stride 1 with same padding only.
  * Layer sequencing, multi-pass scheduling for more than 128 maps, and the
    DMA to DRAM are left to whatever drives the streams.
* **DeltaRNN:**
  * One GRU layer is built, as in the BRAM-based accelerator described here.
    The two-layer, 768-unit network usually quoted belongs to a later
    DRAM-based version. Running it on this RTL would need a second weight set
    and sequencing between the layers, which is not provided.
  * The number formats, the hard-sigmoid and hard-tanh activations, the BRAM
    layout, the 128 multipliers and the 4-cycle activation loop are this
    design's own.
* **Neither engine** has a host interface, clock generation or a memory
  controller.

## Fit for typical workloads

* **VGG-16 convolution layers (224×224, 3×3 kernels):**
  * They fit in width (224 ≤ 256).
  * A compressed row is at most 224·68 words, about 15 k, against a 262 k ring.
  * Layers with more than 256 input channels need 512·9 = 4608 kernel words
    per map, against 2304 in a bank. They must be split by input channel
    outside the accelerator.
* **One 768-unit DeltaGRU layer with 768 inputs** fits at the default size:
  1536 columns × 18 chunks of 2048 bit.

## Verification

Every module has a self-checking testbench in `tb/` that compares the module
against an independent reference written in plain SystemVerilog.

* **NullHop:**
  * `nh_tb_pkg` holds the compression, a direct convolution and the pooling
    reference.
  * The tests cover random layers with random sparsity.
  * They apply random valid/ready gaps on both buses.
  * They use a small pixel ring to force stalls and row release.
* **DeltaRNN:**
  * `drnn_tb_pkg` holds a bit-exact reference of the delta GRU step.
* **Whole design:**
  * `tb_sparse_accel_top` runs both engines at reduced sizes. It counts and
    requires each mechanism: skipped zero MACs, pooling, ReLU, input-bus
    stalls, output back-pressure, several MAC clusters, deltas sent and
    suppressed, and multiplier reuse.
  * `tb_sparse_full` runs the same at the full default parameters: two CNN
    layers, the first with 128 output maps and pooling, and three GRU steps.
* **Workload sizes:** `tb_workloads` runs at the default parameters.
  * CNN: row slices of VGG-16 layers at their real widths and channel counts
    (224×3→64, 224×64→64 with pooling, 56×128→128).
  * CNN: a whole 14×14×256→128 layer with pooling. It fills every kernel
    bank exactly.
  * RNN: three steps of a 768-unit GRU layer with all 768 inputs.
* **Fault copies:** for every module, a copy with one deliberate fault was run
  against its testbench, and each was caught.

To simulate one test with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/nh_pkg.sv rtl/drnn_pkg.sv tb/nh_tb_pkg.sv tb/drnn_tb_pkg.sv \
  tb/tb_nullhop_top.sv --top tb_nullhop_top -o sim
./obj_dir/sim
```

Each test ends by printing `TB_RESULT checks=N failures=M`. Other modules are
found in `rtl/` through `-Irtl`.

## Files

| File | Contents |
|---|---|
| `rtl/nh_pkg.sv`, `rtl/drnn_pkg.sv` | constants, types, layer config |
| `rtl/nullhop_top.sv` | NullHop: `nh_idp`, `nh_ccm`, `nh_pre` |
| `rtl/nh_idp.sv` | `nh_input_tracker`, `nh_idp_manager`, `nh_pixel_mem` |
| `rtl/nh_ccm.sv` | `nh_pixel_allocator`, `nh_controller`, `nh_kernel_bank`, `nh_mac` |
| `rtl/deltarnn_top.sv` | `drnn_input_encoding`, `drnn_mxv_ctrl`, `drnn_weight_bram`, `drnn_mxv_unit`, `drnn_act_pipeline` |
| `rtl/sparse_accel_top.sv` | both engines side by side |
| `tb/tb_<module>.sv` | test of each module |
| `tb/tb_sparse_full.sv` | full-size end-to-end test |
| `tb/tb_workloads.sv` | workload-sized end-to-end test |
