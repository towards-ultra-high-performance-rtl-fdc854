# Block-circulant DNN inference on one reconfigurable FFT pipeline

A fully connected layer `y = relu(W x + b)` with an `m x n` weight matrix costs `m*n`
multiplications. If `W` is constrained during training to be made of `k x k` *circulant* blocks,
each block `C_ij` is defined by a single length-`k` vector `w_ij`. Multiplying a circulant
block by a vector is a circular convolution, and a circular convolution is a product in the
frequency domain. So the layer becomes

    a_i = IFFT( sum_j  FFT(w_ij) o FFT(x_j) ),      y_i = relu(a_i + b_i)

where `x_j` is the j-th length-`k` slice of the input and `o` is element-wise multiplication.
The storage falls from `k^2` to `k` per block, and the work from `O(k^2)` to `O(k log k)`.
Convolutional layers are lowered to a matrix product `Y = X F` (each row of `X` is one
receptive field), and each row is then processed exactly like an FC input vector.

This RTL implements an inference engine for such networks. The whole engine runs on one
fully pipelined 128-point FFT, and the whole model stays in on-chip memory. Three observations
shape the design:

* **FFT reuse.** `FFT(x_j)` does not depend on `i`, so it is computed once per input slice and
  reused for every output block. The spectra `FFT(w_ij)` are computed offline and stored. The
  sum over `j` is taken in the frequency domain, so each output block needs only one IFFT. A
  layer with `p x q` blocks therefore costs `q` FFTs, `p*q` spectrum products and `p` IFFTs.
  For example, a 1024 x 1024 layer with `k = 128` costs 8 FFTs, 64 products and 8 IFFTs.
* **One structure for everything.** An IFFT is an FFT of the conjugated input followed by a
  conjugation, so the same butterfly pipeline serves phases 1 and 3. A radix-2 FFT of size 128
  contains 128/k independent k-point FFTs in its first `log2 k` stages, so one structure also
  serves every block size up to 128.
* **Batch-interleaved phases.** The pipeline is deep (11 to 13 cycles from memory read to
  memory write). Running one picture through a layer, and then through the next layer, would
  stall on every data dependency. Instead, each phase runs for the whole batch of pictures,
  one operation per clock, before the next phase starts. The pipeline is drained only
  between phases.

## Block diagram

```
                 host load / readback, layer table
                              |
          +-------------------+------------------------------------+
          |                bc_ctrl  (layer > phase > picture > row > block > word)
          |                   | one operation per clock
          v                   v
   feature memory --> [phase 1: fft_engine FFT] --> spectrum buffer
   (in place)                                          |
        ^          weight-spectrum memory -------+     v
        |                                        +-> [phase 2: emac_unit] --> accumulation buffer
        |                                                                        |
        +------ [phase 3: fft_engine IFFT, + bias, ReLU] <-- bias memory ---------+
```

| Module | Role |
|---|---|
| `bc_pkg` | Widths, sample and complex types, twiddle functions, the layer record, saturation |
| `fft_stage` | One column of radix-2 butterflies with its pipeline register |
| `fft_core` | Seven `fft_stage`s: N/k parallel k-point FFTs per clock, latency 7 |
| `fft_engine` | FFT/IFFT wrapper: real-input packing, half-spectrum output, IFFT pre-processing, bias and ReLU |
| `emac_unit` | Phase 2: spectrum products, sum over the blocks of a word, accumulation over input words |
| `block_ram` | One-write, one-synchronous-read memory, 1536-bit words |
| `bc_ctrl` | The schedule: the loop nest, addresses, drain between phases |
| `bc_accel` | Top level: memories, pipeline alignment, host port |

## Memory words and the half-spectrum layout

Every memory is organised in words of `N = 128` twelve-bit values (1536 bits). A word always
holds 128 time-domain values, or the half spectra of 128 time-domain values. With block size
`k = 2^log2k`, a word carries `G = 128/k` blocks side by side, with block `g` in values
`[g*k, g*k+k)`. The layout of a word is therefore the same for every `k`.

The spectrum of a real vector is conjugate-symmetric. Of its `k` complex bins, only bins
`0 .. k/2` are independent, and bins `0` and `k/2` are purely real. That is exactly `k` real
numbers, so a block's spectrum fits in the same `k` values its samples occupied:

| values of the block | contents |
|---|---|
| 0, 1 | Re bin 0, Re bin k/2 |
| 2m, 2m+1 (1 <= m < k/2) | Re bin m, Im bin m |

Both the spectrum buffer and the weight-spectrum memory use this layout. The element-wise
product in phase 2 is a complex multiplication for lanes `m >= 1`. For lane 0 it is two real
multiplications, since bins 0 and k/2 are multiplied separately. Storing half spectra halves
both the weight memory and the multipliers.

Weight spectra must be written in this layout by the offline tool. For block `(i, j)` of a
layer, the word at `wbase + i*in_words + w` holds, in lane group `g`, the half spectrum of
`w_{i, w*G+g}`. Here `in_words = ceil(q/G)`.

## The three phases

For a layer with `in_words` input words and `p = out_blocks` output blocks:

1. **FFT** (`in_words` operations per row). A feature word is read and transformed
   (`fft_engine` in forward mode). The half spectra are written to the same address in the
   spectrum buffer.
2. **Multiply-accumulate** (`p * in_words` operations per row). For output block `i` and input
   word `w`, `emac_unit` multiplies the spectrum word by the weight word lane by lane. It then
   adds the `G` block products of the word together with a fold tree: these are the `G` input
   blocks `j` that share the word. The result is accumulated into lane group `i mod G` of an
   accumulator word. The first operation of an output word clears the accumulator (`clr`).
   The last one (`last`: last input word and last group, or last block of the layer) emits
   it after a rounding right shift and saturation to 12 bits. The result is written to the
   accumulation buffer.
3. **IFFT** (`ceil(p/G)` operations per row). An accumulation word is read. The pre-processing
   stage rebuilds each block's full spectrum from its half and conjugates it. The core
   transforms it, and the real part is taken. The bias word is added, ReLU is applied if the
   layer asks for it, and the result is written to the feature memory at the start of the
   picture's area. This overwrites the layer's inputs, so every layer works in place.

The controller's loop nest is `layer > phase > picture > row > block > word`. Each phase runs
for all pictures of the batch. Between phases the controller idles for `DRAIN = 14` cycles so
that the pipeline empties. There are two reasons for this:

* phase 2 reads what phase 1 wrote;
* the engine may only change direction when it is empty (an assertion checks this).

A layer of `R` rows with `B` pictures thus takes
`B*R*(in_words + p*in_words + ceil(p/G)) + 3*DRAIN + 1` cycles. The end-to-end testbench
checks this figure.

## Pipeline timing

The controller issues one operation per clock, through a registered output. Counting from the
cycle `t` in which an operation appears on `op_*`:

| cycle | FFT | MAC | IFFT |
|---|---|---|---|
| t | address register (memory stage 1) | same | same |
| t+1 | read data (stage 2); engine input | read data; product stage | read data; pre-processing register |
| t+1 .. t+8 | 7 butterfly stages | products, fold/accumulate | pre-processing + 7 butterfly stages |
| | result at t+8 | result at t+3 (only on `last`) | bias read at t+8, bias/ReLU stage, result at t+10 |
| +1 | result register (stage 3) | same | same |
| +2 | memory write (stage 4) | same | same |

An FFT therefore takes 7 + 4 cycles from issue to memory, and an IFFT 9 + 4. `bc_accel`
carries each operation's write address and kind in a delay line and taps it at the right
depth for the operation's kind. Within one phase all operations have the same kind, so results
never collide. An assertion checks that a MAC result and an engine result never arrive
together.

Inside `fft_core`, stage `s` (1..7) pairs lanes `2^(s-1)` apart and multiplies by the twiddle
`W_{2^s}^m`. A stage with `s > log2k` passes its data through. The first `log2k` stages
therefore compute `128/k` independent k-point FFTs, each on its own group of `k` lanes. The
input of each group must be in bit-reversed order. `fft_engine` does this with fixed wiring
per block size, a multiplexer over the 7 possible sizes.

## Number formats and scaling

* **Samples.** All data in memory, and every lane of the FFT pipeline, are 12-bit two's
  complement integers. The meaning of the binary point is left to the network's quantisation.
* **Twiddles.** Twiddles are 12-bit values with 10 fractional bits, rounded to nearest. They
  are computed at elaboration time with `$cos`/`$sin`, so no table file is needed.
* **Butterflies.** Butterflies compute at full width. Each stage may halve its outputs with
  round-half-up, under control of one bit of a 7-bit scale mask. The result is then saturated
  to 12 bits.
* **Phase 2.** Phase 2 accumulates in 40 bits. It shifts right with rounding by `mac_shift`
  and saturates to 12 bits.
* **Bias.** The bias is added after the IFFT, with saturation.

Where the scale is set:

* Halving all `log2k` active FFT stages makes phase 1 output `FFT(x)/k`.
* The IFFT needs the factor `1/k` itself. Halving all active stages in phase 3 gives
  `IFFT(Y)` exactly.
* All other choices give powers of two that the offline tool must fold into the weight
  spectra or into the `mac_shift` of the layer.

The layer record fixes the split in the fields `fft_scale`, `ifft_scale` and `mac_shift`.

## Layer record (`layer_cfg_t`)

| field | bits | meaning |
|---|---|---|
| `log2k` | 3 | block size `k = 2^log2k`, 2 .. 128 |
| `in_words` | 8 | input words per row, `ceil(q/G)` |
| `out_blocks` | 10 | output blocks `p` |
| `rows` | 8 | 1 for FC; number of lowered rows for a CONV layer |
| `wbase` | 16 | first weight-spectrum word |
| `bbase` | 12 | first bias word |
| `relu` | 1 | apply ReLU in phase 3 |
| `fft_scale`, `ifft_scale` | 7 each | per-stage halving masks |
| `mac_shift` | 5 | phase-2 output shift |

Picture `b` owns words `b*PIC_WORDS .. b*PIC_WORDS+PIC_WORDS-1` of the feature, spectrum and
accumulation memories. Row `r` reads words `r*in_words + w` and writes words
`r*ceil(p/G) + u` of that area.

## Interface of `bc_accel`

All signals are synchronous to `clk`, and `rst_n` is an asynchronous active-low reset. Use
the host port and the layer table only while `busy` is low.

* **`host_we`, `host_sel`, `host_addr`, `host_wdata`.** Write one word of:
  * the feature memory (`host_sel` 0),
  * the weight-spectrum memory (1),
  * the bias memory (2).
* **`host_re`, `host_raddr`.** Read a feature word; the data is on `host_rdata` one cycle later.
* **`cfg_we`, `cfg_addr`, `cfg_wdata`.** Write layer record `cfg_addr`.
* **`start`.** A one-cycle pulse. It runs layers `0 .. n_layers-1` on pictures
  `0 .. batch-1`. `busy` rises in the next cycle, and `done` pulses once when the last
  phase has drained.

Default sizes:

| parameter | default | memory |
|---|---|---|
| `BATCH` | 64 pictures | |
| `PIC_WORDS` | 32 words = 4096 values per picture | feature, spectrum and accumulation memories: 2048 words each (3 x 384 KB) |
| `WDEPTH` | 2048 | weight spectra: 384 KB, i.e. 2048 blocks of k = 128 |
| `BDEPTH` | 256 | bias: 48 KB |
| `MAX_LAYERS` | 16 | |

In total this is about 1.6 MB of on-chip memory.

## Where this design departs from, or adds to, the algorithm

* **Circulant convention.** The hardware computes `IFFT(FFT(w) o FFT(x))`, which is a circular
  convolution. That makes `w_ij` the *first column* of `C_ij`. If a training flow stores the
  first row instead, the offline tool must reverse indices 1..k-1 of `w_ij` before taking its
  FFT.
* **CONV layers.** The accelerator processes CONV layers only in lowered form. The lowering
  (building `X` from the feature maps), pooling and any reshaping between layers belong to the
  software that prepares the data. The `rows` loop then runs each row of `X` as one input
  vector.
* **Multipliers.** Phase 2 has its own multipliers rather than borrowing those of the FFT
  stages. Sharing them is left to the synthesis tool.
* **Drain.** The drain between phases is a fixed wait, not an occupancy count. This costs
  `3*DRAIN` cycles per layer per batch, independent of the batch size.
* **Quantisation.** Bit growth is handled by per-layer scaling, as described above, with
  saturation everywhere. This is one possible choice for a 12-bit datapath.
* **Throughput.** Throughput is one 128-value word operation per clock. A small MLP therefore
  needs several clocks per picture and layer. Very high frame rates quoted for tiny MLPs in
  the literature on this scheme are not reached by this schedule.
* **Capacity.** Large lowered CONV layers, such as a first 3x3 convolution on a 32x32 image,
  exceed both the 255-row field and the 4096-value picture area at the default sizes. They
  would have to be split in software or run with larger parameters.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_fft_core` | Eight back-to-back vectors with mixed block sizes, against a double-precision DFT. Also checks the 7-cycle latency. |
| `tb_fft_engine` | Forward half spectra against a DFT. Inverse transforms from random Hermitian spectra, with bias, ReLU and saturation. Also checks the latencies of 7 and 9 cycles. |
| `tb_emac_unit` | Bit-exact comparison of whole output words for five block sizes, including saturation. Also checks the 2-cycle latency. |
| `tb_block_ram` | Random reads and writes against a model, including read-during-write. |
| `tb_bc_ctrl` | The full operation stream of a two-layer, three-picture run, one operation at a time. It also checks drain gaps and back-to-back issue. |
| `tb_bc_accel` | The top at its default parameters, running a four-layer network (FC and lowered CONV, `k` = 128, 64, 16, 4) on four pictures. Results are compared bit for bit with a model of the arithmetic, and the cycle count with the formula above. It counts, and requires at least once, each of: MAC, IFFT, drains, small-block operations, lane groups > 0, ReLU clamps, saturation, CONV rows, in-place overwrites and batch interleaving. |
| `tb_workload_fc` | A 1024 x 1024 FC layer with `k = 128`, followed by a 1024 -> 128 layer, on eight pictures at the default parameters. It checks that each picture costs exactly 8 FFTs, 64 multiply groups and 8 IFFTs, checks the cycle count, and compares every output value bit for bit with the model. |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_bc_accel \
              -y rtl rtl/bc_pkg.sv tb/tb_bc_accel.sv -o sim
    obj_dir/sim

Replace `tb_bc_accel` with any other testbench name. Each one finishes in seconds.
