# PREBA DPU: an input-preprocessing accelerator for GPU inference servers

A GPU that is split into many small slices, such as seven 1g.5gb instances of an
A100 under Multi-Instance GPU, runs many inference servers at once. Each server
needs its inputs prepared before the model can run:

- Images are JPEG-decoded, resized, cropped and normalised.
- Speech is resampled, turned into a Mel spectrogram and normalised.

On the host CPU this preparation becomes the bottleneck: the GPU slices wait
for the processor cores. The design here moves the preparation onto an FPGA
card attached over PCIe, the *data preprocessing unit* (DPU). The host copies
raw inputs into the card's memory, sends one command per input, and reads
model-ready tensors back.

The design follows the PREBA architecture. It builds the DPU from many small
**computing units (CUs)**. Each CU handles one input at a time with as little
delay as possible. Throughput comes from running many CUs side by side
(request-level parallelism), not from making one CU wide. Inside a CU the
stages pass data to each other through streams (valid/ready FIFOs). Only the
CU's first and last stages touch memory.

Audio is the interesting case. Normalisation needs the mean and variance of
the *whole* spectrogram before it can emit its first value. A CU that ran
resample, Mel and normalise in series would therefore sit half idle. The audio
path is split into two CU types instead:

- a Resample + Mel CU, which streams;
- a Normalize CU, which makes three passes over memory.

The host hands a finished spectrogram to a Normalize CU. Meanwhile the Mel CU
already works on the next utterance.

This repository gives synthesizable SystemVerilog for everything from the
command queues inward. Three parts are left outside as ports:

- the JPEG decoder (a vendor library block in the original design);
- the card DRAM;
- the PCIe shell.

## Block diagram

```
 host (via PCIe shell)                 card DRAM (global memory)
   | cmd / cpl                               ^ one 32-bit word port
   v                                         |
 cmd_dispatcher ---- start/args ----+   mem_arbiter (round robin, N = all CUs)
   3 command queues (IMG/MEL/NORM)  |        ^    ^     ^    ^     ^
   completion queue                 |        |    |     |    |     |
                                    +--> img_cu x3   audio_mel_cu x3   audio_norm_cu x2
                                          |  ^
                         dec_* ports  <---+  |  (external JPEG decoder per image CU)

 img_cu:        mem_reader -> [JPEG decoder] -> img_resize -> img_crop -> img_normalize -> writer
 audio_mel_cu:  mem_reader -> audio_resample -> mel_spectrogram -> writer
 audio_norm_cu: pass 1 sum -> pass 2 squared deviations -> pass 3 (x-mean)/std -> writer
```

Each CU merges its reader and writer onto one memory port with a 2-input
`mem_arbiter`. The top merges all CU ports with an 8-input one.

## Driving the DPU from the host

A command (`cmd_t` in `preba_pkg`) has these fields: `kind`, an 8-bit `tag`
returned with the completion, `src`, `len`, `dst` and two arguments. All
addresses are 32-bit word addresses in global memory.

| kind | src / len | dst receives | arg0 | arg1 | completion `result` |
|---|---|---|---|---|---|
| `CU_IMG` | JPEG file, `len` words | `3*crop*crop` words, CHW, signed Q3.12 | short side (256) | crop (224) | words written |
| `CU_MEL` | PCM, one signed 16-bit sample per word (low half), `len` samples | `frames*80` words, frame-major, unsigned | input rate, Hz | output rate (16000) | words written |
| `CU_NORM` | `len` unsigned words (a Mel CU's output) | `len` words, signed Q5.10 | — | — | `len` |

How requests are scheduled:

- The dispatcher keeps one FIFO per CU type, so a burst of images never delays
  audio.
- The head of each FIFO goes to the lowest-numbered idle CU of its type in the
  cycle it becomes free.
- `blocked[k]` shows that type-k requests are waiting because every CU of that
  type is busy.
- Completions are queued and returned in the order the CUs finish, not in
  command order. The tag identifies the request.

For audio, the host issues `CU_NORM` on the `CU_MEL` output after the `CU_MEL`
completion arrives. The choice of *which* finished spectrogram to normalise
next is host software.

The host-side dynamic batching system of PREBA is not part of this RTL:

- It sorts requests by audio length into buckets.
- It sizes batches per bucket from offline profiling of the GPU slice.
- It bounds how long a batch may wait.

## Image CU

**Decoder interface.**

1. The CU streams the JPEG words out of memory on `dec_in_*`, with
   `dec_in_last` on the final word.
2. The decoder returns the image size on `dec_hdr_*`.
3. The decoder then returns RGB pixels in raster order on `dec_pix_*`.

Any decoder with this interface fits. The test benches use a stand-in format:

- word 0 = `{h, w}`;
- then one `{8'b0, r, g, b}` word per pixel.

**Resize (`img_resize`).** This is the hardest part of the image path. The
output size keeps the aspect ratio:

- the shorter side becomes `short_side`;
- the longer side becomes `floor(long*short_side/short)`.

The unit computes the size and two Q16 source steps with one sequential
divider: three divisions, 32 cycles each.

Sampling is bilinear with half-pixel centres:

```
sx = (i + 0.5) * in_w / out_w - 0.5      (clamped to >= 0)
y  = lerp(lerp(p[y0][x0], p[y0][x0+1], fx), lerp(p[y1][x0], p[y1][x0+1], fx), fy)
```

The weights `fx` and `fy` are rounded to 8 bits. The right and bottom edges
repeat the last pixel.

The image is never stored whole. Two line buffers of `MAX_W` pixels hold the
two most recent source rows, indexed by row parity. The unit alternates
between two phases:

1. Accept input rows until the lower source row `y1` of the next output row has
   arrived.
2. Emit that output row at one pixel per cycle.

Rows that no output uses are simply overwritten, which is the down-scaling
case. When up-scaling, rows stay in place and feed several output rows. Input
left over at the end is drained.

**Crop (`img_crop`)** keeps the centred `crop x crop` window:

- The window starts at `x0 = (w - crop)/2` and `y0 = (h - crop)/2`, using floor
  division.
- It passes inside pixels through and drops the others.
- It has no storage.

**Normalize (`img_normalize`)** computes `(x/255 - mean_c)/std_c` with the
ImageNet statistics (mean 0.485/0.456/0.406, std 0.229/0.224/0.225). For each
channel this is one multiply and one subtract:

```
y_Q3.12 = (x * A_c - B_c + 128) >>> 8,   A_c = 2^20/(255*std_c),  B_c = 2^20*mean_c/std_c
```

The CU's writer puts each pixel's three values into three planes, so the
tensor comes out in CHW order. Each value is sign-extended to a 32-bit word.

## Audio Mel CU

**Resample (`audio_resample`)** converts `in_rate` to `out_rate` by linear
interpolation:

- It uses the Q16 step `in_rate/out_rate`.
- Output n lies at source position `n*step`.
- An output exists for every position below the input length.

With equal rates the unit passes samples through unchanged. It holds only two
input samples. It has no anti-alias filter, which matters when downsampling
rich material. This is the simplest circuit that performs the function.

**Mel spectrogram (`mel_spectrogram`).** It works in four steps: framing, Hann
window, FFT and Mel filter bank.

| Setting | Default |
|---|---|
| `WIN` (frame length) | 400 samples (25 ms at 16 kHz) |
| `HOP` (frame step) | 160 samples (10 ms) |
| `NFFT` (FFT size) | 512 |
| `NMELS` (Mel bands) | 80 |

Only complete frames are produced: `frames = (n - 400)/160 + 1` for `n` ≥ 400
samples, and none below that. The unit processes each frame as follows:

1. Samples collect in a 512-entry ring buffer.
2. When a frame's last sample arrives, the 400 samples are multiplied by a
   periodic Hann window, `w[n] = 0.5 - 0.5 cos(2πn/400)` in Q15. They are
   written in bit-reversed order into the FFT buffer and zero-padded to 512
   points.
3. An in-place radix-2 decimation-in-time FFT runs with one butterfly per clock
   (9 stages × 256 butterflies). It uses 32-bit data, Q15 twiddles
   `cos/sin(2πk/512)·32767` and no scaling between stages. The 16-bit input
   times a window of gain below 1, grown by at most 2^9, stays inside 32 bits.
4. For each bin k = 0..256 the power `(re² + im²)·2^-16` goes into the two
   triangular filters that overlap the bin. A per-bin table gives the index q of
   the Mel point at or below the bin frequency and the rising weight w in Q16.
   Filter q receives `p·w` and filter q−1 receives `p·(1−w)`. The 82 Mel points
   are evenly spaced on the Slaney Mel scale from 0 to 8 kHz. Filters peak at
   1.0 and are not area-normalised.
5. The 80 accumulators are scaled by 2^-16, saturated to 32 bits and streamed
   out. No logarithm is applied.

Each frame takes 512 + 2304 + 257 + 80 = **3153 cycles** after its last
sample. A frame arrives every 160 samples, so one CU keeps up with real time at
any clock above 0.32 MHz. A 2.5 s utterance (248 frames) takes about 0.78 M
cycles.

The three tables are `.hex` files read with `$readmemh` at elaboration:
`hann400.hex`, `twiddle512.hex` and `melbank512.hex`. They are built from the
formulas above for the default sizes. Change `WIN`, `NFFT` or `NMELS` only
together with new tables.

## Audio Normalize CU

`audio_norm_cu` normalises a whole spectrogram to zero mean and unit variance.
It makes three passes through memory:

1. `sum` of all n values, then `mean_q8 = floor(2^8·sum/n)`.
2. Sum of `d² = (2^8·x − mean_q8)²`, then `var_q16 = Σd²/n`,
   `std_q8 = isqrt(var_q16)` and `recip = floor(2^74/std_q8)`.
3. `y = (d·recip) >>> 64`, which is `2^10·(x − mean)/std`. The result is
   saturated to signed 16 bits (Q5.10) and written to `dst`.

The divisions use one sequential divider and the square root a sequential
integer square root. Accumulators are 112 bits wide. This is enough for
32-bit inputs and up to 2^32 values per request. A constant input
(std = 0) produces zeros.

Because this CU holds the only whole-input dependency, the Mel CUs never wait
for it.

## Memory interconnect

Every CU master uses the same word protocol as the card memory:

- a valid/ready request `{we, addr, wdata}`;
- for each read, one `rsp_valid` pulse with data, always in request order.

The protocol lets a reader have several reads in flight. `mem_reader` keeps up
to 16 outstanding reads against a 16-entry FIFO, so one CU streams at one word
per cycle despite memory latency.

`mem_arbiter` grants one requester per cycle in round-robin order. It records
the winner of each read in an order FIFO and sends each response to the
requester at the head of that FIFO. Reads stop being granted while that FIFO is
full.

All eight CUs share this single 32-bit port. In a real card the port would be
an AXI port of the HBM controller, or the CUs would be spread over several
pseudo-channels. With one port, an image request costs about 1 read per
compressed word plus 3 writes per output pixel of port bandwidth.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `preba_dpu` | `NUM_IMG_CU`, `NUM_MEL_CU`, `NUM_NORM_CU` | 3, 3, 2 | CUs of each type (each ≥ 1) |
| `preba_dpu`, `img_cu`, `img_resize` | `MAX_IMG_W` / `MAX_W` | 4096 | widest image the line buffers hold |
| `cmd_dispatcher` | `QDEPTH` | 8 | entries per command queue |
| `mel_spectrogram`, `audio_mel_cu` | `WIN`, `HOP`, `NFFT`, `NMELS` | 400, 160, 512, 80 | framing, FFT size, bands |

## What follows the original design and what does not

These parts follow PREBA:

- the CU organisation;
- the three image stages after decode, in order (resize, crop, normalise, with
  a 224×224×3 output);
- the audio stages resample → framing → Hann window → FFT → Mel filter;
- normalisation as mean, then variance from that mean, then normalise every
  value;
- the split of audio into a Resample+Mel CU type and a Normalize CU type;
- host control through command queues;
- many CUs running in parallel, all reading and writing the card's global
  memory.

These are choices of this implementation. The original gives no numbers for
them, or builds them from vendor library blocks whose insides it does not
describe:

- the number of CUs (the original drawings show several stacked CUs of each
  type, not how many);
- all word formats and fixed-point scalings;
- the command/completion format and the lowest-free-CU dispatch policy;
- bilinear resize to a 256 short side with half-pixel centres, and the
  centre-crop position;
- the ImageNet normalisation constants;
- linear-interpolation resampling;
- 400/160/512/80 framing with a Slaney Mel filter bank and no logarithm;
- normalising over the whole spectrogram rather than per band;
- the single shared memory port with round-robin arbitration.

**Departures.** The original builds the image DPU and the audio DPU as
separate FPGA images. Here one top holds both CU families behind one command
port. A single-purpose build can reduce the other family to one CU of each type; it cannot remove it.
The JPEG decoder is not included.

The compute structures are the simplest ones that perform each function:

- one FFT butterfly per clock;
- one output pixel per clock;
- sequential dividers.

The original uses vendor DSP and vision library kernels, which unroll for
lower latency per input. Throughput per CU is therefore lower than the
original's. The architecture-level mechanism, many latency-bound CUs fed by
command queues, is the same.

## Verification

Every block has a self-checking test bench in `tb/`. Each compares the block's
output with a model computed independently in the test bench, using floating
point where the block uses fixed point:

| Test bench | What it checks |
|---|---|
| `tb_img_resize` | every output pixel against float bilinear sampling (±2 LSB), for down-scaling, up-scaling and a 1-pixel-wide image |
| `tb_img_crop`, `tb_img_normalize` | exact window, including a crop larger than the image; values within 1 LSB of the float formula |
| `tb_audio_resample` | exact pass-through at equal rates; 44.1 → 16 kHz and 8 → 16 kHz against float linear interpolation |
| `tb_mel_spectrogram` | every band against a float DFT + Mel model (2 % + 8), and the 3153-cycle frame latency |
| `tb_audio_norm_cu` | every value against float mean/std (±2 LSB) |
| `tb_mem_arbiter`, `tb_cmd_dispatcher` | response routing and order, no starvation; one start per free CU, every completion once, blocking when all CUs of a type are busy |
| `tb_img_cu`, `tb_audio_mel_cu` | whole CUs against the card memory model |

Each test bench has also been run against a copy of its block with one
deliberate bug, and each reported failures.

`tb_preba_dpu` runs the whole DPU at its default configuration:

- Six images and six utterances are queued at once. Images are scaled-down
  sizes, landscape and portrait, one needing up-scaling. Utterances are sent at
  16, 32 and 8 kHz.
- Every Mel completion triggers a Normalize command from the test bench's host
  model.
- The memory model inserts random stalls.

Besides checking every output value, the test counts these mechanisms and fails
if any never occurs:

- a request waiting for a CU;
- two image CUs busy at once;
- two Mel CUs busy at once;
- a Normalize CU working while a Mel CU works;
- memory back-pressure;
- resampling;
- up-scaling and down-scaling.

`tb_preba_dpu_full` runs one full-size operation with every parameter at its
default: a 500×375 image resized to 256 and cropped to 224×224×3, and a 2.5 s,
16 kHz utterance. It finishes in about 0.97 M cycles, a few seconds of
simulation.

`tb_preba_dpu_librispeech` runs realistic input sizes on the default DPU:

- utterances of 5, 15 and 25 s, sent at 16, 32 and 8 kHz and processed by
  three Mel CUs at once, then normalised (up to 2498 frames × 80 bands);
- two ImageNet-sized images, one landscape and one portrait.

All of it finishes in 9.6 M cycles, about 20 s of simulation. The 25 s
utterance alone needs 2498 × 3153 = 7.9 M cycles of Mel work.

All three top-level tests share their host model and reference checks through
`tb_dpu_harness`. Behavioural models in `tb/`:

- `tb_global_mem`: card memory with latency and random stalls;
- `tb_jpeg_decoder_model`: the stand-in decoder.

To simulate with Verilator 5, run from the repository root, because the tables
are read by relative paths:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/preba_pkg.sv tb/tb_preba_dpu.sv --top-module tb_preba_dpu
./obj_dir/Vtb_preba_dpu
```

Every test bench ends by printing `TB_RESULT checks=<n> failures=<m>`.

**Trust and limits.**

- The image and audio arithmetic is checked value by value against floating
  point, at the tolerances above.
- The scheduling and interconnect are checked for correct routing under random
  stalls, not for performance.
- Not built or not checked:
  - the JPEG decoder;
  - the anti-alias filter a production resampler would have;
  - the logarithm most speech front ends apply after the Mel filters;
  - timing closure at any particular FPGA clock.
