# A binarized encoder for soft X-ray temperature profiles

A plasma control system usually gets a decimated copy of each diagnostic
signal. This RTL sends something else. It runs the encoder half of a
variational autoencoder (VAE) inside the acquisition device, on a soft X-ray
(SXR) camera's temperature profile. The controller receives the profile's
latent code: six numbers that describe the profile's shape. The code stays
useful when some lines of sight are missing, because the network was trained
with missing inputs.

To fit a small FPGA, the network is quantized hard. Every weight and every
hidden activation is one bit, and only the input samples have 8 bits. A
multiply then becomes a sign flip or an XNOR, and a neuron becomes a
popcount-like sum compared against a threshold.

The network sizes, the precisions and the folding factor come from the
RFX-mod study "Diagnostic data integration using deep neural networks for
real-time plasma analysis" (Rigoni Garola et al., 2020). That paper built its
encoder with the Xilinx FINN compiler and does not describe the hardware
inside. The microarchitecture here follows the FINN style of
matrix-vector-threshold units, but it is this design's own.

## The network

One frame is one SXR profile of 15 points. Each point is an (impact
parameter, temperature) pair, which gives 30 signed 8-bit samples. The layer
sizes follow the template "8-bit input layer, then S × [32, 32, 16, 16]
binary neurons". This build uses scale S = 30.

| layer | inputs | neurons | input bits | weight bits | output |
|-------|--------|---------|-----------|-------------|--------|
| L1 | 30 | 960 | 8 (signed) | 1 | 1 bit (threshold) |
| L2 | 960 | 960 | 1 | 1 | 1 bit (threshold) |
| L3 | 960 | 480 | 1 | 1 | 1 bit (threshold) |
| L4 | 480 | 480 | 1 | 1 | 1 bit (threshold) |
| L5 | 480 | 6 | 1 | 1 | signed sum (the latent mean μ) |

The six outputs are the mean of the latent distribution, as in a 6-dimensional
VAE. The σ half of the encoder is not built, since only μ is passed on.

## Binary arithmetic

A binary value is stored as one bit: 1 means +1 and 0 means −1. Neuron *n* of
a layer computes

    s_n = Σ_i w_ni · x_i ,   w_ni ∈ {−1, +1}

- In L1, `x_i` is a signed 8-bit sample, so each term is `+x_i` or `−x_i`.
- In L2 to L5, `x_i` is ±1, so a term is +1 when input bit and weight bit are
  equal (XNOR) and −1 otherwise.

L1 to L4 output `a_n = (s_n >= T_n) ? +1 : −1` with one signed integer
threshold `T_n` per neuron. That is where a trained network's bias, batch
normalization and sign activation end up once they are folded together. L5
outputs `s_n` itself, an integer in ±480, sign-extended to 16 bits. The
receiver applies any scaling back to physical units.

## Folding: how one layer runs (`mvtu`)

A layer is not laid out neuron by neuron. Each layer has PE = 8 neuron lanes,
and each lane consumes SIMD = 8 inputs per clock. A layer with MW inputs and
MH neurons therefore takes

    NF = MH / PE          neuron folds
    SF = ceil(MW / SIMD)  synapse folds
    NF × SF               clock cycles per frame

The step order is: for each neuron fold `nf`, for each synapse fold `sf`, every
lane adds SIMD products to its accumulator. After the last `sf`, the PE
results leave as one output word of 8 bits (or 6 sums for L5).

The input vector arrives as SF words on a valid/ready stream. The unit uses the
words straight from the stream during neuron fold 0 and copies them into an
input buffer at the same time. Folds 1 to NF−1 reread that buffer. So a frame
costs exactly NF × SF steps, and the input is read only once. A step stalls
only when fold 0 has no input word, or when the result register is still full
on the last synapse fold.

Each lane has its own weight memory of NF × SF words of SIMD bits, and its own
threshold memory of NF words:

    weight word  (lane p, address nf·SF + sf) = weights of neuron nf·PE + p
                                                for inputs sf·SIMD … sf·SIMD+7
                                                (bit l = input sf·SIMD + l)
    threshold    (lane p, address nf)          = T of neuron nf·PE + p

In L1 the 30 inputs fill 4 words. The last two lanes of the fourth word are
padding and are excluded from the sum. L5 uses PE = 6, so it produces all six
outputs in one neuron fold (6 is not a multiple of 8).

## The pipeline, its rate and its latency (`hdi_encoder`)

    stream in ─► frame FIFO (64 frames) ─► NaN mask ─► L1 ─► Q1 ─► L2 ─► Q2
               ─► L3 ─► Q3 ─► L4 ─► Q4 ─► L5 ─► code FIFO (64 codes) ─► stream out

All connections are valid/ready streams 8 elements wide. Each layer works on
its own frame. Q1 to Q4 are FIFOs that each hold one full input vector of the
next layer. With them, a layer can finish frame k+1 while its successor still
works on frame k. The successor's fold 0 then reads at one word per clock.
Without them, that fold would be paced by the producer, which gives one word
every SF cycles.

| | L1 | L2 | L3 | L4 | L5 |
|---|---|---|---|---|---|
| NF × SF at S = 30 | 120×4 = 480 | 120×120 = 14,400 | 60×120 = 7,200 | 60×60 = 3,600 | 1×60 = 60 |

- **Throughput** is set by L2: one code every 14,400 cycles. At 100 MHz that is
  6,944 frames/s. The testbenches check this interval exactly at S = 1 (16
  cycles), 10 (1,600), 20 (6,400) and 30 (14,400).
- **Latency** of a frame sent into an idle pipeline is 25,391 cycles at
  S = 30, or 254 µs at 100 MHz. That is about the sum of the column above.
  At S = 1 it is 45 cycles.
- **Compared with the published measurements:** the FINN build measured 125 µs
  average latency and about 1.3 × 10⁴ frames/s on a Zynq at 100 MHz. It used
  the same folding factor of 8, and the DMA round trip was included. This RTL is
  about twice as slow. How FINN distributed its folding over the layers is not
  published. A larger PE or SIMD on L2 and L3 would close the gap: both are
  parameters of `mvtu`.
- Even so, 14,400 cycles per frame is far below the camera's 500 µs
  (50,000-cycle) sampling interval.

The two 64-frame FIFOs decouple the pipeline from its source and sink. When the
code FIFO fills, the layers stall back to front. When the frame FIFO then
fills, `s_ready` falls.

## Missing lines of sight (`nan_mask`)

A noisy line of sight is recorded as NaN. The network was trained with a mask
layer that turns NaN into zero, so the neurons facing a missing input stay
inactive. The hardware reproduces that mask. Each 8-bit sample travels with a
`missing` bit, and the mask replaces a flagged sample by 0. In L1 a zero
sample adds nothing to any neuron's sum, whatever its weight. The mask also
zeroes the two padding lanes of the fourth word of a frame.

## Interfaces

`hdi_encoder` ports:

| port | dir | width | meaning |
|---|---|---|---|
| `s_data` | in | 8 × 8 | 8 signed samples; a frame is 4 words, samples 0–29 in lane order |
| `s_missing` | in | 8 | 1 = sample missing (NaN) |
| `s_valid` / `s_ready` | in / out | 1 | input handshake |
| `m_code` | out | 6 × 16 | latent code, signed |
| `m_valid` / `m_ready` | out / in | 1 | output handshake |
| `cfg_we`, `cfg` | in | 1, 56 | weight and threshold writes |

`cfg` is the packed struct `hdi_pkg::cfg_write_t`, with these fields:

- `layer`: 0–4 for L1–L5.
- `kind`: `CFG_WEIGHT` or `CFG_THRESHOLD`.
- `pe`: the lane.
- `addr`: the weight address nf·SF+sf, or the neuron fold nf for a threshold.
- `data`: the weight bits in the low SIMD bits, or a signed threshold.

Writes take effect in the clock cycle in which `cfg_we` is high. A complete
load at S = 30 is 208,680 writes. Loading a layer while it computes is not
protected against.

Trained weights do not exist in this repository. A FINN build would fix them at
compile time. Here they live in RAM so that any trained network of this shape
can be loaded.

## Files

- `rtl/hdi_pkg.sv`: sizes, the configuration write struct.
- `rtl/nan_mask.sv`: missing-sample mask.
- `rtl/stream_fifo.sv`: valid/ready FIFO (frame caches and Q1 to Q4).
- `rtl/mvtu.sv`: one folded quantized layer.
- `rtl/hdi_encoder.sv`: the top.
- `tb/hdi_ref_pkg.sv`: the reference model. It produces hashed weights and
  thresholds, and `encode()` evaluates the network with plain loops.
- `tb/hdi_cfg_loader.sv`: writes a reference weight set through `cfg`.
- `tb/hdi_scale_run.sv`: runs one encoder of scale S.
- `tb/tb_nan_mask.sv`, `tb/tb_stream_fifo.sv`, `tb/tb_mvtu.sv`: unit tests.
- `tb/tb_hdi_encoder.sv`: S = 1, 300 frames. It checks the steady-state rate,
  random gaps, missing samples, and both FIFOs full.
- `tb/tb_hdi_encoder_scales.sv`: S = 10 and S = 20.
- `tb/tb_hdi_encoder_full.sv`: the full S = 30 design with default parameters.

Every testbench compares against values computed independently of the RTL, and
prints `TB_RESULT checks=N failures=M`.

## Simulating

With Verilator 5 (the testbenches use `--timing`):

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/hdi_pkg.sv tb/hdi_ref_pkg.sv tb/tb_hdi_encoder_full.sv \
        --top-module tb_hdi_encoder_full
    ./obj_dir/Vtb_hdi_encoder_full

For another testbench, replace the last file and the top name. The full-size
run finishes in about a second.

To change the network, set the `hdi_encoder` parameters:

- `SCALE` (layer widths).
- `IN_W` (samples per frame).
- `LATENT` (code size).
- `FOLD` (PE and SIMD of all layers).
- `FIFO_FRAMES` (cache depth).
- `CODE_BITS` (output width per latent value).

A per-layer PE or SIMD needs only an edit of the instantiations in
`hdi_encoder.sv`. `mvtu` takes them as parameters.

## What to trust, and where this departs from the source

Taken from the source:

- 30 8-bit inputs (15 k-means positions × (x, y)).
- The S × [32, 32, 16, 16] template with S = 30.
- 1-bit weights and activations.
- Latent size 6.
- Folding factor 8.
- 64-frame FIFO caches.
- Mask-to-zero for missing samples.

Choices of this design:

- The bit code (1 = +1).
- The threshold form of the activation.
- The separate `missing` bit in place of a floating-point NaN.
- Run-time loadable weights.
- Memories read combinationally.
- The inter-layer FIFOs.
- All stream formats.
- The integer, unscaled code.

Not built, because they are not hardware in the source:

- The ADC and transient recorder.
- The Zynq processor and its DMA.
- The low-latency link to the controller.
- The decoder, the magnetic-mapping network and the composing VAE, which run
  offline in floating point.

The 2-bit (A2W2) variants of the size study are not built either.

Verified: every code matches the reference model bit for bit, at S = 1, 10,
20 and 30, with random back-pressure and missing samples. The cycle-exact
steady-state rate is checked as well. Not verified: behaviour with real
trained weights, and timing closure on a real FPGA. The weight memories are
large (1.65 Mbit at S = 30), and their combinational reads would want block
RAM with a registered read stage in a real implementation.
