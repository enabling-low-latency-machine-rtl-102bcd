# On-detector pulse compression with a one-layer encoder

A calorimeter channel is read out as a short waveform: 32 samples of 16 bits
each, 512 bits per pulse and per bunch crossing. That is far more than the
links leaving the detector can carry, so the pulse has to be reduced to about
two numbers of similar size before it leaves the front-end board. The reduction
used here is the encoder half of a small autoencoder. It is one dense layer
that maps the 32 samples onto 2 latent values, followed by a ReLU. The 2 values
are 10-bit codes, so each pulse shrinks from 512 to 20 bits. The decoder half
runs off-detector and is not part of the hardware.

The design targets a flash-based, radiation-tolerant FPGA. Its operating point
is a 160 MHz clock, one new pulse per channel every 4 clock cycles (the 40 MHz
bunch-crossing rate), and 8 channels per FPGA. The RTL is plain, technology
independent SystemVerilog. It reproduces the published encoder's fixed-point
arithmetic bit for bit, and its initiation interval and latency cycle for
cycle.

## The arithmetic

Everything is fixed point. `<W,I>` below means W bits in total, of which I are
integer bits including the sign.

| quantity             | format  | signed | fractional bits | LSB       | range                 |
|----------------------|---------|--------|-----------------|-----------|-----------------------|
| input sample `x[i]`  | <16,9>  | yes    | 7               | 1/128     | -256 ... 255.992      |
| weight `w[o][i]`     | <10,4>  | yes    | 6               | 1/64      | -8 ... 7.984          |
| bias `b[o]`          | <10,4>  | yes    | 6               | 1/64      | -8 ... 7.984          |
| accumulator `y[o]`   | <30,17> | yes    | 13              | 1/8192    | -65536 ... 65535.9999 |
| latent code `q[o]`   | <10,7>  | no     | 3               | 1/8       | 0 ... 127.875         |

With these formats the multiply-add needs no rounding. A sample
times a weight has 7 + 6 = 13 fractional bits, the same as the accumulator.
The bias is shifted left by 7 bits to reach 13 fractional bits as well. The
sum

    s[o] = sum_i x[i] * w[o][i]  +  (b[o] << 7)          (integer, LSB 2^-13)

is exact when formed at full width: 26-bit products, plus 5 bits of growth for
32 terms, plus 1. Rounding and overflow are dealt with at two points only.

**Cast to the accumulator.** The exact sum can exceed the 30-bit range by a
little. An example is every sample at -256 with every weight at -8: each
product is then +2048, and 32 of them already reach +65536. There are two
arithmetic variants of the same trained model:

* **full**: the sum saturates to the largest or smallest <30,17> value;
* **nano**: the low 30 bits are kept, so the sum wraps around.

**ReLU and requantisation.** Negative values become 0. A positive value drops
10 fractional bits (13 down to 3), and the 10-bit latent code is then:

* **full**: `q = floor(y / 1024 + 1/2)`, limited to 1023. This is round to
  nearest with ties rounding up, then saturation at 127.875.
* **nano**: `q = floor(y / 1024) mod 1024`. This is truncation and wrap-around,
  so a value of 128.0 or more comes out small.

The full variant is the one that agrees with the quantised software model.
The nano variant gives up that exactness to save logic and cycles. Both
variants are built from the same modules; the `MODEL` parameter
(`ae_pkg::MODEL_FULL` or `ae_pkg::MODEL_NANO`) selects one.

Worked example (full): take `y = 0x000C_0A00` = 788992, which is 96.3125 in
<30,17>. Then 788992 / 1024 = 770.5, which rounds up to 771, and the latent
code is 771 = 96.375. In nano mode the same value truncates to 770 = 96.25.

## Timing: initiation interval, latency and stalls

| variant | initiation interval (II) | latency (cycles) | at 160 MHz      |
|---------|--------------------------|------------------|-----------------|
| full    | 4                        | 24               | 25 ns / 150 ns  |
| nano    | 3                        | 4                | 18.75 ns / 25 ns|

`encoder_core` takes a pulse on an edge where `in_valid && in_ready`. The
result can be taken `LATENCY` edges later, if nothing stalls. The pipeline is:

    edge t      products x*w registered, bias registered        (dense_layer stage 1)
    edge t+1    adder tree + bias + accumulator cast registered (dense_layer stage 2)
    edge t+2    ReLU + requantisation registered                (relu_quant)
    edge t+3 .. delay line of LATENCY-3 registers
    edge t+LATENCY   result taken (out_valid && out_ready)

The arithmetic needs 3 stages. The delay line brings the latency up to the
published figure: 1 register for nano, 21 for full. Nothing is published about
how the original implementation spends its 24 cycles, so they are modelled as
a plain delay. If your system does not need to match that latency, set
`LATENCY` to 4 for either variant.

The datapath could take a pulse every cycle. The initiation interval comes
from a small counter instead: after a pulse is taken, it holds `in_ready` low
for `II-1` cycles. This matches the published accelerator, whose schedule
starts one pulse per II cycles.

Back-pressure: if the last stage holds a result and `out_ready` is low, every
stage of the pipeline holds, and `in_ready` goes low. No result is ever
dropped or reordered. An assertion in `encoder_core` checks that a waiting
result stays stable.

## Channels, FIFOs and the weight store

    in_data[c] --> [stream_fifo] --> [encoder_core] --> [stream_fifo] --> out_data[c]     x 8 channels
                                          ^  w, b
                                    [weight_store]  <-- wr_en / wr_addr / wr_data

* `ae_channel` puts a FIFO on each side of the core, as the generated
  accelerator had. The FIFOs are 2 entries deep by default. An input entry
  holds one whole pulse (512 bits, sample 0 in the low 16 bits). An output
  entry holds both latent codes (20 bits, latent 0 in the low 10 bits).
  Through both FIFOs, an isolated pulse written at edge t can be read at edge
  t + LATENCY + 2.
* `ae_frontend` instantiates `N_CH = 8` channels. Each has its own valid/ready
  streams, indexed by channel.
* `weight_store` holds 64 weights and 2 biases in registers and drives them to
  every channel in parallel. Address `o*32 + i` holds the weight from sample
  i to latent o; addresses 64 and 65 hold the biases. It is loaded one value
  per clock, and reset clears it to zero. A pulse uses the values present on
  the edge it is taken, so a pulse taken during a reload sees a mix of old
  and new values: hold the input streams while reloading. The trained
  weights are not included here: they are data, not design, and depend on the
  training run.

Reset (`rst_n`) is synchronous and active low throughout.

## Files

| file                    | content                                                        |
|-------------------------|----------------------------------------------------------------|
| `rtl/ae_pkg.sv`         | formats, `model_e`, default II and latency per variant          |
| `rtl/stream_fifo.sv`    | valid/ready FIFO                                                |
| `rtl/weight_store.sv`   | 66 x 10-bit parameter registers                                 |
| `rtl/dense_layer.sv`    | 64 multipliers, adder trees, accumulator cast                   |
| `rtl/relu_quant.sv`     | ReLU and <30,17> to <10,7> conversion                           |
| `rtl/encoder_core.sv`   | pipeline, II counter, delay line, stall logic                   |
| `rtl/ae_channel.sv`     | FIFO - core - FIFO                                              |
| `rtl/ae_frontend.sv`    | top: 8 channels and the shared weight store                     |
| `tb/ae_ref_pkg.sv`      | bit-exact reference model and pulse generator for testbenches   |
| `tb/tb_*.sv`            | self-checking testbenches, one per module plus the nano top     |
| `tb/enc_harness.sv`     | driver/checker used by `tb_encoder_core`                        |

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_ae_frontend \
        rtl/ae_pkg.sv tb/ae_ref_pkg.sv rtl/*.sv tb/tb_ae_frontend.sv
    ./obj_dir/Vtb_ae_frontend

Replace `tb_ae_frontend` with any other testbench name. The top-level run
takes well under a minute. It uses the top exactly as published (8 channels,
full model, no parameter overrides).

What the testbenches check:

* `tb_stream_fifo`: order, full/empty flags and occupancy against a queue
  model, with random traffic.
* `tb_weight_store`: address map, out-of-range writes, reset.
* `tb_dense_layer`, `tb_relu_quant`: both variants side by side, against the
  reference. This includes accumulator overflow in both directions, rounding
  ties, saturation and wrap, under a random pipeline enable.
* `tb_encoder_core`: both variants, plus an 8-sample instance (the shortest
  readout considered). Checks that pulses are taken exactly every II cycles
  and results appear exactly LATENCY edges later, then random traffic with
  stalls.
* `tb_ae_channel`: latency through the FIFOs, sustained rate of one pulse per
  II, random back-pressure.
* `tb_ae_frontend` (full) and `tb_ae_frontend_nano`: all 8 channels. Loads
  weights through the port, checks latency and rate, then runs random traffic
  with three different weight sets. The last set drives the accumulator into
  overflow. The testbench counts, and requires, II throttling, output stalls,
  a full input FIFO, accumulator overflow, latent saturation or wrap,
  rounding, ReLU clamping and a weight reload.

The stimulus is synthetic. Pulses are a gamma-like shape with random amplitude
and onset, plus noise. Weights are random in a pulse-like range or at the
extremes. The measured detector waveforms and the trained weights are not
available, so the compression quality itself is not demonstrated here. What
is demonstrated is the arithmetic, bit for bit, against an independent
reference.

## How this relates to the published design

Taken from the published design:

* the layer structure (32 to 2 dense, then ReLU);
* all five number formats;
* the two arithmetic variants, and where they differ (rounding versus
  truncation, overflow protection versus wrap);
* the II and latency of each variant;
* the FIFO-based streaming boundary;
* the 8-channel, 160 MHz, 40 MHz-per-channel operating point.

This design's own choices:

* **Latent code is unsigned.** The published format is only given as <10,7>.
  A ReLU output is never negative, so the sign bit is used for range.
* **Ties round up.** "Round to nearest" does not say how ties go.
* **Saturation is applied once**, to the exact sum, rather than after every
  partial sum. The two agree unless intermediate sums leave the range and come
  back into it.
* **The full model's latency is a delay line.** It matches the cycle count,
  not the original structure.
* **The II is a counter.** The datapath is fully parallel (64 multipliers) and
  not time-shared.
* **Handshakes and FIFOs are this design's own.** That covers valid/ready
  handshakes, FIFO depth 2, and the whole-pipeline stall.
* **Weights are loadable and shared.** They live in loadable registers rather
  than constants, and one store is shared by all channels.
* **Some published parts are left out.** The UART and the rest of the
  evaluation-board logic used to exchange pulses with a host are not included.
  The per-channel streams are ports of `ae_frontend` instead.

Not modelled at all: the mapping of the multipliers onto 4-input LUTs and the
timing closure at 160 MHz. Both depend on the target device and its tools.
