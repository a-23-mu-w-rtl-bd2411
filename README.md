# Time-domain keyword spotter: digital back-end and classifier in SystemVerilog

This design recognises 12 spoken keyword classes from a microphone signal. It uses a
few tens of microwatts and a 250 kHz clock. It gets there by doing almost all
of the audio feature extraction in the time domain:
- A voltage-to-time converter turns the microphone voltage into a pulse train.
- A bank of 16 ring-oscillator band-pass filters splits that pulse train into frequency bands.
- In every band, a rectified filter output switches the bias of a 15-stage ring oscillator.
  The oscillator's phase is then the integral of the band's energy.

Measuring that phase is a purely digital job: count how many ring stages toggled since
the last sample. From there on everything is logic:
- decimation into 16-ms feature frames;
- calibration, logarithmic compression and normalisation;
- a two-layer GRU recurrent network with a fully connected output layer;
- arg-max, an SPI host interface and an interrupt.

This repository gives RTL for that digital part. It also gives behavioural models
of the ring-oscillator encoders, so that the whole chain from band-pass outputs to
class index can be simulated. The analog front-end itself is not modelled:
- the voltage-to-time converter with its frequency-locked-loop linearisation;
- the band-pass filters;
- the bias generators.

The 32 rectified band-pass outputs, two per channel, are inputs of the top level.

## Signal chain and clocks

```
bpf_p/bpf_n[16] -> sro_pfm x16 -> 15 phase taps per channel
   -> xor_diff (62.5 kHz samples, 0..15 per sample)
   -> cic_decim (sum of 1024 samples = FV_Raw, 14 bit, one frame per 16.4 ms)
   -> fv_calib  (subtract beta, multiply by alpha: FV_Cal, 12 bit)
   -> log_lut   (log2(FV_Cal + 1): FV_Log, 10 bit, Q4.6)
   -> fv_norm   ((FV_Log - mu) / sigma: FV_Norm, 14 bit, Q6.8)
   -> gru_accel (GRU 48 -> GRU 48 -> FC 12, eight processing elements)
   -> argmax -> class_idx, irq, SPI result register
```

Everything runs on one 250 kHz clock, `clk`:
- `clk_gen` makes a one-cycle oversampling enable every 4 clocks, giving 62.5 kHz.
- It makes a decimation strobe on the last of every 2^10 samples.
- So a feature vector appears every 4096 clocks, which is 16.38 ms.
- Nothing else in the design is a clock; the enables are ordinary signals.

The back-end pipeline registers the calibrated value, the log and the normalised
value in turn. `fv_valid` therefore pulses 3 clocks after the decimation strobe.

## Measuring phase with an XOR: `sro_pfm` and `xor_diff`

A ring of 15 inverters passes through 30 distinct states per oscillation. Each
half-period step flips exactly one stage. If the ring's taps are sampled at
62.5 kHz, the number of taps that differ between two consecutive samples is the
number of 1/30-cycle steps the oscillator advanced. This holds as long as it
advanced by at most 15 steps.

`xor_diff` computes that number:
- two registers hold the previous and the current sample;
- 15 XOR gates compare them;
- a population count adds up the differences.

The result is a first-order difference (1 - z^-1) of the ring's phase. Together
with the oscillator, which integrates, it forms a first-order noise-shaping
time-to-digital converter: the quantisation error of one sample carries into the
next sample and is not lost. `cic_decim` is a first-order integrate-and-dump
decimator. It adds the counts of 1024 samples, so each frame's FV_Raw is the
total phase advance over the frame, up to a bounded error of one step at each
window edge.

`sro_pfm` is the behavioural stand-in for one oscillator. Its frequency is
`F_FREE + K_SW * (bpf_p + bpf_n)`: 4 kHz free-running and 6 kHz more per active
switch input. These numbers are this model's own. They are chosen so that the
fastest oscillator, 16 kHz, moves at most 7.7 steps per 62.5 kHz sample, well
inside the 15-step limit. The model integrates the phase in integer units on a
250 ns time step and shows it as a thermometer pattern on its 15 taps. It is
event-driven, uses delays, and is not synthesisable.

## Feature conditioning: `fv_calib`, `log_lut`, `fv_norm`

The three stages correct for chip-to-chip differences and compress the dynamic
range. They do this before the network sees the features.

`fv_calib` (offset and gain):
- FV_Cal = max(FV_Raw − β, 0) · α / 64, clipped to 12 bits.
- β is 14 bits; α is 8 bits, unsigned, with 6 fractional bits.
- This compensates for each channel's free-running frequency and gain.

`log_lut`:
- The logarithm is taken with a leading-one detector: y + 1 = 2^e · (1 + m/64 + …).
- A 64-entry table gives the fraction: `frac[m] = round(64 · log2(1 + m/64))`.
- The result is 64·e + frac[m]. It lies in 0..768 (unsigned Q4.6) and is within
  2 LSB of 64·log2(x+1).

`fv_norm`:
- FV_Norm = (FV_Log − μ) · (1/σ) / 64, saturated to 14 bits, signed Q6.8.
- 1/σ is stored as a 12-bit unsigned value with 8 fractional bits.
- The divider is therefore a multiplier, and the host supplies the reciprocal.

The host writes all per-channel constants over SPI:
- β = 0, α = 1.0, μ = 0 and 1/σ = 1.0 after reset.
- The word widths and the reciprocal encoding are choices of this design.

## The GRU accelerator

### Network and number formats

The network is a GRU with 16 inputs and 48 units, a second GRU with 48 units, and
a fully connected layer with 12 outputs. The equations follow the usual form, with
the reset gate applied after the recurrent product:

```
r  = sigmoid(W_ir x + W_hr h + b_r)
z  = sigmoid(W_iz x + W_hz h + b_z)
n  = tanh(W_in x + b_in + r * (W_hn h + b_hn))
h' = z * h + (1 - z) * n
```

Number formats:

| quantity | format |
|---|---|
| weights and biases | signed 8 bit, Q2.6 |
| activations, features and states | signed 14 bit, Q6.8 |
| accumulator | signed 24 bit, Q10.14, saturating on every add |

- A weight times an activation is already in accumulator format.
- An activation times an activation (Q.16) is shifted right by 2.
- A bias is shifted left by 8 when loaded.
- `SAT` takes the accumulator back to an activation: shift right by 6, then saturate to 14 bits.

`act_lut` holds one 64-entry tanh table: `tab[i] = round(256 · tanh((i + 0.5)/16))`.
- It is indexed by |x|/16 and the sign is restored afterwards.
- Sigmoid reuses the same table through sigmoid(x) = (1 + tanh(x/2)) / 2.
- Inputs of 4.0 and above saturate to ±1.
- The table is indexed in bins of 1/16, so tanh(0) reads as 8/256.

### Eight processing elements and one instruction stream

`gru_accel` has eight heterogeneous processing elements (`hpe`). Each computes one
neuron of a group of eight. A processing element has:
- one 14 × 14 multiplier with operand multiplexers;
- a 24-bit accumulator;
- an activation register;
- a gate register `t`;
- the activation table.

All eight execute the same micro-operation each cycle. Each takes its own weight
byte from the 64-bit weight word. The second operand is one of:
- broadcast to all eight, either a feature or a stored state;
- each element's own lane of an output-buffer word.

The operations:

| op | effect |
|---|---|
| BIAS | acc = w << 8 |
| MAC | acc += w · x |
| SAT, SIG, TANH | act = f(acc >> 6) |
| WR | store act to the output buffer |
| WRACC | store acc to the output buffer |
| WRZ | store zero to the output buffer |
| MULOWN | acc = act · own >> 2 |
| ADDOWN | acc += own |
| LDT | t = own |
| MULT | acc = t · own >> 2 |
| MAC1MT | acc += (1 − t) · act >> 2 |

`gru_ctrl` is the sequencer. For each group of eight neurons of a GRU layer it issues:

```
r gate : BIAS, MAC x I (inputs), MAC x 48 (states), SIG, WR r
z gate : BIAS, MAC x I, MAC x 48, SIG, WR z
n gate : BIAS(b_in), MAC x I, WRACC nx, BIAS(b_hn), MAC x 48, SAT,
         MULOWN r, ADDOWN nx, TANH
update : LDT z, MULT h_old, MAC1MT, SAT, WR h_new
```

Each classifier group is BIAS, MAC × 48, SAT, WR.

- The weight memory is read strictly in order: one word per BIAS or MAC, 3026 words per inference.
- A weight image is just the weights laid out in the order of this schedule.
  Byte l of each word belongs to the element computing neuron 8·group + l.
- The sequencer is a two-stage pipeline:
  - stage 0 issues the memory read addresses and the micro-operation;
  - stage 1 gets the memory data and the registered micro-operation together and executes.

### Output buffer and double-buffered state

`obuf` holds 56 words of eight 24-bit lanes (1344 bytes):
- the two hidden states, each in two banks of 6 words;
- the r, z and nx words of the group in progress;
- the 12 scores.

- A layer reads the old state from one bank and writes the new state to the other.
- Each layer's bank bit flips when the layer finishes.
- This is what lets all 48 units of a layer see the old h while new values are being written.
- Layer 2 takes its input from the bank layer 1 just wrote.
- The classifier takes its input from the bank layer 2 just wrote.
- A state clear, requested through the control register, zeroes all four banks
  before the next inference starts (24 extra clocks).

One inference takes 3200 clocks, or 12.8 ms at 250 kHz (3224 with a clear). That
fits in the 4096-clock frame. The published chip reports 12.4 ms. The difference
comes from this design's instruction schedule, which spends a few cycles per
group on activation and state-update steps.

## Host interface

`spi_slave` is an SPI target, mode 0, MSB first:
- It oversamples SCLK, CS and MOSI with the system clock through two-flop synchronisers.
- SCLK must therefore stay below clk/8 (31 kHz at 250 kHz).

| command | bytes that follow | action |
|---|---|---|
| `0x01` | addr_hi, addr_lo, data… | write bytes to the weight memory, address auto-increments |
| `0x02` | addr_hi, addr_lo, data… | write configuration registers |
| `0x03` | one dummy | read `{irq, 000, class[3:0]}`; irq clears when CS rises |
| `0x04` | 32 dummies | read FV_Raw of channels 0..15, high byte first |

Configuration map (`config_reg`):
- `0x000` is control: bit 0 `run` and bit 1 `clear`. `clear` drops by itself when
  the inference that uses it starts.
- Channel c occupies `0x010 + 8c`: β low, β high, α, μ low, μ high, 1/σ low and
  1/σ high at offsets 0..6.

`kws_dbe` ties the back-end together:
- It starts an inference on `fv_valid` when `run` is set and the accelerator is idle.
- It raises `irq` with each result; `irq` stays up until the result is read.
- It sets a sticky `overrun` flag if a feature vector arrives while an inference
  is still running. That cannot happen at the default frame length; it only
  happens if the decimation window is shortened.

## Where this design departs from, or goes beyond, the published chip

- **Analog front-end.** The voltage-to-time converter, its frequency-locked loop,
  the band-pass filter bank and the bias circuits are not modelled. The ring-oscillator
  encoders are modelled behaviourally, with frequencies chosen for this model.
- **Feature-path widths and encodings.** The formats of β, α, μ and 1/σ, and the
  base and format of the logarithm, are this design's. The published chip gives the
  word widths of FV_Raw (14 bits), FV_Cal (12), FV_Log (10) and FV_Norm (14).
- **Classifier arithmetic.** The published chip gives:
  - 8 processing elements, each with a 14-bit multiplier, a 24-bit accumulator and a table-based sigmoid/tanh;
  - 24 KB of weight memory and a 1.3 KB output buffer;
  - a finite-state-machine controller.

  The published chip also quantises weights to 8 bits and activations to 14 bits.
  This design chooses:
  - where the binary point sits (Q2.6 weights, Q6.8 activations) and the table contents;
  - the micro-operation set and the schedule;
  - the folding of the two r and z biases into one byte each.
- **Latency.** 12.8 ms here against 12.4 ms on the chip.
- **Post-processing rate.** On the chip the calibration, log and normalisation
  stages run on the 61 Hz decimated clock. Here they run on the system clock,
  gated by the once-per-frame valid pulse, which gives the same results.
- **Host protocol.** The SPI command codes, the register map, the result byte
  layout and the FV_Raw read-back command are this design's. The chip is known to
  load weights and return the class with an interrupt flag over SPI.
- **Memories.** The weight memory and output buffer are written as plain arrays
  with a registered read, not as SRAM macros. The weight memory is not reset; it
  must be loaded before `run` is set.

## Simulating

All files are SystemVerilog-2017:
- `rtl/kws_pkg.sv` holds the shared constants and types. Compile it first.
- The testbenches share a reference model, `tb/kws_ref_pkg.sv`. It is a bit-exact
  fixed-point GRU, weight-image builder and feature path, written from the equations.

For example, the full chip at default sizes:

```
verilator --binary --timing -Irtl -y rtl rtl/kws_pkg.sv tb/kws_ref_pkg.sv \
          tb/tb_kws_top.sv --top-module tb_kws_top
./obj_dir/Vtb_kws_top
```

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

For synthesis take `kws_dbe` as the top. `kws_top` and `sro_pfm` contain the
behavioural oscillator model, which uses delays and is for simulation only. The
weight memory (24 KB) and the output buffer are plain arrays; on silicon they
would be SRAM macros.

| testbench | what it shows |
|---|---|
| `tb_kws_top` | Full chip at default parameters: loads all 24208 weight bytes and the calibration over SPI, runs 5 frames with random band-pass activity, reads FV_Raw back, checks each raw count against the input density and each class against the reference network, checks irq, state clears and latency (3201/3225 clocks). About 40 s of simulation. |
| `tb_kws_dbe` | Back-end with ideal oscillators and a 2048-clock frame, so overrun happens; exact FV_Raw, four inferences checked against the reference. |
| `tb_gru_accel` | Eight inferences compared score by score with the reference, including state clears. |
| `tb_gru_ctrl` | Schedule shape: 3026 sequential weight reads, 2976 MACs, 50 biases, 24 sigmoids, 12 tanh, busy/done. |
| others | One per block: differentiator, decimator, clock enables, calibration, log table (error bound), normaliser, activation table (exact and against tanh/logistic), processing element (every op, saturation), memories, configuration registers, SPI commands, arg-max, oscillator model frequency. |
