# DeltaKWS keyword-spotting chip in SystemVerilog

This is a synthesizable SystemVerilog model of DeltaKWS, a keyword-spotting IC. The chip's
datapath is made of three stages:

1. A serial IIR band-pass feature extractor (FEx) turns 8 kS/s, 12-bit audio into ten 12-bit
   features every 16 ms.
2. An asynchronous FIFO carries those features into a second clock domain.
3. A Delta-GRU accelerator (64 neurons, 10 inputs, 12-class FC layer, 8 MAC lanes) computes only
   on input and hidden-state changes that exceed a threshold Delta_TH. It reads its 8-bit weights
   from a 24 kB SRAM made of twelve 2 kB banks.

After 62 frames (one second of audio) the chip emits the class with the highest score.

All parameter defaults are the published numbers: 16 filter channels with 10 selected, 128
samples per frame, a 10-64-12 network, 8 lanes, 12-bit deltas, 8-bit weights, 12 banks of
1024 x 16 bits, and Delta_TH = 0.2.

## Files

| file | contents |
|---|---|
| `rtl/kws_pkg.sv` | Shared constants, number formats, the weight-memory row map, the log table and the sigmoid/tanh approximations |
| `rtl/deltakws_top.sv` | The chip: the two serial links, the clock dividers, the FEx, the async FIFO, the weight memory and the accelerator |
| `rtl/spi_rx.sv`, `rtl/pulse_sync.sv`, `rtl/clk_div.sv`, `rtl/async_fifo.sv` | Host links, clock-domain crossing and clock division |
| `rtl/fex.sv` | Feature extractor, built from `fex_reconfig` (channel sequencing), `iir_bpf` (filter bank), `envelope_det` and `fex_postproc` |
| `rtl/sram_bank.sv`, `rtl/weight_mem.sv` | 2 kB SRAM bank model and the 12-bank weight memory |
| `rtl/delta_rnn.sv` | The accelerator, built from `config_reg`, `rnn_ctrl`, `state_buffer`, `delta_encoder`, 8 x (`delta_lane` + `mac_nlu`), `state_assembler` and `argmax` |
| `tb/tb_*.sv` | One self-checking testbench per block, or per group of closely coupled blocks |
| `tb/kws_ref_pkg.sv` | Bit-true reference model of the network, used by the accelerator and chip testbenches |

## Clocks and host interface

The host supplies two pad clocks, `clk_rnn_pad` and `clk_iir_pad`.

- Each serial link shifts one bit per pad clock.
- `clk_div` divides each pad clock by 2 (parameters `RNN_DIV`, `IIR_DIV`) to make the processing
  clocks.
- The measured operating point is 125 kHz for the RNN and 128 kHz for the FEx. It therefore
  needs pad clocks of 250 kHz and 256 kHz.
- Received words cross into the divided clock with a toggle pulse synchroniser. The received word
  is held stable until the next frame ends.

**Audio link** (`a_cs_n`, `a_mosi`, MSB first):

- A 12-bit frame is one signed audio sample.
- A 32-bit frame `{2'b00, addr[9:0], data[19:0]}` writes FEx configuration.

**Control link** (`c_cs_n`, `c_mosi`, `c_miso`) uses 40-bit frames `{cmd[3:0], addr[19:0], data[15:0]}`:

- `cmd 1` writes a 16-bit weight word. `addr[13:10]` is the bank and `addr[9:0]` the word.
- `cmd 2` writes an accelerator register: 0 is Delta_TH, 1 is frames per decision, 2 is inputs
  per frame, and 3 is restart.
- During every frame, `c_miso` shifts out the status word
  `{decision seen, 000, class[3:0], frame count[7:0]}`.
- The decision also appears in parallel on `dec_valid`/`dec_cls`.

## Feature extractor (FEx)

**Reconfiguration control.** Each input sample is processed in 16 channel slots, one per FEx
clock. A slot runs the datapath only if its bit in `Ch_sel` is set. The reset value selects
channels 0-9, giving the ten channels the chip uses.

- At 8 kS/s and 128 kHz this is exactly one slot per clock.
- One further sample may wait in a pending register.
- A sample that arrives while one is already waiting is dropped and flagged.

**IIR band-pass filter.** Each channel is two cascaded second-order sections in direct form II.
The numerator is fixed by the symmetry a11 = 2a01 = 2a21 and |a12| = 2a02 = 2a22 = 2.

- Each section's numerator is `w[n] +/- 2 w[n-1] + w[n-2]`. This needs only a shift and a sign
  bit per section.
- SOS-I is scaled by the 8-bit gain a01.
- There are five multipliers per channel: four for feedback, one for the gain.
- Feedback coefficients are 12-bit with 10 fraction bits. States are 20-bit and saturating.
- Coefficients and the four states of each channel sit in register files indexed by the channel
  number.
- The published figure prints "<<2" beside the numerator, but the coefficient relation calls for
  a factor of 2. This design shifts by one.

**Envelope detector.** It takes |y| (saturated to 16 bits) and accumulates it per channel for 128
samples. At the end of the frame it outputs the sum / 128 and clears the accumulator.

**Post-processing.** For each channel: `s = (env - beta) * alpha / 16`, clipped to 0..4095.

- `log2(1 + s)` is computed from the leading-one position plus a 32-entry mantissa table, in 4.8
  fixed point.
- The feature is then `(log - mu) * (1/sigma) / 64`, saturated to 12 bits.
- beta, alpha, mu and 1/sigma are per-channel registers. 1/sigma is stored as a reciprocal so that
  no divider is needed.

Features leave the FEx in ascending channel order. `frame_done` marks the last one of each frame.

## Delta-GRU accelerator

Number formats:

| quantity | format |
|---|---|
| features, h, deltas | Q3.8 in 12 bits |
| weights | Q1.6 in 8 bits |
| gate memories and FC scores | Q7.8 in 16 bits, saturating |

The network (per frame t):

```
delta_x = x_t - x_hat  (passed only if |delta| > Delta_TH, x_hat += delta when passed)
delta_h = h_{t-1} - h_hat  (same rule)
M_r  += W_r  * delta      M_u += W_u * delta
M_cx += W_cx * delta_x    M_ch += W_ch * delta_h
r = sigma(M_r), u = sigma(M_u), c = tanh(M_cx + r * M_ch), h_t = c + u (h_{t-1} - c)
```

Because the gate memories M hold the running pre-activations, a zero delta costs nothing but one
encoder clock. sigma is a piecewise-linear (PLAN) approximation, and tanh(x) = 2 sigma(2x) - 1.

Each frame is scheduled by `rnn_ctrl` as follows:

1. **LOAD.** Pop `num_in` features from the FIFO into the state buffer.
2. **ENC.** The delta encoder visits the 74 state elements, one per clock. Non-zero deltas are
   broadcast to the eight lanes' `'0'-skip + Delta FIFO`. Zero deltas are dropped there, which
   counts as a skip.
   - In parallel, the MAC sweep takes the delta at the FIFO head and reads its 24 weight rows
     (3 gates x 8 neuron groups), one 64-bit row per clock. Lane m owns neurons 8k + m.
   - The encoder stalls while any Delta FIFO is almost full.
3. **NLU.** Eight clocks. Each lane updates one neuron group per clock. The state assembler
   gathers the eight new h values per clock and writes them back.
4. After `num_frames` frames (62 by default), the **FC layer** reads 128 rows (h_j against 12
   classes, two rows per j). The argmax then produces the decision. Finally, biases are reloaded
   from the bias rows for the next utterance.

Cost per frame: about `num_in + 24 n + 15` RNN clocks, where n is the number of non-zero deltas
(for n >= 4). Otherwise it is at least 74 encoder clocks.

- At Delta_TH = 0 (n = 74), a frame takes 1801 clocks = 14.4 ms at 125 kHz. This is within the
  16 ms frame period; the published latency is 16.4 ms.
- At Delta_TH = 0.2 with the published 87 % sparsity (n ~ 10), a frame takes about 2.2 ms.

**Weight memory map.** Rows are 64 bits: 8 weights, one per lane.

| rows | contents |
|---|---|
| `(j*3 + gate)*8 + k` | GRU weights |
| 1776 + 2j + q | FC weights |
| 1904.. | Biases (four gates x 8 groups, then two FC rows) |

That is 1938 rows = 15.5 kB of the 24 kB. Row r sits in bank group r / 1024, which is four banks
side by side. Bank b holds lanes 2b (low byte) and 2b+1 (high byte).

**SRAM bank.** A, D, CS_n and WE_n are registered at the rising clock edge. The addressed 256 x 16
block row is read and Q is updated through the column multiplexer at the falling edge. Within the
same RNN clock, Q is ready for the next rising edge.

## What follows the paper and what is this design's own choice

Follows the paper:

- The block structure and the data widths: 12-bit audio and features, 20-bit filter states,
  12-bit b / 8-bit a coefficients, 16-bit envelope, 12-bit delta, 8-bit weights.
- The 5-multiplier SOS symmetry.
- The envelope detector.
- The channel selection.
- The delta encoder rule.
- Per-lane '0'-skip and Delta FIFOs.
- The 8 lanes.
- The 24 kB memory built from twelve 1024 x 16 banks of four 256 x 16 blocks, with Q changing on
  the falling edge.
- Delta_TH = 0.2.

This design's own choices, because the published description does not give them:

- The link frame formats, the status word and the register maps.
- The clock-divide ratio.
- FIFO depths (async FIFO 16 in the chip, Delta FIFOs 8).
- Fixed-point binary points.
- The log table and its placement after an offset/scale step.
- Storing 1/sigma instead of sigma.
- The PLAN sigmoid.
- The column-wise schedule and row layout.
- The dense FC layer run once at the end of the utterance.
- 62 frames per decision.
- Ties in the argmax go to the lowest class.

Known mismatches with the published figures:

- **Intermediate buffer.** The design holds 16 channels x 4 states x 20 bits in registers,
  whereas the publication states 56 B + 32 B.
- **State buffer.** The design holds about 0.22 kB of x/x_hat/h/h_hat, plus the lanes' 16-bit
  gate memories in registers. The published buffer is 0.58 kB.

Not implemented, because they are analog or off-chip:

- The word-line voltage booster, the word-line and I/O level shifters, the self-timed SRAM
  timing generator and the 8T bit cell. Their logical effect is in `sram_bank`.
- The near-threshold supply domains.
- The FPGA host board. The testbenches drive the chip's pins directly.

## Verification

Each testbench is self-checking. It ends with a `TB_RESULT checks=N failures=M` line and has a
watchdog.

| testbench | what it checks |
|---|---|
| `tb_spi_rx` | Frame contents and lengths, single-clock `rx_valid` latency, MISO status bits |
| `tb_clk_div` | Output period = DIV input clocks and 50 % duty, at DIV 2 and 8; quiet in reset |
| `tb_async_fifo` | Two unrelated clocks, random traffic with a scoreboard; full at DEPTH; write-to-read latency <= 4 read clocks |
| `tb_sram_bank` | Every word; Q unchanged at the rising edge and valid after the falling edge; Q held when deselected |
| `tb_weight_mem` | All 12 banks written; 2000 back-to-back random row reads at one row per clock with one-clock latency |
| `tb_fex` | Bit-true model of filter, envelope and post-processing on 16 random stable channels with a non-contiguous channel selection; feature values, channel order, one vector per 128 samples, frame latency <= 20 clocks, dropped-sample flag; log table within one step of the true log2 |
| `tb_delta_encoder` | Threshold rule including equality and saturation; same-clock state update; one-clock output latency |
| `tb_delta_lane` | Skip of zero deltas, FIFO order, empty/almost-full flags, clear |
| `tb_argmax`, `tb_config_reg` | Ties, extremes and hold; reset values, field writes, restart pulse |
| `tb_delta_rnn` | Accelerator with weight memory against the reference model. Checks every hidden value after every frame, the decision and its score, the non-zero-delta count, and frame time within 24 n .. 24 n + 30 clocks. Also checks that stalls and skips happen. Covers `rnn_ctrl`, `mac_nlu`, `state_buffer` and `state_assembler` |
| `tb_deltakws_top` | Whole chip at default parameters. The host loads a random network over SPI, programs 16 band-pass channels, selects ten, and streams one second of audio (a tone burst between silences). Captured features go through the reference network, and the decision, score and status word must match. Every mechanism must occur: unselected slots, 62 frame ends, 620 FIFO crossings, skips, non-zero deltas, encoder stalls, restart and one decision. Also reports the decision latency and temporal sparsity (90 % in this run) |

Each testbench has also been run against a copy of its module with one deliberate fault, for
example a threshold test of >= instead of >, or the SRAM output moved to the rising edge. Every
such copy made its testbench fail.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/kws_pkg.sv tb/kws_ref_pkg.sv \
          tb/tb_deltakws_top.sv --top-module tb_deltakws_top -o sim && ./obj_dir/sim
```

The whole-chip test runs in a few seconds.
