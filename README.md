# Closed-loop sleep modulation: FPGA accelerator for a CNN + BiLSTM sleep stager

This RTL implements the digital part of a wearable closed-loop sleep
modulation system. A single EEG channel, sampled at 256 Hz, is cut into
20-second epochs. An 8-bit quantised neural network classifies each epoch into
one of five sleep stages (W, N1, N2, N3, REM). In the chosen stage, usually
deep sleep (N3), the FPGA fires a short auditory stimulus. The stimulus is
locked to the phase of the slow oscillation, which an analog filter and
comparator detect.

The network does not run on a general-purpose core. It runs on two small
engines that a microcontroller (MCU) drives over an 8-bit memory bus:

* a **convolution engine**, four multiply-accumulate lanes with fused ReLU and
  max-pooling and a programmable address generator;
* an **LSTM engine**, which groups vectors and updates the cell state with one
  shared multiplier and a 38-entry tanh table.

The design point is to meet the budget "one 20-s epoch classified in under
one second at 20 MHz" with four multipliers, about 73 KiB of on-chip RAM, and
weights that stream in from external flash one layer at a time. At the
default parameters a full epoch, weight loading included, takes
**18,478,972 cycles (0.92 s at 20 MHz)** in simulation.

## The network the hardware runs

| part | layers (filters / kernel / stride) | output per epoch |
|---|---|---|
| shape path | conv 128/1280/16, pad 576 → max-pool 12 → 3 × conv 128/8/1 | `a_shape`, 5 × 128 |
| detail path | conv 128/128/16 → max-pool 12 → 3 × conv 128/8/1 | `a_detail`, 5 × 128 |
| sequence | 2-layer bidirectional LSTM, 64 hidden units, over the `a_detail` of the last 3 epochs (15 steps) | `h_f` (last forward state), `h_r` (first reverse state) |
| head | dense layer on `[a_detail, a_shape, h_f, h_r]` (1408 bytes) → 5 logits; softmax/arg-max on the MCU | stage |

Every convolution is followed by batch normalisation and ReLU. For inference,
batch normalisation is folded into the weights and a 16-bit bias, and dropout
disappears.

Both paths map 5120 samples to 313 convolution positions. Pooling by 12 uses
312 of them and leaves 26, and the three 8-tap layers give 19, 12 and 5. With
these shapes the published operation counts come out exactly:

* detail path: 9,830,400 multiplications;
* shape path: 55,836,672 multiplications;
* LSTM: 2,960,640 = 60 cell passes × (49,152 + 192);
* activation memory per path: (26 + 19 + 12 + 5) × 128 = 7,936 bytes.

The shape path's padding of 576 samples per side is inferred from those
numbers; it is not stated anywhere.

The published parameter counts for the two CNN paths (278,528 and 425,984)
only work out with *two* 8-tap layers. The text and the model drawing both
say four convolution layers per path. This design follows the text and the
drawing. The dense layer's published size (376,832 parameters) cannot be split
uniquely, so the 1408 → 5 layer above is this design's reading.

## Number formats and requantisation

Weights and activations are signed 8-bit. The EEG sample (16-bit, offset
binary) is reduced to its top byte. Every engine run ends with the same
requantisation:

```
acc   = bias16 + Σ x·w                      (32-bit)
y     = sat8((acc + 2^(shift-1)) >>> shift)  (round half up)
y     = relu ? max(y, 0) : y
out   = max over the pooling window
```

`shift` (0..31) and `relu` are per-run register fields, so each layer has its
own scale. The LSTM uses fixed formats:

* gate pre-activations and the cell state are Q3.4 (value / 16);
* sigmoid outputs are 0..127 (/128);
* tanh outputs and the hidden state are Q0.7 (/128).

## Convolution engine (`conv_controller`, `conv_datapath`)

The engine reads **one input byte per cycle** and broadcasts it to four MAC
lanes, each with its own weight from a 4-byte-wide weight buffer. Four filters
therefore advance together.

Feature maps are stored with their channels innermost (`addr = pos·C + ch`).
This makes the receptive field of one output position a single contiguous run
of `K·C` bytes starting at `(p·STRIDE − PAD)·C`. One address counter then
serves all layer types:

* **first conv layer:** C = 1, K = 128 or 1280, stride 16, input from the input buffer;
* **8-tap layers:** C = 128, K = 8, stride 1, input from working RAM;
* **dense layer and LSTM gate products:** one "position" with K = 1 and
  C = vector length, output to the output buffer or to gate scratch.

Reads outside `[0, IN_LEN·C)` return zero without a RAM access. This gives
the zero padding for free.

The loop order is filter group g → pooled output q → window position j → tap
t. The four pooled bytes of each output go to
`OUT_BASE + q·OUT_PSTR + 4g + lane`. Lanes at or past `NFILT` are not written,
so filter counts that are not a multiple of four work. Because `OUT_BASE` and
`OUT_PSTR` are free, a layer can write straight into its place inside a larger
vector. For example, `a_detail`, `a_shape`, `h_f` and `h_r` are laid out back
to back, so the dense layer reads them as one 1408-byte vector with nothing
copied.

**Timing:** a run takes exactly `NGROUPS · OUT_LEN · (POOL·K·C + 7)` cycles.
The 7 are pipeline drain plus four write-backs; there are no bubbles inside a
window.

**Registers:** 16-bit registers at byte offset `2·index`, little endian. The
order is CTRL, SRC, DST, IN_BASE, IN_LEN, IN_CH, KSIZE, STRIDE, PAD, NGROUPS,
NFILT, OUT_LEN, POOL, MODE, OUT_BASE, OUT_PSTR. `MODE` holds ReLU in bit 0 and
the shift in bits 12:8. The bias table (256 × 16 bit) sits at byte offsets
0x200–0x3FF. Writing 1 to CTRL starts a run. Reading CTRL returns
`{done, busy}`. Weight word `g·K·C + t` holds the four filters of group g.

## LSTM engine (`lstm_controller`, `lstm_datapath`, `tanh_lut`)

The LSTM engine does not have its own matrix multiplier. One time step takes
three operations:

1. **GROUP** copies `x_t` and `h_{t−1}` into one contiguous vector.
   It takes LEN_A + LEN_B + 1 cycles.
2. **Convolution engine** multiplies that vector by the 256 × (in + 64) gate
   matrix as a dense run with 64 filter groups, writing the 256 gate
   pre-activations in the order i, f, g, o.
3. **CELL** updates each hidden unit in 19 cycles: 5 reads, 2 operand
   cycles, 8 datapath steps, a handshake cycle and 3 writes. The writes are
   c, h and an extra copy of h to an output sequence, or to `h_f`/`h_r` in
   the second layer.

**CLEAR** (LEN_A cycles) zeroes the state. GROUP also serves as a plain copy:
before each epoch the MCU uses it to shift the 3-epoch `a_detail` history.

The cell datapath has **one multiplier used in eight steps**:

* the i, f, g, o activations;
* f·c;
* i·g and the new c;
* tanh(c);
* o·tanh(c) and h.

`done` is high in the 9th cycle after `start` is sampled. The cell equations
are:

```
c' = sat8((σf·c + ((σi·tg) >>> 3) + 64) >>> 7)
h  = sat8((σo·tanh(c') + 64) >>> 7)
```

tanh comes from a 38-entry table `T[i] = round(127·tanh(i/8))`, which covers
|x| < 4.75, with linear interpolation.

* For a Q3.4 argument the index is |v| >> 1 and the fraction is 1 bit.
* Sigmoid is taken from the same table as σ(x) = (1 + tanh(x/2))/2. The index
  is then |v| >> 2, with a 2-bit fraction.

The interpolation products go through the same multiplier. The sign is
restored afterwards.

## Memories and the bus

The MCU talks to everything over a byte bus with a 17-bit address, handled by
`bus_decoder`:

| base | size | block |
|---|---|---|
| 0x00000 | 12288 words × 4 B | weight buffer, write-only; byte lane = addr[1:0] |
| 0x10000 | 8192 B | input half of the I/O buffer, write-only |
| 0x18000 | 256 B | output half of the I/O buffer, read-only |
| 0x1C000 | 0x400 | convolution registers and bias table |
| 0x1D000 | 0x400 | LSTM registers |

* Reads return data in the cycle after the request.
* An access to any other address is dropped and raises `bus_err` for one cycle.
* Every memory is a simple dual-port RAM with one-cycle reads.
* The working RAM (16 KiB) has one port pair. The top gives it to the
  convolution engine while that engine is busy, and to the LSTM engine
  otherwise. An assertion checks that the two are never busy together.

The weight buffer holds 48 KiB. That is all gate weights of one LSTM layer
and direction (64 × 192 words), or up to 64 filter groups of a conv layer.
Larger layers are loaded and run in chunks: the first shape layer needs 4
chunks.

The working RAM layout used by the reference firmware is:

* two 3328-byte ping-pong buffers for the CNN layers;
* three `a_detail` history slots, followed directly by `a_shape`, `h_f` and
  `h_r`, which forms the dense input;
* the first LSTM layer's output sequence;
* scratch space for the GROUP vector, the gates, c and h.

In total 11.6 KiB are used.

## Amplifier interface (`afe_spi_controller`)

The EEG amplifier is an RHD2216-type chip with 16-bit words on SPI mode 0.

* Every `sample_div` clock cycles the controller sends CONVERT(channel)
  followed by two filler commands. It returns the reply to the third word,
  which is the result of the conversion because of the chip's two-word
  pipeline, as `sample` with a one-cycle `sample_valid`.
* `clk_div` sets the SCLK half period.
* Between frames the MCU can send any command word (`cmd_valid`/`cmd_ready`)
  and gets the reply on `resp`/`resp_valid`. This is how registers are
  configured and calibration is started.

The command encoding follows the amplifier family's datasheet.

## Stimulation trigger (`stim_trigger`)

The comparator output of the slow-oscillation band-pass (an asynchronous
input) goes through two flip-flops. The selected edge, rising or falling, is a
zero crossing. If stimulation is enabled and the current stage equals
`target_stage`, the trigger waits `delay` cycles and then holds `stim_on` for
`pulse_len` cycles. `stim_on` rises exactly delay + 3 cycles after the edge.
Crossings while a burst is pending are ignored. Crossings in the wrong stage
are counted in `n_blocked`, and bursts in `n_triggers`. Both are
16-bit counters that wrap around. Delay and length are
32-bit cycle counts, so a phase offset anywhere within a 1 Hz oscillation at
20 MHz can be programmed. Gating by stage follows the
system overview, where the classifier's N3 decision and the oscillation
detection meet in a phase-synchronisation block. The published experiment
triggered without the classifier.

## Top level (`sleep_fpga_top`)

The top instantiates:

* the bus decoder;
* the three memories;
* both engines;
* the SPI controller;
* the trigger.

It brings out:

* the bus and the engine status;
* the AFE controls and the SPI pins;
* the comparator input and `stim_on`.

The current `stage` is an input: the MCU writes it after the softmax. The MCU
itself, the flash, the analog front end, the pink-noise generator and the
class-D amplifier are outside this RTL.

**Parameters:**

| parameter | default |
|---|---|
| `WBUF_DEPTH` | 12288 |
| `WRAM_DEPTH` | 16384 |
| `IBUF_DEPTH` | 8192 |
| `OBUF_DEPTH` | 256 |
| `LANES` | 4 |

All buffer sizes are this design's choices; no sizes are published.

**30-s epochs.** The same hardware also runs 30-s epochs (7680 samples) with
no change. The published model for that case adjusts only the max-pooling
layer, and the pool size is not given. With a pool of 18, both paths again
give 26 pooled positions, so everything after the first layer is identical.
Such an epoch takes 25,507,708 cycles, which is 1.28 s at 20 MHz. That is
well inside the epoch period but above the one-second figure, which was
stated for 20-s input only.

## Firmware sequence per epoch

`tb/tb_sleep_top.sv` contains the complete sequence as bus tasks, and it is
the best reference for driving the design:

1. Acquire 5120 samples through the SPI controller and write their top bytes
   to the input buffer.
2. Shift the `a_detail` history with two GROUP copies (1282 cycles). A ring
   of slots would avoid the copy, but the copy keeps the newest features
   directly in front of `a_shape`, where the dense layer expects them.
3. For each of the 8 conv layers: write weights and biases chunk by chunk,
   program the registers, start, and poll CTRL.
4. For each LSTM layer and direction: load the gate weights once, CLEAR c
   and h, then for each of the 15 steps run GROUP → dense gate run → CELL.
   Walking the steps in reverse gives the backward direction.
5. Run the dense layer into the output buffer, read 5 logits, and take the
   arg-max as the stage.

## Verification

Every module has a self-checking testbench in `tb/`.

* `tb_conv_datapath`: random pooled convolutions against a loop model, plus
  output latency.
* `tb_conv_controller`: small layers with padding, stride, pooling, partial
  groups and both memories, against a loop model, plus the exact cycle
  formula.
* `tb_lstm_datapath`: all formats against an integer model of the cell.
* `tb_lstm_controller`: GROUP, CLEAR and CELL contents and cycle counts.
* `tb_tanh_lut`: the table against its formula.
* `tb_bus_decoder`, the memory testbenches, `tb_afe_spi_controller` with a
  behavioural amplifier model (`rhd_spi_model`), and `tb_stim_trigger` with
  exact burst timing, including the 1 Hz bench test at real time scale
  (20 M cycles per period, 250 ms delay).

`tb_sleep_top` runs the design at its default parameters. It first runs a
tiny network (512 samples, 8 filters, 8 hidden units), then the full 20-s
network, then the 30-s variant, each for three consecutive epochs, with random-hash weights and a
synthetic EEG from the amplifier model. For every epoch it compares these
against an integer model of the whole network written independently in the
testbench:

* `a_shape`, `a_detail`;
* the first LSTM layer's sequence;
* `h_f`, `h_r`;
* the logits.

It checks the one-second budget. It fails if any of these mechanisms never
occurred:

* padding, ReLU clipping, saturation, pooling;
* chunked weight loads, partial filter groups;
* GROUP/CELL/CLEAR, history shifts;
* AFE samples, a bus error;
* blocked and fired stimuli.

The full run takes about 95 s in Verilator.

To simulate with Verilator:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb rtl/sleep_pkg.sv tb/tb_sleep_top.sv --top-module tb_sleep_top
./obj_dir/Vtb_sleep_top
```

Replace the testbench name for any other block. Width warnings in the testbenches are why `-Wno-fatal` is needed. Each testbench prints `TB_RESULT checks=N failures=M`.

The network weights are synthetic, so the classification itself is not
validated. The arithmetic is bit-exact against the model, but accuracy on real
sleep data depends on trained, calibrated weights and shifts, which are not
part of this design.
