# Waveform-triggered capture logic for a 60 GHz software-defined radio

A millimetre-wave radio that samples at 1.536 GS/s produces about 6 GB/s of IQ
data, far more than a companion computer can take in over a socket. This logic
solves that by capturing only what matters: it watches the receive stream all
the time for a short known **trigger waveform**, and when it finds one it
stores a fixed number of samples that follow it. Captures pile up in a buffer
one after another. A transmitter can therefore send bursts at arbitrary times
(for example one burst per beam in a beam sweep), and the computer collects all
captured bursts later at its own pace. A second path plays back a block of IQ
samples on command.

The RTL covers the programmable-logic side of such a radio built on an RFSoC
device: sample FIFOs, transmit and receive packet generators, the trigger
detector, and a register block. The data converters, DMA engines, processor,
RF front end and clocking are outside it and appear as ports.

## Data format and clocks

* The converters run at 1.536 GS/s and the logic at 192 MHz. Every logic clock
  therefore carries **R = 8 samples** per channel. Each sample is 16 bits, so
  the I and Q streams are each 128 bits wide.
* Within a 128-bit beat, sample *j* sits in bits `[16j+15:16j]` and sample 0
  is the oldest. This ordering is a choice made here; keep it consistent with
  the converter configuration.
* `clk_pl` (192 MHz) drives every block. `clk_ps` (100 MHz) drives the DMA
  side of the four FIFOs and the AXI4-Lite side of the register block. Resets are synchronous and active high, one per
  clock, and the two must overlap.
* All streams use AXI-Stream `valid`/`ready`. The ADC streams are taken to be
  valid on every clock, because a converter does not stall.

## Block structure

```
             clk_ps domain              clk_pl domain
 DMA  ──► iq_fifo (DAC, I) ─┐
 DMA  ──► iq_fifo (DAC, Q) ─┴─► tx_packet_gen ───────────────────► DAC I/Q
 DMA  ◄── iq_fifo (ADC, I) ◄┐
 DMA  ◄── iq_fifo (ADC, Q) ◄┴── rx_packet_gen ◄──────────┬──────── ADC I/Q
                                      ▲ t_rx,w           │
                                      └──── detector ◄───┘
                                            (8 x ppd)
 AXI4-Lite ───► monitor ──► configuration of tx/rx, status read-back
```

| file | role |
|---|---|
| `rtl/sdr_pkg.sv` | constants (R, widths, FIFO depth), the Golay sequence, config/status structs |
| `rtl/iq_fifo.sv` | dual-clock FIFO, 2^15 x 128 bits + tlast, occupancy on both sides |
| `rtl/tx_packet_gen.sv` | releases exactly L_tx beats to the DACs on a trigger edge |
| `rtl/rx_packet_gen.sv` | trigger selection, capture FSM, tlast, stop threshold, transfer counter |
| `rtl/ppd.sv` | one preamble detector: polyphase correlator, energy, metric, 4-hit rule |
| `rtl/detector.sv` | slicer for 8 lags, 8 `ppd`s, OR into the trigger, detection counter |
| `rtl/monitor.sv` | AXI4-Lite register file, bus clock to logic clock |
| `rtl/sdr_pl_top.sv` | the whole logic |

## Transmit path

The processing system pads the block to a multiple of 8 samples, DMAs it into
the two DAC-FIFOs, writes `L_tx = ceil(S_tx/8)` and then writes `t_tx` from 0
to 1. `tx_packet_gen` sees the rising edge and raises its **enable** line for
exactly `L_tx` beats. Enable is ANDed into the data to the DAC, the valid to
the DAC, and the ready back to the FIFO. Nothing leaves the FIFOs while
enable is low, and the DAC then sees zero data. With data already in the
FIFOs, beats leave one per clock from the clock after the edge, which is the
full sample rate. A FIFO holds 2^15 beats, so up to 2^18 samples can be
played without underflow. A trigger edge during a transfer is ignored.

## Receive path

`rx_packet_gen` gates the ADC streams into the ADC-FIFOs in the same way. A
capture ("transfer") is `L_rx` beats long, and its last beat carries
`tlast`.

**Trigger selection.** The mode flag `m_rx` drives a multiplexer:

* `m_rx = 0`, software-triggered reception: only the register bit `t_rx,s`
  starts a capture. Use this to record whatever is on the air.
* `m_rx = 1`, waveform-triggered reception: `t_rx,s OR t_rx,w` starts a
  capture, where `t_rx,w` is the detector output. The software trigger still
  works in this mode, which is useful for tests.

A capture starts on a **rising edge** of the selected trigger if `e_rx` is 1.
The enable line rises on the next clock, so the first stored beat is the one
that arrives one clock after the trigger edge is seen. Trigger edges during a
capture are ignored. Each completed capture increments `N_trans`. Holding
`r_trans` at 1 keeps `N_trans` at zero.

**Buffering and the stop threshold.** In waveform mode, captures of
`L_rx` beats land back to back in the ADC-FIFOs. The FIFO fill level is
`D_adc,I`, the write-side count of the I FIFO. A capture may start only while
`D_adc,I < D_th`. Software sets

    D_th = L_rx * floor(2^15 / L_rx)

so the buffer takes exactly `floor(2^15 / L_rx)` whole captures. Any trigger
after that is dropped, and no capture is ever cut short by a full FIFO. The
computer reads `N_trans` and then DMAs `N_trans * L_rx` beats. The `tlast`
marks separate the captures. In software mode the threshold is not checked.

**Flushing the buffer.** The top-level input `adc_fifo_flush` lives in the
DMA clock domain. While it is high, both ADC-FIFOs are read at one beat per
clock, the beats are dropped, and the DMA sees no valid beat. Hold it until
`D_adc,I` reads 0; a full buffer takes 2^15 DMA clocks. Combine it with
`r_trans` to start a new sweep from an empty buffer. Draining is used rather
than a reset, because resetting one side of a dual-clock FIFO while the other
side runs would break its Gray-coded pointers.

## Trigger waveform and detector

This is the part that needs the most care.

**The waveform.** A binary Golay sequence *g* of length 32 is repeated four
times and BPSK-mapped to ±1. Each chip is then held for 4 samples, so the
waveform is 512 samples long. The radio sends it root-raised-cosine filtered
(roll-off 0.5, 576 MHz wide). The detector correlates with the rectangular
version, so every tap is ±1 and every "multiplication" becomes an addition or
a subtraction. The 128 taps cover one repetition:

    b_k = 2 g_{31 - floor(k/4)} - 1,   k = 0..127

Here `b_0` multiplies the newest sample. The sequence in `sdr_pkg` is the
standard recursive one (a' = [a b], b' = [a −b], from a = b = [1]). Change
`GOLAY` to use another sequence; the transmitter must use the same one.

**The metric.** For the 128-sample window ending at sample *n*:

    rho_n = sum_{k=0}^{127} b_k x_{n-k}          (complex; I and Q use the same taps)
    E_n   = sum_{k=0}^{127} |x_{n-k}|^2
    m_n   = |rho_n|^2 / (128 * E_n)               (0 <= m_n <= 1)

A **hit** is `m_n > 1/4`. In hardware this is the exact integer comparison
`|rho_n|^2 > 32 E_n`, so no division is needed. Because the metric is
normalised by the received energy, it does not depend on the gain. Because it
uses |rho|, it does not depend on a constant phase rotation.

**The detection rule.** A hit must occur four times, 128 samples apart, once
on each repetition of *g*. A residual carrier-frequency offset rotates the
phase from one repetition to the next, but it barely affects any single
128-sample correlation. Requiring four hits in a row also keeps noise from
triggering captures.

**Eight samples per clock: polyphase correlator.** The correlation is
evaluated once per clock for a given lag and split into 8 sub-filters:

    rho_n = sum_{l=0}^{7} sum_{k=0}^{15} b_{8k+l} x_{n-8k-l}

Column *l* of `ppd` receives `x_{n-l}` and is a 16-tap **transposed-form**
FIR. The tap `b_{120+l}` sits at the far end and `b_l` next to the output,
with a register after every adder and one more at the output. A 3-stage
adder tree then sums the 8 columns. Each clock the window energy is updated
as a running sum over the last 16 beats (add the newest beat's energy,
subtract the one from 16 clocks ago), delayed to line up with `rho`. The next
stages square `rho`, compare, and keep a 49-clock history of hits. A
detection is `hit[t] & hit[t-16] & hit[t-32] & hit[t-48]`. All arithmetic is
at full precision: 21-bit columns, 24-bit `rho`, 49-bit `|rho|^2`, 40-bit
energy.

**Eight lags.** The waveform can end at any of the 8 positions of a beat. The
detector keeps the previous beat and, for lag *l*, slices the 8 samples
`x_{n-l} ... x_{n-l-7}` out of the last 16, where *n* is the newest sample.
There are 8 `ppd` instances, one per lag, and their detections are ORed into
`t_rx,w`. Detections of lag 0 are counted in `N_detect`, one per rising edge.

**Latency.** `hit` is valid 6 clocks and `det` / `t_rx,w` 8 clocks after the
beat that closes the window. The receive FSM sees the trigger in that clock,
so the first captured beat is the 9th beat after the beat that completed the
trigger waveform. Put at least 72 samples of padding or a test pattern
between the trigger and anything that must be captured.

## Register map (AXI4-Lite, 32-bit, `monitor`)

| addr | name | access | meaning |
|---|---|---|---|
| 0x00 | L_tx | RW | transmit length in beats (bits 15:0) |
| 0x04 | t_tx | RW | bit 0: transmit trigger, acts on 0→1 |
| 0x08 | L_rx | RW | capture length in beats (bits 15:0) |
| 0x0C | e_rx | RW | bit 0: capture enable |
| 0x10 | r_trans | RW | bit 0: hold N_trans at 0 |
| 0x14 | D_th | RW | stop threshold on D_adc,I (bits 15:0) |
| 0x18 | t_rx,s | RW | bit 0: software capture trigger, acts on 0→1 |
| 0x1C | m_rx | RW | bit 0: 0 software, 1 waveform triggered |
| 0x20 | N_trans | RO | completed captures |
| 0x24/0x28 | D_adc,I / D_adc,Q | RO | ADC-FIFO fill (beats) |
| 0x2C/0x30 | D_dac,I / D_dac,Q | RO | DAC-FIFO fill (beats) |
| 0x34 | N_detect | RO | detection events of lag 0 |

The registers live on the bus clock (`clk_ps`). The packet generators and the
detector run on `clk_pl`, so two handshakes connect the two clocks:

* **Configuration (bus to logic).** An accepted write toggles a request bit.
  The logic side synchronises it, copies all eight registers into its own
  flops at once, and toggles an acknowledge back. Until that acknowledge
  arrives, the bus side accepts no further write and withholds `BVALID`. The
  registers therefore cannot change while they are copied. Once software has
  the write response, the logic is already using the new value. A write
  takes about 2 bus and 2 logic clocks longer than a plain register write.
* **Status (logic to bus).** The logic side copies the six counters into a
  holding register and toggles a request. The bus side copies the holding
  register and acknowledges, and then the cycle repeats. A status read
  therefore returns a value a few clocks old, at most about 100 ns at the
  default clocks. Wait that long after an event before reading its effect.

Reads return one bus clock after `ARREADY`. Byte strobes are honoured.
Read-only and unmapped writes are ignored, and unmapped reads return 0.
Both resets must be applied together.

## Typical use

*Beam sweep receiver:* write `L_rx`, then `D_th` as above, `m_rx = 1` and
`e_rx = 1`. Wait while the other radio sends its bursts. Read `N_trans` and
DMA `N_trans * L_rx` beats. Before the next sweep, pulse `r_trans`. If any
beats were left unread, also hold `adc_fifo_flush` until `D_adc,I` reads 0.

*Capacity at the defaults:* one FIFO holds 32768 beats. A sweep of 64 bursts
with 1580 captured samples each needs `64 * ceil(1580/8) = 12672` beats.
With `L_rx = 256` it needs 16384 beats. A transmitted burst of trigger (512)
+ test pattern (150) + a 1280-sample OFDM frame is 243 beats. All of these
fit, as does a single 2^18-sample recording.

## Where this RTL departs from or adds to the paper

* **FIFOs.** The original uses vendor AXI FIFOs. `iq_fifo` is a generic
  dual-clock replacement of the same depth and width, with first-word
  fall-through. The flush is a drain controlled by a top-level input (see
  above). The original flushes the FIFOs without saying how, and it has no
  flush register.
* **Metric normalisation.** The paper's equation for the metric gives three
  forms that disagree by constant factors; one of them can never reach 1/4.
  This RTL uses the Cauchy–Schwarz-normalised form above, which lies in
  [0, 1] and makes the 1/4 threshold meaningful.
* **Golay sequence, sample order, lag definition, bit widths, register
  addresses, counter widths, reset behaviour, edge detection, AXI4-Lite
  details** are not given in the paper and were chosen here.
* **Threshold scope.** The stop threshold applies in waveform mode only,
  including a software trigger given in that mode. `N_trans` also counts
  software-triggered captures. `e_rx` gates only the start of a capture.
* **Register block clocking.** The original draws the register block
  across the 100/192 MHz boundary but does not say how the values cross.
  The two handshakes described above are this design's own.
* **I and Q in lockstep.** Both packet generators count beats on the I
  stream and assume that Q moves with it. This holds because both FIFOs of a
  pair are written before a trigger and the converter streams never stall.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/sdr_pkg.sv tb/tb_ref_pkg.sv tb/tb_sdr_pl_top.sv --top-module tb_sdr_pl_top
./obj_dir/Vtb_sdr_pl_top
```

Replace the top module with `tb_ppd`, `tb_detector`, `tb_detector_rrc`, `tb_rx_packet_gen`,
`tb_tx_packet_gen`, `tb_iq_fifo` or `tb_monitor`. `tb_ref_pkg` is needed only
by the detector, ppd and top testbenches. The testbenches use
`` `timescale 1ns/1ps ``; add `--timescale 1ns/1ps` if Verilator asks for a
default. It models the detector directly
from the metric definition, on the recorded sample history, with its own
Golay construction.

What the testbenches establish:

* `tb_ppd`, `tb_detector`: bursts at random gains, phases and sample
  offsets, some near full scale, in noise. Every clock, every lag's hit and
  detection output must match the reference, including the 6- and 8-clock
  latencies and the `N_detect` count.
* `tb_detector_rrc`: the trigger waveform as it would be transmitted
  (root-raised-cosine shaped, roll-off 0.5, with a random carrier offset of
  up to ±3 MHz and noise about 25 dB down), against the rectangular taps.
  All 12 bursts must be detected, with no trigger on noise, and the outputs
  must match the reference bit for bit.
* `tb_rx_packet_gen`, `tb_tx_packet_gen`: exact beat counts, beat identity
  and order, one beat per clock, start one clock after the trigger edge,
  `tlast` placement, mode and enable gating, the stop threshold at
  `floor(64/L_rx)` captures, and the `N_trans` reset.
* `tb_iq_fifo`: fill to exactly 2^ADDR_W, ordered random streaming across
  the two clocks, and settled counts.
* `tb_monitor`: every register, strobes, status read-back and read-only
  behaviour, with the bus at 100 MHz and the logic at 192 MHz. Each field
  must reach the logic side before its write response.
* `tb_sdr_pl_top`: runs at the default sizes. The DAC is looped back to the
  ADC through a delay/gain/noise channel. It covers a software capture and a
  full beam sweep: 64 bursts, each a trigger waveform plus a 1580-sample
  payload carrying the burst index, sent at irregular times and sample
  offsets, with every eighth burst far below the noise. The 56 bursts above
  the noise must be stored as 198-beat captures, and nothing else may be
  stored. Each capture is compared beat by beat with the one the reference
  detector predicts, and the burst index decoded from it must match. The
  test goes on with a software trigger in waveform mode, a counter reset,
  and a buffer filled to its threshold (L_rx = 10000: three captures, a
  fourth trigger refused, 30000 beats read back with `tlast` every 10000).
  It ends with a flush of two buffered captures, followed by a clean capture.
  It takes about 10 seconds.

Not verified: timing closure at 192 MHz (the correlator has about 2 000
21-bit adders), behaviour with the real converter IP, and multipath
channels. Only the detector testbench uses the shaped waveform; the
end-to-end test loops back the rectangular waveform over a flat channel.
