# BenchLink PHY: a burst link with programmable pilot density

Two small drones, or a drone and a ground station, each carry their own oscillator and have no GPS
to discipline it. Their carriers therefore disagree by a frequency offset that drifts with
temperature and motion. A single preamble at the start of a burst corrects most of that offset,
but whatever remains turns the constellation slowly during the rest of the frame. Known pilot
symbols inside the frame can measure and remove that rotation, but each pilot costs a data symbol.

This design is the programmable-logic half of a software-defined link built around that
trade-off. The number of pilot repetitions per subframe, **λp**, is a register. Software can change
it between frames, together with the modulation (4, 8, 16 or 64QAM). A slow, stable channel can run
with one pilot block per subframe. A fast-changing air-to-air channel can use up to eight. The RTL
contains both ends of the link. The transmitter turns 64-bit AXI4-Stream words into framed,
pulse-shaped I/Q samples. The receiver turns I/Q samples back into 64-bit words. The processor
programs both through AXI4-Lite. The RF transceiver, its vendor interface core and the software
on the processor are outside the RTL.

## Frame format

```
| preamble 128 | training 128 |  subframe 0  |  subframe 1  | ... |  subframe 7  |
                                \______________ 8 x 256 = 2048 symbols ______________/
subframe (λp = 3 shown):  | P16 | data | P16 | data | P16 | data |
```

* **Preamble and training sequence.** Both are the same 128-symbol BPSK Golay sequence. It is built
  as `[a64 b64]` from a 64-long complementary pair, so its autocorrelation has a sharp peak. The
  receiver uses it twice. The correlator finds the end of each copy. The autocorrelation between the
  two copies, 128 symbols apart, gives the frequency offset.
* **Subframe.** Each subframe is 256 symbols long and holds λp *segments*. A segment is one
  16-symbol pilot block followed by data. A subframe therefore carries `16·λp` pilot symbols and
  `D = 256 − 16·λp` data symbols:

  | λp | pilot symbols | data symbols | 64-bit words per frame (4/8/16/64QAM) |
  |----|---------------|--------------|---------------------------------------|
  | 1  | 16            | 240          | 60 / 90 / 120 / 180                   |
  | 2  | 32            | 224          | 56 / 84 / 112 / 168                   |
  | 4  | 64            | 192          | 48 / 72 / 96 / 144                    |
  | 6  | 96            | 160          | 40 / 60 / 80 / 120                    |
  | 8  | 128           | 128          | 32 / 48 / 64 / 96                     |

  When `D` is not a multiple of λp (λp = 6 gives 160/6), the first `D mod λp` segments carry one
  extra data symbol. Values of λp outside 1..8 are clamped.
* **Pilots.** The pilots are 16 QPSK symbols. I carries `a16` and Q carries `b16` of a Golay
  complementary pair, with amplitude 1/√2 (unit power).
* **Payload bits.** The 64-bit words are consumed bit 0 first, 2/3/4/6 bits per symbol. A symbol's
  bits may straddle two words. Every frame size in the table is a whole number of words.
  Constellations are Gray coded on each axis. The low bits select the I level and the high bits the
  Q level. 8QAM is a 4×2 rectangle. All constellations have unit average power.

## Number formats

* **Samples and symbols.** `iq_t` is 16-bit signed I and Q in Q1.14, so 1.0 = 16384.
* **Angles.** Angles are binary: a full turn is 2^16. Inside the CORDIC a turn is 2^20.
* **Normalised frequency.** `est_angle / (2^16 · 128)` cycles per symbol. The NCO increment is
  `est_angle << 9` in 2^32-per-turn units.
* **SRRC taps.** 25 taps in Q1.15: l = 4 samples per symbol, roll-off 0.5, span 6 symbols, unit
  energy. A TX filter followed by an RX filter has a gain of 1.0 at the symbol instants.

## Transmitter

**TX FIFO (`tx_fifo`).** This is an asynchronous FIFO, 512 × 64 bits, with Gray-coded pointers. The
AXI4-Stream slave writes it in the AXI clock domain. The PHY clock domain reads it.
TREADY comes from an SR latch. The latch is set when the FIFO is empty and reset when it is full.
Once the FIFO fills, TREADY stays low until the frame builder has emptied it completely. The
source then sends a new burst of data, not a trickle of single words. While the latch is reset,
the read side sees a `drain` flag.

**Frame builder (`tx_framer`, `packet_fsm`).** The Moore state machine steps through these states:
preamble, training, then pilot and data for each segment. Its outputs select the preamble
generator, the pilot table or the QAM mapper. A frame starts in either of two cases:

* the FIFO holds at least `TXTHR` words (`TXTHR = 0` means exactly one frame's worth for the
  current λp and modulation);
* the FIFO is draining and not empty. Without this rule, a FIFO that filled with fewer words than
  the threshold could never empty and would never raise TREADY again.

If the FIFO runs dry inside a frame, the remaining data symbols carry zero bits. λp and the
modulation are captured at the start of a frame. A 128-bit gearbox cuts the 64-bit words into
symbol-sized bit groups.

**Pulse shaper (`pulse_shaper`).** This is a polyphase SRRC interpolator. Each pulse of
`tx_strobe` (the converter's sample rate) produces one output sample. The shaper requests a new
symbol every fourth strobe. `tx_valid` marks a new `tx_i`/`tx_q` sample one cycle after the strobe.

## Receiver

The receiver processes one sample per `rx_valid`. It never applies back-pressure.

**AGC (`agc`).** The AGC multiplies the input by a Q4.12 gain. It squares the output to measure
power and adds `(target − power)·2^−mu` to the gain for each sample. The gain is clamped to
[1/16, 16). The target and step size are registers.

**Matched filter (`rx_srrc`).** This uses the same 25 taps as the TX filter. It keeps one output in
four, at a phase set by software (`RXPH`). There is no symbol timing recovery. The decimation phase
must match the delay of the channel path.

**Coarse CFO (`cfo_estimator`, `nco_cfc`, `rx_cfo`).** The estimator keeps exact running sums over
a window of M = 128 symbols:

```
C[n] = Σ x[k]·x*[k−128]     P[n] = Σ |x[k]|²     Q[n] = Σ |x[k−128]|²
```

On the training sequence, `C` lines up with the preamble 128 symbols earlier. The angle of `C` is
the phase the offset adds over 128 symbols. The decision metric is `|C| / max(P, Q)`. It is
compared with a programmable threshold (`RXTHR[15:8]`/256) without a divider. While the metric stays
above the threshold, the largest `|C|` is tracked. When `|C|` has not grown for 8 symbols, or the
metric falls below the threshold, the angle of that peak is taken with a CORDIC.

The NCO then rotates every sample by the opposite phase ramp. Samples reach the NCO through a
32-symbol delay line, so the payload after the training sequence is already corrected. After an
estimate, the estimator ignores 2048 symbols, so repeated data inside a payload cannot trigger it.

*Why `Q`:* a metric normalised by `P` alone is not bounded. When a burst ends, the newest window
holds only noise (small `P`) while the delayed window still holds signal. `|C|/P` then becomes
large and the estimator fired at the end of every burst. By Cauchy–Schwarz, `|C| ≤ max(P, Q)`, so
with `Q` the metric stays at or below 1.

**Frame detection (`gcs_correlator`, `frame_sync`, `frame_detector`).**

* *Correlator.* A 128-tap ±1 matched filter (adders only) correlates the corrected symbols with
  the Golay preamble. `detect` is raised when `|MF|·256 > thr·Σ|x|` over the same window, that is,
  when the peak is large relative to the average magnitude of the window. The threshold is
  `RXTHR[7:0]`, default 154 ≈ 0.6. Magnitudes use `max + min/2`. No decision is made until the
  window has filled once after reset.
* *Synchroniser.* The synchroniser requires a second peak exactly 128 symbols after the first,
  because the training sequence repeats the preamble. A peak that comes earlier restarts the count
  from itself. This matters at the start of a burst: the AGC is still settling there and can
  produce a stray peak. After the second peak, the synchroniser counts the 2048 payload symbols
  with the same segment layout as the transmitter. It outputs `is_frame`, `is_pilot` with the pilot
  index, and `is_residual`. `is_residual` is set on every pilot block after the first in the frame.

**Equaliser (`channel_eq`).**

* *Channel estimate.* On each pilot block, the equaliser accumulates `x·conj(xp)`. At the
  sixteenth pilot the sum gives `H = Σ x·conj(xp) / 16`. The equaliser then forms
  `1/H = conj(H)·(2^44 / |H|²)` with a single divider.
* *Correction.* Every symbol after that block is multiplied by the new `1/H`. Because each pilot
  block refreshes `H`, the amplitude, the phase and the phase rotation built up since the previous
  block are all removed at each block. More blocks per subframe (larger λp) means less rotation
  builds up between corrections.
* *Residual phase.* On the pilot blocks flagged `is_residual`, the corrected pilots are also
  correlated with `xp` again. The angle of the inverse of that sum is the residual phase that
  remained after the previous correction. It is reported on `resid_valid` and in the `RESID`
  register. It is a measurement. The correction is the refreshed `H`.

**Demapper and packer (`qam_demapper`, `rx_packer`).** The demapper makes hard decisions with the
same Gray labelling as the mapper. The packer collects the bits into 64-bit words. The last word of
each frame carries TLAST. A 256-word FIFO decouples the packer from TREADY. A word that finds the
FIFO full is dropped and counted in `RXOVF`.

## Control registers (`axil_regs`, AXI4-Lite, 32-bit)

| addr | name   | fields (reset)                                                        |
|------|--------|-----------------------------------------------------------------------|
| 0x00 | CTRL   | [3:0] λp (4), [5:4] modulation 0=4QAM 1=8QAM 2=16QAM 3=64QAM (16QAM) |
| 0x04 | TXTHR  | [15:0] FIFO words that start a frame, 0 = one frame (0)               |
| 0x08 | RXTHR  | [7:0] detection threshold /256 (154), [15:8] CFO threshold /256 (205) |
| 0x0C | AGC    | [15:0] target power (4096 = 0.25), [19:16] loop step exponent (8)     |
| 0x10 | RXPH   | [1:0] matched-filter decimation phase (0)                            |
| 0x14 | CFO    | [15:0] last coarse CFO angle (read only)                              |
| 0x18 | RESID  | [15:0] last residual phase (read only)                                |
| 0x1C | FRAMES | [15:0] frames sent, [31:16] frames received (read only)               |
| 0x20 | RXOVF  | [15:0] RX words dropped, [31:16] AGC gain (read only)                 |

Writes complete in one cycle once address and data are both valid. Reads return one cycle after
ARVALID. Unmapped reads return `0xDEADBEEF`. There is no in-band signalling of λp or the
modulation, so both ends of a link must be programmed alike. The receiver picks up new values
between frames.

## Top-level interface (`benchlink_top`)

| group       | signals                                                                                                                     |
|-------------|-----------------------------------------------------------------------------------------------------------------------------|
| clocks      | `clk`/`rst_n` for the PHY and registers; `s_axis_aclk`/`s_axis_aresetn` for the TX stream                                    |
| AXI4-Lite   | `s_axi_*`, 8-bit address                                                                                                    |
| TX stream   | `s_axis_tdata[63:0]`, `s_axis_tvalid`, `s_axis_tready`                                                                      |
| RX stream   | `m_axis_tdata[63:0]`, `m_axis_tvalid`, `m_axis_tready`, `m_axis_tlast`                                                      |
| TX samples  | `tx_strobe` in (one per DAC sample); `tx_i`, `tx_q`, `tx_valid` out                                                        |
| RX samples  | `rx_valid`, `rx_i`, `rx_q` in                                                                                               |
| status      | `rx_frame` (payload being received), `resid_valid`                                                                          |

Any sample rate works as long as `tx_strobe` and `rx_valid` are at most one per `clk` cycle.

## Departures, limits and open points

* **CFO metric.** The metric includes the delayed-window energy `Q` (see above). With `P` alone,
  the estimator misfires at every burst end.
* **Frame confirmation.** Detection needs two correlator peaks 128 symbols apart, with a restart on
  an earlier peak.
* **Frame length.** A "frame" here is preamble + training + 8 × 256 symbols. A subframe is the
  256-symbol unit that the pilot table describes.
* **Unspecified details.** The pilot and preamble contents, constellations, bit order, SRRC roll-off
  and interpolation factor, FIFO depths and all fixed-point widths are choices of this design.
* **No timing recovery.** The receiver has no symbol timing recovery and no fine frequency loop.
  The residual phase is measured and removed block by block through `H`. It does not feed back into
  the NCO.
* **First frame after idle.** During long idle periods the AGC drives its gain to the maximum. The
  CFO estimate of the first frame after idle is then less accurate while the gain recovers. The
  pilots of that frame still correct the phase.
* **No CRC.** There is no CRC or packet framing inside the payload. TLAST marks frame boundaries
  only. Packet checking is left to software.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the module's output with values
computed inside the testbench, mostly in floating point or from the frame layout, and ends with a
`TB_RESULT checks=N failures=M` line.

| testbench            | what it establishes                                                                                      |
|----------------------|----------------------------------------------------------------------------------------------------------|
| `tb_axil_regs`       | reset values, byte strobes, read-only status, response held until accepted                              |
| `tb_tx_fifo`         | order across unrelated clocks, TREADY held low from full until empty, fill level                        |
| `tb_packet_fsm`      | symbol-by-symbol layout for λp = 1, 2, 4, 6, 8 and clamped values; frame length 2304                    |
| `tb_pilot_lut`       | unit-power QPSK, zero summed autocorrelation sidelobes                                                  |
| `tb_preamble_gen`    | BPSK, complementary halves, sidelobes ≤ half the peak                                                   |
| `tb_qam_mapper`      | every bit pattern of every modulation                                                                   |
| `tb_qam_demapper`    | decisions under noise, saturation beyond the outer levels                                               |
| `tb_tx_framer`       | whole frames bit-exact against a reference, threshold start, zero fill, drain start                     |
| `tb_pulse_shaper`    | bit-exact against direct convolution, one request per 4 strobes                                         |
| `tb_rx_srrc`         | bit-exact against direct convolution at two phases; tap symmetry, energy and Nyquist property           |
| `tb_agc`             | settled gain and power at several levels, both clamps                                                   |
| `tb_cfo_estimator`   | one estimate per burst within 1.5° for offsets of both signs; none on data or burst ends                |
| `tb_nco_cfc`         | rotation within 6 LSB of floating point for several increments                                          |
| `tb_rx_cfo`          | payload phase drift below 3° after correction                                                           |
| `tb_gcs_correlator`  | agreement with a reference on every sample; one detection at the preamble end at two signal levels      |
| `tb_frame_sync`      | every flag of every payload symbol; rejection of single and mis-spaced peaks; recovery from a false peak |
| `tb_frame_detector`  | payload alignment and pilot counts through correlator and synchroniser                                  |
| `tb_channel_eq`      | `H`, equalised data and residual phase for two channels                                                 |
| `tb_rx_packer`       | words bit-exact for all modulations, TLAST placement, drops counted under back-pressure                 |
| `tb_benchlink_top`   | the whole link at default parameters, through a channel model                                          |

`tb_benchlink_top` loops the transmitter back into the receiver. The channel model adds a carrier
offset of 2·10⁻⁴ cycles/sample, a 30° phase, a gain of 0.7, noise and a 3-sample delay. The test
sends 15 frames:

* three λp/modulation switches: 16QAM/λp 4, 64QAM/8, 8QAM/6 and 4QAM/1;
* a burst larger than the FIFO, which makes TREADY drop and the FIFO drain into a zero-filled
  frame;
* a threshold change over AXI-Lite.

The test checks every received word against what was sent, the CFO estimate against the injected
offset, the frame counters, TLAST and the residual phase. It counts each mechanism: estimates,
residual measurements, FIFO full, zero fill, back-pressure, mode switches and threshold start. A
mechanism that never happens counts as a failure. The test runs with all parameters at their
defaults and takes about a second.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/benchlink_pkg.sv tb/tb_benchlink_top.sv \
          --top-module tb_benchlink_top -Mdir obj_top -o sim
obj_top/sim
```

Replace the testbench name to run any other testbench. Modules are found through `-Irtl` by file
name.
