# Real-time tone-multiplexed readout for kinetic inductance detector arrays

A microwave kinetic inductance detector (MKID) is a superconducting resonator.
Light falling on it shifts its resonance, and that changes the amplitude and
phase of a microwave tone sent through it at its resonant frequency. Hundreds
of such resonators, each tuned 1 to 2 MHz from the next, can hang on one
transmission line. The whole array is then read out with one cable in and one
cable out: a comb holding one tone per resonator goes in, and each tone's
amplitude and phase are measured on the way back.

This RTL is the FPGA part of such a readout. It builds the comb in real time
from up to 128 numerically controlled oscillators. In the same clock domain it
demodulates the returning signal with one digital down-converter per tone.
Every tone is generated and processed in parallel at the 250 MHz sample rate,
which gives a 125 MHz analog band. Any tone can be retuned at any time without
disturbing the others. The analog parts sit outside the FPGA: a dual 14-bit
DAC, an IQ up-mixer, the cryostat, amplifiers, a down-mixer and a 12-bit ADC.
So the FPGA sees a baseband comb going out and a baseband signal coming back.

```
 slow control ──► usb_if ──freq, enable──► tone_manager ×128 ──sin──► comb_adder ─19b─► attenuator ─14b─► dac_q
   (writes)         │                      │ phase_acc (17 b)  ──cos──► comb_adder ─19b─► attenuator ─14b─► dac_i
                    │                      │ cordic (12 b sin/cos)                          │ over-range counts
                    │                      │ iq_demod (×adc, 20 MSB)   ◄────────── adc_data (12 b)
                    │                      │ cic_lpf ×2 (38 b acc → 32 b)                   │
 readout ◄──────────┴── I,Q ×128 at every frame end ◄──── frame_ctrl (2^18 samples) ────────┘
```

## Tone manager

Each tone has its own `tone_manager` (`rtl/tone_manager.sv`). It contains:

* **Phase accumulator** (`phase_acc`). This is a 17-bit register. The tone's
  frequency word is added to it every clock. The tone frequency is
  `freq_word × 250 MHz / 2^17`, in steps of 1.907 kHz. A word of 2^16 or more
  gives a negative frequency, which is the alias of a positive one. A new
  word takes effect on the next clock. The phase keeps running from where it
  is, so a retune never causes a phase jump.
* **CORDIC** (`cordic`). A rotation-mode CORDIC turns the phase into a 12-bit
  sine and cosine. It accepts a new angle every clock and uses only shifts,
  adds and subtracts. This part takes the most explaining, so it has its own
  section below.
* **I&Q demodulator** (`iq_demod`). It multiplies the common 12-bit ADC
  sample by the tone's cosine (the I branch) and by its sine (the Q branch).
  Each signed product is 24 bits wide. Only its 20 most significant bits are
  kept.
* **Two low-pass filters** (`cic_lpf`). Each one is a first-order CIC
  decimator, which is the same thing as accumulate-and-dump. It adds 2^18
  products into a 38-bit accumulator, which cannot overflow
  (20 + 18 = 38 bits). At the end of the frame it outputs the top 32 bits of
  the sum and starts again from zero. With 2^18 samples at 250 MHz this is a
  boxcar average of about 1 ms, so the filter bandwidth is in the kHz range.
  The frame rate is 953.7 Hz.

The demodulator is driven by the same sine and cosine samples that go into
the comb. The loop delay is fixed: comb adders, DAC, analog chain, ADC. So
it only rotates every tone's (I, Q) by a constant angle. Amplitude and phase
*changes* are what the detector gives, and those are unaffected.

Every tone has an enable bit. A disabled tone adds zero to the comb but is
still demodulated, so it acts as a "blind" channel. You can use it to measure
cross-talk or the noise floor at a frequency with no resonator.

### The CORDIC in detail

* **Angle format.** The 17-bit phase is a binary angle: 2^17 is one full
  turn. It is left-aligned into the 20-bit angle of the arctangent table,
  where 2^20 is one full turn. Table entry i is
  `round(atan(2^-i) · 2^20 / 2π)`, for i = 0..11:
  131072, 77376, 40884, 20753, 10417, 5213, 2607, 1304, 652, 326, 163, 81.
* **Folding stage.** If the two top angle bits differ, the angle lies in
  [π/2, 3π/2). In that case the stage subtracts π and starts from the
  negated vector. The remaining angle lies in [−π/2, π/2), which is inside
  the CORDIC's ±99.9° convergence range.
* **Twelve micro-rotation stages.** Each stage rotates (x, y) by ±atan(2^-i)
  towards zero residual angle. It uses the shift-add pair
  `x ∓ (y >>> i)`, `y ± (x >>> i)`.
* **Gain compensation.** There is no multiplier. Instead the start vector
  holds the compensation: x0 = K · 2047 · 2^4, where
  K = ∏ 1/√(1+2^-2i) = 0.607253.
* **Output stage.** The x and y registers are 17 bits: 12 output bits, 4
  guard bits and 1 bit of headroom. The output stage rounds off the guard
  bits and saturates to ±2047.
* **Latency and accuracy.** The latency is 14 clocks. The leftover angle
  after 12 iterations is below atan(2^-11), which is about one output LSB.
  The testbench measures a worst-case error of 2 LSB over the full angle
  sweep.

## Comb adders and attenuators

Two `comb_adder` trees sum the 128 sines and the 128 cosines. Each tree has
one register per level. With 7 levels that gives 7 clocks of latency and a
19-bit result, which cannot overflow.

The DAC takes only 14 bits, so each comb passes through an `attenuator`. It
shifts the comb right arithmetically by a shift value chosen by software,
from 0 to 5. A shift of 5 covers the worst case, all 128 tones at full scale
in phase: 128 × 2047 >> 5 = 8188. A smaller shift gives more DAC resolution
per tone but can clip. Any sample that still does not fit in 14 bits is
handled in three ways:

* it is saturated;
* it raises `over_range_i` or `over_range_q`;
* it is counted.

The two counts for the last frame go out with each frame's data. Software
picks the largest safe shift from them.

The cosine comb drives DAC channel I and the sine comb drives channel Q. This
matches the I/Q convention of the demodulator (I = signal × cos).

## Frames and readout

`frame_ctrl` is a single free-running 18-bit sample counter shared by
everything. It strobes `frame_end` on the last sample of every frame. The
frame length, 2^18 samples, is a multiple of the phase accumulator's longest
period (2^17). So every tone makes a whole number of turns per frame, and
there is no beat between the tone and the frame.

* One clock after `frame_end`, all 256 filters present their sums.
* `usb_if` copies the sums into a readout buffer, together with a header and
  the two over-range counts.
* It then streams the buffer out as 32-bit words on a valid/ready interface:

| word | content |
|---|---|
| 0 | header: bit 31 `overrun`, bits 15:0 number of frames completed |
| 1 | over-range count of the I comb in this frame |
| 2 | over-range count of the Q comb |
| 3 + 2k | I sum of tone k (signed) |
| 4 + 2k | Q sum of tone k (signed) |

A frame has 3 + 2 × 128 = 259 words, that is 1036 bytes × 953.7 frames/s ≈
0.99 MB/s. The buffer lets the next frame accumulate while the previous one
drains, so the consumer has a whole frame time (about 1 ms) to take 259
words.

If a frame ends while the previous readout is still running, that frame is
dropped, never mixed, and the next header has `overrun` set. The frame number
in the header also shows the gap.

Words stay valid and stable until taken. An assertion in `usb_if` checks
this.

Slow control is a plain write port: `wr_en`, word address `wr_addr`
(8 bits for 128 tones), and 32-bit `wr_data`. A write takes effect on the
next clock. All registers reset to zero, meaning every tone is off at
frequency 0 with shift 0.

| address | bits | register |
|---|---|---|
| k = 0..127 | 16:0 | frequency word of tone k |
| k = 0..127 | 31 | enable of tone k |
| 128 | 2:0 | attenuator shift (values above 5 act as 5) |

## Scaling of the results

Take a tone of ADC amplitude A (in LSB), demodulated over one frame of
2^18 samples. Its I&Q magnitude is

    |(I, Q)| = 2^18 · A · 2047/2 / 2^10

The 2^10 comes from dropping 4 bits at the product and 6 bits at the 32-bit
output. The angle of (I, Q) is the tone's phase at the ADC relative to the
tone's own cosine.

With the DAC looped straight back into the ADC, the ADC sees the DAC sample
shifted right by 2. Then A = 2047 / 2^shift / 4, and at shift 5 each tone
reads about 4.19 × 10^6. These are the numbers the full-size testbench
checks.

## Timing summary (clocks of the 250 MHz sample clock)

| path | latency |
|---|---|
| register write → phase accumulator uses new word | 1 |
| phase register → CORDIC output | 14 |
| CORDIC output → comb sum | 7 (log2 of tone count) |
| comb sum → DAC port, over-range flag | 1 |
| ADC port → demodulated product | 1 |
| last sample of frame → sums valid / readout starts | 1 / 2 |

The design is fully pipelined: one ADC sample in, one DAC sample pair out,
and one product per tone and branch, all on every clock. It has a single
clock and a synchronous active-high reset.

## What follows the original design, and what is added here

From the original design:

* the structure in the diagram above;
* the 128 tone managers;
* all the widths: a 17-bit phase accumulator; a pipelined CORDIC of adders
  only, with 12 iterations, twelve 20-bit arctangents and 12-bit sine and
  cosine; 20 MSBs of the products; 38-bit accumulators over 2^18 samples;
  32-bit results; 19-bit pipelined comb adders with one stage per addition;
  a right-shift attenuator down to 14 bits;
* counting of over-range samples per frame;
* a 12-bit ADC.

Choices made here, where the original says nothing:

* **CORDIC.** The angle unit, the quadrant folding, the guard bits, rounding
  and saturation.
* **Demodulator.** It truncates the products rather than rounding them.
* **Filter output.** Which 32 of the 38 accumulator bits are output (the top
  32).
* **Attenuator.** It saturates instead of wrapping. It tests whether a
  sample fits after the shift.
* **Shared timing.** One frame timer serves all tones.
* **Tone enables.** The per-tone enable bits.
* **Interfaces.** The whole slow-control and readout interface: register
  map, frame format, valid/ready handshake, snapshot buffer, overrun policy.
* **DAC channels.** Which comb goes to which DAC channel.
* **Reset values.** All of them.

Not included:

* The ADC and DAC capture and launch logic. These depend on the device and
  the converter chip.
* The USB micro-controller itself and the host software. The host is where
  further averaging happens (to about 20 Hz), along with derivatives and the
  choice of shift.
* The clocking and trigger inputs for synchronising several boards.

The top-level ports carry two's complement samples, one per clock, where
those interfaces would connect.

Known limits of the design as it stands:

* 128 tones cannot cover the 144-pixel or 256-pixel arrays of the camera it
  was made for.
* The 125 MHz band holds about 64 resonators at 2 MHz spacing.
* Tone amplitude cannot be set per tone; every tone is at full scale before
  the common shift.

## Files

`rtl/` holds one module per file:

| file | contents |
|---|---|
| `kid_pkg.sv` | shared widths, the arctangent table, the header type |
| `phase_acc.sv`, `cordic.sv`, `iq_demod.sv`, `cic_lpf.sv` | the parts of a tone |
| `tone_manager.sv` | one tone, built from the above |
| `comb_adder.sv`, `attenuator.sv` | comb summing and DAC scaling |
| `frame_ctrl.sv` | the shared frame timer |
| `usb_if.sv` | slow control and readout |
| `kid_daq_top.sv` | the top level, `kid_daq_top` |

Every module's parameters default to the full design. The sizes can be
reduced for experiments: `kid_daq_top #(.N_TONES(8), .LOG2_FRAME(12))`.
`N_TONES` must be a power of two. The attenuator's shift range then becomes
log2(N_TONES) − 2.

`tb/` has one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_phase_acc` | exact phase every clock through random retunes |
| `tb_cordic` | full angle sweep plus random angles against real sin/cos, ±2 LSB, 14-clock latency |
| `tb_iq_demod` | exact truncated products, including extreme values |
| `tb_cic_lpf` | exact frame sums, including full-scale frames of 2^18 samples, strobe timing |
| `tb_comb_adder` | 128-input sums, including all-max and all-min, 7-clock latency |
| `tb_attenuator` | shift, saturation, flag and per-frame counts |
| `tb_frame_ctrl` | frame strobe and count with `run` gaps |
| `tb_usb_if` | register map, readout words under back-pressure, snapshot, overrun flag |
| `tb_tone_manager` | I&Q sums against real-valued demodulation of a synthetic ADC tone, retunes, enable |
| `tb_kid_daq_top` | 8 tones with 4096-sample frames and DAC→ADC loopback (details below) |
| `tb_kid_daq_full` | full size (details below) |
| `tb_kid_optical64` | full size, 64 detectors with a responding pixel (details below) |

`tb_kid_daq_top` checks every DAC sample against a real-valued comb model.
It also checks the over-range counts against flags seen at the ports, the
tone magnitudes, and that a blind tone stays below 1 %. It makes an on-line
retune, a tone switch-on, shift changes, saturation, readout stalls and a
readout overrun each happen at least once.

`tb_kid_daq_full` runs at full size: 128 tones (120 on, 8 blind) and two
2^18-sample frames. It checks the second frame's 256 results and samples
the DAC output against the model. It takes about a minute of simulation
after about a minute of compilation.

`tb_kid_optical64` is the multi-pixel observing case, also at full size.
Sixty-four tones sit about 2 MHz apart. The testbench generates the array's
output itself: each tone gets its own amplitude and phase. Between two
frames, one pixel's transmission drops by 30 % and turns by 0.4 rad. The
test checks every tone's measured magnitude (2 %) and angle (0.02 rad). It
also checks that the neighbouring tone moves by less than 0.1 % while the
pixel moves by about 45 %; the measured movement is below 0.003 %. This
check on the neighbour is the digital side of a cross-talk measurement.

Running a testbench with Verilator (5.x):

    verilator --binary --timing --assert -Irtl rtl/kid_pkg.sv tb/tb_kid_daq_top.sv \
              --top-module tb_kid_daq_top -Mdir obj -o sim
    ./obj/sim

Verilator finds the modules by their file names in `rtl/` (`-Irtl`). The
package must be given first. Lint a module with
`verilator --lint-only -Wall -Irtl rtl/kid_pkg.sv rtl/<module>.sv`.
The remaining lint warnings are about bits that are deliberately unused: the
dropped product LSBs, the unused bits of the write data, and the strobes of
tone managers other than tone 0, all of which are identical.
