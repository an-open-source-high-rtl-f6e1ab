# A two-channel 125 MS/s lock-in amplifier in SystemVerilog

A lock-in amplifier recovers a small signal buried in noise. It needs to know
the frequency of that signal. It multiplies the input by a sine and a cosine
at this reference frequency and low-pass filters both products. What survives
the filter is the part of the input that is coherent with the reference. The
sine product gives the in-phase component X and the cosine product the
quadrature component Y. From them follow the magnitude R = sqrt(X^2 + Y^2)
and the phase phi = atan2(Y, X). Noise at other frequencies lands away from
DC after the multiplication, and the filter removes it.

This RTL implements that scheme for an FPGA board with two 14-bit ADCs and two
14-bit DACs, all running at 125 MS/s. It is the logic of a published open-source
FPGA lock-in amplifier, "An open-source high-frequency lock-in amplifier"
(Stimpson et al.). That instrument runs on a Red Pitaya STEMlab 125-14 (Zynq
7010) and demodulates at 10 kHz to 50 MHz. The paper describes the design as a
block diagram and a few numbers. Everything in between has been filled in
here; the last section lists what comes from the paper and what does not.

## Block structure

```
 adc_a ──► ch_proc A ──X,Y,R,phi──►┐                 ┌──► dac_out A ──► dac_a
              ▲  ▲                 │     mem_if      │
              │  │ sin,cos         ├──► (to DACs) ───┤
 timer ──► dds ──┤                 │                 └──► dac_out B ──► dac_b
   │          │  ▼                 │     (to RAM) ─────► mem_valid/addr/data
   │       ref│ ch_proc B ─────────┘        ▲
 adc_b ──────────►                          │ sample_stb
   └────────────────────────────────────────┘
 bus ──► mode_ctrl ──► cfg (all blocks)
```

| Module      | Role |
|-------------|------|
| `lia_top`   | Wires the blocks together. Its ports are the converters, the register bus and the RAM write port. |
| `mode_ctrl` | Register file written by the processor software. Holds every operating parameter and returns the status. |
| `timer`     | Cycle counter, plus strobes that pace the recording and the frequency sweep. |
| `dds`       | Phase accumulator and rotation CORDIC. Produces the sine/cosine reference, the frequency sweep and a scaled reference for the DAC. |
| `ch_proc`   | One channel. Mixer, two `iir_lpf` filters and a vectoring CORDIC, producing X, Y, R and phi. |
| `iir_lpf`   | Single-pole low-pass filter with a programmable time constant. |
| `cordic`    | Pipelined CORDIC used in both modes. |
| `mem_if`    | Passes results to the DACs and records frames of results into a RAM buffer. |
| `dac_out`   | Selects a quantity for one DAC, applies the digital gain (1 to 2000) and saturates. |
| `lia_pkg`   | Widths, the result struct, the configuration struct and the register map. |

## Number formats

Everything runs at the 125 MHz sample clock and takes one sample per cycle.
Nothing is decimated before the RAM recorder.

| Quantity        | Format |
|-----------------|--------|
| ADC sample      | signed 14 bit |
| sine, cosine    | signed 16 bit, amplitude 32767 (within 3 LSB) |
| mixer product   | signed 30 bit, carried in 32 |
| X, Y            | signed 32 bit |
| R               | unsigned 32 bit, saturating |
| phi, DDS phase  | 32-bit fraction of a turn: 2^32 = 2*pi. Read as signed, phi spans -pi to pi |
| filter coefficient alpha | unsigned 32-bit fraction of 1 |
| DAC code        | signed 14 bit |

Take an input A*sin(wt + p), in ADC LSBs, locked to the reference. Then:

    X = A * 32767/2 * cos(p)      Y = A * 32767/2 * sin(p)      R = A * 32767/2

A full-scale input (A = 8191) gives R of about 1.34e8, which is below 2^27.
That leaves ample headroom in 32 bits.

## Reference generation and sweep (`dds`)

A 32-bit accumulator adds the frequency tuning word (FTW) every clock:

    f_ref = FTW * 125 MHz / 2^32        (0.029 Hz resolution)

Some useful tuning words: 10 kHz = 343,597; 500 kHz = 17,179,869;
10 MHz = 343,597,384; 50 MHz = 1,717,986,918.

A rotation-mode CORDIC turns the phase into the sine and cosine. It has 18
stages and 3 guard bits, and rounds at the end. The start vector is
(32767 * 8 * K, 0), with K = 0.60725 the CORDIC gain correction, so the output
needs no multiplier. There is no lookup table. The sine, multiplied by
`ref_amp` / 2^15, is also the reference that can be sent to a DAC.

The sweep steps the FTW by `ftw_step` on each sweep strobe from the timer. The
strobe comes every `sweep_div` cycles. A step that would pass `ftw_stop` goes
back to `ftw_start` instead, so the sweep repeats as a sawtooth. The
`FTW_NOW` register reads the current word. With the sweep off, the FTW is
simply `ftw_start`. The two channels and both DACs all use the same reference
samples. The reference pipeline delay (STAGES + 2 cycles) is therefore common
to all of them, and it only offsets the absolute phase.

## Channel processing and the time constant (`ch_proc`, `iir_lpf`)

The mixer registers adc*sin and adc*cos. Each product then goes through

    y[n+1] = y[n] + alpha * (x[n] - y[n])

The state keeps 32 fraction bits. This lets the filter settle exactly on a
constant input even with a very small alpha. The time constant is
tau = 1 / (alpha * 125 MHz), so

    alpha = 2^32 / (tau * 125e6)

| tau    | alpha |
|--------|-------|
| 9 us (the minimum; a larger alpha is clamped to this) | 3,817,748 |
| 100 us | 343,597 |
| 1 ms   | 34,360 |
| 10 ms  | 3,436 |
| 100 ms | 344 |

The paper chooses tau per demodulation frequency. Its rule is tau >= 10/f_mod;
it used 1 ms at 500 kHz to 10 MHz and 10-100 ms below 100 kHz.

A vectoring CORDIC (24 stages) turns the filtered (X, Y) onto the x axis.
Before the stages, it folds the left half plane over by a rotation of pi. The
final x times K (a 32x34-bit multiply) is R, and the accumulated angle is phi.
X and Y are delayed to stay aligned with R and phi.

Latency: `valid_o` follows `en` by CORDIC_STAGES + 4 = 28 cycles. The four
results of one cycle always belong together. The filter itself dominates the
response time, at about 5*tau to settle.

## Recording into RAM (`mem_if`)

The processor side reads results from a buffer in its DRAM. There the software
copies them into a ramdisk file, which is fetched over Ethernet. The buffer
starts at `BASE_ADDR` and holds up to `BUF_BYTES` = 65,000,000 bytes
(16,250,000 words).

- Writing CTRL[3] starts a recording of `REC_LEN` words. A start during a
  recording is ignored.
- Every `REC_DIV` cycles the timer strobes and `mem_if` latches one frame.
  In dual-input mode a frame is 8 words:
  `X_A, Y_A, R_A, phi_A, X_B, Y_B, R_B, phi_B`. In single-input mode it is the
  first 4.
- The words leave one at a time on a valid/ready write port, at consecutive
  word addresses. Valid, address and data are held until ready; an assertion
  in `mem_if` checks this rule.
- Overrun: if a strobe arrives while words of the previous frame are still
  waiting, the new frame is dropped and `OVERRUNS` counts it. The words
  already in the buffer stay consistent, because a frame is never mixed with
  another.
- After `REC_LEN` words (at most the buffer), `STATUS.done` is set.

A "sample rate" in the instrument's software counts words. Each quantity of
each channel is therefore sampled at 1/8 of it. The power-on setting
`REC_DIV` = 50,000 gives 2,500 frames/s, which is 20 kS/s in those terms.
That is the rate used for the paper's noise measurements. At that rate the
whole buffer lasts 812 s, and a 100 s measurement needs 8 MB.

## DAC outputs and modes (`dac_out`)

Each DAC shows one of X, Y, R, phi or the reference (`DAC_A`/`DAC_B` registers,
bits [2:0]). The value is first scaled to DAC range:

- X, Y and R are shifted right by 14 bits. A full-scale locked input then
  reaches about half of the DAC range.
- phi is shifted right by 18 bits, so that ±pi spans the range.
- The reference is shifted right by 2 bits.

The scaled value is then multiplied by the gain (bits [26:16], 1 to 2000; 0
means 1) and clamped to [-8192, 8191]. `dac_x_sat` marks clamped samples. A
high gain brings small signals above the DAC noise but quickly saturates. The
DAC code is signed two's complement; a board that wants offset binary or
inverted codes needs a final bit flip.

There are two mode bits:

- `input_dual` (CTRL[0]). When 0, channel B is held at zero and frames carry
  channel A only.
- `output_dual` (CTRL[1]). When 0, DAC B carries the reference whatever
  `DAC_B` selects. This is the "reference out" used to drive the modulation of
  an experiment.

## Register map (`mode_ctrl`)

The bus is synchronous: a write happens on the clock edge where `bus_we` is
high, and the read data is combinational from `bus_addr`.

| Addr | Name      | Access | Contents (reset value) |
|------|-----------|--------|------------------------|
| 0x00 | CTRL      | RW | [0] input_dual (1), [1] output_dual (1), [2] sweep_en (0), [3] rec_start (write 1, self-clearing) |
| 0x04 | FTW_START | RW | tuning word (17,179,869 = 500 kHz) |
| 0x08 | FTW_STOP  | RW | last tuning word of the sweep (same) |
| 0x0C | FTW_STEP  | RW | sweep step (0) |
| 0x10 | SWEEP_DIV | RW | cycles per sweep step (125,000); writing restarts the timer dividers |
| 0x14 | ALPHA     | RW | filter coefficient (34,360 = 1 ms), clamped to 1..3,817,748 |
| 0x18 | REC_DIV   | RW | cycles per frame (50,000); writing restarts the timer dividers |
| 0x1C | REC_LEN   | RW | words per recording (BUF_BYTES/4) |
| 0x20 | DAC_A     | RW | [2:0] source 0=X 1=Y 2=R 3=phi 4=ref, [26:16] gain (R, 1) |
| 0x24 | DAC_B     | RW | same (R, 1) |
| 0x28 | REF_AMP   | RW | reference output amplitude, 0x8000 = full (0x8000) |
| 0x30 | STATUS    | RO | [0] recording, [1] done |
| 0x34 | WORDS     | RO | words written in this recording |
| 0x38 | OVERRUNS  | RO | frames dropped in this recording |
| 0x3C | FTW_NOW   | RO | current tuning word (follows the sweep) |
| 0x40 | TIME      | RO | clock cycles since reset, low 32 bits |

The reset values are the operating point of the paper's noise measurements:
dual input, R on both DACs, 500 kHz, 1 ms, 20 kS/s.

## Top-level interface (`lia_top`)

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| clk, rst_n | in | 1 | 125 MHz clock; asynchronous active-low reset |
| adc_a, adc_b | in | 14 | signed ADC samples |
| dac_a, dac_b | out | 14 | signed DAC codes |
| dac_a_sat, dac_b_sat | out | 1 | DAC sample clamped |
| bus_we, bus_addr, bus_wdata, bus_rdata | | 1/8/32/32 | register bus |
| mem_valid, mem_addr, mem_data, mem_ready | | 1/32/32/1 | RAM word writes, byte addresses |

Parameters: `BASE_ADDR` (0x1000_0000), `BUF_BYTES` (65,000,000),
`DDS_STAGES` (18), `CORDIC_STAGES` (24).

To build the instrument, the register bus and the RAM write port must be
bridged to the SoC's processor interfaces. The board-specific ADC and DAC
pins also need adapting. Those bridges are not part of this code.

After synthesis the top is about 1,200 word-level cells and 11,300 flip-flop
bits. Most of the flip-flops are in the three CORDIC pipelines and the X/Y
delay lines.

## Where this follows the paper and where it does not

From the paper:

- the block structure: timer, DDS, two channel processors, memory interface,
  two DAC outputs and mode control, connected as in its block diagram;
- internal sine and cosine references, with X from the sine and Y from the
  cosine;
- a single-pole IIR filter, and a time constant that can be set above 9 us;
- the outputs X, Y, R = sqrt(X^2+Y^2) and phi = arctan(Y/X) for both
  channels;
- 14-bit converters at 125 MS/s;
- a digital DAC multiplier of up to 2000;
- the reference available on a DAC;
- a RAM buffer of about 65 MB that receives all four quantities of both
  channels together, with the "1/8 of the set rate" rule;
- a sweepable generator;
- single and dual input/output modes.

The paper does not say how any of these work inside. The following are this
design's own choices:

- CORDIC for the DDS and for R/phi;
- all word widths and the angle format;
- the filter recursion and running it at full rate;
- what the timer's "time data" is;
- the sawtooth sweep;
- "wave form control" read as reference amplitude;
- what single/dual input/output means, as defined above;
- the frame order, the write port and the overrun rule;
- the DAC scaling shifts and saturation;
- the register map and its reset values;
- the RAM base address.

The paper's conversion of recorded values to millivolts (divide by 2.1e6)
depends on its own scaling and is not reproduced.

Not in this design, and not in the paper's design either:

- an external reference input;
- channel subtraction (A-B);
- linking several boards for more channels (the paper names it but does not
  describe it);
- higher filter orders.

Outside the RTL:

- the ADC and DAC chips;
- the processor and its DRAM;
- the command-line, Python and GUI software;
- the Ethernet transfer.

Analog figures such as input noise, linearity and the 60 MHz half-power point
belong to the board. This logic does not set them.

## Simulation

Every module has a self-checking testbench in `tb/`. Each ends with
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/lia_pkg.sv tb/tb_lia_top.sv --top-module tb_lia_top
    ./obj_dir/Vtb_lia_top

Replace `tb_lia_top` with `tb_timer`, `tb_cordic`, `tb_dds`, `tb_iir_lpf`,
`tb_ch_proc`, `tb_mem_if`, `tb_dac_out` or `tb_mode_ctrl` for one block.
`tb/ram_model.sv` is a behavioural RAM with a random ready, which exercises
back-pressure.

What the testbenches check:

- **`tb_cordic`** compares both modes with real-number sqrt, atan2, sin and
  cos. It also checks the latency.
- **`tb_dds`** compares the sine and cosine with the accumulator phase within
  3 LSB, at 500 kHz and 38 MHz. It also covers the reference amplitude and the
  sweep steps and wraps.
- **`tb_iir_lpf`** checks the analytic step response and exact settling. It
  also compares 3,000 random samples bit-exactly against a 128-bit model.
- **`tb_ch_proc`** drives a locked input at five phases. It checks X, Y, R and
  phi against the formulas above, and that R and phi agree with the X and Y
  output alongside them.
- **`tb_mem_if`** stamps every channel word with its cycle. It checks frame
  order, addresses, the length clamp, single-input frames, and the overrun
  count.
- **`tb_lia_top`** runs the whole design at its default parameters:
  - recording at the power-on settings (500 kHz, 1 ms);
  - the 5 MHz amplitude and the phase difference between channels;
  - rejection of a 6 MHz input;
  - both single modes, DAC saturation, overruns, RAM stalls and the sweep.

  It counts each of these and fails if one never happened. It simulates about
  0.9 million cycles (7 ms of instrument time) in a few seconds.

- **`tb_passband`** reproduces the passband measurement at 10 MHz with a
  1 ms time constant. It detunes the input by 0 to 2.6 kHz and checks the
  steady R against the single-pole response
  |H| = alpha / |1 - (1 - alpha) e^(-j 2 pi df / f_clk)|. The -3 dB point of
  that response is 159 Hz. Measured R is within 0.3 % of the prediction at
  every offset.
- **`tb_freq_range`** covers the working band from 10 kHz to 50 MHz (six
  frequencies). At each one it sets the shortest time constant suggested
  for that frequency: 1 ms at 10 kHz down to 10 us at 1 MHz, and the 9 us
  floor above that. It checks that the alpha register reads back clamped.
  The reference on DAC B is looped into ADC A:
  - R matches the loop amplitude within 0.1 % at every frequency;
  - phi follows a pure delay of two clock cycles within 0.01 rad.

  This shows that the digital chain is flat up to 50 MHz. The roll-off of a
  real board near 60 MHz comes from its analog converters.

Longer time constants only need more cycles. The paper's 100 ms at 1 kHz
would need tens of millions of cycles per settling. That is correct but slow
in simulation, so the tests use 1 ms and 10 us.
