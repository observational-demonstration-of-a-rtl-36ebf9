# An all-digital FFT radio spectrometer on one FPGA

A radio spectrometer turns an intermediate-frequency (IF) signal into an
integrated power spectrum. Usually that takes a separate high-speed ADC chip, a
board to carry it and an FPGA for the FFT. This design drops the ADC chip.

The ADC is built from FPGA resources alone:

- An LVDS input pair acts as a comparator between the IF signal and a
  triangular reference wave.
- The reference is the clock itself, shaped into a triangle by an external RC
  network.
- The comparator output goes through a 200-element carry-chain delay line,
  sampled on every clock edge. This measures *when* the signal crossed the
  reference ramp.

Because the ramp is linear in time, that crossing time is the sample value.
One 300 MHz clock period holds one falling and one rising ramp, so each clock
gives two samples: 600 MSa/s in all. Those samples feed two 1024-point FFT
cores, a power stage and a long integrator. The integrated spectrum is read by
the processor on the same chip.

The SystemVerilog here covers all the digital logic behind the delay line:

- the TDC decoder with its calibration tables,
- the frame buffer,
- two streaming FFTs,
- the power computation,
- the accumulator with its two result banks,
- the AXI4-Lite register block.

Two things are behavioural models used only in simulation, not synthesizable:

- the analog front end (comparator, reference and delay line), in
  `tb/atc_tdl_model.sv`;
- the processor's bus accesses, in `tb/axil_bfm_if.sv`.

## Signal chain

```
 IF ──► LVDS comparator ──► input delay (32 levels) ──► 200-tap carry chain
        ▲ triangular reference (clock + RC)                    │ taps, 300 MHz
                                                               ▼
 tdc_decoder    popcount of each 100-tap half ──► 101-entry table ──► 2 × 25-bit D_in / clk
                                                               ▼
 input_buffer   4 banks × 1024 words, frames alternate ──► FFT 1 / FFT 2, bit-reversed order
                                                               ▼
 fft_r2dit ×2   1024-point radix-2 DIT, single-delay-feedback pipeline, 1 sample / clk
                                                               ▼
 power_spectrum ×2   |X|² of bins 0..511 (50 bits)
                                                               ▼
 spec_accumulator    65,536 spectra into 64-bit words, two banks used in turn
                                                               ▼
 adrs_axi_regs       AXI4-Lite: delay level, tables, snapshot, spectrum readout
```

`rtl/adrs_top.sv` wires these together. Parts outside the FPGA fabric logic
are plain ports of the top:

- `tdl_taps[199:0]`: the delay-line taps.
- `idelay_tap[4:0]`: the setting of the input-delay primitive.
- The `s_*` AXI4-Lite slave port.
- The 300 MHz `clk`, which also produces the reference wave.

Everything runs in that single clock domain.

## The ramp-compare ADC and its decoder

During one clock period the reference falls from +V to −V and rises back. The
comparator output `T_in` is therefore a pulse: high while the input lies above
the reference. Its rising edge is where the falling ramp crosses the input. Its
falling edge is where the rising ramp crosses it.

The delay line has 200 taps of about 16.7 ps each, 3.33 ns in all, which is one
clock period. Sampling it on a clock edge gives a snapshot of `T_in` over the
whole last period:

- Taps 0–99 (the anterior half) cover the half-period that holds the positive
  edge.
- Taps 100–199 (the posterior half) cover the half-period that holds the
  negative edge.

Within a half, the number of high taps says where the edge lies. `tdc_decoder`
counts them instead of searching for a thermometer edge. Counting tolerates
bubbles, where a fast tap overtakes a slow one. The result is a count of
0..100 per half.

Neither the ramp nor the tap delays are linear. Each count therefore goes
through its own 101-entry table (one per half) to give a 25-bit signed value,
`D_in`, in units of 1/256 mV.

- At reset both tables hold the straight line `(count − 50) · 256`.
- Timing: taps are registered at edge *n*, counts at *n+1*, and table outputs
  at *n+2*.
- The posterior sample is the older one, so it leaves first (`s0`), followed
  by the anterior one (`s1`).

### Calibration through the bus

The processor calibrates the ADC with two procedures. `tb/adrs_top_tb.sv`
performs both exactly this way.

1. **Phase.** With no input signal, the two edges must sit in the middle of
   their halves. The processor steps the input delay (register `IDELAY`, 32
   levels over about 1.6 ns). At each level it freezes one raw code
   (`CTRL` bit 1). It reads the two counts (`SNAPCNT`) and the 200 raw bits
   (`SNAPCODE`), and keeps the level whose counts are closest to 50/50. That puts the two
   edges near taps 50 and 150.
2. **Amplitude.** The processor sweeps a known DC input across the reference
   range and records which count each voltage produces in each half. It then
   writes the mean voltage of each count into the tables:
   - write `CALADDR` = address, plus bit 8 to choose the table;
   - write `CALDATA` repeatedly (the address increments itself).

   In the testbench model, whose reference is bent by a cubic term, this
   lowers the rms error from 4.5 mV to 0.3 mV.

## Frames, and why there are two FFTs

Each FFT core accepts one sample per clock, but the ADC delivers two.
`input_buffer` therefore cuts the stream into 1024-sample frames and deals them
out alternately: even frames to FFT 1, odd frames to FFT 2.

- It has four banks of 1024 words, each split into even and odd addresses, so
  both samples of a clock are written at once.
- A frame fills in 512 clocks. Its FFT then reads it for 1024 clocks.
- While that happens, the other FFT reads the following frame. The two readers
  therefore run half a frame apart.
- A bank is rewritten only 2048 clocks after it was started, long after it was
  read.

The read address is the bit-reversed sample index, the input order that a
decimation-in-time FFT needs. As a result the bins come out in natural order.
An `overrun` flag (STATUS bit 19) would show a reader falling behind. At the
ADC's rate this cannot happen.

## The streaming FFT

`fft_r2dit` chains ten `fft_sdf_stage` instances. This is the part most worth
understanding before changing anything.

**What a stage does.** Stage *s* (*s* = 0..9) combines pairs of elements
L = 2^s apart, with a delay memory of L words:

- In each group of 2L inputs, the first L inputs (`a`) are written into the
  delay memory.
- Each of the next L inputs (`b`) is multiplied by the twiddle W_2L^j
  (j = 0..L−1) and meets the `a` stored L clocks earlier.
- The sum a + W·b leaves at once.
- The difference a − W·b goes back into the same memory word. It leaves
  during the first half of the next group, while that group's `a` inputs take
  its place.

So each stage outputs in the order it receives, delayed by L samples. After ten
stages, bit-reversed input gives natural-order output.

**How the stages move.** A stage advances only on `in_valid`. The last results
of a frame leave while the next frame enters, and the buffer keeps every FFT
fed continuously.

**Which bins are kept.** `fft_r2dit` numbers its outputs (`out_idx`), and
`power_spectrum` passes only bins 0..511: the input is real, so the upper half
mirrors the lower.

**Arithmetic:**

- Data are 25 bits.
- Twiddles are 18 bits with 16 fractional bits: round(2^16·cos), round(−2^16·sin).
- Each product fits one 25×18 DSP multiply and is rounded back to the data
  scale.
- The twiddle ROMs are computed at elaboration by an integer constant function,
  a fixed-point Taylor series, so no table file is needed.

**No scaling between stages.** The transform gains up to N = 2^10, so inputs
must stay below 2^14 in magnitude, which is ±64 mV at 1/256 mV per LSB.

- The ADC's full range is ±50 mV, so a real input is safe.
- A larger input wraps silently.

In test, the error against a double-precision DFT is at most 41 LSB at the
largest input.

**Latency.** A stage's delay memory is read without a register, so each stage
adds L valid samples plus one clock.

## Integration and readout

`power_spectrum` squares and adds the real and imaginary parts. The result is
50 bits per bin.

`spec_accumulator` merges the two FFT streams. The half-frame offset guarantees
that a spectrum from one FFT never interleaves with one from the other. Each
bin is added into a 64-bit word with a two-clock read-modify-write. Sums
saturate, and a sticky flag reports it (STATUS bit 16).

The first spectrum of an integration is written rather than added, so no
clearing pass is needed.

**Length and banks.** After `NACC` spectra the integration is complete. The
reset value is 65,536 spectra, which is 111.8 ms of signal. At that point:

- the two banks swap;
- `integ_done` pulses;
- the completed integration counter increments (STATUS[15:0]).

The completed bank stays readable at `0x1000 + 8·bin` (low word, then high
word) while the next integration runs into the other bank.

**Restart.** Writing CTRL bit 0 restarts the integration at the next bin 0.
A new `NACC` applies at once: the running integration ends at the first
spectrum end at which its count has reached the new value. Restart after
changing it to get a clean first result.

## Register map (AXI4-Lite, 32-bit)

| Offset | Name | Access | Contents |
|---|---|---|---|
| 0x0000 | ID | R | `0x41445253` ("ADRS") |
| 0x0004 | CTRL | W | bit 0 restart integration, bit 1 take TDC snapshot |
| 0x0008 | IDELAY | R/W | [4:0] input-delay level |
| 0x000C | NACC | R/W | spectra per integration (reset 65536) |
| 0x0010 | STATUS | R | [15:0] completed integrations, [16] saturated, [17] snapshot taken, [18] result bank valid, [19] buffer overrun |
| 0x0014 | SPECCNT | R | spectra in the running integration |
| 0x0018 | CALADDR | R/W | [6:0] table address, [8] 0 = anterior / 1 = posterior table |
| 0x001C | CALDATA | W | [24:0] table word; then CALADDR[6:0] increments |
| 0x0020 | SNAPCNT | R | [6:0] anterior count, [22:16] posterior count of the snapshot |
| 0x0040 + 4w | SNAPCODE | R | word w = 0..6 of the 200-bit snapshot code |
| 0x1000 + 8b + 4h | SPEC | R | bin b = 0..511, h = 0 low / 1 high half of the 64-bit sum |

Bus behaviour:

- A write completes when address and data are both valid. WSTRB is ignored.
- A read answers three clocks after its address handshake, which gives the
  block RAM time.
- Assertions check that RVALID and BVALID hold until they are accepted.

## Sizes and rates

| Quantity | Value |
|---|---|
| Clock | 300 MHz (3.33 ns) |
| Delay line | 200 taps × 16.67 ps, split 100 + 100 |
| Sample rate | 2 per clock, 600 MSa/s, 0–300 MHz band |
| ADC word | 25-bit signed, 1/256 mV per LSB |
| FFT | 1024 points, 2 cores, 512 bins 585.9 kHz apart |
| Twiddles | 18-bit, 16 fractional bits |
| Power | 50 bits; accumulator 64 bits |
| Integration | 65,536 spectra = 33,554,432 clocks = 111.8 ms |

All of these are the defaults of the RTL parameters. `adrs_pkg.sv` holds the
shared constants.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and stops itself with a watchdog. With Verilator
5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/adrs_pkg.sv tb/fft_r2dit_tb.sv --top-module fft_r2dit_tb
./obj_dir/Vfft_r2dit_tb
```

| Testbench | What it checks |
|---|---|
| `tdc_decoder_tb` | counts and table lookups of random codes with bubbles; table writes; the three-clock latency |
| `input_buffer_tb` | frame order, bit-reversed addresses, alternation of the two ports, timing of the reads |
| `fft_r2dit_tb` | random and single-tone frames against a direct DFT; latency of a frame |
| `power_spectrum_tb` | |X|² of random inputs; only bins 0..511 pass |
| `spec_accumulator_tb` | sums against a reference model, first-spectrum write, bank swap, restart alignment, saturation |
| `adrs_axi_regs_tb` | every register, address auto-increment, read latency, snapshot |
| `adrs_top_tb` | the whole chain with the analog model: phase and amplitude calibration, then tones on bins 100 and 300 through short integrations; counts every mechanism (delay changes, table writes, spectra from each FFT, bank swaps, restarts) |
| `adrs_tone_workload_tb` | tones at 63 MHz (between channels 107 and 108) and 266 MHz (on channel 454) through short integrations; the channel levels follow sinc² of the unwindowed FFT: main lobe about −3.9 dB at half a channel, first side lobe about −13.4 dB |
| `adrs_linearity_workload_tb` | Gaussian noise at six levels over 13 dB (3 to 13.4 mV rms); the summed channel power follows the input power within 10 % and matches Parseval's theorem |
| `adrs_top_full_tb` | one complete 65,536-spectrum integration at reset values: its length in clocks, the tone power on bin 200 within 20 %, its mirror and floor far below |

Run times:

- Every block testbench finishes in seconds.
- `adrs_top_tb` takes about 4 s; the two workload testbenches take under a second each.
- `adrs_top_full_tb` simulates 33.5 million clocks, which takes 3–4 minutes.

## Where this design departs from the published instrument

- **FFT length.** The block diagram of the prototype is labelled "10k points".
  The text gives 1,024 points, 585.9 kHz channel spacing and 65,536 spectra per
  111.85 ms, all of which fit 1024. This design follows 1024.
- **Decoder latency.** The prototype decodes "in one clock". Here counting and
  table lookup each take a register stage, so a sample leaves three clocks
  after its taps were sampled.
- **Shape of the transfer curve.** The prototype's measured count-to-voltage
  curve decreases. Here the count rises with the input. That is only the sign
  convention of the table, which calibration absorbs anyway.
- **Sample order within a clock.** The text does not say which half is older.
  This design outputs the posterior (older) half first.
- **Organisation of the input buffer, accumulator and bus registers.** The
  published description names these blocks and their sizes, but not how they
  work inside. These parts are this design's own:
  - the four-bank buffer;
  - the two-bank accumulator with its 64-bit saturating words;
  - the write-first-spectrum start;
  - the whole register map.
- **Arithmetic details.** Rounding of products and the absence of per-stage
  scaling are this design's choices, as are the 50-bit power and 64-bit sums.
- **Timing closure.** The RTL is synthesizable, but it has not been placed or
  timed at 300 MHz. The FFT multiplier and the delay-memory read are not
  pipelined.
- **One clock domain.** The bus port runs on the signal clock. A real system
  with a separate processor bus clock needs a clock-domain crossing in front of
  `adrs_axi_regs`.
- **Not in RTL.** The following exist only as a behavioural model used for
  simulation:
  - the LVDS comparator;
  - the RC-shaped reference;
  - the input-delay primitive;
  - the carry-chain delay line itself.

  The processor software (calibration and data logging) is represented only
  by the test sequences.
