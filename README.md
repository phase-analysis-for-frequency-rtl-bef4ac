# Cycle-synchronous phase analyzer: FPGA data path

Atomic frequency standards run in cycles. A fountain clock launches a cloud
of atoms, interrogates it twice with microwaves, detects it and starts again.
An optical ion clock goes through state preparation, Ramsey pulses and
readout. Every switching step in such a cycle (a microwave switch, an
acousto-optic modulator (AOM) turned off and on) can disturb the phase of the
interrogation signal by a tiny amount. The disturbance repeats in every
cycle, and if the phase differs between the two Ramsey interactions, the
clock's output frequency is shifted. These excursions are microradians to
millidegrees, far below the phase noise of one cycle. They can still be
measured: record the phase of the signal over many thousands of cycles,
line every record up on a trigger from the clock, and average sample by
sample. The noise averages away and the cycle-synchronous part remains.

This repository holds synthesizable SystemVerilog for the FPGA part of such an
analyzer. It is the published analyzer design (see "Origin" below) written
out as RTL. The analyzer digitises three analog channels at 120 MS/s on a
clock shared with the clock under test:

* the **phase channel**: the signal under test, mixed down to a difference
  frequency `f_diff` (3 MHz for the optical set-up);
* the **power channel**: a power-detector voltage;
* the **AUX/status channel**: any slow quantity to correlate with the phase,
  such as a temperature.

The FPGA turns these into one record per time step (1 us, for example). A
record holds phase, amplitude, a phase-valid flag, power and AUX. The FPGA
cuts the record stream into equal slices that start on the cycle trigger, and
writes the slices to the RAM on the board. A host computer reads the slices
and does the coherent average, the phase unwrapping and the statistics. The
host software, the ADC and the analog front end are not part of this RTL.

## Signal chain

```
 adc_phase ─► cic_decimator ─► iq_detector ──────────────────► phase_avg_blank ─┐
  (120 MS/s)   (pre_decim)      dds_nco → mixers → moving avg    (avg_len,       │
                                → cordic_vector                  blanking)       │
 adc_power ─► cic_decimator ─► delay_line ─────────────────────────────────────►├─► slicer ─► ram_writer ─► RAM
               (aux_decim)      (aux_delay)                                      │   ▲
 adc_aux   ─► cic_decimator ─► delay_line ─────────────────────────────────────►┘   │
                                                                   trig_async ───────┘
```

| file | block |
|---|---|
| `rtl/pa_pkg.sv` | widths, record and configuration types, CORDIC angle table |
| `rtl/cic_decimator.sv` | filter and decimator (one per channel) |
| `rtl/dds_nco.sv`, `rtl/cordic_rotate.sv` | local oscillator (cos/sin) at `f_diff` |
| `rtl/iq_detector.sv`, `rtl/cordic_vector.sv` | I/Q demodulation, phase and amplitude |
| `rtl/phase_avg_blank.sv` | averaging to the output rate, phase blanking |
| `rtl/delay_line.sv` | alignment delay for power and AUX |
| `rtl/slicer.sv` | cycle-synchronous slicing |
| `rtl/ram_writer.sv`, `rtl/sync_fifo.sv` | slot ring in RAM, host hand-over |
| `rtl/phase_analyzer.sv` | top level |

Everything runs on one clock, the ADC sample clock (120 MHz), with one ADC
word per channel per clock (`adc_valid`). Every stage passes data on with a
one-clock `valid` strobe. There is no backpressure before the RAM FIFO: the
stream is continuous, as the physics demands.

## Number formats

* ADC words: 16-bit signed.
* Filtered samples, I, Q, amplitude, power, AUX: 24 bits.
* **Phase: a 24-bit two's-complement fraction of one turn.** `-2^23` is -pi
  and `2^23-1` is just under +pi; one LSB is 0.37 urad. Adding and subtracting
  phases in this format wraps modulo 2*pi on its own, which the averaging
  relies on.
* A record (`pa_record_t`) has 99 bits: `first`, `last`, `valid`, phase,
  amplitude, power and AUX. It is stored as one 128-bit RAM word, with the
  upper bits zero.

## The phase channel

### Pre-decimation

`cic_decimator` is a CIC filter with a run-time decimation factor (up to
65535). On the phase channel it has order 3 (`pre_decim`) and a 64-bit
register chain (16 + 3*16 bits), so any factor is exact. Its DC gain `pre_decim^3` is
removed by a right shift (`pre_shift`), and the result saturates. For the
phase channel the factor must leave the decimated rate well above `2*f_diff`:
with `f_diff` = 3 MHz, `pre_decim` = 8 gives 15 MS/s. A CIC has a sinc^3
response, so the beat note loses some amplitude (0.82x at 3 MHz/15 MS/s) and
takes on a constant phase offset. Both are the same in every cycle and drop
out of the coherent average.

### I/Q detection

`dds_nco` holds a 32-bit phase accumulator that advances by `dds_ftw` per
decimated sample, so `f_lo = dds_ftw / 2^32 * f_decimated`. Its top 24 bits
go to a pipelined rotation-mode CORDIC (18 stages, 18-bit outputs), which
gives cos and sin. The sample rides through the CORDIC pipeline as a tag, so
each sample meets the oscillator value of its own time step with no separate
delay matching.

`iq_detector` forms `I = x*cos` and `Q = -x*sin`. For `x = A cos(wt + phi)`
this is `(A/2)(cos phi, sin phi)`, plus a term at `2*f_diff`. A moving
average of `lp_len` samples (up to 255, a running sum over a circular buffer)
removes that term. It removes it exactly when `lp_len` spans a whole number
of half periods of `f_diff`: at 0.2 of the decimated rate, 5 samples span two
periods. A vectoring CORDIC (20 stages) then returns the phase and the
magnitude. The magnitude is corrected by 1/K with a 16-bit constant. The
amplitude at the output is `lp_len * A_dec / 2 >> lp_shift`.

Because the oscillator, the ADC and the signal under test share one clock,
the detected phase of a steady signal is constant from cycle to cycle. A
cycle-synchronous change of the DUT phase shows up one-to-one in the
detected phase.

### Averaging and phase blanking (`phase_avg_blank`)

This is the step that needs the most care. The IQ detector delivers a phase
every decimated sample (15 MS/s, for example). The stored stream has one
value per time step (1 us = `avg_len` = 15 samples). Two problems arise:

1. **Phase wraps.** A plain mean of phases near +pi and -pi is about zero,
   which is wrong. The block keeps the first phase `p0` of each window and
   sums the wrapped offsets `p_i - p0`. The output is
   `p0 + round(sum / M)`, which is correct as long as the phase stays within
   +/- half a turn of `p0` during one window. At 1 us windows this allows
   frequency offsets up to 500 kHz, well beyond any real DUT. The result is
   still wrapped to +/- pi. Unwrapping across windows is left to the host,
   which sees the whole record.
2. **Weak signal.** When the signal is off (an AOM in its dark interval, a
   microwave switch open), the detector's phase is noise. An unwrapping
   algorithm that trusts it can slip by 2*pi and ruin the whole record. The
   block therefore checks every sample's amplitude against `amp_threshold`.
   If any sample of a window is below it, the window's `valid` bit is
   cleared. The host must skip invalid records when it unwraps and averages.

The division by M is a multiply by `avg_recip = round(2^32 / M)`, which the
host computes. Both sums are wide enough for M up to 65535.

## Alignment of power and AUX

Power and AUX each go through a CIC of order 1 (the top's `AUX_CIC_ORDER`)
that decimates straight to the output rate (`aux_decim` =
`pre_decim * avg_len`). An order-1 CIC is the plain mean over one output
interval, the same window that `phase_avg_blank` averages the phase over, and
its counter starts at reset on the same 120-sample grid. The phase path is
longer: it adds the 44-clock IQ pipeline and the group delays of the phase
CIC and the I/Q low-pass. A phase change therefore reaches the records later
than an AUX change made at the same instant. A `delay_line` of up to 63
output samples (`aux_delay`) holds power and AUX back to match. At the
settings of the end-to-end test (8 x 15, `lp_len` 5) the difference is one
record, and `aux_delay` = 1 puts a simultaneous phase step and AUX step into
the same record. Larger `lp_len` or `pre_decim` calls for more delay. The
slicer pairs each phase record with the newest power and AUX values; a value
that arrives in the same clock is used at once.

## Slicing

`slicer` synchronises the asynchronous cycle trigger with two flip-flops and
detects its rising edge. The edge arms the slicer, and the next phase record
opens a slice. That record gets `first`, and `slice_len` records later the
last one gets `last`. Slices therefore start up to one time step after the
trigger. In a coherent average over many cycles this shows up as a jitter of
at most one record.

Every slice has the same length, which is what lets the host average them
index by index. A trigger that comes while a slice is still open would break
that rule. It is ignored and counted in `trig_missed`, so choose `slice_len`
shorter than the shortest cycle. `enable` low keeps new slices from
starting. `slices_started` counts slices.

## RAM layout and host hand-over

`ram_writer` treats the RAM as a ring of `num_slots` slots of `slice_len`
words each: slot k starts at word `k*slice_len`, and record i of a slice goes
to `slot_base + i`. The n-th stored slice is in slot `n mod num_slots`.

The host protocol uses two counters:

* `slices_done` (from the FPGA): slices whose last word the RAM has
  accepted.
* `host_slices_read` (from the host): slices the host has copied out.

When a new slice starts and all `num_slots` slots hold slices the host has
not read, the whole slice is dropped and `slices_dropped` counts it. The host
thus never meets a half-overwritten slot, and a slow host loses whole cycles,
not parts of them. Records wait for the RAM in a 512-entry FIFO. The RAM port
is a valid/ready handshake (`mem_valid`, `mem_addr`, `mem_data`,
`mem_ready`; an assertion checks that a stalled request holds still). If the
RAM stalls for longer than the FIFO can cover (512 records, about 0.5 ms at
1 us), records are lost and the sticky `fifo_overflow` flag is set. The
stored data are then suspect.

## Configuration

`cfg` (`pa_cfg_t`) is written while `rst_n` is low and held steady while the
analyzer runs. The running sums and counters assume that it does not change.

| field | meaning | 1 us, f_diff = 3 MHz | 0.5 ms resolution |
|---|---|---|---|
| `pre_decim`, `pre_shift` | phase CIC factor, gain shift | 8, 6 | 8, 6 |
| `dds_ftw` | `f_diff / f_dec * 2^32` | 858993459 (0.2) | 536870912 (1/8, 1.875 MHz) |
| `lp_len`, `lp_shift` | I/Q moving average | 5, 0 | 4, 0 |
| `avg_len`, `avg_recip` | M, `round(2^32/M)` | 15, 286331153 | 7500, 572662 |
| `amp_threshold` | blanking level | about half the steady amplitude | same |
| `aux_decim`, `aux_shift` | power/AUX CIC (order 1, gain `aux_decim`) | 120, 7 | 60000, 16 |
| `aux_delay` | alignment, output samples | 1 | 0 |
| `slice_len` | records per slice (up to 8388607) | cycle / 1 us | cycle / 0.5 ms |

`num_slots` (up to 255) and the product `num_slots*slice_len` must fit in the
RAM, which is 2^25 words (512 MiB) at the default `ADDR_W`.

The 0.5 ms column is the setting of `tb_workload_fountain`.

Sizes of the two measurements the analyzer was built for:

* **Fountain clock:** 0.5 ms resolution and cycles of about 1.2 s make about
  2500 records (40 kB) per slice. A 0.5 ms step is 60000 ADC samples, for
  example `pre_decim` 8 and `avg_len` 7500; factors up to 65535 are built.
* **Optical clock (AOM chirp):** about 310 ms cycles at 1 us make 310,000
  records (5 MB) per slice, about 100 slots in 512 MiB. Gaps of 0.5 ms and
  2 ms with the AOM off are blanked records.
* The longest slice, 2^23-1 records, is 8.4 s at 1 us.

## Timing

| stage | latency |
|---|---|
| CIC | output 1 clock after the `decim`-th input |
| IQ detector | 44 clocks (DDS CORDIC 19, mixer/low-pass 3, vectoring CORDIC 22) |
| averaging | 1 clock after the M-th input |
| delay line | 1 clock, plus `aux_delay` samples |
| slicer | 1 clock; slice start 3+ clocks after the trigger edge |
| RAM writer | FIFO first-word-fall-through, 1 clock to `mem_valid` |

The CORDICs are pipelined one stage per clock. The widest operations are
the 64-bit CIC adders, three in a chain within one clock, and the 40x34-bit
reciprocal multiply in `phase_avg_blank`. That multiply is used only once per
output sample, so a multicycle constraint or a pipeline stage can be added
if 120 MHz is not met on a given FPGA.

## Origin: what follows the published design and what is this design's own

From the published analyzer: the three channels, the 120 MS/s sampling on a
common clock, and a filter-and-decimate stage with a variable factor on each
channel. Then, on the phase channel, IQ detection against a
software-defined DDS sinusoid and its quadrature, with phase and amplitude
computed from them, followed by averaging and amplitude-based marking of
phase values as valid or invalid. A small delay aligns the power and AUX
channels with the phase. A cycle-synchronous trigger on a digital input cuts
the stream into evenly sized packages. The packages go to RAM on the board,
where the host picks up completed slices, averages them coherently and
unwraps the phase. The time resolution is 1 us, and cycles can last several
seconds.

This design's own choices, since the published description gives functions,
not circuits:

* all word widths and register sizes;
* CIC filters with power-of-two gain removal as the filters: order 3 ahead of
  the IQ detector, order 1 (the mean over one output interval) on power and
  AUX;
* a CORDIC-based DDS and phase/amplitude calculation, and a moving-average
  low-pass after the mixers;
* block averaging with the wrap-safe offset method and the rule "any weak
  sample invalidates the window";
* division by a reciprocal that the host supplies;
* the trigger synchronizer, the rule that ignores early triggers, the slot
  ring, the drop-whole-slice policy, the FIFO, the RAM handshake and the
  status counters.

The ADC card, the RAM and its controller, the analog front end and the host
software are outside the RTL. The RAM appears only as a write port; its
vendor controller is not modelled, apart from a behavioural stand-in in the
testbench.

## Simulation

Every block has a self-checking testbench in `tb/`, and each one prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks against |
|---|---|
| `tb_cic_decimator` | a direct FIR with boxcar^3 coefficients, every output and its timing |
| `tb_delay_line` | the input from `delay` samples earlier, for delays 0, 1, 5, 63 |
| `tb_dds_nco` | real-valued cos/sin (8 LSB), tag order, latency 19 |
| `tb_iq_detector` | synthetic beat notes of known phase and amplitude, also at the +/-pi wrap; latency 44 |
| `tb_phase_avg_blank` | the circular mean from real arithmetic; the blanking rule; M = 1, 15, 64 |
| `tb_slicer` | a reference model of trigger handling, record contents and counters |
| `tb_ram_writer` | slot addresses `(k mod slots)*len + i`, dropped slices, FIFO overflow |
| `tb_phase_analyzer` | end to end at default parameters (below) |

`tb_phase_analyzer` feeds a model of an optical Ramsey cycle: a 3 MHz beat
note at 120 MS/s, with a 2 us AOM-off gap, a phase ramp through a full turn,
and a 0.03-turn phase step. The AUX channel steps with the phase. A host
process reads each slice from a behavioural RAM (`tb/dram_model.sv`) and
checks the 1 us record spacing, the phase in each region, blanking in the
gap, the exact CIC gains on power and AUX, that the AUX step and the phase step
land in the same record,
and the 0.03-turn step in the coherent average. It also makes the rarer
events happen and counts each one: a trigger inside a slice, slices dropped
while the host pauses, RAM stalls, a FIFO overflow in a second run, and phase
wraps.

`tb_workload_fountain` runs the configuration of a fountain-clock
measurement. It uses 0.5 ms records: pre-decimation 8, averaging 7500, and
power/AUX decimation 60000. The difference frequency is 1.875 MHz. A real
fountain cycle lasts more than a second, so the cycle here is shortened to
18 records. Within it, the phase steps by 20 urad halfway through. That is
the size of phase difference between the two Ramsey interactions the
analyzer must resolve. With +/-3 LSB of noise on a 12000 LSB beat note, each
record agrees with its neighbours to within 3 urad. Over two cycles the step
is recovered as 19.3 to 19.7 urad, depending on the noise seed. The test
allows 20 +/- 1.5 urad. Power and
AUX match the exact CIC result. The noise must be continuous, not whole
LSBs. Whole-LSB noise leaves the ADC rounding undithered, and because the
rounding error repeats with the beat note it shifts the phase by several
urad.

With plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    --top-module tb_phase_analyzer rtl/pa_pkg.sv tb/tb_phase_analyzer.sv
./obj_dir/Vtb_phase_analyzer
```

Replace the top module's name to run another testbench. Each testbench
finishes within a few seconds.

## Limits

* Timing closure at 120 MHz has not been checked on an FPGA; see "Timing".
* Configuration changes need a reset.
* Power and AUX are aligned in whole output samples. A remainder of less
  than one record stays.
* Blanking is all-or-nothing per window. A window that is partly valid is
  discarded, not averaged over its valid samples.
