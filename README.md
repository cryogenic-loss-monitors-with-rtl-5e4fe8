# Time-to-digital readout for a cryogenic ionization loss monitor

A helium ionization chamber inside an accelerator cryostat delivers a tiny
current, from below a picoampere up to about a microampere, proportional to the
local radiation dose rate. An analog *recycling integrator* turns that current
into pulses: a charge amplifier fills its capacitor, and each time the
capacitor reaches threshold a discriminator fires a 1.2 us pulse that removes a
fixed charge Q = 1.63 pC. Pulse rate is therefore proportional to current.

The usual readout counts pulses over a fixed window. That gives poor
resolution unless the window is long: seven bits need 128 pulses. This design
instead times every pulse. An FPGA time-to-digital converter (TDC) timestamps
each pulse edge to 1 ns. The interval dt between two consecutive leading edges
then gives the mean current over that interval:

    <I> = Q / dt

So every single pulse yields a current sample. At the highest rates dt is
still at least 1200 ns (the pulse width), which is more than 10 bits of
resolution. A sudden loss shows up at the next pulse rather than at the end of
a counting window. The data rate follows the signal: much beam loss gives many
records, none gives almost none. The scheme is thus self zero-suppressed.

The RTL follows the FPGA-TDC scheme published by A. Warner and J. Wu
("Cryogenic loss monitors with FPGA TDC signal processing", Fermilab). That
description fixes the ideas and the main numbers: four-phase multi-sampling of
a 250 MHz clock, a clocked encoder, 1 ns resolution, dt between leading edges,
Q/dt, and pulse width as a measure of the stored charge. It does not describe
the logic after the encoder. The interval bookkeeping, the divider, the record
format and the output buffer are choices made here. They are marked as such
below and in each file's header.

## Signal chain

```
 chamber -> recycling integrator -> NIM -> NIM-to-LVDS -> FPGA input buffer
                (analog, not RTL)                               |
                                                             pulse_in
 clm_tdc_top                                                    |
   tdc_phase_sampler   4 flip-flops on c0/c90/c180/c270, retimed to c0
        | word[3:0]    samples of T-4 .. T-1 ns (bit 0 earliest)
   tdc_encoder         first rising / first falling transition, 2-bit fine time
        | edges_t
   tdc_interval_meter  30-bit coarse counter + fine = 1 ns timestamps;
        | interval_t   one measurement per leading edge: dt, previous width
   current_calc        I = Q/dt (optionally Q scaled by width), 48-step divider
        | record_t
   record_fifo         16 records, valid/ready to the readout
        |
   out_valid / out_ready / out_rec
```

Everything after the sampling flip-flops runs on c0. The four clock phases
come from an FPGA clock manager (PLL/MMCM) and are top-level inputs, as is
the received pulse.

## Four-phase sampling: how 1 ns comes out of a 4 ns clock

This is the part that must be understood before the design is changed or
placed on an FPGA.

The system clock is 250 MHz (4 ns). The same frequency is distributed in four
phases, c0, c90, c180 and c270, each 1 ns later than the one before. One
flip-flop per phase samples `pulse_in`. Between them the input is looked at
every nanosecond. Number the samples by the time they are taken: sample k is
taken at k ns, with c0 rising at multiples of 4 ns.

A second rank of four flip-flops, all clocked by c0, gathers the four samples
into a single word. At the c0 edge at time T:

| word bit | sampled by | taken at |
|---|---|---|
| 0 | c0   | T-4 ns (the c0 sample of the previous edge) |
| 1 | c90  | T-3 ns |
| 2 | c180 | T-2 ns |
| 3 | c270 | T-1 ns |

So each word is four consecutive nanoseconds in time order. Consecutive words
tile the time axis with no gap and no overlap. This ordering holds only
because every retiming flop is on the *rising* edge of c0, after all four
samples of the previous 4 ns have been taken.

Timing budget on an FPGA: the c270 -> c0 transfer has 1 ns, c180 -> c0 has
2 ns and c90 -> c0 has 3 ns. The four sampling flip-flops should be placed
close together and close to the input buffer, with matched routing from the
pad. Their skew is the TDC's differential non-linearity. The sampling
flip-flops see an asynchronous input and can go metastable. The retiming
rank gives them most of a phase to settle, but no further synchronizer
follows it. Add one if the part's metastability figures ask for it; the
extra stage only adds latency.

During reset the word reads all ones. An input that is already high when
reset is released is therefore not taken for a pulse start.

## Edges and timestamps

`tdc_encoder` prepends the last sample of the previous word to the current
word, which gives five samples. It finds the first 0->1 (leading edge) and
the first 1->0 (trailing edge) transition among them. The fine time of an
edge is the index, 0 to 3, of the first sample on the new level. With the
extra sample, an edge between the last sample of one word and the first of
the next is found, with fine time 0. Both edges may fall in the same word,
in either order. The pulses are 1.2 us wide, so at most one edge of each
kind per word is expected. If a glitch causes more, only the first one is
reported.

`tdc_interval_meter` holds a free-running 30-bit coarse counter. The
timestamp of an edge is `{coarse, fine}`, a 32-bit count of nanoseconds that
wraps every 4.29 s. An edge at time te (ns) gets the timestamp of sample
ceil(te), plus a fixed pipeline offset. The offset drops out of every
difference.

## What a record means

One measurement is made at every **leading** edge. It is made then, not at the
end of the pulse, because the leading edge is the earliest moment the new
current is known.

| field | meaning |
|---|---|
| `iv.t_lead` | timestamp of this leading edge (ns, wraps) |
| `iv.dt` | this leading edge minus the previous one (ns) |
| `iv.width` | width of the *previous* pulse (ns, 16 bits) |
| `iv.first` | first pulse since reset; `dt` reads 0 |
| `iv.dt_ovf` | more than about 4.29 s since the previous pulse; `dt` reads all ones |
| `iv.wid_ovf` | previous width did not fit 16 bits, or no trailing edge was seen |
| `current_pa` | mean current over `dt` in pA, 32 bits |
| `cur_valid` | the current could be computed (not first, no dt overflow, and with correction on, a known width) |
| `cur_sat` | the quotient did not fit 32 bits and reads all ones |

Why the previous pulse's width? The discharge pulse at the start of an interval
removes the charge that the input current must then refill before the next
pulse. The charge that dt measures is therefore the one set by the pulse that
opened the interval.

`dt_ovf` is set from a separate age counter. It counts cycles since the last
leading edge and saturates at `AGE_LIMIT` (2^30-1 cycles by default). This
means a wrap of the 32-bit difference is never taken for a short interval.

## Current and the width correction

`current_calc` evaluates, exactly (rounded down):

    plain     (wcorr_en = 0):  I[pA] = CHARGE_FC * 10^6 / dt[ns]
    corrected (wcorr_en = 1):  I[pA] = CHARGE_FC * 10^6 * width / (dt * NOM_WIDTH_NS)

with `CHARGE_FC = 1630` (1.63 pC per pulse) and `NOM_WIDTH_NS = 1200`. A
check: 200 nA gives dt = 8150 ns, and 1630e6 / 8150 = 200000 pA.

The correction addresses an analog limitation. At high current the
integrator's discharge pulse stretches and removes more charge than nominal.
The charge is taken as proportional to the pulse width. Scaling Q by
width/1.2 us lets the integrator be run past its nominal range. The linear
model and the nominal width are parameters; calibrate them against the real
front end.

The divider is a plain restoring divider: 48-bit numerator, 48-bit
denominator, one quotient bit per c0 cycle. It is busy for 50 cycles
(200 ns). Pulses are never closer than 1.2 us, so it always finishes before
the next measurement. If it does not (a burst of glitches), the measurement
is dropped and `busy_drops` counts it. Measurements flagged `first` or
`dt_ovf` skip the division and come out after 2 cycles.

The chamber collects negative charge, so its current is negative (the
published bench plots show it that way); `current_pa` is the magnitude.

The dose per pulse (238 uR at 1 atm for this chamber) scales the same way. A
dose rate is 238 uR / dt and can be formed in the readout from `dt`.

## Output stream and losses

`record_fifo` holds 16 records of 133 bits (`record_t`). The readout takes
them with `out_valid`/`out_ready`. The 16 entries hold a whole 40 us RF gate
of high loss (about ten pulses at 400 nA) with the readout idle. When the
buffer is full, new records are dropped and `fifo_drops` counts them. Both
drop counters are 16 bits and saturate.

## Timing

| path | cycles of c0 (4 ns) |
|---|---|
| sample taken -> word | at most 1 |
| word -> edges (encoder) | 1 |
| edges -> measurement (interval meter) | 1 |
| measurement -> record (divider) | 50 (2 if skipped) |
| record -> readable at FIFO output | 1 |

In total, a record becomes valid at the 53rd c0 edge after the edge that
captured its leading edge. That is 213 to 216 ns after the pulse starts.

## Parameters

| parameter | default | where |
|---|---|---|
| `NPHASE` | 4 clock phases | `clm_pkg` (from the source design) |
| `TS_W` / `COARSE_W` | 32 / 30 bits | `clm_pkg` (own choice) |
| `WID_W`, `CUR_W` | 16, 32 bits | `clm_pkg` (own choice) |
| `CHARGE_FC` | 1630 fC | `clm_tdc_top`, `current_calc` (source design) |
| `NOM_WIDTH_NS` | 1200 ns | `clm_tdc_top`, `current_calc` (source design) |
| `AGE_LIMIT` | 2^30-1 cycles | `clm_tdc_top`, `tdc_interval_meter` (own choice) |
| `FIFO_DEPTH` | 16 | `clm_tdc_top` (own choice) |

Clock 250 MHz; all sequential logic resets synchronously on `rst_n` (active
low) at c0. The sampling flip-flops themselves have no reset.

## Operating range

| case | dt | notes |
|---|---|---|
| maximum pulse rate (pulse width 1.2 us) | 1200 ns | 1.36 uA, 10.2 bits |
| dark current in an RF gate, ~400 nA | 4075 ns | about 10 records per 40 us gate |
| bench plateau, ~200 nA | 8150 ns | 13 bits |
| 30 kRad/hr at 1.9 pA/(Rad/hr), 57 nA | 28.6 us | 15 bits |
| lowest before `dt_ovf` | 4.29 s | 0.38 pA |

## What is not in this RTL

- The chamber, the recycling integrator, its NIM driver and the NIM-to-LVDS
  converter: analog parts from an outside vendor. `tb/recycling_integrator_model.sv`
  is a behavioural model for simulation. It integrates the current in 1 ns
  steps and emits 1.2 us pulses per 1.63 pC.
- The FPGA clock manager that makes the four phases, and the LVDS input
  buffer: vendor primitives. The testbenches generate the phases in
  `tb/clm_clkgen.sv`.
- The pulse-counting readout that the TDC replaces is not included.

## Choices made here, not in the source description

- Bit order of the word, and the c0 retiming rank with its all-ones reset.
- Encoder rule: first transition of each kind; the previous word's last
  sample is used at word boundaries.
- One measurement per leading edge, paired with the previous pulse's width;
  `first`/`dt_ovf`/`wid_ovf` flags; 32-bit timestamps, 16-bit widths.
- Current computed in hardware, in pA, by a restoring divider. The source
  gives the formula but not where it is evaluated.
- Width correction as a linear scaling by width / 1.2 us, behind a switch.
- The record FIFO, its depth, the valid/ready handshake and the drop
  counters.
- The charge per pulse follows the 1.63 pC of the described monitor. The
  bench unit used for the published test traces was about 2 pC per pulse;
  set `CHARGE_FC` for the unit at hand.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5, from the directory that
holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
    rtl/clm_pkg.sv tb/tb_clm_full.sv --top-module tb_clm_full
./obj_dir/Vtb_clm_full
```

Replace `tb_clm_full` with any other testbench name.

| testbench | what it shows |
|---|---|
| `tb_tdc_phase_sampler` | word contents against input changes placed between sampling instants |
| `tb_tdc_encoder` | edge flags and fine times for random and pulse-like words, boundary and same-word cases |
| `tb_tdc_interval_meter` | dt, width, flags and 1-cycle latency on a 400-pulse random train with overflows |
| `tb_current_calc` | plain and corrected currents against 64-bit reference arithmetic, saturation, 50-cycle latency |
| `tb_record_fifo` | order, full/empty and level against a queue model |
| `tb_clm_tdc_top` | whole chain with small `AGE_LIMIT`/`FIFO_DEPTH`: latency, correction on/off, stalls, both drop kinds, dt overflow, all four fine phases |
| `tb_clm_full` | whole chain at default parameters, driven by the integrator model: a 0-200-0 nA ramp (plateau reads 199.6 nA) and a 400 nA, 40 us RF gate (reads 400.0 nA over 9 samples) |

The testbenches compute expected values from the edge times they generate.
An edge at te ns must land on sample ceil(te). Stimulus edges are therefore
kept off whole nanoseconds, so that no input change coincides with a sampling
clock edge.
