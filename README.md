# CryoDE in SystemVerilog: a digital twin of a microwave-SQUID-multiplexed detector array

Cryogenic detector arrays (magnetic microcalorimeters, transition-edge sensors) are often
read out through a microwave SQUID multiplexer. Each detector is coupled to an RF-SQUID, and
that SQUID detunes its own superconducting resonator. A flux ramp sweeps the SQUID periodically,
so a fixed probe tone at the resonator sees its amplitude oscillate. A detector pulse shifts the
*phase* of that oscillation. The room-temperature readout therefore receives a comb of carriers,
each amplitude-modulated by a sine whose phase carries the detector signal. The readout has to
separate the tones, demodulate the flux ramp and trigger on pulses.

Testing that readout normally needs a cold cryostat with real detectors. This RTL makes the
same signal digitally, inside the FPGA, upstream of the DAC. Each emulated channel:

1. draws random decay events (a Bernoulli trial every clock, so the events form a Poisson process);
2. plays a stored detector pulse for each event;
3. uses that pulse as the phase offset of a sine NCO, which models the SQUID response;
4. multiplies that SQUID response onto a complex carrier tone from a second NCO.

The output is a baseband AXI4-Stream of two complex 16-bit samples per clock. At 500 MHz that
covers 1 GHz of bandwidth. Several channels are summed to emulate a multiplexer.

```
   count_rate, enable                      T_c, Δt, pulse_amp
          │                                       │
  ┌───────┴──────┐  rnd  ┌────────────────┐ trig ┌┴────────────────┐
  │    lfsr96    ├──────►│ random_trigger ├─────►│ pulse_generator │  4096 x 16-bit table
  └──────────────┘       └────────────────┘      └────────┬────────┘
                                                          │ detector signal = phase offset
   squid ftw, amp, offset ─────────────────►┌─────────────▼──┐ env  ┌──────────┐
                                            │ squid_response ├─────►│          │
                                            └────────────────┘      │ am_mixer ├─► {Q1,I1,Q0,I0}
   carrier ftw ────────────────────────────►┌─────────────────┐ I,Q │          │   AXI4-Stream
                                            │ excitation_tone ├────►│          │
                                            └─────────────────┘     └──────────┘
   axil_regs (AXI4-Lite) holds every setting on the left.   All of this is one `cryode` channel.

   cryode_array:  NCH x cryode ──► channel_summer ──► one stream towards the DAC
```

## Decays as Bernoulli trials (`random_trigger`, `lfsr96`)

Over one 2 ns clock period, a decay is a rare, independent event. Firing with a small fixed
probability p every clock therefore gives Poisson statistics, at a mean rate of p·f_clk.
`lfsr96` is a 96-bit Fibonacci LFSR with taps 96, 94, 49 and 47, which is maximal length. It is
stepped 32 times per clock in combinational logic, so every clock delivers 32 fresh bits.
`random_trigger` compares that number with the register `count_rate`: a number below the
threshold gives 0, and anything else gives 1, ANDed with `enable`. Thus

    p = (2^32 - count_rate) / 2^32,      rate = p · f_clk

| rate at 500 MHz | count_rate       |
|-----------------|------------------|
| 10 Bq           | 2^32 - 86        |
| 35184 Bq        | 2^32 - 302231    |
| finest step     | 0.116 Bq per LSB |

The trigger is registered one clock after the number it was made from. A 32-bit threshold
covers every rate from 0.12 Bq upwards. The original work quotes a usable range of 0.5 to
35184 Bq, which implies a different scaling of the user value; that scaling is not documented,
so this RTL keeps the raw threshold.

## Playing a pulse without interpolation (`pulse_generator`)

This block is the subtle part of the design. The pulse shape lives in a 4096 × 16-bit
unsigned table, sampled at a step Δt. The clock period T_c is generally not a multiple of Δt.
No multiplier is spent on interpolation; two time accumulators decide when to move to the next
table entry:

```
IDLE:    output 0; on trigger go to RUNNING
RUNNING: every clock
           if n == N:                 back to IDLE, n = t_c = t_n = 0, output 0
           elif trigger and n >= 0.8·τ1 (in table samples):
                                      restart: n = t_c = t_n = 0, output LUT[0]
           else:  t_c += T_c
                  output LUT[n]
                  if t_c > t_n:  t_n += Δt;  n += 1
```

Here t_c is compared after its increment. As a result, the m-th running clock shows entry
`ceil((m-1)·T_c/Δt)`. Each entry is held for about Δt/T_c clocks, and one pulse keeps the
block busy for `floor((N-1)·Δt/T_c) + 2` clocks. That is N+1 clocks when Δt = T_c. T_c and Δt
are run-time registers in any common unit; the default is 2000 for both, i.e. picoseconds at
500 MHz, one entry per clock. The accumulators are 40 bits wide. With T_c = 2000 ps, a pulse
can be stretched to about 1.1 s.

A trigger that arrives while a pulse plays is ignored until the pulse has run for 80 % of
its decay constant τ1, counted as `n >= round(0.8·τ1)` in table samples. After that point a
trigger restarts the pulse from entry 0. The table output is finally multiplied by
`pulse_amp` (unsigned Q1.15: 0x8000 is 1.0; results above 0xFFFF saturate). The `enable`
input freezes the whole state machine.

Timing: a trigger seen in IDLE puts LUT[0] on `pulse` three clocks later: state change, table
read, amplitude register.

**The table.** It is computed at elaboration, in integer arithmetic only, from the usual
two-exponential MMC pulse

    f(t) = τ1/(τ1-τr)·(e^(-t/τ1) - e^(-t/τr)) - τ0/(τ0-τr)·(e^(-t/τ0) - e^(-t/τr))

with t and the constants in table samples. The defaults are τ0 = 4 (rise), τ1 = 800 (decay)
and τr = 1 (readout cut-off); the parameters are `TAU0`, `TAU1` and `TAUR`. The table is
normalised to 65535 at its peak. e^(-1/τ) comes from a Q2.30 Taylor series and is raised to
the k-th power by repeated Q0.32 multiplication. The τ values are placeholders: the original
pulse constants are not published.

Instead, the table can be loaded from a file at build time, as the original does: set the
string parameter `LUT_FILE` (`PULSE_FILE` on `cryode` and `cryode_array`) to a `$readmemh` file
with one hex word per entry. This is the way to play a measured pulse. The restart point still
follows `TAU1`, so set `TAU1` to that pulse's decay constant in table samples.

## Phase encoding in the SQUID response (`squid_response`)

The SQUID response is a sine NCO with a 32-bit phase word. Its accumulator advances by
2·ftw per clock; sample k of a clock uses `acc + k·ftw`. The detector signal is added to
the phase word **left-aligned**, `phase + (pulse << 16)`. A change in the detector signal thus
makes the read pointer jump, and 65536 pulse units equal one full period of the SQUID response,
i.e. one flux quantum. One unit of the detector signal is thus Φ0/65536, and a full-scale pulse
at `pulse_amp` = 1.0 shifts the SQUID phase by almost one flux quantum. For the readout to demodulate it, the SQUID-response frequency must be well above the
detector bandwidth.

The table value (a 4096-entry full sine, 16 bit) is scaled by `squid_amp` (unsigned Q0.16)
and `squid_offset` is added, with saturation. The offset makes the envelope swing between two
non-zero transmission levels, as a real resonator does; with offset 0 the envelope is a pure
sine and the modulation becomes double-sideband suppressed-carrier.

Latency: a change of `phase_in` reaches `sample` 2 clocks later.

## Carrier, modulation and stream format (`excitation_tone`, `am_mixer`, `cryode`)

`excitation_tone` is a second NCO of the same kind. It produces I = cos and Q = sin at full
scale; cos is read a quarter period ahead in the same table. Its frequency word is signed by
wrap-around, so tones from -f_s/2 to +f_s/2 are reachable (f_s = 1 GS/s complex).

`am_mixer` multiplies each I and Q sample by the SQUID response: Q1.15 × Q1.15, shifted by 15
and saturated, with one register.

`cryode` wires one channel together. Its stream format is:

    m_axis_tdata[63:0] = { Q1, I1, Q0, I0 }   (16-bit signed each, sample 0 first in time)

The channel has no input stream. Back-pressure stops the whole channel: every register
advances on `ce = m_axis_tready | ~m_axis_tvalid`, so an offered beat holds until it is taken.
An assertion checks that rule. A DAC sink keeps `tready` high, and the channel then runs freely.
`m_axis_tvalid` rises three clocks after reset, once every pipeline register holds a computed
value. The monitor outputs `trigger_o` and `pulse_o` expose the emulated detector signal before
modulation.

## Several channels (`cryode_array`, `channel_summer`)

One channel is one resonator with its SQUID and detector. A multiplexer is emulated by
instantiating channels and summing them. `cryode_array` has `NCH` channels; the default is
the four of the reference integration. Each channel keeps its own AXI4-Lite port, and the
ports are arrays indexed by channel. Channel c uses LFSR seed
`SEED ^ (c+1)·0x9E3779B97F4A7C15`, so the channels decay independently.

`channel_summer` adds the NCH channels sample by sample at full precision, divides by 2^SHIFT (default
log2(NCH)) and saturates. It takes a beat from all channels at once, so the channels run in
lock-step. The sum appears one clock later.

## Registers (`axil_regs`, one set per channel)

| addr | name         | bits | meaning                                  | reset      |
|------|--------------|------|------------------------------------------|------------|
| 0x00 | CTRL         | 0    | trigger enable                           | 0          |
|      |              | 1    | pulse-generator enable                   | 0          |
| 0x04 | COUNT_RATE   | 31:0 | trigger threshold (see above)            | 0xFFFFFFFF |
| 0x08 | PULSE_AMP    | 15:0 | pulse height, Q1.15                      | 0x8000     |
| 0x0C | T_CLK        | 31:0 | T_c, time per clock                      | 2000       |
| 0x10 | T_STEP       | 31:0 | Δt, time per table entry                 | 2000       |
| 0x14 | SQUID_FTW    | 31:0 | SQUID response phase step per sample     | 0          |
| 0x18 | SQUID_AMP    | 15:0 | SQUID response amplitude, Q0.16          | 0          |
| 0x1C | SQUID_OFFSET | 15:0 | SQUID response DC level, signed          | 0          |
| 0x20 | CARRIER_FTW  | 31:0 | carrier phase step per sample, signed    | 0          |
| 0x24 | ID           | 31:0 | read-only 0xC70DE001                     |            |

A write is taken when AWVALID and WVALID are both high and no response is pending. WSTRB is
honoured, and every response is OKAY. Unmapped addresses read 0.

Frequencies follow from the clock. A tone at f needs `ftw = f / (2·f_clk) · 2^32`; for
example 10 MHz at a 500 MHz clock is ftw = 42949673.

## What is fixed by the original design and what is chosen here

Taken from the original description:
- the block structure and signal chain;
- the 96-bit LFSR with 32-bit numbers, the threshold comparison and the enable;
- the 12-bit × 16-bit unsigned pulse table;
- the two-state playback with T_c/Δt accumulators;
- the 80 %-of-τ restart rule;
- amplitude scaling of the pulse;
- the detector signal as read-pointer offset of the SQUID NCO;
- the carrier NCO and the multiplication;
- two complex samples per clock;
- AXI4-Stream data and AXI4-Lite control;
- one module per channel plus a summing module;
- four channels in the reference integration.

Chosen here, because the description leaves it open:
- the LFSR taps, the 32-steps-per-clock unrolling and the seeds;
- the raw meaning of `count_rate`;
- the pulse constants;
- the NCO widths: 32-bit phase, 4096 × 16-bit sine tables;
- the left alignment of the phase offset;
- the SQUID offset register;
- number formats and saturation;
- the register map and reset values;
- the stream lane order and the back-pressure behaviour;
- the summer's scaling.

Points where this RTL settles an inconsistency or departs:
- The prose says playback starts "by decrementing the table index", while the published
  algorithm increments it. The index counts up here.
- The published algorithm, read literally, would still perform the sample step in the clock
  that ends the pulse. Here ending the pulse takes priority, as the prose says.
- The block diagram draws the trigger comparator as ">", while the prose says "below the
  threshold gives 0". The prose decides the equal case.
- The count-rate scaling behind the quoted 0.5 to 35184 Bq range is not reproduced (see above).
- Size: the published channel uses 872 LUTs, 1383 flip-flops, 810 kbit of memory and 10 DSP
  slices. Before technology mapping, this RTL's channel has about 440 flip-flops, 197 kbit of
  tables (a 64 kbit pulse table and two sine tables, one of them read through four ports) and
  8 multipliers. Larger sine tables or duplicated block RAM for the read ports could account
  for the difference, but the original sizes are not published.
- The readout firmware, the processor software that writes the registers and the DAC are
  outside this RTL.

## Verification

Every testbench in `tb/` checks itself and ends with a `TB_RESULT checks=… failures=…` line.
Each has a watchdog.

| testbench               | what it establishes |
|-------------------------|---------------------|
| `tb_cryode_pkg`         | saturation helper, integer exp/cos/sin against real math |
| `tb_lfsr96`             | bit-exact against a bit-serial LFSR; seed; ce; bit balance |
| `tb_random_trigger`     | trigger = enable ∧ (rnd ≥ threshold) every clock, equal case included; rate 1/64 |
| `tb_pulse_generator`    | cycle-level reference model of the playback; pulse lengths N+1 and 3N-1; ignored and accepted retriggers; amplitude and saturation; enable and ce |
| `tb_sine_rom`           | all 4096 entries within 1 LSB of round(32767 sin) |
| `tb_squid_response`     | reference NCO with random phase jumps, amplitude, offset, frequency |
| `tb_excitation_tone`    | cos/sin within 1 LSB for ±frequencies, magnitude |
| `tb_am_mixer`           | products, extremes, saturation |
| `tb_axil_regs`          | reset values, read-back, strobes, ID, unmapped, delayed handshakes, cfg mapping |
| `tb_channel_summer`     | sums, all-or-none handshake, ordering, stall hold, saturation |
| `tb_cryode`             | one channel end to end against a pipeline model (≤3 LSB); trigger-to-pulse latency |
| `tb_cryode_array`       | the top at default size, end to end (≤4 LSB); see below |
| `tb_count_rate_poisson` | event statistics in scaled time |
| `tb_pulse_shape`        | fidelity of table playback with Δt = 2.45 T_c |
| `tb_flux_ramp_demod`    | the pulse recovered from the output stream by flux-ramp demodulation, against the generated one |
| `tb_pulse_file`         | a 256-entry table loaded from `tb/pulse_file_test.hex`, played in order at two amplitudes |

`tb_cryode_array` runs the default configuration: four channels and full tables. It configures
each channel over AXI4-Lite while the output is stalled, so settings change between known clock
edges. It then predicts every output beat from a pipeline model that uses real-valued sines.
Across 24000 clocks it counts, and requires at least once:
- random triggers;
- a trigger during a pulse;
- a pulse restart after 80 % of τ1;
- a pulse played to its end;
- SQUID phase jumps;
- output back-pressure;
- an amplitude switch;
- silence while the trigger is disabled.

`tb_count_rate_poisson` covers the count-rate statistics. Simulating 10 Bq at 500 MHz for
seconds is out of reach, but the trigger is a per-clock Bernoulli trial. The test therefore
keeps the mean at 10 events per window and shrinks time: p = 1/100 per clock, windows of
1000 clocks. Over 3000 windows the mean is 10.0 and the variance close to 10. The histogram
is within 0.03 of the Poisson PMF in every bin, and there is no excess of empty windows. A second
run writes the register value for 35184 Bq and counts 2·10^7 clocks (40 ms of real time). It
expects 1407 events and requires the count within five standard deviations; the run counts 1413.

`tb_pulse_shape` plays one pulse with Δt = 2.45·T_c and compares every clock with the ideal
f(t). The results are RMSE 0.0030 and MAE 0.00024 of full scale, and R² = 0.99986.
These numbers cover the hold-without-interpolation scheme alone, not a readout chain.

`tb_flux_ramp_demod` closes the loop through the phase encoding. It runs one channel with a
SQUID period of 64 samples and a pulse peak of a quarter flux quantum. It takes the
magnitude of the output samples and measures the phase of each SQUID period, as a flux-ramp
demodulator does. The recovered pulse is then compared with the generated one, averaged over
the same period. Over the 129 periods of the pulse the results are RMSE 0.0081, MAE 0.0012 and
R² = 0.99897. Almost all of that error is in the single period that holds the 22-clock rising
edge: there the phase changes within one period, and the demodulator sees 0.51 where the mean
was 0.60. Every other period agrees within 0.16 % of the peak. A faster SQUID response, or a
slower rise, removes the edge error. That is the rule that the SQUID frequency must be well
above the detector bandwidth.

Running one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/cryode_pkg.sv \
          tb/tb_cryode_array.sv --top-module tb_cryode_array
./obj_dir/Vtb_cryode_array
```

Name the package file first; the other modules are found through `-y rtl`. All design tables
are computed at elaboration, so no data files are needed. The one exception is
`tb_pulse_file`, which reads `tb/pulse_file_test.hex`; run it from the directory that holds
`rtl/` and `tb/`. The full-size end-to-end test takes
about ten seconds.

## Changing it

- **Pulse shape.** Set `TAU0`/`TAU1`/`TAUR` on `pulse_generator` (`TAU0` and `TAU1` must
  differ from `TAUR`), or give a table file through `PULSE_FILE`. The restart point follows
  `TAU1`.
- **Table sizes.** `LUT_AW` on `pulse_generator`; `SIN_AW` on `squid_response` and
  `excitation_tone`.
- **Channels.** `NCH` on `cryode_array`. Channel seeds derive from `SEED`.
- **Clock rate.** Only T_c (`T_CLK`), the count-rate threshold and the frequency words depend
  on it.
