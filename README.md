# Digital control logic for a trapped-ion quantum register

A trapped-ion processor is driven by lasers, RF and static voltages that
must hold their frequency, power and value for far longer than one gate
takes. Most of that stability comes from small digital feedback loops and
fast, wide output buses. This RTL implements four of them, one per
subsystem. They share a clock and nothing else:

1. **Comb lock with feed-forward.** A mode-locked laser drives Raman
   transitions through two acousto-optic modulators (AOMs). Its repetition
   rate `frep` drifts. A digital PLL keeps a DDS (`DDS0`, frequency `f0`)
   locked to `frep`. Each change `delta` that the loop makes to `f0` is
   multiplied by the harmonic number `n = 166` and added to the second AOM
   DDS (`DDS2`, `f2`). The beat note that drives the ion then stays fixed
   while the laser drifts.
2. **Intensity lock with sample-and-hold.** A PI loop holds the Raman beam
   power at a setpoint by changing the amplitude of the AOM's DDS. It runs
   only while a trigger from the experiment sequencer is high. While the
   trigger is low, the last amplitude is held, because the beam is then
   switched off.
3. **Next-generation PID.** Eight independent lock channels share one
   arithmetic pipeline:
   8-channel ADC → averaging → PID → bounds and linear map → route to a
   16-bit DAC channel, or to the frequency or amplitude of a DDS.
4. **Trap electrode DAC system.** There are 100 electrode voltages on
   25 four-channel DACs. Up to 32 voltage sets are stored on chip. The
   system moves all electrodes from the present set towards a chosen set,
   with a limit on both the step size and the update rate. This is how ions
   are shuttled. A static move is one upload, after which the serial clocks
   stop, so no digital noise reaches the electrodes.

Everything is synthesizable SystemVerilog-2017. Shared types and constants
are in the package `ionctl_pkg`. The top module is `ion_ctrl_top`.

## Clocking and shared conventions

- **Clock.** One 100 MHz clock (`CLK_HZ`) and one asynchronous, active-low
  reset. All rates below are in 100 MHz cycles. The 100 MHz figure is a
  choice: it makes the 50 MHz serial clock limit of the DAC8734 equal to
  `clk/2`. Change it and you must scale `CONV_DIV`, `MIN_PERIOD` and
  `HALF_DIV`.
- **Serial ports.** Every external chip is written through `spi_master`:
  - MSB first;
  - a programmable word length of up to `MAXBITS`;
  - `LANES` data lines that share one clock and one chip select;
  - `2*HALF_DIV` cycles per bit;
  - `done` pulses when chip select rises.

  A start while `busy` is high is a protocol error, and an assertion
  checks for it.
- **Gains.** All gains are signed 16-bit fixed point with 8 fraction bits
  (`SHIFT = 8`), so 256 means 1.0. Integrators saturate instead of wrapping.
- **Chip word formats.** These come from the chips' own data sheets. The
  functions `ad9912_ftw_word`, `ad9912_amp_word`, `dac8734_word` and
  `dac8568_word` in `ionctl_pkg` build them.

## 1. Comb lock (`comb_lock`)

```
AD7671 ──> ad7671_if ──> avg_filter ──> pi_incr (f0) ──> ad9912_writer ──> DDS0
  (1 MSPS, 16 bit)       (N = 2^log2n)      │ delta
                                            └─> f2 += 166·delta ──> ad9912_writer ──> DDS2
```

- **Sampling.** `ad7671_if` starts a conversion every `CONV_DIV = 100`
  cycles, which is 1 MSPS. It waits for `busy` to fall, then reads the
  16-bit two's-complement word in parallel.
- **Averaging.** `avg_filter` collects `N = 2^log2n` samples, with `N` of
  1 to 16. It passes on their mean once per block, so the loop runs at
  `1 MSPS / N`.
- **PI update.** `pi_incr` uses the incremental (velocity) form:

      s(k)   = s(k-1) + e(k)                (the current error is included)
      f0(k+1) = f0(k) + (kp·e(k) + ki·s(k)) >> 8

  `f0` is clamped to `[y_min, y_max]` (the full tuning-word range in
  `comb_lock`). The unit also outputs `delta`, the
  change it actually applied after the clamp. That is the number the
  feed-forward needs. Using the pre-clamp value would make `f2` run away
  when `f0` saturates.
- **Feed-forward.** `f2 <= f2 + HARMONIC·delta`, where `HARMONIC = 166`.
  This is exact integer arithmetic on 48-bit tuning words. The test checks
  `f2 − f2(0) = 166·(f0 − f0(0))` after every update.
- **DDS writes.** Each DDS has its own `ad9912_writer`. A frequency write
  is a 16-bit instruction plus a 48-bit word:
  - 64 SCLK periods, about 1.3 µs;
  - then an `IO_UPDATE` pulse.

  New values can arrive faster than that: one every 1 µs without
  averaging. The writer therefore coalesces them. It keeps the latest
  request and sends it when the current transfer ends, so the chip always
  ends up with the newest word and no stale one is queued.
- **Controls.**
  - `load` presets `f0` and `f2` and clears the integrator.
  - `lock_en` low stops the ADC and holds both frequencies.
- **Out of scope.** The third DDS (`f1`), which belongs to the experiment
  sequencer, is outside this design.

## 2. Intensity lock (`intensity_lock`)

The same ADC front end and the same `pi_incr` are used here:

- The error is `setpoint − sample`, saturated to 16 bits.
- The output is the 10-bit AD9912 full-scale current word, which sets the
  RF amplitude and hence the AOM diffraction efficiency.
- **`gate` high:** the ADC runs and every nonzero amplitude change is
  written to the DDS.
- **`gate` low:** the ADC is stopped and the PI state is frozen. The
  amplitude register keeps its last value, which is the "hold".

When the gate opens again, the loop continues from the held amplitude and
the saved integrator, so it does not start again from zero. With the 1 MSPS
ADC and a ~0.7 µs amplitude write, the loop can correct once per
microsecond.

## 3. Next-generation PID (`nextgen_pid`)

```
AD7608 ─> ad7608_ctrl ─> oversampler ─> pid_filter ─> output_proc ─> router ─┬─> dac8568_ctrl ─> DAC8568 (8 ch)
 8 ch, 18 bit, 200 kSPS   per-channel     per-channel   bounds +             ├─> ad9912_writer[ch] frequency
                          2^r average     PID state     linear map           └─> ad9912_writer[ch] amplitude
```

- **One stream for all channels.** Every stage carries `(channel, value,
  valid)`, one word per cycle. Per-channel state sits in small register
  arrays indexed by the channel number:
  - oversampler accumulators;
  - PID integrators and previous errors;
  - the configuration.

  So one adder/multiplier set serves all eight channels. At 200 kSPS the
  ADC delivers 8 words every 500 cycles, so the pipeline is idle more than
  98 % of the time.
- **`pid_chan_cfg_t`.** One packed struct per channel holds:
  - `enable`, `log2_ratio`;
  - `kp`, `ki`, `kd`;
  - `dest`: none, DAC, DDS frequency or DDS amplitude;
  - `lin_en`, `gain`, `offset`;
  - the bounds `lo` and `hi`.
- **`pid_filter`.** A positional PID:
  `u = (kp·e + ki·Σe + kd·(e − e_prev)) >> 8`.
  Turning a channel off clears its integrator and previous error.
- **`output_proc`.** If `lin_en` is set it computes
  `y = (gain·u >> 8) + offset`. It then clamps `y` to `[lo, hi]` and raises
  `clipped` for that channel. Setting the bounds to the output range is how
  the user protects the actuator. The bounded word is 48 bits wide. The
  destinations take its low 16 bits (DAC), 48 bits (DDS frequency) or
  10 bits (DDS amplitude).
- **Outputs.**
  - `dac8568_ctrl` keeps one pending code per DAC channel. It serves them
    round robin, one 32-bit word each, so a burst of updates to one channel
    cannot starve the others.
  - Each channel has its own DDS serial port.

## 4. Trap electrode DAC system (`dac_system`)

```
host writes ─> voltage_set_ram (32 sets × 100 codes) ─> dac_sequencer ─> dac8734_ctrl ─> 25 × DAC8734
                                                         step, period     25 data lanes, shared SCLK/CS/LDAC
```

### Memory

`voltage_set_ram` stores each set as four rows, one per DAC channel index.
Each row holds the 25 codes that go out together on the 25 data lines.
Electrode `c` is chip `c/4`, channel `c%4`. The memory is 51,200 bits and
maps to block RAM.

### Bus

`dac8734_ctrl` sends four 24-bit words. All 25 chips receive theirs in
parallel on separate data lines with a shared clock and chip select. It
then pulses `LDAC`, so all 100 outputs change at the same time.

- At 50 MHz, 96 bits take 1.92 µs.
- With chip-select gaps and the latch, a full update takes about 205
  cycles.

The latch pulse is 2 cycles (20 ns), about the DAC's response time to a
latch. This matches the roughly 2 µs per update that the hardware is specified
for. A single shared data line would take 25 times longer, which is why
each chip has its own line.

### Sequencer

`dac_sequencer` takes a command `(set, step, period)`:

1. Read the four rows of the target set.
2. Move each of the 100 present codes towards its target by at most `step`
   codes. A step of 0 jumps straight to the target.
3. Send the update. If any code changed, wait out `period` and repeat.
4. Raise `done` when all codes equal the target. The bus then stops
   completely: no SCLK, no chip select, no data.

A static voltage change is therefore one upload. A shuttle is a ramp of
updates spaced `period` cycles apart.

### Rate limit

The DAC outputs must not be updated faster than 430 kHz. The sequencer
enforces this whatever the host requests:

- The effective period is `max(period, MIN_PERIOD)`, with `MIN_PERIOD = 233`
  cycles (2.33 µs, 429 kHz).
- A hold-off enforces the same spacing between the last update of one
  command and the first of the next.

The end-to-end test requests a period shorter than the limit and checks
that the spacing is still at least 233 cycles.

## What follows the published design, and what is this design's own

**Taken from the published description:**
- the loop equations: the incremental PI with the current error in the sum,
  and `f2 += n·delta`;
- `n = 166`;
- averaging over `N = 1, 4, 16`;
- the 16-bit 1 MSPS error ADC;
- sample-and-hold on the DDS amplitude;
- the eight-channel pipeline order: ADC controller, oversampler, PID,
  bounds and linear map, routing to DAC or DDS;
- the 18-bit 200 kSPS ADC;
- 25 DAC chips × 4 channels;
- 32 on-chip sets;
- the 430 kHz update limit and the ~2 µs, 50 MHz DAC transfer;
- stepping towards a set at a user rate and step size;
- one upload, then clocks off, when not shuttling.

**Chosen here:**
- the 100 MHz clock;
- all bit widths not given above;
- the fixed-point gain format;
- integrator saturation and output clamps;
- power-of-two averaging ratios;
- the chips' word formats and read timing (from their data sheets);
- coalescing of DDS requests;
- one data line per DAC8734;
- the set-memory layout;
- the exact interpolation law ("at most `step` per update");
- the `DEST` encoding;
- the positional PID form;
- the map-then-bound order;
- round-robin DAC8568 service.

### Departures and gaps

- The four subsystems sit in one top module on one clock. In the original
  hardware they are separate FPGA boards.
- Settings enter as plain ports, and voltage sets are written one electrode
  at a time. There is no USB interface and no command interpreter. The
  original drives the DAC system from a small program that the host
  downloads, but its instruction set is not published.
- Only the 32 on-chip sets exist. The original can also stream up to 8 M
  sets from an external SDRAM. That path, its controller and its set
  format are not implemented.
- The 66 kHz (DAC8568) and 100 kHz (DDS) update limits of the
  next-generation PID outputs are not enforced. The writers run as fast as
  their serial links allow.
- The AD7608 is read with one 18-bit parallel word per channel. This is a
  simplified bus; the real part reads 18-bit data over a 16-bit bus or
  serially.
- Several 100-channel DAC systems can be driven side by side in the
  original. Here one instance is built; `NCHIP` widens it, but nothing
  coordinates separate instances.
- The analog offset lock of the slave lasers, the analog filters, the
  photodiodes, the mixers and the clock distribution are not logic and are
  not modelled.

## Files

- `rtl/` has one module or package per file. From leaf to top:
  1. `ionctl_pkg`, `spi_master`, `ad7671_if`, `avg_filter`, `pi_incr`,
     `ad9912_writer`;
  2. `comb_lock`, `intensity_lock`;
  3. `dac8734_ctrl`, `voltage_set_ram`, `dac_sequencer`, `dac_system`;
  4. `ad7608_ctrl`, `oversampler`, `pid_filter`, `output_proc`,
     `dac8568_ctrl`, `nextgen_pid`;
  5. `ion_ctrl_top`.
- `tb/tb_<module>.sv` is a self-checking testbench for each module.
- `tb/*_model.sv` are behavioural models of the external chips:
  - AD7671 and AD7608: ADCs that convert a value the testbench sets;
  - AD9912: decodes frequency and amplitude writes;
  - DAC8734 and DAC8568: decode words and latch outputs.

  The models check the protocol and count malformed transfers.

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. A
watchdog ends a hung run as a failure.

### What the tests check

**Per block:**
- bit-exact serial words and their cycle counts;
- averaging and the PI/PID arithmetic, compared with a reference computed
  in the testbench;
- the `f2 = f2(0) + 166·(f0 − f0(0))` invariant;
- lock, re-lock after a frequency step, and the slower update period with
  `N = 4` and `N = 16`;
- noise reduction by averaging: with white noise on the mixer signal, the
  mean square of the averaged error at `N = 16` is about 1/16 of its
  `N = 1` value (0.059 measured);
- amplitude hold while the gate is low;
- DAC transfer time of about 2 µs;
- the 430 kHz spacing, and step-limited convergence to a target set;
- routing to each destination, and clipping.

**End to end.** `tb_ion_ctrl_top` runs the top at its default sizes with
all four subsystems active at once. It closes each loop through simple
plant models. It counts 17 mechanisms and fails if any never happens:
- the PI update, feed-forward, DDS write coalescing, `N = 4` averaging,
  re-lock after a step;
- intensity lock and hold;
- PID to DAC, to DDS frequency and to DDS amplitude;
- clipping, oversampling;
- static upload, shuttle, the rate cap;
- DDS amplitude writes, DAC8568 writes.

It runs about 600,000 clock cycles (6 ms at 100 MHz) in about a second.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb \
    rtl/ionctl_pkg.sv tb/tb_ion_ctrl_top.sv --top-module tb_ion_ctrl_top
./obj_dir/Vtb_ion_ctrl_top
```

Replace `tb_ion_ctrl_top` with any `tb_<module>` to run one block's test.
`-I` lets Verilator find each module in the file of the same name.
Testbenches of the small blocks override parameters, for example a shorter
conversion period, to keep runs short. The top-level test does not.

### Changing sizes

- **Number of DAC chips (`NCHIP`) and sets (`NSETS`).** Top-level
  parameters; the memory and bus widths follow.
- **Harmonic number (`HARMONIC`).** A parameter of `comb_lock`. Its default
  is `HARMONIC_N` in the package.
- **Maximum averaging (`LOG2N_MAX`).** A parameter of `comb_lock`.
- **Sample rates (`CONV_DIV`).** Parameters of the ADC controllers.
- **Rate limit (`MIN_PERIOD`).** A parameter of `dac_sequencer`.
- **Number of PID channels (`NPID`).** Set in the package. The channel
  number is 3 bits wide, so more than eight channels also needs wider
  `ch` fields.
