# Picosecond TDC on an FPGA carry chain, with bin resorting and delay-line interleaving

A tapped-delay-line time-to-digital converter (TDC) measures the arrival time of an edge
more finely than one clock period. The edge runs along a chain of fast logic stages, here
the carry chain of CARRY8 cells of a 16 nm FPGA. A row of flip-flops, one per stage
output ("tap"), freezes the chain at every clock edge of a 250 MHz clock. The number of
stages the edge has passed gives its time before the clock edge. A free-running counter of
clock periods gives the coarse time.

Two problems limit such a converter on an FPGA. This design handles both:

* **Bins out of order (missing codes).** Routing and clock skew differ from tap to tap by
  a few picoseconds. The physical tap order is therefore not the order in which the flip-flops
  see the edge. The sampled code is then not a clean `111..1000..0`, and some taps can never
  be reported as "the last 1". The fix is **Partial Order Reconstruction (POR)**: from a code
  density test (a histogram of codes under random input) find which bins are never hit,
  deduce the true order, and re-wire the taps into that order in front of the encoder.
* **Resolution limited by the stage delay.** A single line gives bins of a few picoseconds.
  **Iterative Time-bin Interleaving (ITI)** takes several lines driven by the same pulse.
  It computes the start time of every bin of every line,
  `t[n] = W[0] + ... + W[n-1]` (W = bin width measured by a code density test), sorts all bins
  by that time, and wires them into one long thermometer code read by one priority encoder.
  Four lines give about four times as many bins. Bins narrower than 0.2 ps are left out, and
  3474 bins remain in about 4 ns, roughly 1.15 ps each.

POR, the computation of the interleave map, and the final bin-width weighting
(`nu_i = LSB / W[i]`) are off-line calculations on measured histograms. Their results enter
the hardware as fixed wiring, so the FPGA is re-synthesised after each calibration step. The
RTL here is the hardware those results are loaded into. The two maps are synthesis
parameters, and the bin-to-time table is a writable memory.

## Data path

```
start, stop ──► pulse_gen ──► carry8_tdl ×4 ──► tdc_sampler ×4 ──► bin_resort ×4 ──┐
                              (timing model)    (clock edge E)      (POR order)      │
                                                                                     ▼
 hit (timestamp) ◄── timestamp_assembler ◄── bin_time_lut ◄── priority_encoder ◄── iti_interleave
   (after E+4)       coarse*4ns - t[n]       t[n], E+3        code, E+2             (4704 -> 3474)
                                                    └──► code_density_hist (histogram, readout)
```

| Module | Role | Size at defaults |
|---|---|---|
| `tdc_pkg` | period (4 ns in fs), bin index type, map sentinels, hit record, delay-model hash | |
| `pulse_gen` | pulse from a START edge to the next STOP edge | 2 flip-flops |
| `carry8_tdl` | behavioural model of one CARRY8 delay line (delays only) | 147 cells, 1176 taps |
| `tdc_sampler` | one flip-flop per tap → thermometer code | 1176 bits per line |
| `bin_resort` | fixed permutation of one line's code (POR result) | 1176 bits |
| `iti_interleave` | fixed selection and ordering of all lines' bits (ITI result) | 4704 in, 3474 out |
| `priority_encoder` | first 1-0 edge after a run of ones → bin index | 3474 bits, 2 stages |
| `code_density_hist` | one counter per bin, clear sweep, readout | 3474 × 32 bits |
| `bin_time_lut` | bin → start time `t[n]` in fs | 3474 × 22 bits |
| `timestamp_assembler` | coarse period counter, `coarse*T - t[n]` | 48-bit counter, 64-bit time |
| `tdc_top` | everything above, four lines | |

## The thermometer code and the encoder

At a clock edge, tap `i` reads 1 if the pulse reached its flip-flop before the edge. Bin
indices in the RTL start at 0; bin `p` here is bin `p+1` when bins are counted from 1. The
encoder picks bin `p` when:

* `tc[p+1] = 0`;
* `tc[p-ONES_RUN+1] .. tc[p]` are all 1.

Bits below bin 0 read as 1, because the pulse enters there. The bit above the last bin also
reads as 1, so a line that is full of ones holds no edge and reports nothing. A lone 1 ahead
of the edge (a "bubble") is therefore ignored. `ONES_RUN = 2` is this design's choice: the
method asks for "a certain number" of ones without giving it.

Why out-of-order taps make bins disappear: suppose two neighbouring taps are really ordered
5-before-4. Then an edge that has passed taps 1, 2, 3 and 5 gives `11101000`, and the encoder
reports bin 3. An edge that has passed 1 to 5 gives `11111000` and reports bin 5. Tap 4 is
never the last 1, so its bin is a missing code. `bin_resort` with the map "output 3 ← input
4, output 4 ← input 3" (0-based) restores `11110000`. `tb_bin_resort` and
`tb_priority_encoder` check exactly this example.

The encoder is pipelined in two register stages. Stage 1 searches each 64-bit slice in
parallel. Stage 2 selects the lowest slice with a hit. One code per clock, two clocks of
latency.

## Calibration maps

**`bin_resort.ORDER`** (one per line, `tdc_top.RESORT_ORDER[line]`): packed array of 16-bit
entries. Output bit `i` takes input bit `ORDER[i]`. The value `16'hFFFF` (`BIN_KEEP`) means
"keep bit `i` in place", so the default (all ones) is the uncalibrated physical order.
At elaboration an `initial` assertion checks that the map is a permutation.

**`iti_interleave.MAP`** (`tdc_top.ITI_MAP`): packed array of `{line[3:0], bin[15:0]}`. Merged
bit `j` is bit `bin` of resorted line `line`. Inputs that no entry names are dropped. This is
how bins narrower than the filter threshold leave the line. The value all-ones (`ITI_AUTO`)
selects the built-in default. That default takes global index `g = floor(j*4704/3474)`
round-robin (line `g mod 4`, bin `g div 4`). It is the order equal, equally offset lines
would have, with the dropped inputs spread evenly. It is a placeholder, not a calibration
result.

How the maps are obtained (off-line, after collecting a code density histogram through
`hist_rd_*`):

1. **Bin widths.** `W[k] = T_clk * count[k] / total`.
2. **POR.** Work per CARRY8 cell, taking only every third cell at a time, because
   neighbouring cells were found to mix. From the set of hit ("tapped") bins of a cell, build
   the partial order (a directed acyclic graph). The rule: a bin can be hit only if the bin
   after it does not come before the most recent bin whose position is already fixed. Choose
   the permutation closest to a starting guess, re-synthesise and measure again. Candidates
   that do not reproduce the new hit pattern are eliminated through a table of predicted
   patterns per permutation. Two rounds were enough in the original measurements, which
   raised the share of usable bins from about 50 % to 97-99 %.
3. **ITI.** Compute `t[n]` per line in the corrected order, sort all lines' bins by `t[n]`,
   drop bins narrower than 0.2 ps, and write the sorted list as `ITI_MAP`.
4. **Bin-to-time table.** Measure again and write `t[n]` of the merged line, in femtoseconds,
   through `lut_wr_*`. At power-up the table holds the ideal `n * 4 ns / 3474`.
5. **Bin-width weighting** of histograms (`nu_i = LSB / W[i]`) is applied to measured
   distributions in software. It is not part of the RTL.

## Timing and latency

All logic runs on the 250 MHz sampling clock `clk`, except `pulse_gen`, whose two flip-flops
are clocked by `start` and `stop`. Reset `rst_n` is asynchronous and active low. For a pulse
sampled at clock edge E:

* `enc_valid`/`enc_code`: registered at edge E+2.
* The histogram counts it at E+3.
* The table output is registered at E+3.
* `hit` is registered at E+4, with `hit.coarse` = the counter value at E.

`hit.time_fs = coarse * 4 000 000 - t[n]`, which is the START time counted from the first
clock edge after reset. This sign convention is this design's choice.

`code_density_hist` zeroes its counters one per clock after reset or `hist_clear` (3474
clocks, `hist_busy` high). Hits during that sweep are not counted. Counters saturate.
`hist_rd_data` follows `hist_rd_addr` by one clock.

Pulse width: the pulse must stay high longer than a line takes to fill (about 4.3 ns for the
default model). Then the next clock edge sees a line full of ones, and the converter reports
each START once. A pulse shorter than one clock period but longer than a line also works.

## The delay-line model

`carry8_tdl` is not synthesizable logic. It stands in for the placed CARRY8 chain. Each carry
stage delays by `MEAN_STAGE_PS * (0.1 .. 1.9)`, default mean 3.6 ps. Each tap adds its own
offset of `0 .. MAX_SKEW_PS` (default 6 ps), which stands for routing and clock skew to its
flip-flop. These numbers come from a fixed integer hash (`tdc_pkg::tdl_stage_ps`,
`tdl_skew_ps`) seeded per line, so every run is reproducible and the testbenches can compute
the true order (`tdc_pkg::tdl_arrival_ps`). The statistics were chosen to look like measured
16 nm lines: bin widths spread from 0 to about 15 ps, and roughly half the bins missing before
calibration. They are not measured data. With the defaults a line spans about 4.3 ns, a little
more than the clock period. For an FPGA build, replace `carry8_tdl` with a placed CARRY8 chain
that has the same ports.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Run them with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
          --top-module tb_tdc_top rtl/tdc_pkg.sv tb/tb_tdc_top.sv && obj_dir/Vtb_tdc_top
```

`tb_tdc_top` is the end-to-end test, at reduced size: four lines of 4 cells (32 taps each).
It runs two copies on the same input:

* **Uncalibrated copy:** default maps, 100 merged bins.
* **Calibrated copy:** resort and interleave maps sorted from the model's true arrival times,
  with the 0.2 ps filter, which keeps 106 of 128 bins. Its bin-to-time table is loaded with
  the true start times.

6000 pulses at random phases act as a code density test. For every pulse, the testbench
predicts the code of both copies from the arrival times and a reference encoder. It checks
the clock at which each code appears, every histogram counter, and the exact timestamps. On
the calibrated copy it also checks that each timestamp error against the true START lies
inside the reported bin. Typical output:

```
missing codes: raw 66 of 99, calibrated 0 of 105
time-interval pairs 5063, RMS interval error 1.17 ps
```

This shows both effects the design rests on:
* Without resorting and interleaving calibration, two thirds of the bins are never hit.
* With it, every bin is hit, and intervals are measured to about one bin.

**Size limit.** The full-size converter (4 × 1176 taps, 3474 merged bins) compiles in
Verilator. A run at that size took about 15 minutes to build and more than 15 minutes to
simulate 60 pulses, and it did not finish, so no full-size simulation is included. The
largest size simulated end to end is the reduced one above. The blocks that carry the
3474-bin width (encoder, histogram, table) are parameterised. Their testbenches use smaller
sizes.

## Departures and open points

* **Paper-faithful or derived:**
  - The use of CARRY8 "C" taps.
  - Four interleaved lines.
  - 3474 merged bins.
  - The 250 MHz clock.
  - The 0.2 ps filter (applied by the calibration, not the RTL).
  - The start-time definition of `t[n]`.
  - The 1-0 transition encoder with a run-of-ones rule.
  - Resorting at the encoder input.
  - The START/STOP pulse shaper with two flip-flops.
* **This design's choices:**
  - 147 cells per line. This is an estimate from segment sizes of 387-395 bins per
    every-third-cell group: 3 × 392 = 1176.
  - `ONES_RUN = 2`.
  - The exclusive-or combination in the pulse shaper.
  - The two-stage encoder pipeline.
  - Femtosecond units and 22-bit fine times.
  - The 48-bit coarse counter.
  - Histogram counters in logic.
  - Resets.
  - The default maps.
* The original system keeps the bin-to-time table and the coarse count in an on-chip ARM
  processor, and ships timestamps over Gigabit Ethernet. Here the table and counter are logic,
  and the link is left out: timestamps leave on the `hit` port.
* The four lines share one clock. The original measurements show very wide bins where lines
  cross clock regions. Per-line clock phase shifts are a suggested improvement, not built
  here.
* POR and ITI map computation are not in hardware. Nor is in-field recalibration without
  re-synthesis.
