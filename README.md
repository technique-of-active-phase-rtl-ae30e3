# Active phase stabilisation for a 128-path interferometer: control FPGA

This is the control logic at the receiver of a round-robin
differential-phase-shift QKD link. The receiver's unequal-arm
interferometer has **128 selectable delays**. Seven Pockels-cell gates in
one arm add or remove fibre delay, and a 7-bit random number picks the path
for every 100 µs slot. Each path goes through different fibre, so each has
its own phase offset. That offset drifts with temperature. If it is not
corrected, the interference at the two outputs washes out.

A phase modulator (PM) in the other arm corrects the offset, and its
voltage is set per path. The design works in a cycle of one second, kept
in step with a GPS pulse:

| part of the second | length | what happens |
|---|---|---|
| preparation | first 340 ms | The paths are visited in turn, 0…127, for 2.5 ms each. A 23-step search finds the PM voltage that gives the highest visibility, and the result is written to a 128-entry reference table. |
| QKD | remaining 660 ms | At every 10 kHz slot a new random number selects the path. The PM is driven at once to that path's tabled voltage, and the number is written to block RAM. |

Because the table is rebuilt every second, drift slower than about a second
is tracked.

## Block structure

```
 apd_pulse[1:0] ─► tdc_counter ──C1,C2──► ┌─────────────────────────────┐
 gps_pps ────────► gps_counter ─sec/prep/slot─►  stab_algorithm        │
 rng_bit/strobe ─► rng_if ──rn──────────► │  prep_sequencer ─ ls_solver │
                                          │        │  (+ frac_div)      │
                                          │        ▼                    │
                                          │   ref_table ◄─► qkd_ctrl    │
                                          └──┬──────┬─────────┬─────────┘
                          pc_gate[6:0] ◄─ pockels_io  │         ▼
                 dac_sclk/sync_n/din/ldac_n ◄─ spi_master ◄─ dac_code
                 bus_* ◄──► host_if ◄──────────── rn_bram ◄─┘ (record)
```

| module | role |
|---|---|
| `bob_ctrl_top` | Top level. Its ports are the detector pulses, the GPS PPS, the serial RNG, seven gate triggers, the SPI DAC pins and the host bus. |
| `apsc_pkg` | Shared sizes and types: `path_t` (7 bits), `code_t` (16-bit DAC code), `frac_t` (Q1.15), `ref_entry_t`, and `stage_e`. |
| `tdc_counter` | Synchronises and edge-detects the two detector inputs, then counts C1 and C2 in a gate window. |
| `gps_counter` | Builds the frame: second start, the 340 ms `prep` flag and the 10 kHz slot tick. It free-runs if the PPS is missing. |
| `prep_sequencer` | Runs the 23-step search for every path during preparation. |
| `ls_solver` | Does the least-squares fit after the first four steps (grid search). |
| `frac_div` | Bit-serial divider that computes f = C1/(C1+C2). |
| `ref_table` | 128 × {check fraction, code}. It has one write port and two read ports. |
| `qkd_ctrl` | Handles each QKD slot: takes a random number, looks up the code, sets the path and records the number. It also flags an underrun. |
| `stab_algorithm` | Wraps the sequencer, table and QKD controller, and chooses who drives the path and the code. |
| `rn_bram` | 8192-entry ring that records every random number used. |
| `pockels_io` | Drives the seven gate triggers, with a 1 µs low gap at each slot start. |
| `rng_if` | Turns the serial bits into 7-bit numbers, MSB first. |
| `dac_code`, `spi_master` | Format the 24-bit DAC frame, shift it out, then pulse LDAC. |
| `host_if` | Register bus for status, enable, the table and the record. |

## The 23-step search (preparation stage)

This is the core of the design. Each path gets `PERM_CYCLES` = 250 000
cycles (2.5 ms at 100 MHz), split into 23 steps of `STEP_CYCLES` = 10 869
cycles. Every step works the same way:

1. At its first cycle, the step sets a PM code and selects the path.
2. It waits `SETTLE_CYCLES` = 1000 so the DAC, PM and gates can settle.
3. It counts detector pulses C1 and C2 until `CALC_CYCLES` = 320 cycles
   before the step ends.
4. In the remaining 320 cycles it computes **f = C1/(C1+C2)** in Q1.15.
   After step 4 it also runs the least-squares fit.

The visibility is V = (C1−C2)/(C1+C2) = 2f−1. Ranking steps by f therefore
ranks them by visibility, with no signed arithmetic.

The step codes are:

| steps | code | purpose |
|---|---|---|
| 1–4 | `GRID_BASE + k·4096`, k = 0…3 | Four probe phases a quarter period apart (0°, 90°, 180°, 270°). |
| — | fit | Least squares over the four results gives **PT1**. |
| 5 | PT1 | Applies the fitted value. |
| 6–14 | PT1 + (i−4)·655, i = 0…8 | Coarse scan: 9 points 0.1 V apart, centred on PT1. The best one is **PT3**. |
| 15–22 | PT3 + (j−3)·328, j = 0…7 | Fine scan: 8 points 0.05 V apart around PT3. The best one is **PT5**. |
| 23 | PT5 | Check step. Its f is stored with the code. |

At the end of step 23 the table entry of the path becomes
`{f(step 23), PT5}`. The 13 cycles left over in each path are idle. A full
pass takes 128 × 2.5 ms = 320 ms, which fits in the 340 ms window.

Sums of codes saturate at 0 and 0xFFFF (`apsc_pkg::code_add`) and do not
wrap. A wrap would jump the PM by a whole DAC span. Ties in the ranking
keep the earlier step.

### Least-squares fit

When the PM adds an extra phase α, port 1 sees a fraction
g(α) = (1 + cos(θ_r + α))/2 of the light, where θ_r is the path's unknown
offset. The four probes give f_0…f_3 at α_k = k·90°.

The solver tries P = 64 candidate compensation phases φ_p = p·2π/64. For
each it computes

  S(p) = Σ_k ( (1 + cos(α_k − φ_p))/2 − f_k )²

and it returns the p with the smallest S. PT1 is `GRID_BASE + p·256`: the
code at which the PM phase cancels θ_r to within one grid step (5.6°).

The cosine table (P entries, Q1.15) is built by a constant function at
elaboration, so no data file is needed. Because α_k falls on the same grid,
the index of cos(α_k − φ_p) is simply (k·P/4 − p) mod P. The fit runs
sequentially, one (p, k) pair per cycle, and takes 4·P + 2 = 258 cycles.

The fit assumes the interference law above. The original formula is printed
as 1 + cos α_r + cos α_ext, which cannot describe interference. The sum of
the two phases is used here instead.

### Why a grid and not a closed form

With four probes a quarter period apart, θ could be obtained with an
arctangent. The paper's method is a least-squares fit, and a 64-point search
is small, exact about its own grid and cheap in the 320-cycle window. The
coarse and fine scans then refine the result to 0.05 V (about 1.8°, given
the assumed PM scale of 2.5 V per 2π).

## QKD stage

`qkd_ctrl` runs whenever all of these hold:

- the host enable is set;
- the preparation flag is low;
- the table has been filled at least once since reset;
- no preparation pass is running.

At every slot tick it does the following:

- If `rng_if` holds a fresh number, it takes the number, drives it as the
  path and writes it to `rn_bram`.
- If there is no fresh number, it keeps the previous path and counts an
  **underrun**. The underrun count can be read by the host.
- It reads the table entry of the path. The code reaches `dac_code` 3 cycles
  after the tick.
- The SPI frame then takes 2·2·24 + 4 = 100 cycles, and LDAC updates the DAC
  output 2 cycles later.

The DAC output therefore changes about 105 cycles (1.05 µs) after the tick.
That is about as long as the 1 µs gap that `pockels_io` opens at each slot
start, during which all gate triggers are low. Each open gate thus gives one
pulse per slot.

## Timing parameters

The defaults assume a 100 MHz clock. Every length is a parameter of
`bob_ctrl_top`:

| parameter | default | meaning | origin |
|---|---|---|---|
| `SEC_CYCLES` | 100 000 000 | one second | paper (1 s), clock assumed |
| `PREP_CYCLES` | 34 000 000 | preparation stage | paper (340 ms) |
| `SLOT_CYCLES` | 10 000 | QKD slot | paper (10 kHz) |
| `PERM_CYCLES` | 250 000 | time per path | paper (2.5 ms) |
| `STEP_CYCLES` | 10 869 | one of 23 steps | own: 2.5 ms / 23 |
| `SETTLE_CYCLES` | 1 000 | settle before counting | own |
| `DEAD_CYCLES` | 100 | gate gap at each slot | own |
| `SPI_HALF_DIV` | 2 | SCLK = clk/4 | own |
| `RN_DEPTH` | 8192 | random-number record | own (≥ 6600 per second) |
| `CNT_W` | 24 | photon counter width | own |

Elaboration checks reject these settings:

- a step plan that does not fit in `PERM_CYCLES`;
- a count window that is empty;
- a preparation stage shorter than 128 paths.

The DAC scale is also an assumption: a 16-bit offset-binary DAC over ±5 V.
That makes 0.1 V equal to 655 codes, and a PM phase of 2π equal to 16 384
codes (2.5 V). `GRID_BASE` = 0x8000 − 8192 puts the first probe a quarter
span below mid-scale.

If the PM's half-wave voltage differs, change `CODES_PER_2PI`, `COARSE_STEP`
and `FINE_STEP` in `prep_sequencer`. The fit needs `CODES_PER_2PI` to be a
multiple of P.

If the GPS pulse is missing, `gps_counter` starts a new second after
`SEC_CYCLES` + 0.1 %. A PPS that does arrive realigns the frame.

## External interfaces

| interface | format |
|---|---|
| Detectors | `apd_pulse[0]` is port 1 and `apd_pulse[1]` is port 2. Each is an asynchronous pulse that must stay low at least one clock between photons. |
| RNG | `rng_bit` is sampled on the rising edge of `rng_strobe`. Seven bits, MSB first, make one number. If a number is not used before the next one completes, it is counted as lost. |
| DAC | 24-bit frame `{4'h1 command, 4'h1 address, code}`, MSB first. SCLK idles high and data changes while SCLK is high, so the DAC samples on the falling edge. `dac_sync_n` is low during the frame. `dac_ldac_n` pulses low for 2 cycles afterwards. If several codes arrive during one frame, only the newest is sent. |
| Pockels gates | `pc_gate[i]` is bit i of the selected path. |
| Host bus | `bus_rd` or `bus_wr` is held for one cycle. Read data arrive with `bus_rvalid` 2 cycles later. |

Host register map:

| address | access | contents |
|---|---|---|
| 0x0000 | ro | status: [0] QKD stage, [1] table valid, [2] preparation running, [3] GPS pulse seen |
| 0x0001 | rw | [0] enable (1 after reset). When 0, the gates are off and no path is calibrated or switched. |
| 0x0002 | ro | seconds since reset |
| 0x0003 | ro | random numbers recorded |
| 0x0004 | ro | underruns |
| 0x0005 | ro | code now on the DAC |
| 0x1000+p | ro | table entry of path p: [31:16] check fraction, [15:0] code |
| 0x4000+i | ro | record entry i |

## Where this design goes beyond or departs from the source

These parts follow the paper:

- the one-second frame split into 340 ms and 660 ms;
- 2.5 ms per path, with paths visited in order;
- 23 steps per path: four fixed probes, a least-squares estimate, nine
  points 0.1 V apart, eight finer points, and one check step;
- the 128-entry table refreshed every second;
- 10 kHz switching by a 7-bit random number, and recording of the numbers
  in block RAM;
- the block list: TDC, GPS counter, algorithm, BRAM, IOs, DAC code, SPI and
  interface.

These are this design's own choices:

- the clock;
- the step length and settle time;
- the four probe phases;
- the DAC type and scale;
- the 0.05 V fine interval, which is only called "smaller" at the source;
- the placement of the scan points around PT1 and PT3;
- ranking by f, which is equivalent to ranking by visibility;
- storing the step-23 fraction instead of acting on it;
- the interference law used in the fit;
- the behaviour of the missing-PPS and missing-random-number cases;
- every external signal format, and the host bus and its map.

The detectors are called up-conversion detectors in one place and APDs in
another. Either kind gives a pulse per photon, which is all the logic needs.

Not part of the RTL:

- the random number chip, DAC, CPLD and PXI bus;
- the 2 kV Pockels-cell drivers;
- the optics.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The reference values
are computed in the testbench, in floating point where that applies:

- `tb_prep_sequencer` repeats the whole 23-step search in real arithmetic
  and checks the code and fraction of every step.
- `tb_ls_solver` checks the fit against an exhaustive real-valued search.

The behavioural models used by the testbenches are:

- `optics_model`: the interferometer, the PM and the detectors. Each path
  has its own phase, visibility and slow drift, and photons are emitted at
  random.
- `dac_model`: an SPI DAC with LDAC that flags malformed frames.
- `rng_model`: a serial random source that can be paused to force
  underruns.

The end-to-end tests share `tb/top_env.svh`. They check that:

- after every preparation pass, each tabled code cancels its path's phase
  to within a tolerance;
- in every QKD slot, the DAC output equals the tabled code of the gated
  path;
- the gates are off while the design is disabled;
- the record read over the host bus equals the numbers actually used;
- the status counters are correct.

They also count each mechanism and fail if one never occurs. The mechanisms
are GPS-aligned and free-running seconds, preparation passes, fits, coarse
and fine scans, checks, table writes, QKD switches, underruns, host reads
and host disable.

| testbench | configuration | result |
|---|---|---|
| `tb_bob_ctrl_top` | Shortened steps and slots (2000 and 1000 cycles). Two GPS seconds and one free-running second. | 2344 checks pass. Worst phase error 0.34 rad, at the short count window. |
| `tb_bob_ctrl_full` | All defaults: one full second of 10⁸ cycles, 128 paths calibrated, 6606 QKD slots. | 14 300 checks pass in about 1.5 min. Worst phase error 0.15 rad. |

Each block testbench was also run against a deliberately broken copy of its
block and reported failures. Examples include a wrong sign in the fit, a
mis-centred coarse scan, a swapped code multiplexer, and swapped detector
inputs.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/apsc_pkg.sv tb/tb_bob_ctrl_top.sv --top-module tb_bob_ctrl_top
./obj_dir/Vtb_bob_ctrl_top
```

Replace the file and the top name to run any other testbench, for example
`tb_prep_sequencer` or `tb_bob_ctrl_full`. The testbenches use `$urandom`
only, so they need neither a constraint solver nor any data files.
