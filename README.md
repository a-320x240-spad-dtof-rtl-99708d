# Multi-time-gated TDC for a 320x240 SPAD flash-LiDAR sensor (RTL)

A flash-LiDAR sensor lights the whole scene with a short laser pulse. Each
pixel then measures how long the light takes to return. This design does that
with almost no fast circuitry in the pixel array. A slow global clock steps a
6-bit LFSR through 63 states. Each state is one coarse **time gate**, one
clock period wide (2.5 ns in the sensor this RTL follows). When a SPAD fires,
its 2x2-pixel cluster stores the LFSR state, so the photon is time-stamped to
the nearest gate. The fine resolution comes from repeating the measurement
with the global clock delayed by a small phase step Δt. The gates slide over
the echo, and the echo moves into the previous gate at one step b. With a the
gate index, the distance is

    D = (a * T_gate + b * Δt) * c / 2

The phase comes from a phase rotator that divides one clock period into 2^9
positions. A step of 4 codes (19.5 ps, 2.93 mm) or 8 codes (5.86 mm) gives the
fine LSB. Under strong background light each step is repeated many times, and
on-chip 63-bin histograms (8, 10 or 12-bit counters) collect the gate values.

The RTL describes the digital part of such a sensor:

- a 320x240-pixel array made of four 160x120 quadrants;
- 320 LFSRs and 19,200 cluster TDCs;
- 64 readout channels, each with a multiplexer, an LFSR decoder, a histogram
  and a serializer;
- the phase-code generator with its calibration table;
- the measurement sequencer and a register file.

The SPAD front end, the CML phase rotator, the bandgap and the LVDS drivers
are analog and are not part of the RTL. Their digital signals are ports of the
top module. The testbenches include a behavioural phase rotator.

## Array organisation

```
lidar_sensor_top
├── config_regs                 register file
├── control_logic               measurement sequencer
├── phase_stepper               phase code + calibration -> PL, PR, SEL, SELN
├── pixel_quadrant x4           160x120 pixels each
│   └── tdc_group x80           12x20 pixels, one LFSR
│       ├── gate_lfsr           6-bit LFSR, 63 gates
│       └── pixel_cluster x60   2x2 pixels, 6 TSPC bits + 4 address latches
└── readout_channel x64         (16 per quadrant)
    ├── readout_mux             scans the channel's clusters
    ├── gate_decoder            LFSR state -> gate 1..63
    ├── histogram_unit          63 bins, 8/10/12-bit saturating
    └── serializer              frames, one bit per clock
```

`lidar_pkg` holds the constants, the LFSR functions and the shared types.

Pixel `pix[row][col]` has rows 0..239 and columns 0..319:

- Quadrant 0 is rows 0-119 and columns 0-159.
- Quadrant 1 is rows 0-119 and columns 160-319.
- Quadrants 2 and 3 are the lower half, in the same order.

A quadrant has 60x80 clusters. Cluster (r, c) holds pixels (2r, 2c), (2r, 2c+1),
(2r+1, 2c) and (2r+1, 2c+1), which are address bits 0 to 3. Group (gr, gc)
holds cluster rows 6gr..6gr+5 and cluster columns 10gc..10gc+9.

Two phase rotators each feed two quadrants: `gclk[0]` drives quadrants 0 and 1,
and `gclk[1]` drives quadrants 2 and 3. Both rotators get the same control code.

## The cluster TDC

`pixel_cluster` is the heart of the array:

- **Event clock.** The four pixel pulses, each gated by its enable (VSEL), are
  combined into one event clock. Any firing pixel makes a rising edge.
- **Time bits.** On that edge six flip-flops (TSPC cells in silicon) copy the
  LFSR state. A later photon in the same window makes a new edge and
  overwrites the value, so the cluster keeps the *last* photon of the window.
  Pulses that overlap give only one edge.
- **Address bits.** Each pixel pulse also sets its own address latch. The
  latches keep every pixel that fired until the next reset.
- **Reset.** The reset is asynchronous. The control logic pulses it before
  every repetition.
- **Counter mode.** `cnt_mode=1` turns the six time flip-flops into a 6-bit
  counter of cluster events. It wraps at 64. Clusters that are not needed for
  time stamps thus become extra counters.

In simulation these flip-flops really are clocked by the pixel pulses. A
testbench must therefore give `rst` an edge: a reset that is high from time 0
never triggers `posedge rst`.

## Coarse gates

`gate_lfsr` holds the all-zero state outside the measurement window. A maximal
LFSR never reaches that state on its own, so a cluster that sampled it saw no
photon inside the window.

The control logic raises `run` for exactly 63 reference clocks. The LFSR
samples `run` on its own delayed clock `gclk`:

- The first `gclk` edge with `run` high loads the seed 000001. That is gate 1.
- Each following edge moves one gate on, through gate 63.
- The 64th edge sees `run` low and returns the LFSR to idle.

The laser pulse and the start of `run` come from the same reference-clock
edge t0. Gate g therefore spans

    [t0 + d + (g-1)T, t0 + d + gT)        d = clock delay set by the rotator

A photon before t0+d or after the 63rd gate is stored as state 0 and decodes
to gate 0. The polynomial is x^6+x^5+1. `gate_decoder` builds its state-to-gate
table at elaboration from the same next-state function, so the two always
agree.

`gclk` must be the reference clock delayed by more than 0 and less than one
period. Otherwise the `run` edge and the `gclk` edge collide.

## Fine operation: the phase code

`phase_stepper` keeps a nominal 9-bit code `n`:

- `step_clr` (start of a measurement) loads `n = SEL0`.
- `step_adv` (between steps) adds `k`.

The applied code is `n` plus a signed 6-bit trim from a 64-entry calibration
table indexed by `n[8:3]`. The rotator's steps are not uniform: a current
interpolator follows an arctangent law. The trim moves each nominal position
to the code that gives the wanted phase. With k = 8, 16 or 32, the low 3, 4 or
5 bits act as calibration bits, and every step position has its own entry.

The applied code is decoded into the rotator's switches:

| code[8:7] | phase range | PL,PR | SEL           |
|-----------|-------------|-------|---------------|
| 0         | I → Q       | 11    | code[6:0]     |
| 1         | Q → IB      | 01    | ~code[6:0]    |
| 2         | IB → QB     | 00    | code[6:0]     |
| 3         | QB → I      | 10    | ~code[6:0]    |

`SELN = ~SEL`. SEL switches binary-weighted tail currents (1I to 64I) onto the
Q/QB pair, and SELN onto the I/IB pair. PL and PR choose the sign of each
pair. Because SEL counts up in quadrants 11 and 00 and down in 01 and 10, the
phase turns monotonically through the whole period.

The testbench model `tb/phase_rotator_model.sv` has two settings:

- the real law, phase = atan2(±SEL, ±SELN), whose 8-code steps range from
  about 23 ps to 50 ps at 2.5 ns;
- an ideal, linear law, which the end-to-end test uses.

## A measurement

`control_logic` repeats the following for each of `NUM_STEPS` phase steps,
`REPS` times per step (in reference clocks):

| phase   | clocks | what happens                                        |
|---------|--------|-----------------------------------------------------|
| reset   | 1      | `rst_sys`: LFSRs, time bits and address latches cleared |
| settle  | 1      |                                                     |
| window  | 63     | `laser` pulses in the first clock; `run` high        |
| drain   | 2      | late pixel pulses settle                            |
| done    | 1      | `meas_done` pulse                                   |
| readout | 15·N+2 | `ro_start`; all channels send their N cluster words |

The laser pulse is followed by `meas_done` 65 clocks later. After the last
repetition of a step, every channel sends its 63 histogram bins and then
clears them (`hist_start`/`hist_done`). Then `step_adv` raises the phase by k.
After the last step, `frame_done` pulses, which is the end-of-measurement flag.

In counter mode the clusters are cleared only in the first repetition of a
step and read only after its last. They then count over the whole step, and
no histogram dump takes place.

## Readout channels and frames

Each quadrant has 16 channels. With the default parameters, channel
`q*16 + j` owns cluster columns `5j .. 5j+4` of quadrant q over all 60 rows.
That makes N = 300 words, scanned row by row.

Each word becomes a serial frame:

- start bit `1`;
- kind bit: 0 for a cluster word, 1 for a histogram count;
- a 12-bit payload, sent MSB first.

The line idles at 0. The serializer takes a new word one clock after the last
bit, so back-to-back frames cost 15 clocks.

| mode                        | cluster payload                 |
|-----------------------------|---------------------------------|
| time of flight (default)    | `{2'b00, gate[5:0], addr[3:0]}` |
| 2D (`img2d`)                | `{8'b0, addr[3:0]}`             |
| cluster counter (`cnt_mode`)| `{2'b00, count[5:0], addr[3:0]}`|

Raw words leave the chip on every repetition. In time-of-flight mode the
channel's histogram also counts each word that has a photon inside the window
(addr ≠ 0 and gate ≠ 0). It counts either every such word of the channel
(`hist_all`) or only the word at index `HIST_TGT`. Counters stop at 2^w−1
(w = 8, 10 or 12), so an overflowing bin stays visible. Off-chip and on-chip
histogramming therefore run at the same time. To get a 160x120 image, ignore
the address bits and treat each cluster as one pixel.

## Registers

`config_regs` is a simple synchronous bus. A write happens on `reg_we`, and
`reg_rdata` returns the register at `reg_addr` combinationally.

| addr | name      | bits / reset                                            |
|------|-----------|---------------------------------------------------------|
| 0x00 | CTRL      | [0] start (pulse), [1] cnt_mode, [2] img2d, [3] hist_all; 0 |
| 0x01 | NUM_STEPS | phase steps per measurement; 1                          |
| 0x02 | REPS      | repetitions per step; 1                                 |
| 0x03 | PHASE_K   | phase increment k (9 bits); 16                          |
| 0x04 | SEL0      | first phase code; 0                                     |
| 0x05 | CNT_WIDTH | 0: 8, 1: 10, 2: 12 bits; 2                              |
| 0x06 | HIST_TGT  | word index counted when hist_all = 0; 0                 |
| 0x07 | QUAD_EN   | pixel enable per quadrant; 0xF                          |
| 0x08 | CAL       | write {idx[13:8], trim[5:0]} into the calibration table |
| 0x09-0x0C | status | busy, step index, repetition index, nominal code (read-only) |

## How far this follows the source design

These points are taken from the published sensor:

- the organisation: four 160x120 quadrants, one LFSR per 12x20 pixels, 2x2
  clusters with 6 time bits and 4 address bits (10 bits per cluster);
- 63 gates, 2^9 phase positions, SEL[6:0]/SELN[6:0] with 1I-64I currents,
  PL/PR and the quadrant labels in the table above;
- the stepping SEL = SEL0 + k, with the low code bits used for calibration;
- the order of the control sequence;
- 64 output channels;
- 63-bin counters of 8 to 12 bits that saturate;
- cluster TSPCs reused as counters;
- an address-only 2D mode;
- a 160x120 mode.

These are choices of this RTL, because the source does not specify them:

- the LFSR polynomial, seed and idle code;
- the polarity of VSEL;
- keeping the last photon when several arrive;
- the wiring of the counter mode;
- the calibration as an additive trim table;
- the assignment of SEL to the Q pair;
- the channel-to-cluster mapping, the frame format and the handshakes;
- the register map and bus;
- the pulse widths and the drain time;
- a histogram dump after every step;
- the choice of cluster for a single-cluster histogram.

The source describes the cluster clock as a 4-input AND gate that fires "when
any SPAD is triggered". The RTL implements the "any pixel" function directly.
For the calibration split, the source text names 3 to 5 calibration bits with
SEL[4:0] as its example, while its figure names SEL[3:0]. The trim table
supports any of these splits.

Known departures and limits:

- **Range.** The window is 63 gates. At 2.5 ns gates it covers 157.5 ns (about
  23.6 m), plus up to one period of phase shift. The source quotes a
  720 ns / 108 m timing range. That range needs gates of about 11.4 ns, or
  windows that start later, and the source does not say which. A wider range
  can be had with a slower reference clock. No window-offset logic was added.
- **One clock for control and readout.** Control, readout and serializers run
  on one clock, and the serializer sends one bit per clock. The chip sends
  1.2 Gb/s per channel from a separate bit clock, so in this RTL a readout of
  300 words takes 4,502 clocks of the control clock.
- **Repetition rate.** A full readout after every laser shot takes about
  3.75 µs at 1.2 Gb/s. That is longer than the 320 ns period of a 3.125 MHz
  laser. The source does not say how it reaches that rate: selective readout
  or on-chip histogramming alone would be the options.
- **Not modelled.** The clock tree and the analog parts have no logic in this
  RTL. Their signals are ports: `pix`, `gclk`, `pr_*`, `laser` and `sout`.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lidar_pkg.sv rtl/*.sv \
    tb/phase_rotator_model.sv tb/top_tb_core.sv tb/tb_lidar_sensor_top.sv \
    --top-module tb_lidar_sensor_top -o sim && ./obj_dir/sim
```

`tb_lidar_sensor_top` runs the whole sensor at a reduced size: one LFSR group
per quadrant (24x40 pixels) and two channels per quadrant. It takes about
20 s. It runs five measurements:

- time of flight over three phase steps, with calibration trims;
- a wall scene with 8-bit counters that saturate;
- 2D mode with one quadrant disabled;
- cluster-counter mode;
- a single-cluster histogram.

The testbench predicts every serial frame from the pixel pulse times it
generated and the phase it programmed, and compares. It also checks that each
mechanism actually happened: late photons, multi-pixel clusters, gate shifts
caused by a phase step, trims, dumps, saturation, disabled quadrants and
counter mode. The core (`tb/top_tb_core.sv`) also has a `FULL` setting: it
instantiates the top at its default 320x240 size and runs one two-step
measurement. The largest size simulated to completion is the reduced one
above. At full size the C++ build of the verilated testbench is large
(hundreds of thousands of flip-flops clocked by pixel pulses), and a complete
full-size run has not been timed.

Pass sizes with `-G` to a plain lint run, for example:

```
verilator --lint-only -Wall -Irtl rtl/lidar_pkg.sv rtl/*.sv --top-module lidar_sensor_top \
    -GQROWS=1 -GQCOLS=1 -GCH_PER_Q=2
```

The full-size top takes about 2 minutes and 3 GB to lint.

Verilator reports `SYNCASYNCNET` on `rst_n`. The asynchronous reset is also
used in the `disable iff` of assertions, and this is intended.
