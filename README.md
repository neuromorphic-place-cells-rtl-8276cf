# Oscillator path integration: theta chip, vector cells and a place-cell sheet

An agent that knows only its own velocity can still know where it is by
integrating that velocity over time. This design does the integration with
oscillators instead of adders. Each **theta unit** is an oscillator whose
frequency moves away from its idle value in proportion to how well the current
velocity lines up with a *preferred velocity* stored in the unit. Run two units
with opposite preferred directions from the same starting phase. Their phase
difference then grows in proportion to the distance travelled along that
direction. The integral is held in the relative phase of two oscillators.

Digital logic reads those phases without ever computing a number. ANDing two
oscillations and low-pass filtering the result gives a signal that is large
while the two are nearly in phase and small otherwise. That is an "interference"
term that depends only on the phase difference, and so on the displacement.
Several such terms ANDed together make a **vector cell**: it stays silent until
the agent has moved a set distance in a set direction, then fires. Four vector
cells (east, west, north, south), each one cell-width long, drive an 11 × 11
**place-cell sheet**. It holds a single bump of activity and moves the bump one
cell for every vector-cell firing. Each firing also resets every oscillator to
phase zero, so the next displacement is measured from scratch.

The system has three parts:

* a mixed-signal **theta chip** with 128 theta units, each with 8 phase taps, and
  a serial output that scans the taps;
* FPGA logic (all synthesizable SystemVerilog here), consisting of:
  * the chip programmer;
  * four scan multiplexers with lookup tables;
  * four two-layer vector-cell networks;
  * the phase-reset controller;
  * a FIFO to the host;
* the **place-cell network**.

The theta chip is analog in reality. Here it is a behavioural model with the
real chip's pins and its measured frequency statistics.

```
                    +------------------------- theta chip (model) -------------------------+
 velocity --------> | 2 DACs -> 128 x [PV SRAM, W-2W DACs, dot product, ring oscillator x8]   |
 Clear/Write/Bypass | 1024-stage token ring with bypass bits --> one serial output bit/clock|--+
 PV bus ----------> |                                        Cap_clear (phase reset) <------|--|--+
                    +------------------------------------------------------------------------+  |  |
                                                                                                 |  |
   theta_chip_programmer (Clear, 1024 write clocks, scan start)                                  |  |
                                                                                                 v  |
   4 x [ theta_scan_mux (220-slot table -> 80-bit frame) -> vector_cell_network (40+20 nodes, AND) ]|
                                   |  vec[3:0] = {S, N, W, E}                                        |
                  +----------------+-----------------+--------------------+                         |
                  v                                  v                    v                         |
        place_cell_network (11x11)        vc_fifo -> host       phase_reset_ctrl ------------------+
```

## The theta unit and its frequency law

Each unit stores a preferred velocity **Vp** as two 4-bit codes in a small SRAM.
The codes are offset binary with 8 meaning zero. The chip is rated for
−7 … +7 and is most linear within ±4. Code 0 (−8) exists in the encoding but
lies outside that range. The x code
sits in bits [3:0] of the PV byte and y in bits [7:4]. Two W-2W DACs turn the
codes into voltages. A Gilbert-cell multiplier forms the inner product with the
input velocity **V**, which comes from two shared DACs. That current starves a
ring oscillator, so

    F = F_idle + β · (V · Vp)          (V · Vp in code units)

The model uses the measured chip averages: F_idle = 2023.8 Hz and β = 20.8 Hz
per code unit. Unit to unit, the spread is 374.6 Hz and 3.69 Hz (one standard
deviation). `theta_chip` gives unit *u* fixed pseudo-normal draws from a hash of
*u*, so every run sees the same "chip". The oscillator has eight taps, 1/8 of a
period (0.25π) apart. Tap *k* is high while `frac(phase − k/8) < 0.5`, so tap *k*
lags tap 0 by k/8 of a cycle. `cap_clear` forces every oscillator to phase 0 and
holds it there. On release all units restart together, which is the phase reset
all of the integration depends on.

The model integrates phase in fixed time steps (`STEP_NS`, 1 µs by default).
That is fine enough for oscillations of a few kHz. The analog blocks have `real`
ports. Everything outside the chip is plain two-state logic.

## The I/O arbiter: a token ring you can shorten

128 units × 8 taps = 1024 signals, but the chip has a single output pin. The
arbiter (`theta_io_arbiter`) is a chain of 1024 one-bit stages carrying one
token. Stage `8u + p` puts tap *p* of unit *u* on the pin. The first stage of
each unit also enables the write of that unit's PV SRAM. Every stage has a
**bypass bit**. A bypassed stage is taken out of the shift path, and the token
jumps over it in the same clock.

Programming uses the same token. Clear (held for a few clocks) parks the token
in stage 0 and clears all bypass bits. Then, with Write high, every clock does
three things:

1. it stores the Bypass pin into the stage holding the token;
2. on stages `8u` it also writes the PV bus into unit *u*'s SRAM;
3. it moves the token on.

The bits written so far all lie behind the token, so this first pass visits
every stage: exactly 1024 clocks program the whole chip. Once the token wraps
around, the chain is a ring of only the kept stages. Say only 220 taps are kept:
the output then repeats with a period of 220 clocks. Slot *s* of that period is
the *s*-th kept stage in stage order. Because the ring is short, every kept tap
is sampled more often. At the typical 6 MHz scan clock with 220 kept taps, each
tap is sampled at 6 MHz / 220 = 27.27 kHz. That is well above twice the highest
oscillation frequency.

`theta_chip_programmer` runs this sequence from two host-written memories: 128
PV bytes, and 128 bytes of bypass bits (bit *p* set means "skip tap *p*"). It
holds Clear for 4 clocks, then issues 1024 write clocks, presenting each
stage's data one clock ahead. It raises `scan_start` during the first slot of
the shortened scan. The scan multiplexers use that pulse as their slot-0
reference.

The programmer's timing: `start` → 4 Clear clocks → 1024 Write clocks →
`done`. `scan_start` is high for one clock, and that clock is slot 0.

## From the serial stream to the network: lookup tables choose the phase offsets

Each vector-cell network needs 80 binary inputs. Its `theta_scan_mux` has a
220-entry table indexed by slot. Each entry is a valid bit plus the input
position (0–79) that the slot's sample is written to. At the last slot the
filled buffer is copied into the frame and `frame_stb` pulses once. That pulse
is the network's clock enable. Slots marked invalid are ignored, so several
networks can take different taps from the same stream.

The tables are where a vector cell gets its direction and distance. The
standard arrangement uses 20 groups of four units:

* a +x / −x pair, with preferred velocities [4,0] and [−4,0];
* a +y / −y pair, with [0,4] and [0,−4].

In one unit of each group all 8 taps are kept. The other three keep only tap 0.
That gives 20 × (8 + 3) = 220 kept taps: the 1024-stage chain programmed as
60 single taps plus 20 full sets of 8.

In a network, one first-layer node ANDs the two units of a group's x pair, and
another ANDs the two units of its y pair. A second-layer node ANDs those two
first-layer outputs. The output ANDs all
20 groups.

* **Untapped pair (both tap 0).** The pair is in phase at the start, so its AND
  is large and the node is high. It stays high while the displacement along the
  pair's axis stays small.
* **Tapped pair.** Say the table takes tap 3 of the +x unit (3/8 of a cycle
  late). The node is low at the start, and goes high only after eastward motion
  has moved the +x unit 3/8 of a cycle ahead of the −x unit.

The vector cell fires when every group agrees. That happens where the tapped
pairs have just arrived at their offset and the untapped pairs have not yet
left their window. The cell therefore fires after a definite displacement, and
only in the matching direction.

| Network | Taps taken (all other inputs take tap 0) |
|---|---|
| E | tap 3 of the x unit |
| W | tap 5 of the x unit (3/8 early) |
| N | tap 3 of the y unit |
| S | tap 5 of the y unit |

With the node threshold used here (64), taps 1/7 and 2/6 are not selective: a
tapped pair already passes the threshold at zero offset, so the cell fires
once the filters settle, whether the agent moves or not. Tap 3/5 is the one
that gives a displacement cell. Other distances need a different threshold,
or pairs that are tapped in more groups.

A lone vector cell also **aliases**. When the agent moves opposite to the
cell's direction and nothing resets the phases, the phases slip by about 2/3 of a cycle and the
windows line up again. In the assembled system the opposite cell fires first
and its reset prevents this. Keep all four cells enabled, or use an interval
reset shorter than the slip time.

**Calibration matters.** Two units in a pair drift apart at their idle-frequency
difference even when the agent is still. Their gains also differ by tens of
percent. The host therefore measures every unit before building tables. The
full-size testbench shows the procedure:

1. Keep tap 0 of all 128 units, so the scan has 128 slots.
2. Rebuild each unit's waveform from the serial stream, using `theta_osc` and
   the `scan_sync` slot-0 marker.
3. Measure the idle frequency over 21 ms.
4. Repeat at a known inner product (8) to get each unit's gain.
5. Take the 80 units in the middle of the frequency ranking and pair neighbours
   in frequency. This is the offset reduction: pairing similar idle frequencies
   cancels most of the drift.
6. Give the pairs with the highest summed gain the tapped roles and the slowest
   the untapped ones. Then every tapped pair reaches its offset before any
   untapped pair leaves its window.

With the modelled spread (pair gain sums 33–51 Hz per unit), leaving out the
gain step made the south cell miss completely. With it, all four directions
fire.

## The vector-cell network

`vector_cell_network` is a fixed two-layer tree of `interference_node`s:

* 40 first-layer nodes, taking inputs 2i and 2i+1;
* 20 second-layer nodes, taking first-layer nodes 2j and 2j+1;
* a registered 20-input AND.

Each node ANDs its two inputs and filters the product once per frame:

| Filter stage | Layer 1 | Layer 2 |
|---|---|---|
| 9-tap FIR | Hamming window, taps 5, 12, 29, 49, 64, 49, 29, 12, 5 | moving average, 9 × 28 |
| digital RC stage `y += (x − y) >>> K` | K = 2 | K = 4 (slower) |

The output is `y ≥ 64`, about a quarter of full scale. A phase reset (`clr`)
empties every filter. From the inputs to `vec`, the chain adds roughly 1 ms of
lag at a 27 kHz frame rate. That lag is the same for every direction, so it
shifts where a cell fires but not whether it fires.

## Phase resets, the host FIFO and the clock

`phase_reset_ctrl` pulses `cap_clear` for 64 clocks (about 11 µs at 6 MHz) on
three events:

* the start of a trail (`trail_start`);
* a change of input velocity (`vel_we` with a new value);
* the rising edge of any vector cell.

An optional fixed-interval reset exists and is off by default. `reset_cause`
tells which events started the current pulse. The same pulse clears the network
filters.

`vc_fifo` (512 × 4, first-word fall-through) carries one vector word per frame
to the host. When full it drops new words and sets a sticky overflow flag.

Chip and FPGA logic share one scan clock.

## The place-cell sheet

`place_cell_network` is an 11 × 11 grid of `place_cell`s. Each cell holds a 4-bit
activity and owns four *path cells*, one per direction. A vector-cell rising
edge is one event (`step`). On an event the firing cell's path cell in that
direction passes excitation to the neighbour on that side. Then:

* the neighbour becomes active at 10;
* the old cell loses its self-excitation;
* a global leak of 5 is applied to everyone.

The cell just left therefore shows 5, and 0 one event later, which leaves the
visible trailing tail. A path cell pointing off the sheet does not exist, so
the bump stays at the border. The bump starts at the centre, cell (5, 5). Rows
grow southward and north is up. `bump_row`, `bump_col` and `bump_moved` report
the winner.

## Top level: `neuro_place_system`

The top level's defaults are:

* 128 units with the measured frequency and gain statistics;
* 220 scan slots and 80-input networks;
* 4 networks;
* an 11 × 11 sheet;
* a 512-word FIFO.

| Port group | Signals | Use |
|---|---|---|
| chip configuration | `cfg_we`, `cfg_sel` (0 PV, 1 bypass), `cfg_addr` (unit), `cfg_data`, `cfg_start`, `cfg_done` | fill the programmer memories, then program the chip |
| lookup tables | `lut_we`, `lut_net` (0 E, 1 W, 2 N, 3 S), `lut_addr` (slot), `lut_data` ({valid, pos}) | one table per network |
| motion | `vel_we`, `vel_data` ({y, x}, offset binary, 8 = 0), `trail_start` | input velocity; new values and trail starts reset the phases |
| host stream | `rd_valid`, `rd_ready`, `rd_data`, `fifo_overflow` | vector words {S, N, W, E}, one per frame |
| observation | `theta_osc`, `scan_sync`, `frame_stb`, `vec`, `cap_clear`, `reset_cause`, `place_act`, `bump_row`, `bump_col`, `bump_moved` | calibration and monitoring |

The host procedure is:

1. Write PV and bypass bytes and pulse `cfg_start`; scanning begins at
   `cfg_done`.
2. Write the four lookup tables.
3. Pulse `trail_start`.
4. Drive velocities and read vector words.

Tables can be rewritten at any time and take effect from the next scan cycle.
Running a different vector cell only needs a new table.

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/nc_pkg.sv tb/tb_neuro_place_system_full.sv \
          --top-module tb_neuro_place_system_full -Mdir obj -o sim && obj/sim
```

Three testbenches cover the whole system and the sheet:

* **`tb_neuro_place_system_full`** runs the top at its defaults. It calibrates,
  pairs, programs the 220-tap scan and runs an E, N, W, S trail. It checks that
  only the matching vector cell fires, that each direction fires, and that the
  bump follows. It also checks the 220-clock frame period, the three reset
  causes, and that every frame's word reaches the host. Finally it drives a
  detour (north 2, east 4, south 4, west 1 firings) and checks that the bump
  ends displaced by [3, −2]. It runs in about 10 s
  and prints the firings per leg.
* **`tb_neuro_place_system`** is a small end-to-end run: 8 units, 22 slots,
  8-input networks, a 600 kHz clock so frames keep the full-size rate. It
  exercises programming with bypass, direction-selective firing, every reset
  cause, FIFO back-pressure with overflow, and bump tracking.
* **`tb_place_cell_paths`** drives three trails on the default sheet and checks
  each one, printing the trail as a map:
  * walking south while glancing sideways, until the border holds the bump;
  * a detour around an obstacle to [3, −2];
  * a self-crossing loop.

* **`tb_theta_chip_characterisation`** characterises the chip at its defaults.
  It programs all 128 units to [4,0], sweeps the input x velocity over −4 … 4,
  measures every unit from the serial stream and fits a line per unit. In
  this run the fits gave:
  * F_idle mean 1963 Hz, spread 404 Hz, range 941–2970 Hz;
  * β mean 20.9 and spread 3.25 Hz per unit;
  * all 128 fits with R² > 0.9.
* **`tb_vector_cell_displacement`** loads only the east table and drives the
  agent east at speeds 1, 2 and 3. In this run the first firing came
  1.79 / 1.32 / 1.25 ms after the reset. Firing is sooner when faster, as for
  a displacement rather than a timer. The times are quantised by the
  ~0.5 ms oscillation period and include about 0.8 ms of filter lag. The test
  also checks silence when standing or moving north/south, and reports the
  aliasing when moving west.

Each block also has its own testbench, `tb_<module>`.

## Where this RTL departs from, or adds to, the description it follows

* **Behavioural chip.** The theta chip is a behavioural model:
  * time-stepped phase integration;
  * ideal DACs and an ideal multiplier;
  * Gaussian-like spread of F_idle and β only.

  There is no oscillator jitter, nonlinearity or temperature drift. The
  spread is unbounded: the lowest units idle near 940 Hz. The real chip's
  typical frequency range is about 1.2 to 3.1 kHz. It is close to linear
  only between about 1.5 and 3 kHz, and a network should use only units whose
  fit is good. The full-size test keeps only the middle 80 units of the
  frequency ranking.
* **Arbiter details are choices.** These include:
  * bypass bit = 1 to skip;
  * the ring closure after the last kept stage;
  * combinational serial output, sampled on the next clock;
  * 4 Clear clocks.
* **Filter numbers are choices.** The following are given:
  * the filter types (Hamming in layer 1, moving average in layer 2);
  * the 9-tap length;
  * an RC stage after each FIR, with a longer time constant in layer 2.

  The rest is this design's choice: the tap values, the RC form and its
  constants (K = 2 and 4), and the node threshold of 64. The threshold sets
  which taps are displacement-selective.
* **Other chosen values.**
  * Phase-reset pulse of 64 clocks.
  * FIFO depth of 512.
  * Drop-on-full overflow.
  * The place-cell edge rule and the event-driven leak.
* **Host-side choices.** The calibration, the gain-based role assignment and
  the tap choice are host procedures. Here they are written in the testbench,
  not in RTL.
* **Shared-node network not built.** Four complete 60-node networks are built
  (240 nodes). A shared-node variant with 180 nodes, and a hexagonal
  six-direction basis, are possible extensions and are not built.
* **121 vector cells run in sequence.** The 11 × 11 vector-cell map is produced
  by reprogramming one table per cell and running the cells in sequence, as on
  the original FPGA.
* **Place-cell sheet wiring.** The sheet is driven directly by the four vector
  cells, not through the host.
* **Not modelled.** The host PC, its link to the FPGA, the bias DAC board and
  the pad ring.
* **Synthesis.** The FPGA-side modules are synthesizable. The theta-chip
  modules, and the top that contains them, use `real` and delays, so they are
  for simulation only.
