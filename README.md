# ASCH-PUF: a self-checking, self-healing inverter-chain PUF

A physically unclonable function (PUF) makes a chip-unique key out of
transistor mismatch. The hard part is keeping that key the same across
temperature, supply voltage and aging. A few percent of PUF cells sit so close
to their decision point that they flip when conditions change. Conventional
fixes are costly in one of two ways. Error correction grows quickly as the
error rate it must absorb goes up. Dark-bit masking needs every chip to be
measured at many temperature and voltage corners.

This design finds the unstable ("dark") cells on chip, at one condition, in a
few milliseconds. It also repairs many of them instead of throwing them away:

* **Emulating drift with a voltage skew.** Each cell is a chain of four
  sub-threshold inverters. The first stage has its own supply, V1; the other
  stages share V2. A cell's value comes from the mismatch between the switching
  points of stages 1 and 2. Pulling V1 a little below V2 and then a little
  above tilts every cell one way and then the other, much as temperature or
  voltage drift would. A cell whose output differs between the two tilts is
  dark. The size of the skew sets how wide a drift the result must survive.
* **Healing.** Closing a per-cell switch shorts stages 1 and 2. The cell then
  works as an almost independent 3-stage cell with a mismatch of its own. A
  cell that is dark as a 4-stage cell is usually stable as a 3-stage one. Only
  cells that are dark in both forms are masked.
* **Two modes.** In *static* mode (S-ASCH) the heal/mask map is made once, at
  enrollment, and kept in non-volatile memory (NVM). In *dynamic* mode
  (D-ASCH) the map is remade at every power-up and kept in a small SRAM, so no
  NVM is needed. The server receives the map each time. The map reveals
  nothing about the key, because it depends only on which cells are marginal,
  not on their values.

The RTL here gives all the digital logic of that system. Behavioural models
stand in for the analog parts: the PUF array, the DAC, the regulators and the
comparator. With those models the whole chip can be simulated end to end.

## Block diagram

```
                      +---------------------- asch_puf_core (synthesizable) ------------------------+
  mode, skew -------->|  asch_sequencer --start/heal--> sc_controller --v1_value--> pwm_dither ----->|--dac_code--> rdac_model --> supply_model --V1,V2-+
  asch_start/done <-->|     |  ^ row, dark                |  ^ comp          comp_strobe ----------->|------------------------------> az_comparator_model <-+
                      |     v  |                          |  |                                       |                                                   |
  map_wr_* (NVM/server)<----map store: map_lut (D) or     |  +--- valid[127:0] <-- validity_detector x128 <-- out[127:0] <-- puf_readout <-- bl -- puf_array_model
  nvm_rd_* (S) <----->|     NVM port (S)                  +--- wl_row, clk_t, valid_r, sw ---------->|---- wl_en/wl_row/heal ----------------------------> (32 x 128)
  key_start, key <--->|  key_stabilizer --rd_req--> array read port --rd-->  puf_readout              |
  raw_rd/raw_data <-->|                                                                              |
                      +------------------------------------------------------------------------------+
                        asch_puf_top = asch_puf_core + rdac_model + supply_model + az_comparator_model + puf_array_model
```

The array has 32 rows (word lines) and 128 columns (bit lines). A whole row is
read in one clock, 128 bits at a time. Each column has its own readout
flip-flop and its own validity detector. The controller, DAC, comparator and
sequencer are shared by the whole array.

## The self-checking run (`sc_controller`)

This is the core of the design and its least obvious part. A run has two parts.

### 1. Locking V1 onto V2

In normal operation both supplies come from one external bias, and a switch
(SW) ties V1 to V2. To skew V1, the controller opens SW and biases the V1
regulator from an 8-bit resistive DAC. At that moment V1 no longer equals V2,
even at the "right" DAC code, because the two regulators now drive different
loads. A skew of equal size in both directions is only meaningful if V1 first
sits on V2. So the controller measures that point first:

* **Coarse, 8 steps.** A binary search over the 8-bit DAC code, from the MSB
  down. Each step sets a trial bit, waits, and asks the comparator. The bit is
  kept when V1 is not above V2.
* **Fine, 1 to 16 steps.** The DAC code is dithered by 4-bit PWM (`pwm_dither`).
  In every 16-clock period the DAC outputs `code+1` for `fine` clocks and `code`
  for the rest. A capacitor on V1 averages this, which gives 12-bit resolution:
  one fine step is 130 µV. The search tries `base+1`, `base+2`, … in turn
  (`base` = coarse code × 16). It stops at the first setting that puts V1 above
  V2 and locks one step below it. If no setting flips, it locks at `base+16`.
* **Every step** waits `SETTLE_CYCLES` clocks, then strobes the auto-zeroed
  comparator 5 times, `COMP_GAP` clocks apart. The majority of the 5 answers
  decides the step, which rejects comparator noise.

Locking is done once per run, not once per row. The locked 12-bit value is
kept in `locked_value`.

### 2. Skew and detect, once per row

For each row r = 0 … 31:

1. Select row r and set V1 to `locked − skew`. Hold the validity detectors in
   reset (`valid_r = 1`). Wait `SETTLE_CYCLES`.
2. Evaluate the row 64 times, one `clk_t` strobe every `EVAL_GAP` clocks. The
   value captured by the first evaluation becomes the reference. After that
   evaluation the detectors are released.
3. Set V1 to `locked + skew`, wait, and evaluate 64 more times. The detectors
   keep running through the change of skew.
4. A column whose output ever changed during the 128 evaluations has
   `valid = 0`. The controller outputs `dark = ~valid` with `row_done`.

A column is flagged for either of two reasons. One is that the cell read
differently under the two skews. The other is that it flipped from noise
within a session; the 64 evaluations per session are there to catch these.

The `skew` input is counted in 12-bit V1 steps of 130 µV. A skew of 62 gives
about 8 mV. It is clamped to the 0…4095 range.

### Step count and timing

Each new V1 setting is one step. So a run takes 8 coarse steps, 1 to 16 fine
steps, and 2 skew steps for each of the 32 rows: at most 8 + 16 + 64 = 88
steps. The controller outputs `coarse_steps`, `fine_steps` and `step_count`.
In clocks:

* a locking step lasts `SETTLE_CYCLES + 5·COMP_GAP` = 2068 clocks;
* a skew step lasts `SETTLE_CYCLES + 64·EVAL_GAP` = 2304 clocks;
* each row adds one more clock.

One full check at the defaults therefore takes at most about 197,000 clocks. A
flow of two checks takes about 357,000 clocks in simulation (7 fine steps). A
step lasts about 20 µs at a clock near 100 MHz. At that rate the whole flow
needs about 3.6 ms, within the 4 ms budget a measured chip of this kind is
quoted at. The oscillator frequency is not fixed by this RTL: scale
`SETTLE_CYCLES` to the clock so that V1 settles.

## Check, heal, mask (`asch_sequencer`)

Both modes run the same flow:

1. **Round 1.** Heal switches open. The controller does a full run. For every
   row, the dark columns are written to the map as *heal candidates*.
2. **Round 2.** All heal switches closed. The controller does a second full
   run, with its own locking, on the 3-stage cells. For each reported row, the
   sequencer reads the candidates back and writes the final entry:
   * `mask = candidate & dark_healed` — dark as both cells; never used.
   * `heal = candidate & ~dark_healed` — read this cell healed.
   * Cells that were stable in round 1 get neither bit and are read as they
     are.

It also counts the healed and masked cells (`n_healed`, `n_masked`). The map
store is the SRAM LUT (`map_lut`, 32 words of 128 heal + 128 mask bits) in
D-ASCH, and the external NVM in S-ASCH. Final writes carry `map_wr_final = 1`
and always appear on `map_wr_*`. In D-ASCH these writes are the map that is
sent to the server.

At enrollment, the server also needs both values of every cell. It collects
them with raw reads: `raw_rd` with any row and either heal setting.

## Stable key generation (`key_stabilizer`)

The key is built from the array and the map. Rows are visited in order. For
each row the module reads the map entry, the original row and the healed row,
then walks the columns one per clock:

* a masked cell is skipped;
* a healed cell gives its healed value;
* any other cell gives its original value.

Kept bits fill `key` from bit 0 until `KEY_BITS` (128) bits are collected; then
`key_valid` rises. If the array runs out of usable cells first, `key_err` rises
instead. Example: with five cells where cell 2 is masked and cell 3 healed,
the key begins {PUF1, PUF3 healed, PUF4}.

In S-ASCH the same module reads the map from NVM, so masked cells are replaced
by the next stable cells and healed cells are healed on every key read.

## Top-level interface (`asch_puf_top` / `asch_puf_core`)

| signal | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | fast clock (an on-chip oscillator in a real chip); asynchronous active-low reset |
| `mode` | in | `MODE_S_ASCH` (0): map in NVM; `MODE_D_ASCH` (1): map in on-chip SRAM |
| `skew[11:0]` | in | skew in 130 µV steps, sampled at the start of each check |
| `asch_start` → `asch_busy`, `asch_done` | in/out | run the check–heal–check flow; in D-ASCH it also runs by itself on the first clock after reset |
| `locked_value`, `coarse_steps`, `fine_steps`, `step_count` | out | result and step counts of the last check |
| `n_masked`, `n_healed` | out | totals of the last flow |
| `key_start` → `key_busy`, `key[127:0]`, `key_valid`, `key_err` | in/out | generate a key |
| `raw_rd`, `raw_row`, `raw_heal` → `raw_valid`, `raw_data[127:0]` | in/out | read one row raw |
| `map_wr_en`, `map_wr_final`, `map_wr_addr`, `map_wr_data` | out | map writes: to NVM (S) or reported to the server (both) |
| `nvm_rd_en`, `nvm_rd_addr` → `nvm_rd_data` | out/in | NVM read in S mode, data one clock after `nvm_rd_en` |

`asch_puf_core` has the same ports, plus the analog side:

* `sw` — 1 ties V1 to V2;
* `dac_code` — the dithered 8-bit DAC code;
* `comp_strobe` / `comp` — comparator activation and its latched result
  (`comp = 1` means V1 > V2);
* `wl_en`, `wl_row` — row select;
* `heal` — the heal switches;
* `bl[127:0]` — the sense-amplifier outputs.

Timing rules:

* `start` pulses are ignored while the other operation is busy, and
  `asch_start` is ignored while a flow is running.
* With `mode = MODE_D_ASCH` at reset release, the flow starts on the first
  clock, since the dynamic mode must remake its map at every power-up.
* While the flow runs, the controller owns the array. At other times a small
  read port serves the stabilizer first and raw reads second. The port holds
  the row for `RD_WAIT` clocks, samples the readout once and presents the row
  one clock later.
* Map-store reads have one clock of latency.

Shared types and constants are in `asch_pkg`: the array size, the DAC and PWM
widths, 5 votes, 64 evaluations, the mode enum, and the `map_row_t` struct.

## Behavioural models of the analog parts

These are simulation models, not logic for synthesis. They keep the real
parts' ports.

* `puf_array_model`: every cell, in both its original and healed forms, gets a
  fixed mismatch `m`. It is drawn from a hash of (seed, row, column, heal) and
  spread uniformly over ±`SPREAD_UV` (40 mV). An evaluation gives
  `(m + V1 − V2 + noise) > 0`, with ±300 µV of fresh noise each time. A cell is
  therefore dark for a skew `s` when |m| is below about `s`. `SEED` selects a
  chip instance. A `drift_uv` variable, zero unless a testbench sets it,
  stands for a later change of temperature or supply. It moves each cell's
  mismatch by `drift_uv × k`, where k is the cell's own factor in [−1, 1],
  drawn from a second hash.
* `rdac_model`: a straight line, 350 mV + code × 2.08 mV (16 fine steps of
  130 µV per code).
* `supply_model`: with `sw = 1`, V1 = V2 = 615 mV. With `sw = 0`, V1 follows
  the DAC through a first-order filter with a time constant of 256 clocks,
  which also averages the PWM.
* `az_comparator_model`: latches `V1 + noise > V2` on each strobe, with ±60 µV
  of noise.

Voltages are integer microvolts. Noise comes from xorshift generators, so runs
are repeatable.

## What follows the source design and what does not

Taken from the published description:

* the 32 × 128 array with whole-row readout;
* the validity detector per column;
* the SW switch and the load-imbalance reason for locking;
* 8-bit coarse binary search, then 4-bit PWM linear search (1–16 steps);
* 5-vote comparator majority;
* negative skew then positive skew, 64 evaluations each, detectors armed
  across both sessions, once per row after one locking per run;
* at most 24 + 64 steps per check;
* the check → heal → re-check → mask flow;
* the two modes and their map stores, with the dynamic mode running at
  every power-up;
* key generation that skips masked cells and reads healed cells healed;
* the 128-bit key size.

Choices made here, where the description is silent:

* one clock domain: the readout's CLK/CLK_T clock switch becomes a sample-enable
  choice, and the validity detector compares OUT with its previous value
  instead of clocking two flip-flops from OUT and its inverse;
* settle time and strobe spacing;
* comparator polarity and the exact search rules;
* clamping of the skewed setting;
* one heal signal for the whole array, with all cells healed in round 2;
* round-1 candidates kept in the map store itself;
* map word layout, key bit order, array arbitration and read-port timing;
* the one-clock NVM read latency.

Not modelled:

* NVM (only its port), the oscillator (the `clk` input), and the analog test
  buffer for V1/V2;
* the detailed regulator transient, the sense-amplifier timing and capacitor
  sizes;
* the physics behind the masking ratios, BER figures and aging results that
  were measured on silicon. The array model gives plausible dark-cell
  statistics, not those of a real chip: at an 8 mV skew it heals about 15 %
  and masks about 4 % of the cells.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. With plain Verilator, for
example:

```
verilator --binary --timing --assert --top-module tb_asch_puf_top \
    -Irtl -y rtl -y tb +libext+.sv rtl/asch_pkg.sv tb/tb_asch_puf_top.sv -o sim
./obj_dir/sim
```

`tb_asch_puf_top` runs the whole chip at its default size:

* a D-ASCH flow with an 8 mV skew, started by the design itself at reset
  release, then two key generations and raw reads;
* then an S-ASCH flow into an NVM held by the testbench, and a key built from
  it.

The testbench recomputes every cell's mismatch to check the result:

* cells clearly inside the skew window must be dark;
* cells clearly outside it must be untouched;
* heal and mask bits must follow from the two rounds;
* the keys must match what the map and the cell values give.

It also checks the lock point, the step counts and the cycle bounds of the
flow, and counts each mechanism (coarse lock, fine lock, skew, dark, heal,
mask, key skip, key heal, raw read, both modes, power-up run). It runs in a couple of
seconds.

`tb_skew_sweep` runs the full flow in dynamic mode at four skews: 15, 31,
62 and 92 steps, about 2, 4, 8 and 12 mV. For each skew it prints the share
of cells that masking alone would discard (every first-round dark cell) and
the share that is still masked after healing. It checks both against bounds
computed from the mismatch formula, and checks that both grow with the skew.
With the default array model they are:

| skew | masking alone | with healing |
|---|---|---|
| 2 mV | 5.0 % | 0.3 % |
| 4 mV | 10.2 % | 1.0 % |
| 8 mV | 19.8 % | 4.3 % |
| 12 mV | 29.8 % | 9.2 % |

These numbers reflect the model's uniform mismatch spread, not silicon.

`tb_drift_ber` tests the property the whole scheme exists for:

1. After a power-up run with an 8 mV skew, the testbench plays the server.
   It collects every cell's value with raw reads, takes the reported map and
   builds the golden key.
2. It then drifts the array by ±3.5 mV and ±7 mV. Between 2 % and 5 % of the
   raw bits flip. Keys still come out with zero bit errors in both modes:
   * static: the enrollment map is read from NVM;
   * dynamic: the flow is rerun under the drift, and the key is compared with
     the one the server builds from the new map.
3. At 16 mV, twice the skew, a few key bits do flip. Their number must fall
   within bounds the testbench computes from the formulas.

`tb_sc_controller` drives the controller against an ideal comparator that is
wrong on one activation in seven. The wrong answer lands on each of the five
vote positions in turn. The lock must land exactly on the target, and
the step counts must match the formulas above.

To change the array size or timing, override `N_ROWS`, `SETTLE_CYCLES` or
`KEY_BITS` on `asch_puf_top` or `asch_puf_core`. `N_COLS` must stay equal to
`asch_pkg::PUF_COLS`, since `map_row_t` is sized from it.
