# TPMon — an emulated power and temperature monitor for FPGA prototypes of a many-core tile

An ASIC that distributes work over many cores by their temperature and power
needs on-chip monitors: analog temperature sensors and power meters. When the
same system is first prototyped on an FPGA, those sensors do not exist, and
the FPGA's own temperature says nothing about the future chip. TPMon stands in
for them. It watches the instruction stream of every core, looks up what each
instruction would cost in energy on the target ASIC (LEON3 cores, 90 nm,
400 MHz), adds this up over a time step of 1 µs, and turns the resulting
per-core powers into per-core temperatures with a small thermal model in which
a core is heated both by itself and by its neighbours. Resource-allocation
software on the prototype then reads powers and temperatures as if they came
from the real chip.

There is one TPMon per tile. The default tile has 2 × 2 cores; the monitor
contains one power monitor per core and one temperature monitor shared by the
tile.

## Structure

```
                 +----------------------- power_monitor (one per core) ---+
instruction[c] --+-> power_lut --> power_accumulator --> step_reg ---------+--+--> pow_out[c]
pipeline_stall[c]   (energy/instr)  (sum over a step)   (hold one step)    |  |
                 +---------------------------------------------^----------+  |  core_pow[0..3]
                                                               |             v
trigger --> step_counter --- trig_out -------------------------+--> temperature_monitor
              (÷400)                                                  temp_lut      (own power)
                                                                      neighbour_effect (others)
                                                                      temp_adder
                                                                      step_reg  ----------> temp_out[c]
```

| module | role |
|---|---|
| `tpmon` | top: one tile's monitor |
| `step_counter` | ends a time step every `STEP` = 400 enabled clocks (pulse `trig_out`) |
| `power_monitor` | per core: `power_lut` → `power_accumulator` → `step_reg` |
| `power_lut` | 256-entry ROM: instruction opcode → energy in pJ; fixed energy when stalled |
| `power_accumulator` | energy sum of one step, restarted by `trig_out` |
| `step_reg` | register loaded by `trig_out`, holds a result for a whole step |
| `temperature_monitor` | `temp_lut` + `neighbour_effect` → `temp_adder` → `step_reg` per core |
| `temp_lut` | 256-entry ROM: own power → temperature |
| `neighbour_effect` | weighted sum of the adjacent cores' powers → temperature rise |
| `temp_adder` | saturating per-core sum of the two |
| `tpmon_pkg` | sizes, number formats, instruction classes, model constants |

The division into these blocks, the signal names (`instruction_pow`,
`core_pow`, `neighbour_pow`, `single_core_temps`, `neighbour_effect_temps`,
`trig_out`, `pow_out`, `temp_out`) and the 2 × 2 / 400-cycle sizes follow the
published block diagram. The widths, table contents, model constants, reset
style and exact timing are choices of this implementation, described below.

## Time steps and when the outputs change

This is the part most easily misread, so in detail:

* `trigger` is a count enable. In normal use it is tied high, and
  `step_counter` raises `trig_out` for one clock every 400 clocks — the first
  time on the 400th clock after reset is released. While `trigger` is low the
  counter holds and the current step is stretched.
* Each FPGA clock stands for one ASIC core clock. Every clock, each core's
  energy for that clock is added to its accumulator, whether or not `trigger`
  is high.
* `power_accumulator` presents *register + this clock's energy*. On the
  `trig_out` clock that is the energy of exactly the 400 clocks of the step,
  boundary clock included; the step register captures it and the
  accumulator register restarts at zero on the same edge.
* `pow_out[c]` therefore changes one clock after `trig_out` and then holds for
  the whole next step.
* The temperature register is loaded by the same `trig_out`. On that edge it
  sees the power registers' *old* contents, so `temp_out` at the end of step
  *k* is computed from the powers of step *k − 1*: temperatures trail powers
  by one step (1 µs of emulated time). After reset, the first temperature
  (from zero power, i.e. `T_BASE`) appears at the first step end and
  the first power-dependent temperature at the second.
* Reset is synchronous and active high and clears every register to zero.

There is no "valid" output; a reader that needs to know when values change
counts 400 clocks or watches for `pow_out` changes.

## Energy table (`power_lut`)

The table is addressed with `{instruction[31:30], instruction[24:19]}`, the
SPARC V8 `op` and `op3` fields (for `op = 00` the top three bits of `op3`
are `op2`), so every instruction format maps to one of 256 entries. The
contents are computed at elaboration by `power_rom_init` in `tpmon_pkg` from
instruction groups:

| group | pJ per clock |
|---|---|
| pipeline stalled | 40 |
| SETHI / NOP | 60 |
| branch, CALL | 80 |
| integer ALU, shifts | 100 |
| RD/WR special registers, JMPL, RETT, Ticc, SAVE/RESTORE, FLUSH | 120 |
| loads (including atomic LDSTUB/SWAP) | 160 |
| stores | 170 |
| multiply (UMUL, SMUL, MULScc) | 180 |
| FPop | 190 |
| divide | 200 |

**These numbers are placeholders**, not characterised LEON3 energies. They
were chosen only so that the whole model lands on the temperatures reported
for the reference scenarios (below). For real use, replace
`class_energy_pj`/`power_rom_init` with a characterised table; the width
`ENERGY_W` (8 bits, up to 255 pJ) and the step length set the accumulator
width `POW_W` = ⌈log2(400 · 255 + 1)⌉ = 17 bits.

Since a step lasts 1 µs of emulated time, the step energy in pJ is
numerically the mean power of the step in µW: `pow_out` = 80 000 means 80 mW.

## Thermal model (`temp_lut`, `neighbour_effect`)

Temperatures are unsigned Q8.8 °C (value / 256). Core *i*'s temperature is

    T_i = T_BASE + K_SELF · P_i + Σ_j w_ij · K_NB · P_j

with P in µW, T_BASE = 42.33 °C, K_SELF = 52.1 °C/W and K_NB = 31.2 °C/W.
`w_ij` is 1 for cores that share an edge or a corner with core *i* on the
`CX × CY` grid (row-major numbering) and 0 otherwise; in a 2 × 2 tile every
other core counts. Edge and corner weights are separate parameters (`KE`,
`KD`) but equal by default.

* `temp_lut` realises the own-power term as a 256-entry table addressed by
  the top 8 bits of the power (bins of 512 µW, value taken at the bin
  centre), again computed at elaboration by a constant function. Any
  monotonic characterised curve can be substituted by changing
  `power_to_temp`.
* `neighbour_effect` realises the second term by multiply–accumulate with
  fixed-point coefficients (`K_NB_EDGE`, `K_NB_DIAG`, scaled by 2^24).
* `temp_adder` sums them with saturation.

The model is static: each step's temperatures depend only on that step's
powers, with no thermal time constant. The published description calls the
underlying model a thermal RC model but shows no state or feedback in the
temperature monitor; a thermal-capacitance filter is therefore *not* part of
this design. It is the first thing to revisit if transient behaviour
matters.

### Calibration

The three constants and the energy table were fitted to the five tile
temperatures reported for the reference system (2 tiles of 2 × 2 cores,
four high-power and four low-power tasks). With the default tables the
design gives:

| scenario | reported | this RTL |
|---|---|---|
| one medium-power core, other three idle | 47 °C | 47.01 °C |
| same core, other three at highest power | 53 °C (+13 %) | 53.01 °C (+12.8 %) |
| 2 high + 2 low tasks per tile (lowest global maximum) | max 51 °C, both tiles | 51.00 °C |
| 4 high on one tile | 54 °C | 54.00 °C |
| 4 low on the other tile | 47 °C | 46.99 °C |

Task definitions used: idle = pipeline stalled (16 mW), low = branch loop
(32 mW), medium = repeated load/add/store/multiply (61 mW), high = divide
stream (80 mW). Five data points are reproduced by three constants and a
chosen table, so this shows consistency, not that the model is right.

## Parameters

| parameter (module) | default | meaning |
|---|---|---|
| `CX`, `CY` (`tpmon`) | 2, 2 | tile grid |
| `STEP` (`tpmon`, `step_counter`) | 400 | clocks per time step |
| `PW` (`tpmon`) | 17 | power width |
| `TW` (`tpmon`) | 16 | temperature width (Q8.8) |
| `ENERGY_W`, `TLUT_AW`, `T*`/`K*` constants (`tpmon_pkg`) | see package | table and model |

Changing `ENERGY_W` or `STEP` requires `PW` ≥ `pow_width(STEP, ENERGY_W)`.
The accumulator saturates rather than wraps if `trigger` is held low long
enough to overflow a step.

## How far to trust it

* The block structure and data flow match the published diagram.
  Every module has a self-checking testbench against an independent
  reference (opcode lists for energy, floating-point thermal model), and a
  top-level test compares `pow_out` and `temp_out` with a reference model on
  every clock over 40 steps with random instruction mixes, stalls and a
  paused counter.
* Numbers that are not the authors' — all energy values, all thermal
  constants, all widths — are invented or fitted as described above.
* Not modelled: the further abstraction of monitor data for system-level
  allocation, the processor cores themselves, thermal dynamics. The
  authors report a combinational delay below 12 ns on their FPGA (usable to
  about 80 MHz, prototype at 50 MHz); the longest path here is the power
  register → temperature table / neighbour multiply-add → adder → register,
  but no timing has been measured for this RTL.
* Concurrent assertions in `step_reg` (value stable between steps) and
  `step_counter` (one-clock pulse, count in range) are checked in every
  simulation run with assertions enabled.

## Simulating

All testbenches are self-checking and print one line
`TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/tpmon_pkg.sv tb/tpmon_ref_pkg.sv tb/tb_tpmon.sv --top-module tb_tpmon
./obj_dir/Vtb_tpmon
```

| testbench | what it runs |
|---|---|
| `tb_tpmon` | one tile at default sizes, 40 steps, per-clock comparison with a reference model; counts step ends, stalls, paused cycles and neighbour heating |
| `tb_tpmon_workloads` | two tiles, the calibration scenarios above, rounded to whole °C |
| `tb_power_lut`, `tb_power_accumulator`, `tb_step_reg`, `tb_step_counter`, `tb_power_monitor` | power path |
| `tb_temp_lut`, `tb_neighbour_effect` (also a 3 × 3 grid), `tb_temp_adder`, `tb_temperature_monitor` | temperature path |

`tb/tpmon_ref_pkg.sv` holds the reference energy function and the thermal
model in physical units; keep it in step with `tpmon_pkg` when changing the
tables. Lint with `verilator --lint-only -Wall -Irtl rtl/tpmon_pkg.sv rtl/tpmon.sv`;
the only remaining warnings are unused package constants and the
instruction bits that do not address the energy table.
