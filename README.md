# A metaplastic learning tile for quantized networks on multi-level memristors

Neural networks trained on one task and then on a second tend to forget the
first ("catastrophic forgetting"). Metaplasticity counters this by giving
every synapse a hidden state that decides how easily its visible weight can
still change. Here the visible weight is a quantized weight `W_S` with 17
levels. It is stored as the conductance difference of two hafnium-oxide
memristors, so the crossbar can use it directly for analog multiply-accumulate.
The hidden weight `W_H` is a high-precision number kept in ordinary digital
memory. Training moves `W_H`. A memristor is re-programmed only when `W_H`
crosses into the capture range of another level. The closer `W_H` sits to its
level, the harder it is to push it away. Weights that earlier tasks drove onto
a level are therefore consolidated, and the devices see few programming
cycles.

This repository holds synthesizable SystemVerilog for the digital half of
such a system, as one tile. It also holds behavioural models of the analog
half (the 1T1R memristor cell and the crossbar with its periphery), so the
whole loop can be simulated.

The architecture and the update rule are those of S. D'Agostino et al.,
"Synaptic metaplasticity with multi-level memristive devices". The number
formats, interfaces, timing and programming sequence are this design's own.
They are listed under "Departures" below.

## The update rule

There are 17 quantized levels `Q_0 < … < Q_16`. By default they are equally
spaced over [-1.5, 1.5], one step `I = 0.1875` apart. For each weight, the
optimizer (Adam, outside this tile) delivers an update `U_W`. The tile then
does four things:

1. `W_S = nearest level to W_H` (`quantizer`). Beyond the outer levels it
   clamps to them.
2. `M = 1 - tanh²((2m*/I)·|W_H - W_S| - m*)` (`meta_function`). Here `I` is
   the width `Q_{k+1} - Q_k` of the interval that holds `W_H`.
   - With `u = 2|W_H - W_S| / I`, this equals `sech²(m*(1-u))`.
   - M is `sech²(m*)` on a level (0.0099 for m* = 3) and 1 half-way between two levels.
3. Compute the update (`compute_dwh`):
   - If `U_W · (W_H - W_S) < 0`, then `dW_H = -eta·U_W·M`.
   - Otherwise `dW_H = -eta·U_W`.
4. `W_H ← W_H + dW_H` (`wh_adder`). If the nearest level has changed,
   re-program the pair of devices.

The condition in step 3 is the key to the rule, and it is easy to misread.
`-eta·U_W` has the sign of `W_H - W_S` exactly when the update moves `W_H`
away from its level, towards a level change. Only those updates are scaled by
M. An update that pulls `W_H` back towards its level always goes through in
full. The training schedule runs the first epochs with m* = 0, which gives
M = 1 everywhere and ordinary quantized training. The input `meta_en = 0`
selects this mode. `meta_en = 1` uses `M_STAR` (default 3).

### Fixed-point formats

| quantity | format | notes |
|---|---|---|
| `W_H` | signed 16 bit, 256 LSB per level step | 1 LSB = 0.1875/256. The range is about ±24 level steps, so there is room beyond ±1.5 |
| `W_S` | signed level index −8..8 (5 bit) | real weight = index × 0.1875 |
| `M` | unsigned 9 bit, 8 fraction bits | 1.0 = 256 |
| `U_W` | signed 16 bit, in `W_H` LSB | |
| `eta` | unsigned 16 bit, 12 fraction bits | eta ∈ [0, 16) |
| `dW_H` | signed 21 bit | |

- `eta·U_W` and the product with `M` are shifted right arithmetically, which rounds
  towards −∞.
- The sum `W_H + dW_H` saturates at the 16-bit limits and does not wrap.
- A hidden weight exactly half-way between two levels is assigned to the upper one.

### Levels and the M table

The level set is the parameter `LEVELS`: 17 ascending values in `W_H` LSBs.
It is shared by the quantizer and the metaplastic function. The default is
`k·256` for k = −8..8.

- **Quantizer.** It compares `W_H` with the 16 mid-points between adjacent
  levels. These are constants, so the comparison costs one comparator each.
  The quantizer also reports which interval holds `W_H`.
- **Position within the interval.** `meta_function` multiplies `|W_H - W_S|`
  by a constant reciprocal of that interval's half-width. This gives
  `u = 2|W_H - W_S|/I` with 7 fraction bits.
- **Table.** `u` indexes a table of 129 entries. The table is filled at
  elaboration from the real formula: `sech² z = 4/(eᶻ+e⁻ᶻ)²`, with `eᶻ` from a
  Taylor series after repeated halving of `z`. It therefore follows the
  `M_STAR` parameter, and no data file is needed.
- **Precision.** With equal spacing the index equals the residual exactly.
  With unequal spacing, truncating `u` costs at most about 5/256 in M.
- **Outside the level range.** M is 1.

## Storing 17 levels on two devices

Each memristor has nine levels:
- the low-conductance state (LCS), reached by a RESET pulse;
- eight high-conductance states (HCS 1..8), reached by a SET pulse. The
  compliance current of the SET, set through the selector transistor's gate,
  chooses the level.

A weight uses two devices in adjacent columns:

| weight level | plus device | minus device |
|---|---|---|
| `+k` | HCS k | LCS |
| `−k` | LCS | HCS k |
| `0` | LCS | LCS |

`prog_ctrl` re-programs only the devices whose own level changes. For each
such device it issues:
- a RESET, unless the device is already in LCS;
- then a SET with compliance code = new level, unless the new level is LCS.

A SET cannot thin an existing filament, so the RESET comes first. The very
first programming of a device adds a FORM pulse before the RESET. Pulses are
single-shot, with no read-verify loop. Each pulse takes one cycle plus
`PULSE_GAP` idle cycles. A request with `P` pulses keeps the circuit busy for
`2 + P·(PULSE_GAP+2)` cycles.

The circuit counts pulses (`n_pulses`) and device re-programmings
(`n_dev_prog`). These are the numbers to compare with the device endurance,
which is around 10⁵ cycles for this technology.

## The tile

```
            x_in ─► ┌──────────────────────┐ ─► y_out  (to the activation stage)
            d_in ─► │ crossbar_array        │ ─► z_out  (to the error/gradient stage)
                    │ 128 x 64 weights      │
                    │ 128 x 128 devices     │ ◄── pulses ── prog_ctrl ◄──┐
                    └──────────────────────┘                            │ level changed
 cmd_u (U_W) ─► compute_dwh ◄── meta_function ◄── quantizer ◄─┐          │
                    │                                         │ W_H,old  │
                    ▼                                         │          │
                 wh_adder ──► W_H ──► hidden_weight_memory ───┘          │
                               └────► quantizer ── new W_S ─────────────┘
```

`metaplastic_core` is the top module. It sequences five commands, which are
accepted on a `cmd_valid`/`cmd_ready` handshake one at a time:

| command | action | cycles |
|---|---|---|
| `0` INIT | write `cmd_wh`, then form + reset + set both devices to the nearest level | 3, then programming in the background |
| `1` UPDATE | read `W_H`, apply the rule to `cmd_u`, write back, request re-programming if the level moved | 3 (4 if it re-programs) |
| `2` READ | return `W_H` from memory and `W_S`/formed from the crossbar | 2 + wait for programming |
| `3` FWD | `y_j = Σ_i W_ij x_i` | 3 + wait for programming |
| `4` BWD | `z_i = Σ_j W_ij d_j` | 3 + wait for programming |

- `cmd_addr` is `row·COLS + col`.
- Programming overlaps with later updates. The core stalls, and counts the
  cycles in `n_stall`, in three cases:
  - an update needs the programming circuit while it is still busy;
  - a read-back needs the crossbar before programming has finished;
  - a matrix-vector product needs the crossbar before programming has finished.
- The other statistics outputs count updates, attenuated updates, level
  changes and saturations.
- `rst_n` resets only the digital logic. `pristine_n` puts the crossbar model
  back into its as-fabricated state. The memristors are non-volatile, so a
  chip reset does not erase them.

The old level `W_S` is recomputed from `W_H,old`, not read from the crossbar.
The two always agree, because every level change is programmed before the
crossbar is used again.

## What is modelled and what is not

`rram_cell` and `crossbar_array` are behavioural models of analog parts:
- The crossbar keeps the state of every device (level and forming) in two
  arrays. A programming pulse passes the addressed device through
  `rram_cell`, the device's pulse response, and stores the result.
- A conductance is reported as its level number: LCS and pristine read 0.
- A forward or backward product is computed as exact integer arithmetic, one
  clock after it is started.
- Device-to-device variability, read noise and converter resolution are not
  modelled. The architecture is meant to tolerate the spread of real
  conductances, but a simulation of this RTL will not show that.
- The product loops in `crossbar_array` are deliberately written as plain
  loops, not as hardware. Yosys' synthesis stops on their unroll limit, which
  is acceptable for a model.

Everything else is synthesizable:
- the quantizer, the metaplastic function, the update and the adder (all
  combinational);
- the hidden-weight memory, a 1R1W array with one-cycle read latency;
- the programming FSM;
- the command sequencer.

Not included:
- **The optimizer (Adam).** `U_W` enters through `cmd_u`.
- **The forward stage.** Batch normalization and the activation function
  after the column sums are left out. The sums leave through `y_out` and the
  activations enter through `x_in`.
- **The backward stage.** Cost, error and gradient computation are left out.
  The sums leave through `z_out` and the errors enter through `d_in`.
- **The analog drivers and sense circuits.** Their ideal behaviour is folded
  into the crossbar model.

## Sizes

One tile has 16 kbit of memristors:
- 128 × 128 devices, that is 128 × 64 differential weights;
- 8,192 × 16 bit of hidden-weight memory.

The network this architecture targets (784-512-512-10) has 668,672 weights:
- 1.34 M devices;
- 10.7 Mbit of hidden weights;
- 92 tiles when the layers are cut along tile boundaries.

A full network is therefore an array of these tiles, with the activation and
gradient stages between them. That array is not built here.

| parameter | default | meaning |
|---|---|---|
| `ROWS`, `COLS` | 128, 64 | weights per tile. `COLS` must be a power of two |
| `PULSE_GAP` | 3 | idle cycles after each programming pulse |
| `M_STAR` | 3.0 | steepness m* of the metaplastic function |
| `LUT_BITS` | 7 | table resolution (2^LUT_BITS + 1 entries) |
| `LEVELS` | `k·256`, k = −8..8 | the 17 quantized levels in `W_H` LSBs (ascending) |

## Departures from the source description and own choices

- **Number formats.** The source treats hidden weights as real numbers. All
  widths and scalings above are this design's own.
- **Level spacing.** The default level set is equally spaced. The source
  gives only the count and the range, and illustrates the function on
  unequally spaced levels. Any ascending set can be given through `LEVELS`.
- **Outside the level range.** M = 1 outside ±1.5. The equation is defined
  only between levels.
- **m\* is fixed at elaboration.** Only m\* = 0 or m\* = `M_STAR` can be
  selected at run time.
- **Programming sequence.** The RESET-before-SET order, FORM leaving the
  device at HCS 8, and the pulse timing are assumptions.
- **Interface.** The command interface, the stall policy and the one-cycle
  crossbar latency are this design's own.
- **Tile split.** The split of the 16 kbit array into 128 rows × 64 weight
  columns is assumed.

## Simulating

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_quantizer` | every 16-bit input against an exhaustive nearest-level search, for equal and unequal level sets |
| `tb_meta_function` | against `1 - tanh²` from the simulator's real `$tanh`: exact for m* = 3 and 1.5; within 5/256 for an unequal level set |
| `tb_compute_dwh`, `tb_wh_adder` | random and corner cases against wide-integer references |
| `tb_hidden_weight_memory` | random reads and writes, including read-during-write |
| `tb_rram_cell` | the device state rules |
| `tb_crossbar_array` | programming, read-back and both products on an 8 × 4 tile |
| `tb_prog_ctrl` | pulse sequences, device contents, pulse counts and busy time |
| `tb_metaplastic_core` | a whole session on an 8 × 4 tile (details below) |
| `tb_consolidation` | the point of the rule, on a 16 × 8 tile (see below) |
| `tb_metaplastic_core_full` | the same session at the default 128 × 64 size, 20,000 updates per phase |

The session in `tb_metaplastic_core` and `tb_metaplastic_core_full` does the
following:
- programs every weight from pristine and reads it back;
- trains in both modes, then runs back-to-back level changes that stall;
- runs forward and backward products and a saturating update;
- checks everything against a reference model in `tb/meta_ref_pkg.sv`;
- checks that every mechanism occurred at least once.

`tb_consolidation` starts every weight within 1/8 step of a level, as after
a first task. It then applies the same stream of unrelated updates (random
sign, up to 0.4 step) twice, once with m* = 0 and once with m* = 3. In a
typical run:

| m* | weights that left their level (of 128) | device programmings |
|---|---|---|
| 0 | 49 | 114 |
| 3 | 6 | 8 |

The test requires at least a factor of two on both counts.

The testbenches use `tb/meta_ref_pkg.sv` (reference equations) and, for the
core, `tb/tb_core_body.sv`. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/meta_pkg.sv tb/meta_ref_pkg.sv tb/tb_metaplastic_core.sv \
    --top-module tb_metaplastic_core -Mdir obj_core
./obj_core/Vtb_metaplastic_core
```

For a leaf block, list its file and testbench explicitly, for example
`rtl/meta_pkg.sv tb/meta_ref_pkg.sv rtl/quantizer.sv tb/tb_quantizer.sv`.
Add `-Wno-fatal` if the lint warnings bother you. Pass `-j 4` to speed up
the C++ build of the full-size testbench.
