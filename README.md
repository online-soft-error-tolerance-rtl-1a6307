# Online soft-error detection and repair for a ReRAM crossbar MVM tile

A ReRAM crossbar multiplies a vector by a matrix in one analog step. The
matrix is held as cell conductances, the vector is applied as wordline
voltages, and each bitline sums the cell currents. Soft faults such as
programming noise, read disturb and retention drift move conductances away
from their programmed values. The outputs are then wrong, and nothing on the
digital side can see it.

This RTL implements a cheap online check for that. It is taken from the
scheme in *Online Soft Error Tolerance in ReRAM Crossbars for Deep Learning
Accelerators* (Khezeli, Zarandi, Cheshmikhani). The check relies on one fact:
in inference the weights are written once and then read many times. So the
ADC code that each column gives for one fixed input is known in advance. That
fixed input is the **test vector**: every wordline at the maximum input
voltage (0.3 V).

The tile works like this:

* **At programming time.** It writes the weights, applies the test vector
  once, and keeps only the 4 least-significant bits of each column's 8-bit ADC
  code. These are the column's *reference LSBs*.
* **Before every multiplication.** It spends one extra cycle applying the test
  vector. In each column a 4-bit equality comparator checks the LSBs of the new
  code against the reference.
* **On a mismatch.** Every mismatching column is rewritten from the known
  weights. Only then is the real input vector applied.

The LSBs are kept rather than the MSBs because bitline codes in neural
network layers cluster at small values. Small conductance changes therefore
show up in the low bits first. Applying the maximum voltage makes any
conductance change as large as possible in current.

The cost is one comparator and RED_BITS storage bits per column, plus one
extra crossbar cycle per multiplication. Repair time is added only when a
fault is found.

## Block map

```
 in_vec ─► vector_select ─► wl_dac ×ROWS ─► reram_crossbar ─► bl_adc ×COLS ─► digital_value_buffer ─► out_codes
            (TEST / INPUT)                    ▲ column write                      │ codes
                                              │                                   ▼
 weight source ◄──wt_req/wt_col── reprogram_unit ◄── fault_vec ── error_detector (lsb_comparator ×COLS)
 (outside)     ──wt_valid/data──►      ▲                                    ▲ reference LSBs
                                       │                                    │
                                 ft_controller ──── cal_we ────────► redundancy_store
```

| Module | Kind | Role |
|---|---|---|
| `reram_pkg` | package | default sizes, command / selection / state enums, analog widths |
| `wl_dac` | behavioural model | input code → wordline voltage (full scale 0.3 V) |
| `reram_crossbar` | behavioural model | conductance array, I = Σ V·G per bitline, column writes, fault injection |
| `bl_adc` | behavioural model | bitline current → 8-bit code |
| `vector_select` | RTL | holds the input vector; drives the test vector or the input vector to the DACs |
| `digital_value_buffer` | RTL | register row that samples all ADC codes |
| `redundancy_store` | RTL | RED_BITS reference bits per column |
| `lsb_comparator` | RTL | one column's RED_BITS equality check |
| `error_detector` | RTL | all comparators, fault vector, OR, count |
| `reprogram_unit` | RTL | rewrites the selected columns from the weight source |
| `ft_controller` | RTL | the PROGRAM and MVM sequences |
| `ft_crossbar_top` | RTL | one tile, all of the above |

The DAC, crossbar and ADC are analog parts. They are written as integer
behavioural models, so the whole tile simulates in an ordinary digital
simulator. They are not meant to be synthesised as they stand. The analog
quantities are carried as integers:

* a voltage is in microvolts (`V_W` = 20 bits);
* a bitline current is in microvolt × conductance-level units (`I_W` = 40 bits).

## The two sequences

`ft_controller` accepts a command with `cmd_valid`/`cmd_ready`. `cmd_ready`
is high only in IDLE.

**PROGRAM** (`CMD_PROGRAM`)

1. `PROG`: the reprogram unit writes every column, fetching each one from the
   weight source.
2. `CAL_APPLY`: the test vector drives the freshly written array, and the
   buffer samples the codes.
3. `CAL_STORE`: the low RED_BITS of every buffered code are written into
   `redundancy_store`.
4. `prog_done` pulses one cycle later.

The reference therefore comes from the array right after it was written.
Use `ref_wr_en`/`ref_wr_col`/`ref_wr_lsbs` to load references computed
off-line from the weights instead. Any write to these ports overrides the
calibration for that column.

**MVM** (`CMD_MVM`, the input vector is taken from `in_vec` with the command)

| cycle | state | what happens |
|---|---|---|
| 0 | IDLE | command accepted, input vector latched in `vector_select` |
| 1 | TEST | test vector on all wordlines, ADC codes sampled |
| 2 | CHECK | comparators evaluated, `last_fault_vec` updated; if any column mismatches, the reprogram unit is started with that mask |
| … | REPAIR | only when a fault was found: flagged columns rewritten one by one, lowest index first |
| 3 (+repair) | APPLY | input vector on the wordlines, ADC codes sampled |
| 4 (+repair) | OUT | `out_valid` high for one cycle; `out_codes` stays valid until the next sample |

The columns are not tested again after a repair. The input vector is applied
straight away, as in the published scheme.

**Cycle counts.** Let W = `WRITE_CYCLES` and let L be the number of cycles
`wt_req` stays high before `wt_valid` is seen (2 with a weight store that
answers on the next edge). Then:

* A clean MVM takes 4 cycles from acceptance to `out_valid`.
* An MVM that repairs *k* columns takes 6 + k·(1 + L + W) cycles.
* PROGRAM takes COLS·(1 + L + W) + 5 cycles to `prog_done`. That is 901
  cycles at the defaults with L = 2.

## What the check can and cannot see

Whether a fault is caught depends on the ADC quantisation, and this is the
least obvious part of the scheme. At the defaults (128 rows, 16 conductance
levels, 0.3 V, full-scale current = 128 · 0.3 V · 15 levels):

* One ADC step is 2.25·10⁶ units. A change of one conductance level in one
  cell moves the test-vector current by 3·10⁵ units, which is 0.13 of a step.
* A cell must drift by about 7.5 levels, or several cells in one column must
  add up to that, before the code moves for certain. Smaller drifts may or may
  not cross a step boundary. Under a real input, whose voltages are at most
  the test voltage, such a drift moves an output code by at most about one
  step.
* A drift that moves the code by an exact multiple of 2^RED_BITS (16) aliases
  and is missed. With fewer reference bits this happens more often. That is
  the trade-off the RED_BITS parameter controls (1 to 4 bits were evaluated
  for the scheme).

A stuck cell (a hard fault) is flagged on every MVM, because rewriting cannot
move it. The tile rewrites that column each time and still produces the stuck
result. The counters `n_mvm_faulty` and `n_cols_flagged` let a system notice
a column that keeps failing. Retiring such a column is outside this design.

In the fault-rate sweep (random soft errors in a 120×84 layer whose weights
lean towards low levels), about half of the faulty columns are flagged with
1 reference LSB. 2 LSBs flag about three quarters, and 4 LSBs flag 85 % to
100 % at rates of 5 % and above. A column flagged with k LSBs is always flagged with
k + 1, because a difference in the low k bits is also a difference in the low
k + 1 bits.

The end-to-end testbenches print how often each case occurred. At 128×128,
a single-cell soft error of a few levels often stays below one ADC step and
goes unflagged. At 16×16 one level is about one step and almost all are
caught.

## Parameters

Values marked *scheme* come from the published configuration. The others are
choices of this RTL.

| Parameter | Default | Origin |
|---|---|---|
| `ROWS`, `COLS` | 128, 128 | scheme (128×128 crossbar) |
| `ADC_BITS` | 8 | scheme |
| `RED_BITS` | 4 | scheme (4 LSBs as redundancy) |
| `VMAX_UV` | 300000 (0.3 V) | scheme (maximum input voltage) |
| `DAC_BITS` | 8 | own choice |
| `G_BITS` | 4 (16 levels) | own choice |
| `WRITE_CYCLES` | 4 | own choice |
| `I_FS` of `bl_adc` | ROWS·VMAX·(2^G_BITS−1) | own choice (full scale = all cells at top level, all rows at 0.3 V) |

## Where this RTL departs from, or adds to, the published scheme

* **Analog parts are ideal.** The DAC is linear and the ADC is an ideal floor
  quantiser with saturation. The crossbar is a perfect Σ V·G with no wire
  resistance, access-transistor drop, non-linear I–V or device variation.
  Soft and hard faults exist only as injected level changes (`inj_*` ports).
* **Timing is in cycles, not nanoseconds.** The published overhead figures
  come from circuit and NVSim simulation in absolute time (about 20 ns for a
  128×128 array). Here the ADC converts within the cycle in which the vector
  is applied, and a column write is a fixed `WRITE_CYCLES` pulse with no
  write-verify loop.
* **Weight storage is outside the tile.** The scheme assumes only that the
  weights are known. The tile reads them, one column at a time, through a
  request/response port.
* **Several faulty columns are repaired one after another.** The order, the
  single reprogram unit and the reuse of that unit for initial programming are
  choices of this RTL.
* **One tile only.** Layers wider than 128 inputs need several tiles and
  partial-sum accumulation. Neither exists here. Mapping convolution and
  linear layers onto crossbars is a software step and is not part of the RTL.
* **Additions.** The OFF wordline selection, the direct reference-load port,
  the fault count and the status counters are additions.

## Sizes that fit

* One tile holds any weight matrix up to 128×128, so a 64×64 or 128×128
  matrix fits.
* A 256×256 matrix needs `ROWS = COLS = 256`, which the parameters accept.
* Typical neural network classifier layers need more than one tile:
  * LeNet-5's first fully connected layer is 400×120;
  * ResNet-18's CIFAR-10 classifier is 512×10.

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops with a watchdog if it hangs.
`tb/golden_weight_model.sv` is a behavioural weight store for the tests that
need one. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/reram_pkg.sv tb/tb_ft_crossbar_top.sv --top-module tb_ft_crossbar_top
./obj_dir/Vtb_ft_crossbar_top
```

Replace the testbench name to run another one.

* `tb_ft_crossbar_top` runs the whole tile at 16×16. It runs programming with
  calibration, clean MVMs, 120 rounds of random soft errors, wrong references
  loaded directly, and a stuck cell. For each MVM it checks the flagged
  columns, the repaired result and the exact cycle count against its own model
  of the cells.
* `tb_ft_crossbar_full` runs the same sequence with every parameter at its
  default (128×128), with fewer soft-error rounds. It takes well under a
  second.
* `tb_workload_fault_sweep` puts a 120×84 weight matrix, the size of
  LeNet-5's second fully connected layer, on four default-size tiles. The
  tiles keep 1, 2, 3 and 4 reference LSBs. For fault rates from 1 % to 60 % of
  the mapped cells it injects the same soft errors into all four, runs one
  MVM, checks flags and results against its own model, and prints how many
  faulty columns each tile flagged.

To change the configuration, override the top's parameters. `RED_BITS` must
not exceed `ADC_BITS`, `VMAX_UV` must stay below 2^20 µV, and
`WRITE_CYCLES` must be at least 1.
