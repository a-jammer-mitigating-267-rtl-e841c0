# SANDMAN: a jammer-mitigating 32×8 MU-MIMO receiver core in SystemVerilog

A base station with 32 antennas receives 8 single-antenna users (UEs) at the
same time and in the same band. A single-antenna jammer adds its own signal,
which may be continuous (barrage), sent only during the pilots, or sent only
during the data. A "smart" jammer that is silent during the pilots cannot be
removed by estimating its direction from the pilots, so the receiver must work
on a whole block at once.

This core handles a block of 64 receive vectors: 16 pilot symbols, then 48 data
symbols. It first estimates the channel from the pilots. It then runs a fixed
number of iterations (t_max = 10) that do three things in turn:

- find the jammer's spatial direction in what the current model cannot
  explain;
- project that direction out;
- move the data estimates one projected-gradient step toward the
  received signal.

At the end it converts the estimates into soft bits (LLRs) for QPSK or 16-QAM.

## The algorithm, as the hardware runs it

Notation: `Y` (32×64) holds the received block. `S_T` (8×16) holds the known
pilots. `S̃_D` (8×48) holds the data estimates, which start at zero.
`S = [S_T | S̃_D]`.

| step | operation | where it runs |
|------|-----------|---------------|
| CHEST | `Ĥ = Y_T S_T^H / 16`, once per block | every PE accumulates its own `Ĥ(m,k)` |
| ① | `E = Y − Ĥ S` (pilot part once, data part every iteration) | PE rows plus row adders |
| ② | `z = E^H x`, where `x` is a ±1 vector | column adders; `z` stored per column |
| ③ | `j̃ = E z` | PE accumulators, then row adders into the PE+ |
| ④ | `u = j̃ / ‖j̃‖` | PE+ units, a 32-input adder and a table-based `1/√·` |
| ⑤ | `c^H = u^H E_D` | `u` broadcast on rows, column adders |
| ⑥ | `Q = E_D − u c^H` | every PE |
| ⑦ | `−∇ = Ĥ^H Q` | column adders, one data symbol per cycle |
| ⑧ | `S̃_D = prox(S̃_D − 2τ ∇)` | 8 step units, one per UE |
| LLR | soft outputs | 8 LLR units, one per UE; results overwrite `S̃_D` |

`x` comes from a 32-bit circular shift register. It rotates by one position
after every iteration, so each iteration's power step starts from a different
±1 vector. `prox` clips each real dimension to ±1/√2. That value is the outer
level of both constellations, so the clipping keeps every estimate inside the
constellation's bounding box.

## The processing-element array

The array has 32×8 PEs. PE `(m,k)` belongs to antenna `m` and UE `k`, so the
array has exactly the shape of `Ĥ`. It is built as four 8×8 slices stacked
along the antenna axis (`pe_slice`, `pe_array`). Each PE holds:

- its `Ĥ(m,k)` (12b per component);
- 8 entries of `Y` (row `m`);
- 8 entries of `E` (row `m`);
- 6 entries of `Q` (the "T" array);
- an accumulator.

Column `n` of a 64-column matrix is held by PE column `n mod 8`, in slot
`n div 8`. The 64 columns of `Y`/`E` therefore fill 8 slots, and the 48 data
columns of `Q` fill 6.

All PEs execute the same operation in the same cycle. The controller
(`sandman_ctrl`) sends one control word per cycle, made of an operation and an
index. Data reaches the PEs in three ways:

- **Row broadcast.** A PE row gets either one of its own stored values, picked
  by the index (used for `Y` in CHEST and `Q` in ⑦), or `u(m)` (⑤, ⑥).
- **Column broadcast.** A PE column gets a pilot, an estimate, `z(n)` or
  `c^H(n)`.
- **Reductions.** Every PE row has an adder over its 8 PEs (used for ① and ③).
  Every PE column has an adder over all 32 PEs (②, ⑤, ⑦).

With these, every matrix product in the algorithm becomes a series of
one-cycle, array-wide steps:

- ① computes one column `n` per cycle: PE `(m,k)` forms `Ĥ(m,k) S(k,n)`, the
  row adder sums over `k`, and PE column `n mod 8` subtracts the sum from its
  stored `Y(m,n)`.
- ⑦ computes one data column per cycle: PE `(m,k)` forms `conj(Ĥ(m,k)) Q(m,n)`
  and the column adder sums over `m`.
- ② and ⑤ handle 8 columns per cycle, one per PE column.
- ③ and ⑥ handle 8 columns per cycle, one per PE column, with the row adder
  summing them.

The jammer normalisation ④ runs in 32 extended PEs (`pe_plus`), one per
antenna:

- Each PE+ stores `j̃(m)` in 24b per component and outputs `|j̃(m)|²`.
- A 54b adder tree sums these outputs.
- `inv_sqrt` turns the sum into a mantissa and a power-of-two exponent.
- Each PE+ then scales its `j̃(m)` into `u(m)`, which carries 15 fraction bits.

## Schedule and throughput

| phase | cycles |
|-------|--------|
| CHEST (16 pilots, write-back) | 17 |
| ① on the 16 pilot columns | 16 |
| per iteration: ① on data 48, ② 8, ③ 8 + 1, ④ 2, ⑤ 6, ⑥ 6, ⑦ + ⑧ 48 | 127 |
| LLRs (48 data columns) | 48 |

One block takes `33 + 127·t_max + 48` control cycles. With t_max = 10 that is
1351 cycles, and 1353 from the `start` pulse to `done`. A 16-QAM block holds
8 × 48 × 4 = 1536 bits. The reference chip delivers 267 Mb/s at 320 MHz, which
allows 1841 cycles per block, so this schedule is within that budget. No
clock frequency is claimed for this RTL.

## Fixed-point formats

All array values are two's-complement numbers with 7 fraction bits, so the
QPSK level 1/√2 is 91. Widths are given per real component:

| quantity | width | notes |
|----------|-------|-------|
| `Y` | 14 | range ±64 |
| `Ĥ` | 12 | range ±16 |
| `E` | 15 | |
| `Q` | 21 | |
| multiplier | 21 × 18 → 39 | |
| accumulator | 22 | |
| `S̃_D` | 10 | |
| pilots | 8 | |
| LLR | 5 | |
| `z` | 18 | stored as `E^H x / 32` |
| `j̃` | 24 | stored as `E z / 64` |
| `u` | 18 | 15 fraction bits |
| `2τ` | 16 | unsigned, 12 fraction bits, a run-time input |

Every store into a narrower register saturates, and products are truncated
(arithmetic shift). The register sizes match the published storage totals:

- E storage 8 × 30b, T storage 6 × 42b and Y storage 8 × 28b per PE;
- a 12b `Ĥ` register;
- a 21b × 18b multiplier with a 39b product and a 22b accumulator;
- the S array at 8 × 960b (48 symbols × 4 LLRs × 5b, or 2 × 10b estimates);
- the pilot array at 16 × 128b.

How these bits split into integer and fraction parts, and all the scale
factors, are this design's own choices.

The LLRs are max-log values without noise scaling. For each symbol:

- `llr0` is the in-phase sign;
- `llr1` is the quadrature sign;
- `llr2` and `llr3` (16-QAM only) are `(√2/3 − |·|)`, the distance to the
  inner/outer threshold;
- each is shifted right by 3 and saturated to 5 bits;
- a positive LLR means bit 0.

The 16-QAM levels are Gray-mapped as ±1/(3√2) (inner) and ±1/√2 (outer).

## Interface

`sandman_top` loads one block through column-wide ports, one value per cycle:

- `y_we/y_n/y_col` writes receive column `n` (0..63) into the PE array;
- `st_we/st_t/st_row` writes pilot row `t` (0..15);
- `x_load/x_seed` sets the shift register;
- `tau2`, `qam16` and `t_max` are static while a block runs.

A pulse on `start` runs the block. `busy` is high until `done` pulses. After
that, `rd_n/rd_llr` reads the 4 LLRs of the 8 UEs for data symbol `rd_n`.
Loading while `busy` is high is not allowed, and an assertion checks this.
Reset is asynchronous and active low.

## Modules

| module | role |
|--------|------|
| `sandman_pkg` | sizes, formats, complex types, operation codes, `sat`/`cmul` |
| `pe` | one PE: registers, complex MAC, operand selection per operation |
| `pe_slice` | 8×8 PEs, row broadcast, row adders, slice column sums |
| `pe_array` | 4 slices, column adders, `z` and `c^H` registers |
| `pe_plus` | extended PE for ④ |
| `inv_sqrt` | `1/√e` by leading-one normalisation and a 768-entry table `round(2^20/√(i+½))`, i = 256..1023, computed at elaboration |
| `x_shift_reg` | ±1 vector `x` |
| `step_unit`, `prox` | ⑧ for one UE |
| `llr_unit` | soft outputs for one UE |
| `s_ff_array`, `st_ff_array` | estimate/LLR storage and pilot storage |
| `sandman_ctrl` | the schedule above |
| `sandman_top` | everything wired together |

## Where this RTL departs from the reference chip

- **No Cannon's-algorithm dataflow.** The reference slices shift operands
  circularly between neighbouring PEs. This lets an 8×8 block be multiplied
  by `Ĥ` and by `Ĥ^H` without a transpose, and the PEs on a row or column are
  reconfigured to form the row and column adders. Here, ① and ⑦ use the
  row/column broadcasts instead, with dedicated adder trees. The cycle count
  per 8×8 block is the same. The skewed operand layout, the shift links and
  the PE-chained adders are not built.
- **Step ⑧ runs outside the PEs.** It is computed in 8 step units at the
  column-adder outputs, one data symbol per cycle, rather than inside the PEs.
- **Jammer strength.** The reference reports jammers received 30 dB stronger
  than the average UE. In simulation, this design gives zero bit errors in
  single test blocks in these cases:
  - QPSK with barrage, pilot-only or data-only jammers up to 24 dB above the
    UE;
  - 16-QAM with a barrage jammer up to 18 dB.

  At 30 dB, QPSK blocks with the jammer present during the pilots show a few
  bit errors (up to 0.5 %). 16-QAM under a barrage jammer shows about 4 % at
  24 dB and about 10 % at 30 dB. Data-only jammers are removed at every
  level tried.

  The sensitive quantity is `‖u‖`. A pilot-phase jammer enters `Ĥ` along its
  own direction, so any scale error in `u` leaves a copy of the jammer in
  `Q`, and that copy reaches the gradient through `Ĥ^H`. The 1/√ table
  therefore has 768 entries, each taken at the middle of its interval. A
  48-entry table capped QPSK at about 12 dB. A larger table did not help
  further. The remaining limit probably comes from the other scale factors
  chosen here, such as the ±64 range of `Y` and the ±16 range of `Ĥ`.
- **Items not described by the reference are this design's own.** These are
  the host interface, the schedule, every binary point, the shift register's
  seed and rotation, the LLR scaling, the table size of `1/√·`, and the zero
  start for `S̃_D`.
- **Not modelled.** Pads, the package, supplies and body bias are not part of
  this RTL.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one compares the module against an independent model in `tb_model_pkg`, or
against direct arithmetic. `tb_sandman_top` runs the full-size core (no
parameter overrides) on six random blocks. Each block has a random channel,
Walsh–Hadamard pilots, random data and a little noise:

- no jammer, QPSK;
- barrage, pilot-only and data-only jammers 24 dB above the UE, QPSK;
- no jammer, 16-QAM;
- barrage jammer 18 dB above the UE, 16-QAM.

For every block it checks:

- every `Ĥ` entry, bit-exact against an integer model;
- the hard decisions of the LLRs (at most 1 % bit errors; the current result
  is 0);
- the cycle count (1353 and ≤ 1841);
- that QPSK's unused LLRs are zero;
- that every operation, prox clipping and a rotation of `x` occurred.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/sandman_pkg.sv tb/tb_model_pkg.sv tb/tb_sandman_top.sv \
  --top-module tb_sandman_top -Mdir obj_top
./obj_top/Vtb_sandman_top
```

Other modules are found through `-Irtl`. Each testbench prints
`TB_RESULT checks=N failures=F`. The full-size run builds in about a minute
and simulates in under a second.

To change the system size, edit the constants in `sandman_pkg`.
`M_ANT` must be a multiple of 8. The per-PE slot counts follow from
`N_SYM / K_UE` and `D_DAT / K_UE`. The controller's schedule is written for
16 pilots and 48 data symbols.
