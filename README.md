# CMOR: a cellular-automaton reservoir with a ReRAM read-out layer

In reservoir computing, a fixed dynamical system spreads an input out into a
larger, non-linear state space. A single trained linear layer then classifies
that state. CMOR (cellular memristive-output reservoir) builds the fixed
system from an *elementary cellular automaton* (ECA) made of plain CMOS
multiplexers. The trained layer is a bank of 1-transistor-1-ReRAM (1T1R)
cells wired in parallel.

- Each automaton cell switches one resistive memory device on or off.
- The bank's total conductance is then a dot product: the reservoir state
  times the stored conductance map.
- Comparing that conductance with a boundary value gives the class. This is a
  support-vector machine whose weights are device conductances, here called
  the RSVM (ReRAM support-vector machine).

The fabricated circuit takes an 8-bit input and computes 7 generations of the
automaton, so it has 8 × 7 = 56 ReRAM weights. Eight variants were made, one
per rule: 60, 90, 102, 105, 153, 165, 180 and 195. This repository gives
SystemVerilog for the digital part of that circuit and behavioural models of
its analog part. Together they simulate the whole read-out chain.

## The automaton

An ECA cell's next state depends on three bits: its left neighbour L, itself
C and its right neighbour R. The rule number's binary digits list the next
state for each of the 8 neighbourhoods: bit `k` of the rule is the output for
`{L,C,R} = k`. For example, rule 60 = `0011_1100` is `L ^ C`.

**Cell (`eca_cell`).** A cell is just an 8:1 multiplexer. The neighbourhood
drives the select lines (`s0` = L, `s1` = C, `s2` = R, with L as the most
significant bit). The 8 data inputs are tied to the rule bits. On the
fabricated chips the rule is fixed in the mask, so here it is the parameter
`RULE`. The paper also mentions a later variant with a storage element per
cell, so the rule can be loaded at run time. That variant was never made and
is not included here.

**Ring (`eca_ring`).** `N_CELLS` cells are closed into a ring: cell `c` reads
cells `c-1` and `c+1` modulo N. The ring therefore has no boundary condition,
and each input bit fans out to three cells.

The ring's direction is the one choice here that changes results. "Left" is
the lower column index. This reproduces the published rule-60 measurement, in
which a single 1 in column 0 spreads towards higher columns and fills all 8
cells at generation 7.

**Stack (`eca_stack`).** `M_GENS` rings are chained. Ring 0 takes the input
`din` and ring g takes ring g-1's output, so `gens[g]` is generation g+1. The
input word itself has no weight. Nothing is clocked: after `din` changes, all
generations settle through M levels of multiplexers. Propagation delay is the
only speed limit. Power is drawn only when the input changes and when the bank
is read.

## The read-out layer

**Gate control (`rsvm_gate_ctrl`).** Element (r,c) of the bank is a select
transistor in series with a ReRAM device. Its gate is driven in one of two
ways:

- **Compute mode** (`prog_en = 0`): the gate follows reservoir cell (r,c).
- **Programming mode** (`prog_en = 1`): the gate follows a one-hot address
  select, so exactly one element conducts.

**Bank (`rsvm_array`, behavioural).** Every source and drain of the bank sits
on two common terminals. A programming pulse across those terminals therefore
reaches all elements, but it changes only the one whose transistor is on.
That is how single devices are written without per-device wiring. On silicon
the gate drivers are thick-oxide devices so that they can pass the 3.3 V
programming voltage. Only their logic is modelled.

**ReRAM element (`reram_1t1r`, behavioural).** The device is built in the
level-1 via: a TiN stud as bottom electrode, an HfO₂ switching layer, a Ti
oxygen-scavenger layer and a TiN top electrode. The model keeps a binary
state:

- HRS (high-resistance state): pristine, or after a reset.
- LRS (low-resistance state): after forming or set.

Its read conductance depends on the gate and the state:

| gate | state | conductance |
|------|-------|-------------|
| off  | any   | `G_OFF_US` = 16 µS (leakage) |
| on   | HRS   | `G_HRS_US` = 20 µS |
| on   | LRS   | `G_LRS_US` = 400 µS |

The leakage with the gate off is included because measurements showed that
disabled elements contribute noticeably. These three values are not published
numbers. They were chosen to match the shape of the measurements: all-HRS
banks near 1.0–1.1 mS, and one LRS element adding about 0.4 mS.

**Classifier (`rsvm_classifier`).** The conductance sum is
`G = Σ gate·G_dev + Σ ¬gate·G_off` (`g_sum_us`, an integer in µS). It is
compared with the boundary input `g_b_us`: `y_pos = G > G_b`, so G equal to
G_b gives class −1. On the chip this comparison was done by the measurement
equipment on the measured conductance. Here it is a digital comparator, so the
model has a class output.

## Addressing and read-out (`element_select`)

A binary row address (0 … M-1, meaning generation row+1) and column address
(0 … N-1) are decoded to a one-hot map. The same address drives a multiplexer
that routes the addressed cell's logic state to a single output, `state_out`.
This is how all 56 cells can be checked through few pins. An out-of-range row
(7 at the default size) selects nothing and reads 0.

The published circuit does have this addressing, but the paper does not
describe its circuit or encoding. The decoder, the 0-based binary encoding and
the out-of-range behaviour are this design's choices.

The published experiment labels, "(2,7)" and "(4,7)", elsewhere written
"(7,2)" and "(7,4)", cannot be mapped onto one indexing that also matches the
published conductance sweeps. The testbench uses the two elements whose
behaviour matches those sweeps under the indexing above:

- generation 1, cell 7, which conducts exactly when `din[7] ^ din[6]`;
- generation 4, cell 7, which conducts when `din[7] ^ din[3]`.

## Top level (`cmor_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `din` | in | N | digital input |
| `row_addr`, `col_addr` | in | clog2(M), clog2(N) | element address |
| `prog_en` | in | 1 | programming mode |
| `prog_pulse` | in | 1 | rising edge = one programming pulse |
| `prog_op` | in | `prog_op_e` | `PROG_SET` (to LRS) or `PROG_RESET` (to HRS) |
| `g_b_us` | in | `G_W` | classification boundary, µS |
| `gens` | out | M×N | all generations |
| `state_out` | out | 1 | addressed cell's state |
| `lrs_map` | out | M×N | device states |
| `g_sum_us` | out | `G_W` | bank conductance, µS |
| `y_pos` | out | 1 | 1 = class +1 |

The top has no clock. The only state is the 56 device bits, which change on
`prog_pulse` rising edges. To program one element:

1. Set `prog_en = 1`, the address and `prog_op`.
2. Pulse `prog_pulse`.
3. Return `prog_en` to 0.

The input `din` has no effect during programming. The top's parameters are
`N_CELLS = 8`, `M_GENS = 7`, `RULE = 60` and `G_W = 16`. `cmor_pkg` holds the
defaults and the `prog_op_e` type.

## Testbenches

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…` line.

- `tb_eca_cell`, `tb_eca_ring`, `tb_eca_stack` check the automaton against
  the eight rules' Boolean forms. They do not use the rule-number lookup. The
  stack is also checked against a closed form: for rule 60, generation g
  equals the XOR of `x[c-j]` over all j with C(g,j) odd.
- `tb_element_select`, `tb_rsvm_gate_ctrl`, `tb_reram_1t1r`, `tb_rsvm_array`
  and `tb_rsvm_classifier` test the remaining blocks on their own.
- `tb_cmor_top` runs at the default size and repeats the published
  experiment sequence:
  1. Sweep all 256 inputs on a pristine bank: class −1 everywhere.
  2. Read every cell through the address path.
  3. Set one element and check the XOR classification with G_b = 1.2 mS.
  4. Set a second element and check three conductance levels.
  5. Reset the first element.
  6. Pulse with an out-of-range address and check nothing changes.

  In every sweep it also checks that rule 60 gives the same conductance for an
  input and its bitwise inverse. It counts each mechanism and fails if one
  never happens.
- `tb_cmor_rules` instantiates the top once per fabricated rule. For all 256
  inputs it checks all 56 cells, both on `gens` and one by one through the
  read-out terminal.

To simulate with plain Verilator, for example the top:

```
verilator --binary --timing --assert -y rtl rtl/cmor_pkg.sv tb/tb_cmor_top.sv \
          --top-module tb_cmor_top -o sim && ./obj_dir/sim
```

`-y rtl` lets Verilator find each module by its file name. The package must be
named explicitly, and first. Each run takes well under a second.

## How far to trust it, and where it departs

- **Faithful:** the multiplexer cell and its rule weighting, ring wiring,
  stacking, 8 × 7 size, parallel 1T1R bank, gate drive by the automaton,
  per-element enable for programming, and the read-out of any cell.
- **Assumed:**
  - the ring direction (taken from the measured rule-60 pattern);
  - which input bit feeds which column (`din[c]` → column c; unstated);
  - the address encoding and the separate programming-mode signal;
  - the conductance values and the µS integer code;
  - the comparison at G = G_b.
- **Not modelled:**
  - multi-level resistance programming (the devices allow it, but the
    published tests used HRS/LRS only);
  - device-to-device LRS spread, which is measurable in the two-element
    experiment;
  - the voltages (3.3 V programming, 1 mA compliance, 1.2 V select gate);
  - forming versus set as separate operations;
  - power;
  - the run-time programmable rule variant.

The two ReRAM files are behavioural models, not hardware to synthesize.
Everything else is synthesizable combinational logic.
