# UniCAIM key cache in SystemVerilog

In LLM decoding, each new token's query must be compared with the keys of every earlier
token. As the context grows, the key/value (KV) cache grows too. UniCAIM (Xu, Zeng, Huang,
Li and Huang, "UniCAIM: A Unified CAM/CIM Architecture with Static-Dynamic KV Cache Pruning
for Efficient Long-Context LLM Inference") keeps the key cache in one FeFET memory array.
That array works in three modes inside every decoding step:

1. **CAM mode, dynamic pruning.** All rows compare themselves with the query at once. A
   race between discharging sense lines keeps the *k* rows most similar to the query. No
   score is ever computed.
2. **Charge-domain CIM, static pruning.** Each row adds the charge left on its sense line
   into an accumulation capacitor. Once the cache is full, a second race finds the row with
   the lowest accumulated score. That row is evicted, and the next token's key overwrites it
   in place, so the cache never grows.
3. **Current-domain CIM, exact attention.** Only the *k* surviving rows go through the
   ADCs. The ADCs return their exact scores q·k.

The prefill stage keeps the H most important prompt tokens ("heavy" tokens). M further
rows are reserved for generated tokens. The main configuration has H = 512, M = 64
(576 rows), head dimension d = 128, 64 ADCs of 10 bits, and one signed multilevel key per
cell.

This RTL describes that macro at clock-cycle level. The memory array, the sense-line race
circuits and the ADCs are analog in the original. Here they are behavioural models written
as synthesizable integer logic, with the ports of the real blocks. The drivers, registers,
multiplexer and controller are ordinary RTL.

## How analog quantities become integers

Everything else depends on this encoding (`rtl/unicaim_pkg.sv`).

**Keys.** A key dimension is one of nine values, -1.00 to +1.00 in quarter steps. It is
stored as a signed integer k in -4..+4. A cell holds it as two complementary FeFET
threshold levels (VTH1, VTH1b) = (4-k, 4+k). Level 0 is the lowest threshold V_L and gives
the most current. Level 8 is V_H. So +1 is (V_L, V_H), -1 is (V_H, V_L), 0 is (V_M, V_M)
and +0.5 is (V_L', V_H').

**Queries.** A query dimension is ±1. A +1 puts the read voltage on the BLb line of the
pair, a -1 on BL. Only the FeFET whose gate sees the read voltage conducts.

**Currents.** That FeFET conducts 8 - level units. For one cell this gives 4 - k·q units:
0 for a perfect match, 8 for the exact opposite. A row's sense-line current is therefore

    i_sl = 4·d - score,     score = Σ q_c·k_c  (quarter steps, -4d..+4d)

For d = 128 this is 0..1024, and scores run from -512 to +512. A larger score gives a
smaller current, which is the property the whole design relies on. The linear scale is a
modelling choice. The original circuit shows the current linear in the MAC value but gives
no exact unit.

**Voltages.** A sense-line or accumulator voltage is an integer in 0..8d, with V_DD = 8d.
After the CAM race, a row's sense line is modelled as V_SL = 8d - i_sl = 4d + score, so a
zero score sits at V_DD/2.

## One decoding step

`unicaim_ctrl` runs these phases in order. The `phase` output shows the current phase.

| phase  | what happens | clocks |
|--------|--------------|--------|
| WRITE  | The step's key is written into one row in a single cycle. That row is the one evicted in an earlier step if there is one, else the next free reserved row. The row's accumulator resets to V_DD/2. | 1 |
| CAM    | Top-k race (`cam_topk`). The survivors are latched in the top-k local register. | 2 + up to 8d+1 |
| SHARE  | Switch S1 closes: each valid row's V_SL is charge-shared into its accumulator. | 1 |
| STATIC | Only when all H+M rows hold tokens. The eviction race (`charge_cim`) picks the row to overwrite next. | 2 + up to 8d+1 |
| ATTN   | The MUX routes the top-k rows to the K ADCs, which convert in parallel (`current_cim`). | B+2 |
| DONE   | `step_done` pulses and the results hold. | 1 |

The step's own key is written first, so the current token attends to itself. The row
chosen for eviction in step t is overwritten in step t+1. In the original's worked
example, the eviction is likewise chosen in the step that fills the cache (step M) and
refilled in step M+1.

### The top-k race (`cam_topk`)

In the circuit, every valid sense line is precharged to V_DD and then discharges with its
current. A row whose line falls below V_DD/2 switches off its detect transistor F_dyn.
The detect currents of the rows still high add up to I_1. A comparator checks I_1 against
I_Ref1 = (k+1)·I_dyn. Its output Ctrl1 flips as soon as at most k rows are still high.
That stops the race, and those rows are latched.

A row's crossing time goes as 1/i_sl, so rows cross in order of decreasing current. The
model walks that order one current level per clock. In evaluation clock t, rows with
i_sl ≥ 8d+1-t have crossed. The result is exactly:

*with the valid rows' currents sorted ascending c[0] ≤ c[1] ≤ …, keep the rows with
i_sl < c[k]*

So if a tie straddles the k-th place, fewer than k rows survive, just as in the circuit.
The race takes a variable number of clocks, at most 8d+1. That is the digital counterpart
of the circuit's fixed-duration discharge. `k_cfg` sets k at run time, which corresponds to
programming F_dyn.

### Accumulation and eviction (`charge_cim`)

- **SHARE.** Each valid row does `V_Acc += (V_SL - V_Acc) >> CAP_SHIFT`. This is charge
  conservation between C_SL and C_Acc with a ratio of 2^-CAP_SHIFT (default 1/4).
- **STATIC.** All accumulators discharge at DIS_STEP per clock. The first to reach the
  FeFET inverter's switching voltage V_S (default 0.25·V_DD) has the smallest
  accumulation. Its F_sta turns on and comparator CMP2 (I_2 ≥ I_sta) flips Ctrl2, which
  stops the discharge.
- **After the race.** Every accumulator keeps its lowered value. The row is latched as
  `evict_addr`. If several rows cross in the same clock, the lowest index wins.

The accumulator is therefore a leaky running average of each token's similarity, not an
exact sum. That is what the charge-sharing circuit computes.

### Exact scores (`current_cim`)

`topk_mux` packs the selected rows in ascending row order onto the K channels. Each
`sar_adc` converts its current in B clock cycles after a sampling clock. Each code becomes
`score = 4d - code`. With B = 10 and d = 128, a current of 1024 (score -512) clips to
code 1023. If more than K rows were selected (k_cfg > K), only the first K are converted.

## Module map

```
unicaim_top
├── unicaim_ctrl         phase sequencing, fill pointer, valid rows, pending eviction
├── wl_driver            write: one-hot word line; read: all valid rows
├── bl_driver            query -> (BL, BLb) read pattern; key -> VTH level pair
├── unicaim_array        N x D stored VTH pairs, row sense-line currents (model)
│   └── unicaim_cell     one two-FeFET cell (model), N*D instances
├── cam_topk             CAM top-k race + CMP1 (model)
│   └── local_register   top-k row mask
├── charge_cim           S1 sharing, accumulators, eviction race + CMP2 (model)
│   └── local_register   evicted row
└── current_cim          exact scores
    ├── topk_mux         "N+1-to-k" MUX
    └── sar_adc  x K     SAR ADC (model)
```

`unicaim_pkg` holds the default sizes, the key and level types, the key-to-level function
and the phase enum.

## Top-level interface

| signal | dir | meaning |
|--------|-----|---------|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `k_cfg` | in | k of the top-k race |
| `pf_valid`, `pf_ready`, `pf_key[D]` | in/out/in | Load one heavy key per clock into rows 0…H-1. Accepted when both valid and ready are high. Ready drops after H keys. |
| `step_valid`, `step_ready` | in/out | Start a step. Valid is sampled while ready (idle) is high. |
| `step_q_neg[D]` | in | query sign per dimension, 1 = -1 |
| `step_key[D]` | in | the step's new key, signed quarter steps |
| `step_done` | out | one-clock pulse at the end of the step |
| `attn_valid[K]`, `attn_addr[K]`, `attn_score[K]` | out | per ADC channel: in use, row, q·k in quarter steps |
| `topk_count` | out | rows that survived the race |
| `step_evicted`, `evict_addr` | out | this step chose a row for eviction, and which |
| `step_reused` | out | this step's key overwrote an evicted row |
| `full`, `phase` | out | all rows hold tokens; current phase |

Parameters: `H` (512), `M` (64), `D` (128), `K` (64), `B` (10). `N = H + M`. The
widths follow from these.

## Sizes against the workloads evaluated in the original

- **Main circuit configuration.** 576 rows × 128 dimensions with 64 ten-bit ADCs. These are
  the defaults.
- **Prompt length.** The original sweeps prompts of 512 to 2048 tokens, plus QA prompts of
  1.5k and 2.5k tokens. Prompt length does not change the array: prefill pruning keeps 512
  heavy tokens of any prompt, and that selection happens before loading.
- **Output length.** Outputs of 64 to 256 tokens fit, because past 64 generated tokens
  every step evicts and reuses one row.
- **Scope of one macro.** One macro holds one head's keys. Deploying a full model needs one
  macro per head and layer, which the original does not detail.
- **Pruning ratios.** The original quotes ratios of 20/50/80%. They do not map onto k for
  this array without more information. Also, k above 64 would need more ADC rounds than
  this design has.

## Where this RTL departs from, or adds to, the original

These follow the original:

- block structure, the three modes and their order in a step;
- the complementary-VTH key encoding and the ±1 query encoding;
- the comparator references (k+1)·I_dyn and I_sta;
- the single-cycle overwrite of the evicted row;
- all default sizes.

These are choices made here:

- integer units of current and voltage, and the linear cell-current scale;
- nine key levels in quarter steps. The original calls the cell "3-bit" but plots nine key
  values from -1 to +1. Nine levels also reproduce its stated score range of ±512.
- the race-to-clock mapping (one current level per clock);
- V_SL after the race = 8d - i_sl;
- the charge-sharing ratio (1/4), the eviction discharge step (1 per clock), V_S = 0.25
  V_DD and the accumulator reset value V_DD/2;
- lowest-index tie-breaking in eviction, and ascending packing in the MUX;
- the write-first step order and the handshakes;
- one bit per clock in the SAR ADC;
- clipping of the single out-of-range score.

Not built:

- The multilevel query expansion over four cells (2-bit query × 2-bit key). It is an
  alternative configuration in the original.
- The unexplained "+1" input of the N+1-to-k MUX.
- Prefill-stage token selection, the value cache and softmax. The original describes no
  hardware for these.
- Analog bias generation.

Because the analog parts are idealised, this RTL reproduces the decisions the circuit
makes (which rows survive, which row is evicted, the quantised scores). It does not
reproduce device variation, energy or absolute delay.

## Simulating

Every block has a self-checking testbench in `tb/`. Each compares the block against a
reference computed independently inside the testbench and prints
`TB_RESULT checks=N failures=M`:

- `tb_unicaim_top` runs the whole macro at a reduced size (H=8, M=4, D=16, K=3, B=7) for
  40 steps. It checks every output against a step-level reference model, and counts the
  mechanisms (prefill writes, reserved-row writes, top-k races, boundary ties, evictions,
  in-place overwrites).
- `tb_unicaim_full` runs the same procedure at the default size, with 72 steps, so the
  cache fills and evicts.

With plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/unicaim_pkg.sv tb/tb_unicaim_top.sv --top-module tb_unicaim_top -o sim
./obj_dir/sim
```

Replace `tb_unicaim_top` with any other testbench name. The full-size array has
576 × 128 cell instances, so `tb_unicaim_full` takes about 8 minutes to build and about
2.5 minutes to run. In that run, 49 of the 72 top-k races ended on a boundary tie,
and 9 evictions and 8 in-place overwrites occurred. ADC clipping is exercised only in
`tb_current_cim`. Testbenches
use only `$urandom`. Simulators with two-state variables are fine, because everything the
design reads is reset or written first; the non-volatile array is masked by the row-valid
bits until written.

To change the size, set the parameters of `unicaim_top`. Widths are derived from them.
The constants in `unicaim_pkg` are the defaults only.
