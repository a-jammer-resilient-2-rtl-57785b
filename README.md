# JASS: a jammer-resilient time-synchronisation core for a 16-antenna receiver

This is synthesizable SystemVerilog for the digital core of a multi-antenna
synchronisation chip. The chip does one job: it finds the sample at which a
known training sequence begins. It keeps doing that job while a jammer with up
to two transmit antennas is active.

A plain correlator fails here. It slides the K-symbol sequence over the
received samples and waits for a correlation peak. A strong jammer buries that
peak. JASS (jammer-aware synchronisation) handles the jammer like this, for
every candidate delay `l`:

1. It estimates the jammer's spatial signature, i.e. the directions in which
   the 16 antennas see the jammer, from the received samples themselves.
2. It projects those directions out of the samples.
3. It measures how much of the remaining energy lines up with the sequence.

When that normalised score crosses a threshold `tau`, the delay is reported.

The RTL follows the published JASS ASIC (65 nm, 16 antennas, K = 16, up to two
jammer antennas, 344 MHz, 1.28 MS/s). It covers its datapath structure, bit
widths, unit latencies and algorithm order. Its number formats, control
schedule and I/O are this design's own. The section "Where this RTL departs
from the chip" lists every difference.

## 1. The computation

Notation:
- `Y_l = [y[l], ..., y[l+15]]` is the 16 × 16 window of receive vectors
  (antennas × time).
- `s` is the BPSK sequence (±1, K = 16).
- `Phi = Y_l Y_l^H`.

For each `l = 0, 1, ..., lmax` the core runs the steps below. The line numbers
are those of the reorganised algorithm.

| line | step |
|---|---|
| 3 | `c = Y_l s*` |
| 4 | `Lambda = 16·Phi − c c^H`. Its principal eigenvectors span the jammer, because the part that correlates with `s` has been removed. |
| 5–10 | For `i = 1, 2`: start `a_i` from the PRNG. Run two power iterations, `a' = Lambda a` then `a = a'/‖a'‖`. Then deflate, `Lambda −= a' a^H`. |
| 11 | `b~ = a_1^H a_2` and `B~ = [1 −b~; −b~* 1]`, so that `(A^H A)^−1 = B~ / (1 − |b~|²)`. |
| 12 | `v = A^H c` and `W = A^H Phi` |
| 13 | `N = (1 − |b~|²)‖c‖² − v^H B~ v` |
| 14 | `D = (1 − |b~|²)tr(Phi) − tr(B~ W A)` |
| 15 | Stop with `index = l` if `N − tau·D ≥ 0` |
| 17 | `Phi ← Phi − y[l]y[l]^H + y[l+16]y[l+16]^H`, a sliding update that avoids recomputing `Y Y^H` |

How lines 13–15 relate to the score:
- `N/D` equals `‖P Y_l s*‖² / ‖P Y_l‖_F²`, where `P` is the projection
  orthogonal to `A = [a_1 a_2]`.
- Dividing the score's numerator by `K = 16` makes it lie in `[0, 1]`.
- `P` is never formed.
- The division `N/D` is replaced by the sign test in line 15.

## 2. Architecture

```
            samples ──► jass_sample_mem (1024 × 16 antennas, circular)
                              │ y[l+16] (new)              y[l] (old) from window column 0
                              ▼
  jass_y_window (Y_l, 16×16×2×15 b) ──┐
  jass_bvw_regs (b~, v, W) ───────────┤
  jass_prng (2 × xorshift32) ─────────┼──► jass_interconnect ──► bc (same for all PEs)
  c_n, a_n,1, a_n,2 of all PEs ───────┘                     └──► ext[n] (one per PE)
                                                                   │
        ┌─────────── 16 × jass_pe (row n of Phi and Lambda, c_n, a'_n, a_n,i) ◄── cmd from jass_ctrl
        │ acc_out (a'_n)                        │ product (tree mode)
        ▼                                       ▼
     jass_pn ──► pn_n back to PEs        jass_adder_tree (16 → 1, 3 stages, tagged)
                                                │ routed by tag to:
                        jass_inv_sqrt ◄── ‖pn‖²  ├─► b~, v, W registers
                        r back to PEs            └─► jass_score (‖c‖², tr Phi, W A)  ──► pass
```

`jass_ctrl` runs the algorithm. Every clock it sends one command, the same to
all 16 PEs, and sets the interconnect's source selects. `jass_top` wires the
blocks together and adds the sample input stream.

### 2.1 The processing element and its three modes

PE `n` owns:
- row `n` of `Phi` (16 × 2 × 34 b) and row `n` of `Lambda` (16 × 2 × 25 b);
- `c_n` (2 × 22 b);
- `a'_n` (2 × 26 b);
- `a_n,1` and `a_n,2` (2 × 22 b).

Its datapath is a three-stage pipeline:
- stage 1: operand registers, 26 b and 23 b;
- stage 2: one complex multiplier. The product is shifted arithmetically by a
  fixed amount for each operation and saturated to 36 b;
- stage 3: a 34 b complex add/subtract.

Each command carries the column index `k`. The PE works in one of three modes:

- **Accumulate.** Used for `Lambda a` (`OP_MV`) and `c = Y s*` (`OP_C`).
  - In cycle `k` the broadcast operand is entry `a_k` of the vector.
  - The PE multiplies its own `Lambda[n][k]` by it and adds the product to the
    accumulator.
  - After 16 issues plus 3 pipeline cycles, 19 cycles in all, every PE holds
    its entry `a'_n`.
  - For `c`, the sign of `s_k` picks add or subtract of `y_n,k`. No
    multiplication is needed.
- **Multiply-subtract.** Used for rank-one updates: `Lambda` (`OP_LAM`), the
  deflation (`OP_DEFL`) and the `Phi` update (`OP_PHI_ADD`, `OP_PHI_SUB`).
  - In cycle `k` each PE updates entry `k` of its row with
    `own value × conj(broadcast)`.
  - A whole 16 × 16 update takes 16 issues plus 3 cycles.
- **Tree.** Used for inner products and traces (`OP_T_*`).
  - Each PE puts one product on the adder tree.
  - The sum appears 5 cycles after the issue: 2 cycles in the PE and 3 in the
    tree.
  - A tag that travels with the data tells the control unit where the sum
    belongs: the `‖pn‖²` input to the inverse square root, `b~`, `v`,
    `W[i][k]`, `‖c‖²`, `tr(Phi)` or one entry of `W A`.

### 2.2 Normalising the power-method vector

`a'` can have a huge dynamic range, because the jammer can be 30 dB stronger
than the user. It is normalised in two steps.

1. **Pseudonormalisation (`jass_pn`).**
   - All 32 real and imaginary parts are OR-ed together in absolute value.
   - A leading-one detector gives `n = floor(log2 max|·|)`.
   - Each part is then shifted right by `n`, which leaves 21 bits in
     `[−2, 2)` (Q2.19).
   - The direction of `a'` is unchanged, so the power method is unaffected.
2. **Exact normalisation.**
   - The adder tree forms `‖pn‖²`, which lies in `[1, 128)`.
   - `jass_inv_sqrt` returns `1/‖pn‖` as Q1.21.
   - Each PE multiplies its `pn_n` by this value (`OP_SCALE`), giving
     `a_n,i` as Q2.20.

### 2.3 Inverse square root

1. A base-4 leading-one detector brings the 31 b input to `x' ∈ [0.25, 1)`,
   kept as 21 b, and records the shift `alpha` (4 b).
2. The top 11 bits of `x'` address a 2048 × 13 b table with
   `LUT[i] = floor(sqrt(2^34/(2i+1)))`, which is `1/sqrt` at the bin centre.
   The table is computed at elaboration by a constant function, so no data
   file is needed.
3. One Newton–Raphson step, `y = y0 (3 − y0² x')/2`, runs on a single real
   13 × 23 b multiplier in three passes.
4. A shift by `alpha` undoes the rescaling.

Latency is 6 cycles. The worst error seen over the whole input range is 4 LSB
of the 22 b result.

### 2.4 PRNG

Two 32-bit xorshift stages are chained combinationally. Each stage computes
`x ^= x<<13; x ^= x>>17; x ^= x<<5`. The first stage's output gives the real
part of a start-vector entry and the second stage's output gives the imaginary
part; each is the top 21 bits of its stage's 32-bit word.

Every draw writes the second stage's output back into the state. `seed` is
loaded at `start`, and the state then runs on across delay indices, so one
complex entry comes out per clock.

### 2.5 Score unit

The score unit receives these inputs:
- `‖c‖²`, `tr(Phi)` and the four entries of `W A`, captured from the tree;
- `b~` and `v`, read from their registers.

It evaluates:

    N = (1−|b~|²)‖c‖² − |v1|² − |v2|² + 2 Re(b~ v1* v2)
    D = (1−|b~|²)tr(Phi) − Re(WA11) − Re(WA22) + Re(b~ WA21) + Re(b~* WA12)

It then decides `N·2^16 ≥ tau·D` in integer arithmetic, with the operands
aligned as described in section 3.

The unit uses wide real multipliers and has 3 pipeline stages.

## 3. Number formats

Only the word widths come from the chip. Where the binary point sits in each
word was chosen here so that a jammer far above the user still fits. The
shifts applied after the multiplier keep values in these formats.

| quantity | width (re and im) | format |
|---|---|---|
| `y` (ADC sample) | 15 b | integer, unit = 1 LSB |
| `Phi` | 34 b | integer (`Y Y^H`) |
| `c` | 22 b | integer (`Y s*`) |
| `Lambda` | 25 b | `(16 Phi − c c^H) / 2^13` |
| `a'` | 26 b | `Lambda a / 2^8` (before pseudonormalisation) |
| `pn` | 21 b | Q2.19 |
| `a_1`, `a_2`, `b~` | 22 b | Q2.20 |
| `v` | 26 b | `A^H c · 2^4` |
| `W` | 26 b | `A^H Phi / 2^10` |
| `‖pn‖²` into 1/sqrt | 31 b | `x · 2^22` |
| 1/sqrt output | 22 b | Q1.21 |
| `tau` | 16 b | Q4.12 (score scale 0…16) |
| `N`, `D` outputs | 96 b | `N·2^16`, `D·2^20`, so N/D = 16·num/den |

Overflowing values saturate; nothing wraps. The comparison inside the score
unit is exact integer arithmetic, so `tau` is the only rounding point of the
decision. The end-to-end test compares the hardware score `16·num/den` with a
floating-point model of the same algorithm for every evaluated delay. The two
agree to within 0.03 on a 0…16 scale, and to within 0.06 under a 30 dB
barrage jammer.

## 4. Schedule of one delay index

The control unit (`jass_ctrl`) issues the operations in algorithm order and
does not overlap groups. The cycle budget for one delay index `l > 0` is:

| group | cycles |
|---|---|
| `c = Y s*` (1 set-up + 16 issues + 1 drain) | 18 |
| `Lambda = 16 Phi − c c^H` | 17 |
| 4 × power step: `Lambda a` (16 + 3), norm issue, `‖pn‖²` on the tree (5), 1/sqrt (6), scale | 4 × 35 = 140 |
| deflation `Lambda −= a'_1 a_1^H` | 16 |
| `b~`, `v` (2), `‖c‖²`, `tr Phi`, `W` (32), `W A` (4) on the tree | 54 |
| score | 5 |
| fetch `y[l+16]`, `Phi −= y[l]y[l]^H`, `Phi += y[l+16]y[l+16]^H`, shift window | 36 |
| **total** | **286** |

Each group waits only as long as its results need:
- A PE result issued in cycle `T` can be read by an issue in cycle `T+3`.
- A tree result can be used 5 cycles after its issue.
- The control testbench checks these rules with a read-after-write
  scoreboard.

A run begins by filling the window with `y[0..15]`, which builds `Phi` one
column at a time. It then evaluates delays 0, 1, … until one passes or until
`l = lmax`.

The deflation after the second eigenvector is skipped, because its result is
never read.

At 344 MHz, 286 cycles per sample gives 1.20 MS/s. The chip reaches 268
cycles, and 1.28 MS/s; see section 6.

If the next sample has not arrived yet, the control unit waits in its fetch
state with `stall = 1`. The sample buffer is circular. Its `in_ready` output
drops when 1024 samples are waiting that have not been fetched.

## 5. Using `jass_top`

Parameters: `DEPTH = 1024`, the size of the sample buffer. The sizes B = K = 16
and Imax = 2 are fixed in `jass_pkg`.

| port | dir | meaning |
|---|---|---|
| `s[15:0]` | in | sequence; bit k = 1 means s_k = +1 |
| `tau[15:0]` | in | threshold, Q4.12, on the score scaled to 0…16 |
| `lmax[9:0]` | in | last delay to evaluate |
| `seed[31:0]` | in | PRNG start state (0 is replaced by 1) |
| `start` | in | one-cycle pulse while `busy = 0` |
| `in_valid`, `in_ready`, `in_sample[16]` | in/out/in | stream of receive vectors. The first vector after reset is `y[0]`. |
| `busy`, `done` | out | `done` pulses at the end of a run |
| `found`, `index` | out | result of the run: `index = L`, or `lmax` on a miss |
| `index_tick` | out | pulses once per evaluated delay |
| `score_num`, `score_den` | out | `N·2^16` and `D·2^20` of the last evaluated delay |
| `stall` | out | waiting for a sample |

`start` captures `s`, `tau`, `lmax` and `seed` into registers. The
sequence register is the 16 × 1 b `s` array of the architecture. The ports may
change freely during a run. The sample counters
restart only at reset, so a new run continues from the next unread sample.

A window of all-zero samples gives `N = D = 0`. That passes the test
`N − tau·D ≥ 0` exactly as the algorithm states it, so do not start a run on
an idle, all-zero input.

## 6. Where this RTL departs from the chip

- **Cycles per delay index: 286 here, 268 on the chip.** The chip's schedule
  is not described. This design runs the operation groups one after another,
  with the shortest drains that the pipelines allow.
- **Adder tree.** The chip reuses the PEs' own adders with extra pipeline
  registers. This design uses a separate 16-input tree fed from the PEs'
  product registers. The function and the 5-cycle latency are the same.
- **Loop bound.** The algorithm listing runs `l = 0..lmax`, while the prose
  says a miss is declared after `lmax` candidates. This design follows the
  listing and evaluates `lmax + 1` delays.
- **Own choices.** All binary points, saturation, the PRNG output bit
  selection, the table contents and the 6-cycle inverse square root schedule
  were chosen here.
- **Also chosen here:** the score unit internals, the interconnect source
  lists, the control unit and the sample stream interface. The chip only names
  these blocks or shows them as multiplexers.
- **Not modelled.** The SRAM macros are modelled as a synchronous array. Pads,
  clocking and the off-chip interface are not modelled.

## 7. Files

| file | content |
|---|---|
| `rtl/jass_pkg.sv` | sizes, widths, complex types, PE command set, saturation |
| `rtl/jass_pe.sv` | processing element |
| `rtl/jass_adder_tree.sv` | 16-input pipelined complex adder tree with tag |
| `rtl/jass_pn.sv` | pseudonormalisation |
| `rtl/jass_inv_sqrt.sv` | inverse square root |
| `rtl/jass_prng.sv` | complex xorshift generator |
| `rtl/jass_score.sv` | N, D and the threshold test |
| `rtl/jass_y_window.sv` | Y_l window shift register |
| `rtl/jass_bvw_regs.sv` | b~, v, W registers |
| `rtl/jass_interconnect.sv` | operand multiplexers |
| `rtl/jass_sample_mem.sv` | 1024-entry sample buffer |
| `rtl/jass_ctrl.sv` | control unit |
| `rtl/jass_top.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench for each module |

## 8. Verification

Every testbench checks its module against values computed independently
inside the testbench, has a watchdog, and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_jass_prng` | Output and state against a software xorshift, seed load, hold. |
| `tb_jass_pn` | Random vectors over the full dynamic range. Output equals `x/2^n` exactly and lies in `[−2, 2)`. |
| `tb_jass_inv_sqrt` | 2000 inputs across the range, within 8 LSB of a real-valued `1/sqrt`. Latency is 6. |
| `tb_jass_pe` | `Lambda a` after exactly 19 cycles, rank-one updates, `Phi` updates, `c`, tree products. |
| `tb_jass_adder_tree` | Sums and tags, 3-cycle latency. |
| `tb_jass_score` | N, D and pass against a real-valued model. |
| `tb_jass_y_window`, `tb_jass_bvw_regs`, `tb_jass_interconnect`, `tb_jass_sample_mem` | Storage and routing. |
| `tb_jass_ctrl` | With cycle-accurate stand-ins for the datapath: the operation counts of every delay index, 286 cycles per delay, a read-after-write scoreboard over every issue, detection, miss, and stalling without issuing. |
| `tb_jass_top` | Full design at default parameters, described below. |
| `tb_jass_jammers` | Full design against the four jammer types of the chip's evaluation, described below. |

`tb_jass_top` generates 16-antenna data with a two-antenna barrage jammer
about 10 dB above the user, plus noise. It then runs four scenarios:
- detection at delay 6, with every score compared against a floating-point
  model;
- a miss;
- a run that stalls on slowly arriving samples;
- 1100 samples with `lmax = 1023`, which fills the buffer, exercises
  back-pressure and walks all 1024 delays.

It counts detections, misses, stall cycles, back-pressure cycles, deflations
and PRNG draws, and fails if any of them never occurs. It runs in a few
seconds.

`tb_jass_jammers` runs the four two-antenna jammer types that the chip was
evaluated against. The signal-to-noise ratio is 5 dB per antenna in every
case.

| jammer | jammer-to-signal ratio | what it transmits |
|---|---|---|
| delayed spoofing | 0 dB | the user's stream, one sample late, so it also carries the sequence |
| antenna switching | 10 dB | Gaussian symbols from one antenna at a time |
| erratic | 20 dB | bursts of Gaussian symbols at random times |
| barrage | 30 dB | continuous white noise from both antennas |

Each type gets six random channels, each with the sequence at a random delay.
`tau` is 6.
- Every score is compared with the floating-point model. The largest
  difference seen is about 0.06, at 30 dB.
- Every decision must match the model's.
- All 24 runs report the exact delay.
- The model also scores every delay without mitigation, i.e. with `A = 0`.
  That baseline finds the delay in 6, 1, 0 and 0 of the six runs, in table
  order. Only the 0 dB spoofer leaves the sequence visible without
  mitigation. For the other three types the testbench requires the core to
  beat the baseline.

Run a testbench with Verilator 5:

    verilator --binary --timing -Irtl -y rtl rtl/jass_pkg.sv tb/tb_jass_top.sv \
              --top-module tb_jass_top -Mdir obj_top
    ./obj_top/Vtb_jass_top

Replace `top` with any other module name to run that module's testbench.
