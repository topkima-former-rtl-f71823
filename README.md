# Top-k in-memory ADC softmax macro (Topkima-Former attention core)

In a transformer, softmax over the attention logits `q · K^T` is expensive.
It needs an exponential and a division for every key, and its cost grows
with sequence length. Keeping only the `k` largest logits (top-k) removes
most of that work, but a digital top-k needs a sort first, and the sort then
dominates the latency.

This design gets the top-k with no sort. `K^T` sits in an SRAM
compute-in-memory array, and `q · K^T` is formed as charge on the bit lines.
The column ADCs are ramp ADCs built from replica cells of the same array. The
ramp **falls**, so the columns with the largest dot products cross it first.
The order in which the column comparators fire is therefore already the
sorted order. An arbiter records the columns as they fire, and a counter
stops the conversion once `k` of them have fired. Only those `k` values go to
a small digital softmax.

The RTL here covers this macro, as described in "Topkima-Former: Low-energy,
Low-Latency Inference for Transformers using top-k In-memory ADC" (Dong,
Yang et al.): the top-k in-memory-ADC macro ("topkima-M"), its pairing into
a 384-key softmax macro ("topkima-SM"), and a digital softmax. The analog
array is a behavioural model. The rest of that paper's accelerator is not
included: the RRAM arrays that compute `Q, K, V = X·W`, the SRAM array that
computes `A·V`, and the buffers and interconnect. That paper takes them from
an existing simulator framework and does not design them.

## What one run does

A run takes one query row `q` (64 signed 5-bit values, already scaled by
`1/sqrt(d_k)`, see below). It returns one sparse row of attention scores
over `d = 384` keys: up to five `(key index, ADC code, 5-bit probability)`
entries.

```
            q (64 x sign+5b)                                  K^T row writes (64 x 384 x 4b)
                 |                                                     |
     +-----------+-----------------------------+          +------------+-------------+
     |  topkima_m #0: columns 0..255, k0 = 3   |          | topkima_m #1: 256..383,  |
     |  wl_pwm_driver -> sram_imc_array        |          |               k1 = 2     |
     |  (MAC rows | calib rows | ramp rows|SA) |          |  (same structure)        |
     |        req |  ^ ack                     |          |                          |
     |  topk_arbiter_encoder -> topk_register  |          |                          |
     |        \-> topk_counter -> stop ramp    |          |                          |
     |  ima_controller sequences all of it     |          |                          |
     +-----------------+-----------------------+          +------------+-------------+
                       | 3 x (addr, cycle)                             | 2 x (addr, cycle)
                       +----------------- join (addr + 256) -----------+
                                            |
                                      softmax_core
                                            |
                              a_valid / a_idx / a_code / a_prob (5 entries)
```

The two macros run in parallel from the same `start`. The softmax starts in
the cycle the slower of the two finishes.

## Why a falling ramp sorts

After the multiply phase, column `c` holds a bit-line level proportional to
its dot product `MAC_c = Σ_r q_r · w_rc`. The converter has two steps:

1. **Calibration.** In one clock cycle, all 32 calibration replica cells of
   every column are pulsed together. This sets the ramp's starting level.
2. **Ramp.** Ramp replica cells are then pulsed one per ramp step, up to 32
   steps. Each pulse lowers the ramp by one LSB. Step `s` (0..31) is the
   *conversion cycle*.

A column's sense amplifier fires at the first step where the ramp is at or
below its level. In the model's units (one LSB = `UNIT` MAC units) this is
step `s = 31 − min(31, floor(MAC/UNIT))`. The ADC code is `31 − s`.
Negative dot products never fire. A larger dot product means an earlier
step, so the firing order runs from the largest value down. Nothing has to
be compared with anything else.

The stored ADC result is the conversion cycle `s` at which the column fired,
as in the paper. The softmax only needs differences of logits, so it works
on `s` directly: `exp(x_i − x_max) = R^(s_i − s_min)`.

## From q and K^T to bit-line charge

**Weights.** Each `K^T` element is a 4-bit sign-magnitude number (−7..+7).
It is stored in three ternary dual-10T cells in three physical rows. Each
cell holds +1 `(QL,QR)=(H,L)`, 0 `(L,L)` or −1 `(L,H)`. Cell `j` stores
magnitude bit `j`, carrying the weight's sign (`kt_weight_encoder`). A write
stores one weight row (all three cell rows of all columns) per cycle, so a
64 × 384 head loads in 64 writes. In the paper, this is row-by-row writing
at 5 ns per row, 320 ns per head.

**Inputs.** Element `q_r` drives the read word lines of its three cells as
pulses `|q_r|`, `2|q_r|` and `4|q_r|` clock cycles long (`wl_pwm_driver`).
The pulse goes on `+RWL` for positive `q_r` and on `−RWL` for negative
`q_r`. A cell adds `sign(q) · cell` per cycle of pulse, so the three cells
add up to `q_r · w_rc`. All pulses start together. The multiply window is
always `31 · 4 = 124` cycles. At the paper's 2 GHz pulse clock this is the
quoted 15.5 ns (LSB cell) and 62 ns (MSB cell).

**Scale-free attention.** The `1/sqrt(d_k)` factor is not computed anywhere.
It is folded into `W_Q` when the weights are prepared, so the `q` given to
this macro already includes it. This costs no hardware, and there is none
here.

## Arbitration, counting and early stop

This is the part with the most timing detail (`ima_controller`,
`topk_arbiter_encoder`, `topk_counter`, `topk_register`).

- A sense amplifier that fires latches its output. That output is a
  request. It stays high until it is acknowledged, and the acknowledge also
  switches that sense amplifier off until the next pre-charge. Without that,
  a column would keep firing at every later step, because the falling ramp
  stays below its level.
- Arbitration slots come every `ARB_PERIOD` cycles (default 5, i.e. 2.5 ns;
  the paper's arbiter + encoder + counter path is under 2.08 ns). In each
  slot the **lowest-numbered** requesting column is granted. Its address and
  the current conversion cycle are written into result slot `count`, and
  the counter increments.
- As soon as `count ≥ k`, the conversion stops and `done` follows. Any
  requests still pending are dropped. When more columns cross in one step
  than places are left, the lower addresses are kept, which is the paper's
  tie rule.
- A ramp step lasts at least `RAMP_PERIOD` cycles (default 8, i.e. 4 ns,
  the paper's ADC clock). It lasts longer while requests from that step are
  still waiting: the ramp holds ("stalls") until all of them are granted,
  so every stored cycle number is exact. A step with `n` grants lasts
  `max(RAMP_PERIOD, n·ARB_PERIOD + 2)` cycles. A step cut short by the
  counter after `m` grants lasts `m·ARB_PERIOD + 2` cycles.

Latency of one macro, with `start` high in cycle 0:

| phase | cycles |
|---|---|
| idle → pre-charge | 1 + 1 |
| PWM multiply | 124 |
| calibration pulses | 1 |
| ramp steps | sum of step lengths (8 each when at most one column fires) |

`done` is high in cycle `127 + Σ steps`. A full ramp with no early stop is
`127 + 256 = 383` cycles (191.5 ns at 2 GHz). The paper's `T_ima = 128 ns`
is the 256 ramp cycles of that. Early stop cuts the ramp short. The paper
reports about 31 % of the full ramp on average over its dataset. That figure
depends on the data and is not reproduced here.

## Sub-top-k: two crossbars for 384 keys

One head of BERT-base has a 64 × 384 `K^T`. A crossbar here is 256 columns
× 256 rows: 192 rows hold the 64 three-cell weights and 64 rows are replica
cells (32 calibration, 32 ramp). The keys are therefore split over a
256-column macro that keeps its top 3 and a 128-column macro that keeps its
top 2. The two lists are joined, with the second macro's addresses offset by
256, and the softmax normalises over all five. This is not an exact global
top-5: a key that would be 4th overall but sits in the first macro is lost
to the 2nd-best of the second macro. The paper measures this loss as small
for 256 × 256 crossbars.

The run-time `k` input of each `topkima_m` can be lowered below its
`KMAX`; the top ties it to `K0`/`K1`.

## Softmax core

The paper only names its digital softmax core and cites earlier work for
it, so `softmax_core` is this design's own simplest implementation.

1. Find the smallest conversion cycle `s_min` among the valid entries.
2. For each entry, look up `e_i = R^(s_i − s_min)` in Q16 and add it to a
   sum, one entry per cycle. The 32-entry table is computed at elaboration
   by the recurrence `lut[0] = 65536`,
   `lut[d] = round(lut[d−1] · R_Q16 / 65536)`.
3. For each entry, compute `prob_i = round(31 · e_i / sum)` with a 5-step
   restoring divider.

`R_Q16 = 51039 = round(65536 · e^−0.25)` means one ADC code is worth 0.25
in logit units. The true value depends on the ADC LSB and on the weight
scaling, which the paper does not give. Change `R_Q16` to match the real
scale. Start to `done` takes `3 + K·(PROB_BITS+2)` cycles (38 at the
defaults), or `4 + K` cycles if no entry was found. The outputs are 5-bit
probabilities, the 5-bit quantisation the paper uses for `A`.

## The array model

`sram_imc_array` is a behavioural model of an analog circuit: the cells,
pre-charged read bit lines, replica cells and sense amplifiers. It is
written in synthesizable style only so that the digital logic around it can
be simulated and sized. Its accumulation is ideal and integer: one unit per
active cell per clock cycle of pulse. Each replica pulse is worth `UNIT`
(default 64) of those units. There is no noise, offset or bit-line
non-linearity, and the paper's calibration is not modelled: `cal_mask`
only sets how many calibration cells are pulsed, and all 32 are by default.
The paper measures the analog error separately and shows it costs little
accuracy. A silicon implementation would replace this module by the macro
with the same ports.

## Files

| file | role |
|---|---|
| `rtl/topkima_pkg.sv` | shared constants, cell type and encodings |
| `rtl/kt_weight_encoder.sv` | 4-bit weight → three ternary cells |
| `rtl/wl_pwm_driver.sv` | PWM word-line pulses for `q` |
| `rtl/sram_imc_array.sv` | behavioural model of array, replica cells and sense amplifiers |
| `rtl/topk_arbiter_encoder.sv` | lowest-address-first arbiter, one-hot ack, binary address |
| `rtl/topk_counter.sv` | grant counter, `count ≥ k` stop |
| `rtl/topk_register.sv` | `k` result slots (address, conversion cycle) |
| `rtl/ima_controller.sv` | pre-charge / multiply / calibration / ramp / arbitration sequencer |
| `rtl/topkima_m.sv` | one top-k in-memory ADC macro |
| `rtl/softmax_core.sv` | digital softmax over the selected entries |
| `rtl/topkima_sm.sv` | top: two macros, list join, softmax |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/topkima_ref_pkg.sv` | integer reference model used by the macro-level testbenches |

Top-level parameters (defaults are the paper's configuration):
`COLS0 = 256`, `COLS1 = 128`, `K0 = 3`, `K1 = 2`, `W_ROWS = 64`, `QBITS = 5`.
The defaults that are this design's own choices are `UNIT = 64`,
`RAMP_PERIOD = 8`, `ARB_PERIOD = 5`, `PROB_BITS = 5` and `R_Q16 = 51039`.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example, the end-to-end test at full size:

```
verilator --binary --timing --assert -Wno-fatal rtl/topkima_pkg.sv tb/topkima_ref_pkg.sv \
    -y rtl rtl/topkima_sm.sv tb/tb_topkima_sm.sv --top-module tb_topkima_sm -o sim
./obj_dir/sim
```

Swap in another module and its testbench for the unit tests. The testbenches
never rely on uninitialised state, and the design runs under Verilator's
random initial values (`+verilator+rand+reset+2`).

`tb_topkima_sm` runs the top with all its default parameters. It loads two
`K^T` heads and runs seven query rows. It checks each output entry, each
macro's status and the total latency against the reference model. It also
checks that each mechanism occurs at least once: early stop, full ramp with
fewer than `k` found, ties beyond `k`, stalled ramp steps, saturated codes,
and entries from both sub-arrays. `tb_topkima_m` does the same for one
macro at a reduced size (32 columns, 8 weight rows), with a run-time
`k = 1` case added. The block testbenches check each piece on its own,
including exact cycle counts for the PWM window, the sequencer and the
softmax.

## A full attention head

`tb_bert_head` runs the workload the paper evaluates in hardware: one
BERT-base head on SQuAD, with `Q` of 384 × 64 and `K^T` of 64 × 384, and
`k = 5`. It uses the default top and runs all 384 query rows. Real
activations are not included, so the testbench builds its own: random 4-bit
keys, and for each row a query that is a noisy, scaled copy of one key. That
way every row has a clear best match. Each row's output is checked, and the
testbench reports averages. One run gave:

| quantity | this RTL (synthetic data) | paper (BERT-base, SQuAD) |
|---|---|---|
| cycles per query row, start to done | ≈ 320 (160 ns) | — |
| multiply, 384 rows | 384 × 124 cycles = 23.8 µs | ≈ 24 µs (MAC, its Fig. 4(a)) |
| fraction of the 32-step ramp used | ≈ 0.56 | α ≈ 0.31 |
| softmax, 384 rows | 384 × 38 cycles = 7.3 µs | ≈ 7.5 µs |

The ramp fraction depends entirely on the data and on `UNIT`. The other two
figures depend only on the timing.

## Departures from the paper and choices it leaves open

- **One clock.** Everything runs on one clock, the paper's 2 GHz pulse
  clock. The 4 ns ramp clock and the arbiter slot are counts of it. The
  paper does not say how its clock domains are built.
- **Ramp holds while requests wait.** The paper does not say what the ramp
  does when the arbiter is still busy. Here it waits, which keeps the stored
  cycles exact. The resulting step length matches the paper's latency term
  `max(αT_ima + T_arb, T_clk + k·T_arb)` in form.
- **Query coding.** `q` is a sign plus a 5-bit magnitude. The paper only
  says "5 bits". Its 15.5 ns LSB pulse at 2 GHz is 31 cycles, which implies
  a 5-bit magnitude, and its cell table has signed inputs.
- **Fixed multiply window** of 124 cycles whatever the data.
- **Fewer than k crossings.** If fewer than `k` columns cross in 32 steps,
  the list is returned partly empty (`a_valid`). The paper does not cover
  this case.
- **ADC scale.** `UNIT`, the worth of one ramp step in dot-product units, is
  assumed. It fixes which dot products saturate at code 31 and which
  negative ones are never seen.
- **Softmax internals and `R_Q16`** are this design's own, as described
  above.
- **Not built:** the RRAM `X·W` projection arrays, the SRAM `A·V` array,
  buffers, interconnect, and the 12 heads in parallel. A full attention
  layer would use one `topkima_sm` per head.
