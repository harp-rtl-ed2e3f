# Hadamard-domain write-and-verify for an RRAM compute-in-memory macro

Programming multilevel RRAM cells is a loop: write a pulse, read the cell back,
decide whether it needs more SET, some RESET, or nothing, and repeat. When the
read-back is noisy, that loop makes wrong decisions. It oscillates and needs
many iterations. The design here verifies a whole column at once. Instead of
reading one cell at a time, every verify read drives **all** bitlines of the
column with one row of an N×N Hadamard matrix (+1 → VDD, −1 → GND). N such
reads are then decoded digitally with the inverse transform Hᵀ/N.

Because HᵀH = N·I, each decoded cell estimate averages N measurements. So the
uncorrelated part of the read noise is reduced by a factor N in variance,
without any extra read. A common-mode offset (the same for every read) lands
almost entirely on cell 0. The reason is that every row except the first is
balanced.

Two verify modes share the same engine:

* **HD-PV** (Hadamard-domain program-and-verify). Each of the N reads gets a
  full SAR conversion. The decoded estimate ŵ is then compared with the target
  w* at a ±0.5 LSB threshold.
* **HARP** (Hadamard-domain one-shot compare). The SAR ADC skips the binary
  search. The capacitor DAC is set straight to the code of the
  Hadamard-domain target y*ᵢ = Hᵢ·w*. One comparison answers "below?". Only if
  it is not below, a second comparison at target+1 separates Equal from High.
  So each read costs one or two comparator decisions instead of NBITS. The
  resulting ternary signs s_y ∈ {−1,0,+1} are decoded with Hᵀ, and the decision
  uses a threshold τ_w on the decoded sum.

Both modes feed the same per-cell SET/RESET/STOP decision and the same streak
counters. Both also use the same column-wise writer, which pulses every cell
that needs the same update at once.

## What is in the RTL

| file | role |
|---|---|
| `rtl/harp_pkg.sv` | shared enums (decisions, compare outcomes, modes, operations, drive levels) and the Hadamard sign function |
| `rtl/hadamard_row_gen.sv` | row i of the Sylvester Hadamard matrix, computed from the index |
| `rtl/hadamard_target_enc.sv` | y*ᵢ = Hᵢ·w* and the ADC code it corresponds to |
| `rtl/sar_logic.sv` | NBITS-step MSB-first SAR search |
| `rtl/compare_logic.sv` | one-shot target compare, giving Low / Equal / High |
| `rtl/inv_hadamard_acc.sv` | N parallel ± accumulators forming Hᵀy |
| `rtl/wv_decision.sv` | SET / RESET / STOP per cell, for both modes |
| `rtl/streak_freeze.sv` | streak counters and freeze flags |
| `rtl/col_write_seq.sv` | coarse initial write and four-phase fine write of a signed column pair |
| `rtl/bl_drive_enc.sv` | BL / SL / sampling-reference levels for each array operation |
| `rtl/wv_ctrl.sv` | the write-and-verify loop for one column pair |
| `rtl/shift_add.sv` | inference shift-and-add over input bits, signs and weight slices |
| `rtl/harp_macro.sv` | top level: WV engine, per-pair inference ADC logic and shift-add, drive encoding |

The analog parts are not RTL: the crossbar, the TIAs, the capacitor DACs and
comparators, and the voltage drivers. The top brings their control and status
out as ports:

* `bl[N]` are per-bitline drive levels.
* `sl`, `wl_pos`, `wl_neg`, `vsam` and `dac_code` are per column pair.
* `cmp` is the comparator result, one per pair.
* `wr_pulse` strobes write pulses.

`tb/cba_afe_model.sv` is a behavioural model of those parts, used only by the
testbenches.

## Array organisation and number conventions

The default macro is a 32×32 crossbar. It has 32 bitlines (rows, N = 32) and 32
physical columns, grouped into `NPAIR = 16` signed pairs.

A signed weight is stored as a positive/negative cell pair on the same
bitline, with the cell of the other sign left at HRS (zero). A 6-bit weight
magnitude is split into two 3-bit slices (B = 6, B_C = 3, `K_SLICES = 2`). The
slices sit on two neighbouring pairs, with the MSB slice on the lower pair
index. The macro therefore holds 32 × 8 signed 6-bit weights.

Throughout, **one ADC LSB equals one cell conductance level**, so a cell holds
the levels 0..7. With V_sam = GND the code of a read is the signed column sum
itself.

* **Row 0 (all +1).** The sum is 0..N·7 = 0..224, which fits the 9-bit range.
* **Balanced rows.** The sum lies between −224 and +224. The sampling reference
  is switched to Vcm/2, which shifts the code by half scale (256), so the codes
  fall in 32..480.

The ADC decision level for code c lies at c − ½ LSB. A full SAR search
therefore rounds to the nearest level. HARP's Equal means "within half an LSB
of the target".

Fine SET/RESET pulses move a cell by about ¼ LSB (`STEPS_PER_LSB = 4`). A
coarse SET pulse moves it 5 fine steps (`COARSE_STEPS = 5`).

## The write-and-verify loop (`wv_ctrl`)

For the selected column pair, `wv_start` latches the target magnitudes
`w_mag[N]` and signs `w_neg`. The loop then runs:

1. **Coarse write.** From HRS, cell c receives `min(10, ⌊4·w*/5⌋)` coarse SET
   pulses, so a coarse pulse never overshoots.
   * The positive column is written first, then the negative one.
   * In pulse round r every cell whose count exceeds r is pulsed. A phase
     therefore lasts as long as its longest cell needs.
2. **Verify sweep.** Rows i = 0..N−1 are read in turn. Both word lines of the
   pair are on, and the bitlines carry Hᵢ.
   * **HD-PV:** the pair's SAR logic converts the read. The signed value
     (code − 256 on balanced rows) goes into the accumulators.
   * **HARP:** the compare logic tests against y*ᵢ's code. The accumulators
     receive +1 (High), −1 (Low) or 0 (Equal).
3. **Decide.** With the accumulators holding A = Hᵀy, each cell gets a decision:
   * **HD-PV:** RESET if A − N·w* > N/2, SET if it is < −N/2, STOP otherwise.
     This is the ±0.5 LSB rule scaled by N.
   * **HARP:** RESET if A > τ_w, SET if A < −τ_w, STOP otherwise (τ_w = 4).
4. **Streak-freeze.** A STOP increments the cell's streak counter, and a SET or
   RESET clears it. A cell freezes when its streak reaches K = 2 and is never
   written again in this run.
5. **Finish or write.**
   * If all cells are frozen, the run ends with `wv_converged = 1`.
   * Otherwise the fine write runs four phases: SET on the positive column,
     RESET on the positive column, SET on the negative column, RESET on the
     negative column. Each unfrozen cell whose decision matches the phase gets
     one ¼-LSB pulse.
   * After the write, if MAX_ITER = 50 sweeps have been made, the run ends
     with `wv_converged = 0`. Otherwise the next sweep starts.

**Cycle counts.**

* A verify read costs one cycle to set up plus one cycle per comparator
  decision: NBITS + 1 = 10 cycles in HD-PV, and 2 or 3 cycles in HARP.
* A sweep of 32 reads therefore takes 320 cycles in HD-PV, and 64..96 cycles
  in HARP.
* Deciding takes two cycles.
* A fine write takes four cycles (one per phase). Pulse widths are the
  drivers' business: `wr_pulse` is a one-cycle strobe.

**Counters.** `wv_iter` counts sweeps, `wv_reads` counts reads, `wv_cmps`
counts comparator decisions, and `wv_pulses` counts write-pulse cycles. These
are the figures of merit the two modes trade. `wv_cmps` is the ADC energy
proxy.

### Why τ_w is applied to the un-normalised sum

Written literally, the HARP decode is s_w = (1/N)·Hᵀs_y, which can never
exceed 1 in magnitude. A threshold of 4 (with 2 and 6 as the alternatives
studied) only makes sense on the integer sum Hᵀs_y, whose range is −N..N. So
that is where the RTL applies it.

This has a consequence. A single cell that is off by a whole LSB, with all others exact, moves every
read by one LSB in the direction of its own sign entry. Every read then
reports High or Low accordingly, and that cell's decoded sum is ±N, far above τ_w.

In contrast, residual errors of one fine step on several cells can produce
Equal on most rows, and are left alone. HARP therefore stops earlier and
coarser than HD-PV. In the noise-free unit test its residual error reaches up
to one LSB (4 fine steps), whereas HD-PV lands within half an LSB.

### Streak length

Two descriptions of when a cell freezes are possible: after K consecutive
in-threshold reads, or once the counter exceeds K. The RTL freezes when the
counter equals K, i.e. after K consecutive STOP decisions (`streak_freeze`).

## Inference (`harp_macro`)

`inf_start` applies the unsigned 8-bit input vector `x[N]` bit-serially, LSB
first. Input bit 1 drives the bitline to VDD and bit 0 to Vcm.

For each input bit, all positive columns are read and converted in parallel by
the per-pair SAR logic. Then all negative columns are read and converted.

One `shift_add` per weight column combines the results:

    y += ± (code_MSB << 3 + code_LSB) << bit

The negative pass subtracts. `y_out` holds the signed dot products when
`inf_done` pulses. An inference takes 2 · 8 · (9 + 1) = 160 cycles plus a few
cycles of control.

WV and inference share the per-pair ADCs and never run at the same time. A
start that arrives while the other operation is busy is ignored.

## Departures and choices not fixed by the source description

* **Hadamard construction.** The Sylvester ordering H[r][c] = (−1)^popcount(r&c)
  is used. Its 4×4 case is 1111 / 1−11−1 / 11−1−1 / 1−1−11.
* **Decoding adders.** The inverse-Hadamard adders (`inv_hadamard_acc`) are
  separate from the inference shift-add adders. Sharing them is possible, and
  was the intended saving, but is not done here.
* **Unselected bitlines.** During RESET they are held at V_reset, and during
  SET they are at GND, so unselected cells see no bias.
* **Coarse pulse count.** The floor rule min(10, ⌊4w*/5⌋) is a choice. So is
  the single fine pulse per cell per iteration.
* **One ADC per pair.** Each pair has one TIA/ADC. A verify read turns both word
  lines of the pair on, so it reads w_pos − w_neg. With the other cell at HRS,
  that is the target column.
* **Row order and width.** Rows are read in order 0..N−1. The input width
  (8 bits) and the LSB-first order are assumed.
* **Clipping.** Target codes outside the ADC range are clipped. This cannot
  happen at the default sizes.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
        --top-module tb_wv_ctrl rtl/harp_pkg.sv tb/tb_wv_ctrl.sv
    ./obj_dir/Vtb_wv_ctrl

`tb_harp_macro` runs the top at its default size, with no parameter
overrides. It does the following:

1. It programs four column pairs, forming two signed 6-bit weight columns. It
   alternates HD-PV and HARP, using 0.7 LSB read noise (uncorrelated plus
   common-mode) and random programming steps.
2. It forces an HD-PV run into the iteration limit with very large noise.
3. It runs three noise-free inferences and compares them exactly with a
   reference computed from the model's conductances.

It counts every mechanism: coarse, SET and RESET pulses, negative-column
writes, SAR and one-shot reads, one- versus two-comparison outcomes, the Vcm/2
reference, freezing, convergence, the iteration limit and inference. It fails
if any of them never happened.

A typical run with noise gives these results:

* HD-PV converges in about 9 sweeps, with an RMS cell error around 0.3 LSB.
* HARP takes 12–13 sweeps, and each read averages about 1.6 comparisons
  instead of 9.

`tb_wv_harness.sv` closes the loop around one `wv_ctrl`, the drive encoder
and the analog model. Its parameters set the array size, the ADC resolution
and the noise levels. `tb_wv_ctrl` and `tb_wv_column_study` use it.

## Measured behaviour of the two modes

`tb_wv_workloads` programs 16 random signed columns in each mode and
reports the means. It covers the 32-row array with a 9-bit ADC and the
64-row array with a 10-bit ADC, both at about 0.7 LSB read noise:

| array | mode | sweeps | comparator decisions | write-pulse cycles | clock cycles | RMS error |
|---|---|---|---|---|---|---|
| 32 rows, 9-bit | HD-PV | 7.4 | 2124 | 19 | 2657 | 0.29 LSB |
| 32 rows, 9-bit | HARP | 25.8 | 1326 | 45 | 3164 | 0.49 LSB |
| 64 rows, 10-bit | HD-PV | 8.0 | 5120 | 20 | 6210 | 0.28 LSB |
| 64 rows, 10-bit | HARP | 48.4 | 4989 | 92 | 11534 | 0.43 LSB |

What the numbers show:

* HARP spends far fewer comparator decisions per sweep than HD-PV. At 32 rows
  it needs 62 % of HD-PV's total, which is the ADC energy it saves.
* HARP needs more sweeps, and its per-sweep saving is partly spent on them.
* At 64 rows with the same τ_w = 4, most HARP runs end at the 50-sweep
  limit rather than by freezing. The cause is that near convergence about half
  of the reads come out High or Low rather than Equal under this noise. The
  decoded sum of 64 such signs then has a standard deviation of about 5.7, so a cell rarely stays
  within ±4 for two sweeps in a row. A larger τ_w would suit the larger
  array. The defaults keep the single value given for τ_w.
* The model counts one clock cycle per comparison and per pulse. The cycle
  column therefore reflects digital control, not the 100 ns write pulses or
  the analog settling of a real macro.

The analog model works in units of 1/16 LSB. Its comparator is the place to
change the noise statistics, the write-step size or the offset behaviour.
