# HDP: an attention co-processor that prunes with integer parts

Self-attention costs O(l²·d) per head and most of that work is wasted: in
each row of the attention matrix only a few query–key pairs matter, and some
whole heads contribute little to the result. Hybrid Dynamic Pruning (HDP)
finds the waste at run time, without retraining. It uses a cheap estimate of
the attention matrix: the product of only the *integer parts* of Q and K.
From that estimate it:

* **prunes 2×2 blocks** of the attention matrix whose importance (the sum of
  the absolute integer-product values in the block) falls below a
  per-row threshold Θ;
* **prunes whole heads** whose total importance θ_Head falls below a
  threshold τ_H, before any further work is spent on them;
* **approximates** each kept score as
  `IntQ·IntK + IntQ·FracK + FracQ·IntK`, leaving out `FracQ·FracK`. When both
  numbers lie between −1 and +1 their integer parts are zero, so their whole
  product drops out. This acts as free near-zero pruning.

The RTL here implements the co-processor for this method. It has four
identical cores, six on-chip component memories, a control unit that hands
heads to cores, and an output arbiter that returns result tiles to DRAM. Each
core runs one head at a time through the whole pipeline: integer pass,
pruning decisions, fraction pass on kept blocks only, softmax, and
probability × V.

## Number format

All of Q, K, V and the results are 16-bit signed fixed point, Q8.8.
Everything depends on how a number is split:

```
x = I·256 + F      I = x/256 truncated toward zero,   F = remainder, same sign as x
```

`I` lies in −128..127 and `F` in −255..255. Both are stored as 9-bit signed
*components* (`hdp_pkg::int_part`, `frac_part`). Truncating toward zero
(rather than flooring) makes every |x| < 1 have I = 0, and near-zero pruning
relies on that.

For two numbers, `x·y = I_x·I_y·2^16 + (I_x·F_y + F_x·I_y)·2^8 + F_x·F_y`.
HDP computes the first term for every pair. It computes the two middle terms
only for kept blocks and never computes the last. The score, in Q.8 and
scaled by 1/√d_h (a right shift by 3 for d_h = 64), is

```
score = (I + (F1 + F2)/256) >>> 3      computed as  ((I·256) + F1 + F2) >>> 3
```

Probabilities leave the softmax unit in the same Q8.8 format (256 = 1.0).
So the probability × V product can use the same split: a probability's
integer part is 0 or 1 and its fraction is 0..255. The output is exact for
those probabilities:
`out = sat16((Σ_j p_j·V_j) >>> 8)`, formed from the four partial products
Int·Int, Int·Frac, Frac·Int and Frac·Frac.

## Memories and data layout

The host writes Q, K and V of one layer through the load port, eight 16-bit
values per word (`ld_sel` picks the matrix). `hdp_top` splits each word into
its integer and fraction components on the way in. It writes them to a pair
of memories: MEM0/1 = integer/fraction Q, MEM2/3 = K, MEM4/5 = V. Each
memory word holds 8 components of 9 bits. Every core has its own synchronous
read port on every memory. With `HW = MAX_L·D_H/8` words per head:

| matrix | word address                              | element e of the word     |
|--------|-------------------------------------------|---------------------------|
| Q, K   | `head·HW + (token/8)·D_H + dim`           | token `8·(token/8) + e`   |
| V      | `head·HW + token·(D_H/8) + dim/8`         | dim `8·(dim/8) + e`       |

So one Q or K word gives eight tokens at one feature dimension. That is one
column step of the matrix product. One V word gives eight dimensions of one
token.

The default size holds one BERT-Base layer: 12 heads × 128 tokens × 64 dims,
12288 words per memory. Each core also has its own buffers:

* the integer results of the whole head (`int_buf`, (L/2)² blocks of four
  32-bit values);
* the block mask (`mask_mem`);
* two rows of scores and two rows of probabilities.

## The processing element and the PE array

A PE (`pe.sv`) has four multiply–accumulate lanes. It takes two operands
`a[0..1]` from the first matrix and four `b[0..3]` from the second. It forms
`a0·b0, a0·b1, a1·b2, a1·b3` and adds them into four accumulators. Its
`importance` output is `|acc0|+|acc1|+|acc2|+|acc3|`. It is driven only
while `import_flag` is high. In the integer pass the array feeds
`b2 = b0, b3 = b1`, so one PE holds one 2×2 block and its importance is
that block's θ.

The array (`pe_array.sv`) has 2×4 PEs on shared operand buses. It works in
three modes:

| mode      | what the PEs hold                                                        | tile   |
|-----------|--------------------------------------------------------------------------|--------|
| `PM_QK`   | PE(r,c): block rows 2r..2r+1, cols 2c..2c+1 of IntQ·IntKᵀ, plus θ         | 4 × 8  |
| `PM_FRAC` | PE(0,c): IntQ·FracKᵀ, PE(1,c): FracQ·IntKᵀ of block c of a group of four | 2 × 8  |
| `PM_PV`   | row 0: IntP·IntV (PEs 0,1), IntP·FracV (PEs 2,3); row 1: FracP·IntV, FracP·FracV | 2 × 4 |

The `ADDER` (`score_adder.sv`) is combinational. It produces the four scores
of a block from the stored integer result and the two fraction accumulators,
and the eight outputs of a PV tile from the four product classes.

## Sparsity engine: how blocks and heads are chosen

The sparsity engine (`sparsity_engine.sv`) sees the block importances of one
row of blocks at a time. Each incoming θ is written into a 2 KB importance
memory (512 × 32 bit). It also updates the row's min, max and sum, and the
head's running θ_Head. On `end_r`:

1. a sequential divider forms `mean = floor(sum / n_blk)`, where `n_blk = L/2`
   (48 cycles);
2. `se_threshold` computes the row threshold. ρ_B is the block pruning ratio,
   a signed value with 8 fraction bits (so 64 means 0.25):
   ```
   Θ = (ρ·max + (256−ρ)·mean) >> 8          ρ ≥ 0
   Θ = (−ρ·min + (256+ρ)·mean) >> 8         ρ < 0
   ```
3. the stored row is read back and one mask bit per cycle is streamed out:
   `mask = (θ < Θ) ? 0 : 1`.

Θ never exceeds the row maximum, so every row keeps at least one block. The
pruning is row-balanced. On `end_h` the engine reports
`prune_head = θ_Head < τ_H` and clears θ_Head.

## A head's life inside a core

`hdp_core.sv` is the part to read first. Its sequencer runs these phases for
one head (L = `cfg.seq_len`, a multiple of 8):

1. **Integer pass.** For every band of four Q rows and every group of eight K
   rows, the array accumulates IntQ·IntKᵀ over D_H cycles. Each cycle reads
   one IQ word and one IK word. The 4×8 tile's integer results go to
   `int_buf`. The four θ of its upper block row go straight to the sparsity
   engine. The four θ of its lower block row wait in `stage_theta`, because
   the engine keeps statistics for one row of blocks at a time. At the end of
   a band the engine gets `end_r` twice, once per block row, and returns both
   mask rows.
2. **Head decision.** After the last band the core sends `end_h`. A pruned
   head ends here: `done` pulses with `head_pruned = 1`. No result tiles are
   produced, and by definition the head's output is zero.
3. **Fraction pass with Fetch Upon Mask.** Block row i is handled in groups
   of four blocks, because one K word holds the eight K rows of four blocks.
   A group with no kept block costs one cycle and no memory read. Otherwise
   IQ, FQ, IK and FK words are read for D_H cycles. PE(0,c) and PE(1,c) form
   the two fractions of block c. Then, one block per cycle, the ADDER
   combines the stored integer result and the two fractions into four
   scores.
4. **Softmax** of rows 2i and 2i+1, one after the other. Entries of pruned
   blocks enter as masked and come out as probability 0.
5. **Probability × V.** This runs once per group of four dimensions. For each
   token j of a kept block, one IV word and one FV word are read. V of pruned
   blocks is never fetched. The array accumulates the four product classes,
   and the ADDER produces a 2×4 tile. The tile is offered on
   `out_valid`/`out_ready`, and the core waits until it is taken.

Cycle cost per head is roughly:

```
integer pass   (L/4)(L/8)(D_H+6) + (L/2)(2·(L/2) + ~110)
fraction pass  (L/2)²/4 + groups with a kept block·(D_H+7)
softmax        (L/2)·2·(2L+3)
PV             (L/2)(D_H/4)(kept tokens per row pair + 3), plus output stalls
```

For L = 128 and D_H = 64 with ρ_B = 0.25, a core spends roughly 0.2 M cycles
on a kept head. It spends about 0.05 M cycles on a pruned one.

## Softmax unit

`softmax.sv` takes a row one score per cycle. Each score becomes an
exponent, which is stored and added to the row sum. The exponent is computed
as `e^s = 2^t` with `t = s·log2 e`, split into an integer `z` and a fraction
`f`. Then `2^f ≈ 1 + f·(0.65625 + 0.34375·f)`, which is exact at both ends.
The result is shifted by `z`, with t clamped to [−16, 16). At the end of the
row, the sum is normalised to `m·2^e` with m in [0.5, 1), and
`1/m ≈ 48/17 − 32/17·m`. The unit then streams `exp·recip` out, one per
cycle. A row of n entries takes n cycles in, one cycle for the reciprocal and
n cycles out. Scores are not reduced by the row maximum first. The clamp
bounds the range instead, so very large scores saturate.

## Control and output

`control_unit.sv` gives the next head to the lowest-numbered idle core. It
pulses `done` when every head has been handed out and every core has
finished. It also totals pruned heads and kept blocks. Heads are independent,
so cores never exchange data. `out_arbiter.sv` merges the cores' tiles
round-robin onto the single result port. It holds an offered tile steady
until `out_ready` takes it.

### Top-level interface (`hdp_top`)

| port | meaning |
|------|---------|
| `ld_valid, ld_sel, ld_addr, ld_data[8]` | write one word of Q, K or V (16-bit values) |
| `start, n_heads, cfg{seq_len, rho_b, tau_h}` | run a layer; cfg is latched at start |
| `busy, done, heads_pruned, blocks_kept` | status; totals are valid at `done` |
| `out_valid, out_ready, out_tile{head,row,dim,data[8]}` | result tile: rows row..row+1, dims dim..dim+3, `data[r*4+d]` |

Parameters and their defaults:

* `N_CORES` = 4
* `MAX_L` = 128
* `D_H` = 64
* `MAX_HEADS` = 12
* `SCALE_SHIFT` = 3
* `IMP_DEPTH` = 512
* `MEM_DEPTH` = MAX_HEADS·MAX_L·D_H/8

Sequence lengths up to `MAX_L` in steps of 8 run without rebuilding.

## What follows the method, and what is this design's own

These parts follow the method's description:

* four cores of eight PEs each, and six component memories;
* the PE with four accumulators and an absolute-sum importance;
* the 4×8 output tile, and output-stationary accumulation;
* the sparsity engine's min, max, sum, mean and threshold equation, with the
  END_R / END_H protocol, its 2 KB importance memory and its head comparator;
* the phase order of a head;
* Fetch Upon Mask;
* the split of the PV product over the eight PEs;
* a polynomial exponent and a linear reciprocal in the softmax.

These are this design's own choices:

* the Q8.8 split and truncation toward zero;
* all widths, memory sizes, address maps and handshakes;
* how heads are shared among cores, and the output arbiter;
* the softmax coefficients and clamp;
* shifting by 3 for 1/√d_h;
* the sequential divider for the mean.

Where the description contradicts itself, this design chose as follows:

* **Equality cases.** A block with θ = Θ is *kept*, as the algorithm's
  `(θ < Θ) ? 0 : 1` says. A head with θ_Head = τ_H is also *kept*, as the
  engine's `<` comparator says, although the algorithm's `θ_Head > τ_H` would
  prune it.
* **Pruned scores.** The algorithm multiplies pruned scores by the mask,
  which makes them 0 before the softmax. The hardware description instead
  skips their computation entirely. This design gives pruned entries
  probability 0, so they are skipped in PV as well.

Known departures and gaps:

* **Row-pair order.** Softmax and PV run per pair of rows, right after that
  pair's fraction pass, not after the whole Q·Kᵀ. Results are identical, and
  the buffers shrink from L rows to two.
* **Fetch granularity.** Fetch Upon Mask works on groups of four blocks,
  because that is one K word. A pruned block that shares a group with a kept
  one has its K fetched and its fractions computed, but they are not used.
  Only groups whose four blocks are all pruned save their reads.
* **Load path.** Fetch Upon Mask applies to on-chip reads. Moving Q, K and V
  from DRAM into the on-chip memories is the load port's job, and this
  design does not skip DRAM reads of pruned K blocks.
* **Register files.** The architecture figure shows four register files
  (two 64 × 64-bit, two 32 × 64-bit) with no stated use. They are not built.
* **Configurations.** Two configurations, an edge and a server version, are
  named for the method but never described. Only the four-core architecture
  is built.
* **Sequence length.** MAX_L = 128 covers GLUE-style sentence tasks.
  Sequences of 512 or 768 tokens, the lengths the motivation for this
  accelerator cites, need `MAX_L` raised. The core's integer buffer then
  grows with L².

## Testbenches and how far to trust the RTL

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The reference arithmetic is in
`tb/hdp_ref_pkg.sv`, written directly from the algorithm as plain 64-bit
integer loops. It covers the split, the exponent and reciprocal, and a full
pruned-and-approximated attention head. The core and top results are
compared with it bit for bit.

| testbench | covers |
|-----------|--------|
| `tb_pe`, `tb_pe_array` | MACs, importance, all three array modes |
| `tb_sparsity_engine` | thresholds for ρ of both signs, equal importances, a full 512-block row, head decisions at, above and below τ_H |
| `tb_score_adder`, `tb_softmax` | partial-product weights, saturation; exponent, reciprocal, masking, row latency |
| `tb_onchip_mem`, `tb_control_unit`, `tb_out_arbiter` | 4-port reads, dispatch rules, ordering, fairness and stall stability |
| `tb_hdp_core` | one core, 16 tokens × 8 dims, random heads incl. pruned ones, random output back-pressure |
| `tb_hdp_top` | whole chip at 16 tokens × 8 dims × 8 heads |
| `tb_hdp_top_full` | whole chip at its defaults: one BERT-Base layer, 12 heads × 128 tokens × 64 dims, ρ_B = 0.25, τ_H = 1 (about 1 M cycles, tens of seconds) |
| `tb_workload_bert_tiny` | whole chip at its defaults: three BERT-Tiny layers (2 heads × 64 dims) of 128, 64 and 40 tokens with ρ_B = 0.25, 0.70 and −0.25, one head pruned |

The top-level tests count each mechanism and fail if one never happens:

* pruned and kept blocks;
* pruned and kept heads;
* output stalls;
* cores working in parallel;
* two cores offering tiles at once.

What the tests do not establish:

* **Accuracy.** The approximations (softmax polynomial, reciprocal, 8-bit
  probability resolution) have not been evaluated for model accuracy. The
  tests only show that the hardware computes the arithmetic described above.
* **Timing.** Nothing has been synthesised for timing. The integer buffer
  `int_buf` is written as a flip-flop array with eight writes per cycle. A
  real implementation would map it onto SRAM banks.

To simulate, for example, the whole chip at full size:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/hdp_pkg.sv tb/hdp_ref_pkg.sv \
    rtl/*.sv tb/tb_hdp_top_full.sv --top-module tb_hdp_top_full -o sim
./obj_dir/sim
```

For the other testbenches, swap in their file and top module.
