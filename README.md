# LeOPArd attention tile: bit-serial pruning of attention scores

In self-attention, each query row is compared with every key. After softmax, most of those
scores end up with a weight close to zero. This design prunes those scores at run time. Each
layer has a threshold `Th`, learned during fine-tuning. A score `q·k` that falls below `Th` is
dropped before softmax, and its value row is never read.

Most of the saving comes from deciding early. The key is read two bits at a time, most
significant bits first. After each 2-bit step the hardware knows two things:

- the partial sum `P` so far;
- a safe upper bound `M` (the *margin*) on how much the remaining low bits could still add.

When `P + M < Th`, the score can no longer reach the threshold, so the dot product stops
there. Most pruned keys finish after one or two of their six steps.

The RTL here is a complete, synthesizable tile:

- the front end, which computes the scores;
- the FIFO pair between the two stages;
- the back end, which does softmax and the weighted sum of V;
- a two-tile top level.

Threshold learning happens during training and is not hardware, so it is not part of this
design.

## Number formats

| quantity | format |
|---|---|
| Q element | 12-bit two's complement |
| K element | 12-bit sign-magnitude: sign + 11-bit magnitude |
| score, threshold | 24-bit signed, saturated |
| V element, softmax output | 16-bit signed |
| head dimension | d = 64 (smaller heads are zero-padded) |

K is stored in sign-magnitude because the margin needs the sign of each product before any
magnitude bit is known.

## The bit-serial score and its margin (`bs_dpe`, `margin_calc`)

A key is split into six 2-bit digits, processed in this order:

| step s | digit bits | weight of a 1 in the low bit |
|---|---|---|
| 0 | {sign, mag[10]} | 2^10 |
| 1 | mag[9:8] | 2^8 |
| 2 | mag[7:6] | 2^6 |
| 3 | mag[5:4] | 2^4 |
| 4 | mag[3:2] | 2^2 |
| 5 | mag[1:0] | 2^0 |

**Partial sum.** On each step, `bs_dpe` forms the 64 products `±q_i × digit_i`. The sign is
`k_sign_i`, latched at step 0. It adds the products in one adder tree and shifts the total
left by the step's weight `2·(5−s)`. The result goes into a 30-bit accumulator. The paper
mentions "about 20 bits" for the accumulator. This design uses 30, which keeps the full
64-term sum exact, and saturates to 24 bits only when the score is written out.

**Margin.** The bound starts from `Sum = Σ |q_i|`, taken only over the lanes where
`sign(q_i) XOR sign(k_i) = 0`. Only those lanes can still push the score up. This sum is
formed at step 0, when the key signs are first seen. It is kept in an 18-bit register.

- Before any magnitude bit below mag[10] is known, each of those lanes can add at most
  `2^10 − 1` more. So the margin after step 0 is `M_0 = Sum × (2^10 − 1)`, computed as
  `(Sum << 10) − Sum`.
- Each later step fixes two more bits. It removes the largest amount those two bits could have
  added: `M_s = M_{s−1} − Sum × 3 × 2^(10−2s)`. This is two shifts and a subtraction.
- After the last digit, `M_5 = 0`.

Lanes with opposite signs can only lower the score, so they add nothing to the bound. For
that reason, stopping is never wrong: a key that is stopped early can never have ended at or
above `Th`.

**Worked check.** The testbench `tb_margin_calc` rebuilds a small example by hand: two
concordant lanes with |q| = 9 and 5, so Sum = 14. It checks the margin after every step, and
then checks 1,400 random vectors against a reference bound.

## QK-DPU timing (`qk_dpu`)

One DPU owns one Key Buffer and processes one key at a time. It reads one 128-bit word per
cycle.

| cycle | activity |
|---|---|
| c | read word `key*6 + s` from the Key Buffer |
| c+1 | `bs_dpe` and `margin_calc` form `P_s` and `M_s` combinationally; compare `P_s + M_s < Th` |

Two counters drive the DPU:

- a digit counter (Bit-serial Cntr), from 0 to 5;
- a key counter (IDX Cntr).

A key finishes when it is pruned early, or when its sixth digit is done. In the same cycle
the read address jumps to the next key's digit 0. Keys therefore follow one another with no
idle cycle. A key that is kept costs 6 cycles; a key stopped after step s costs s + 1 cycles.

A key that completes all six digits but still scores below `Th` is also dropped. The
statistics call this a *last-digit prune*.

A kept key produces the following outputs:

- `out_score`: the score, saturated to 24 bits;
- `out_idx`: the key's global index, `idx × N_QK + DPU_ID`.

If the arbiter does not take the result that cycle, the DPU holds it and stalls.

The per-layer threshold is loaded once into the DPU's threshold register.

## Key and value layouts (`key_buffer`, `value_buffer`)

**Key Buffer.** There is one Key Buffer per DPU: 512 words × 128 bits, which is 8 KB. Keys
are spread over the DPUs in round-robin order:

- global key `j` lives in DPU `j mod N_QK`, as local key `j / N_QK`;
- local key `l` occupies words `6l … 6l+5`, one word per digit;
- in the word for digit s, bits `[2i+1:2i]` hold element i's digit s.

Because each key takes six words, a 512-word bank holds 85 keys. With the default `N_QK = 6`,
the tile therefore holds at most **510 keys**. With `N_QK = 8` it holds 512 keys (64 per bank).

**Value Buffer.** The Value Buffer has 8 banks × 512 words × 128 bits, which is 64 KB in
total. V row `r` is stored at address `r` in every bank. Bank `b` holds elements `8b … 8b+7`.
A single read of all banks returns the full 64-element row in one cycle.

## Front end (`qk_pu`)

Queries arrive through a 4-deep Q-FIFO and are broadcast to all `N_QK` DPUs.

**Starting a row.** Each DPU is told how many keys it holds: `ceil((seq_len − d) / N_QK)`,
where d is its DPU number. All DPUs start together.

**Collecting results.** A fixed-priority arbiter, in which the lowest DPU number wins, passes
at most one kept score per cycle into the Score/IDX FIFO pair. After every DPU has finished,
the front end writes one end-of-row marker into the FIFO pair.

**Stalling between rows.** The front end may start a new row only while fewer than two
finished rows are still waiting for the back end. This allows one row of overlap between the
two stages. Beyond that, the front end stalls until the back end completes a row.

**Statistics.** The front end counts the following events, which the testbenches use to prove
that each mechanism actually ran:

- rows;
- kept scores;
- early stops;
- last-digit prunes;
- digit steps;
- back-end stall cycles;
- DPU stall cycles.

## Score / IDX FIFOs (`sync_fifo`)

The two FIFOs are written and read together, and each is 512 entries deep:

- the Score FIFO is 24 bits wide;
- the IDX FIFO is 10 bits wide: a 9-bit key index plus an end-of-row bit.

The paper gives the IDX FIFO as 8 bits wide. Eight bits cannot address 512 keys, and the
back end also needs to know where each row ends, hence the 10-bit width here.

The FIFO presents its head entry on the output before a read (show-ahead, also called
first-word fall-through). Assertions flag any push into a full FIFO or pop from an empty one.

## Back end: softmax and weighted sum (`softmax_exp`, `v_pu`, `softmax_norm`)

**Exponential.** Every score that survives pruning is at least `Th`, so `Th` serves as the
softmax reference point. `softmax_exp` computes:

```
x          = (score − Th) >> shift        (x ≥ 0, 9 fractional bits)
2^x        = LUT[x mod 512] × 2^(x / 512)
LUT[f]     = round(2^(f/512) × 32768)     (512 × 16 bit = 1 KB, rtl/exp2_lut.hex)
```

The integer exponent saturates at 15.

The `shift` input is programmed. It absorbs the constant `log2(e)/sqrt(d)` together with the
fixed-point scale of the scores. Softmax gives the same result for any choice of reference
point, so using `Th` instead of the row maximum changes nothing. It also removes the need for
a separate pass to find the maximum.

**Weighted sum.** `v_pu` pops one entry per cycle. For each entry:

1. It reads the V row named by the entry's index.
2. Its 64 multiply-accumulate lanes (MACs) add `(mant × v_j) << ex` to 58-bit accumulators.
3. It adds `mant << ex` to a 40-bit sum of exponentials, `esum`.

The probability is broadcast to all 64 lanes in the same cycle. The paper describes a 1-D
systolic chain instead. That chain would only add latency, not change the result.

**Normalisation.** Normalisation is deferred until the end of the row. When the end-of-row
marker arrives, `softmax_norm` does the following:

1. It computes `recip = floor(2^64 / esum)` by restoring division, one bit per cycle, which
   takes 65 cycles.
2. It emits `out_j = (acc_j × recip) >>> 64` for one element per cycle, saturated to 16 bits.

A row therefore costs about 130 cycles for normalisation, plus one cycle per kept score. The
finished row goes into a 2-deep Output-FIFO.

If every score in a row is pruned, the output is a row of zeros.

## Tile and top (`leopard_tile`, `leopard_top`)

`leopard_tile` connects the front end, the FIFO pair and the back end. It shares one threshold
register between the front end, which uses it for pruning, and the back end, which uses it as
the exponent reference. It also counts the cycles in which the FIFO is full.

`leopard_top` instantiates `N_TILES = 2` independent tiles. Each tile has its own ports for
loading K and V, for Q input and for output, so one attention head can run on each tile.

K and V are loaded through these write ports. The off-chip memory interface, DMA and host
control are not part of this design.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N_TILES` | 2 | tiles in the top |
| `N_QK` | 6 | DPUs per tile (6 is the area-efficient point; 8 is the high-utilisation point) |
| `KB_DEPTH` | 512 | words per Key Buffer |
| `VB_DEPTH` | 512 | rows in the Value Buffer |
| `SF_DEPTH` | 512 | Score/IDX FIFO depth |
| `Q_DEPTH` | 4 | Q-FIFO depth |
| `OUT_DEPTH` | 2 | Output-FIFO depth |

The data widths are set in `leopard_pkg.sv`.

## Workloads at the default size

| workload | sequence | fits? |
|---|---|---|
| MemN2N / bAbI | 50, d = 20 (padded to 64) | yes |
| BERT and ALBERT on SQuAD | 384 | yes |
| ViT-B/16 | 197 | yes |
| BERT on GLUE | 512 | no: 510 is the maximum with `N_QK = 6`; it fits with `N_QK = 8` |
| GPT-2-Large | 1280 | no: needs off-chip tiling, which is not built |

## Where this design departs from the paper

- The accumulator is 30 bits instead of about 20, so scores are exact before saturation.
- The IDX FIFO is 10 bits instead of 8 (see above).
- With `N_QK = 6`, the tile holds 510 keys instead of 512.
- The V-PU broadcasts the probability to all lanes instead of passing it along a systolic
  chain.
- Softmax uses `Th` as its reference point, and normalises once per row with a reciprocal.
- The arbiter order, the end-of-row marker, the FIFO depths not given in the paper (Q-FIFO 4,
  Output-FIFO 2) and the Key Buffer interleave are choices made in this design.
- With 512-deep FIFOs, a DPU stall needs more than 512 kept scores waiting at once. In the
  full-size test, the back end drains the FIFO faster than that, so DPU stalls are exercised
  only in the tile test, which uses a 16-deep FIFO.

## Testbenches and simulation

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one compares the block
against a reference model written in the testbench and shares helpers in `tb/tb_util_pkg.sv`.
Each ends with the line `TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it covers |
|---|---|
| `tb_leopard_tile` | 96 keys, 10 rows with a 16-deep FIFO; forces front-end stalls, DPU stalls and a full FIFO |
| `tb_leopard_top` | both tiles at default parameters, 510 keys, 6 rows per tile, outputs checked element by element; about one minute |

In both testbenches, a mechanism that never happened counts as a failure.

To run a testbench with plain Verilator (the package files are named first; the rest are found
through the library paths):

```
verilator --binary --timing --assert -Wno-fatal -Wno-lint -Wno-style \
    rtl/leopard_pkg.sv tb/tb_util_pkg.sv -y rtl -y tb \
    tb/tb_leopard_top.sv --top-module tb_leopard_top -o sim
./obj_dir/sim
```

Replace `tb_leopard_top` with any other testbench name.

Run it from the directory that holds `rtl/`, because `softmax_exp` reads `rtl/exp2_lut.hex`
through a relative path.
