# ESACT in SystemVerilog: local-similarity sparse attention front end

A transformer layer spends most of its work on three things: multiplying every
token by the Q, K and V weight matrices, the attention products, and the
feed-forward network. ESACT ("An End-to-End Sparse Accelerator for
Compute-Intensive Transformers via Local Similarity") cuts all three with
one cheap observation. Before anything is computed for real, it predicts the
attention matrix at very low cost, keeps only the top k entries of each row,
and compares rows with each other inside small fixed windows of neighbouring
tokens. If two rows of a window keep nearly the same keys with nearly the same
weights, then the later token needs no Q vector of its own; it borrows the
earlier token's. If no row of the window keeps a key position, that key's K
and V rows are not needed yet. Across heads, a token that borrows from the same
neighbour in most heads can also skip the FFN.

This repository gives synthesizable RTL for that mechanism: the addition-only
predictor, top-k, the window similarity unit, the sparse Q/K/V generation on a
16 x 64 PE array overlapped with prediction, the most-frequent-index (MFI)
decision for the FFN, the dynamic allocation of uneven work to PE lines and the
recovery of the skipped rows' partial sums. Each block has a self-checking
testbench, and one test runs the whole top at its full size.

This is an independent implementation made from the published description. Where
the paper gives a structure, the RTL follows it. Where it only names a function
(top-k, the allocation policy, the crossbars), the RTL uses the simplest circuit
that performs that function. Each file's opening comment says which parts are
which.

## 1. HLog: multiplying without multipliers

The predictor quantizes every 8-bit operand to a *hybrid logarithmic* (HLog)
level. The magnitude levels are 1, 2, 3, 4, 6, 8, 12, 16, 24, 32, 48, 64, 96
and 128, that is 2^e or 2^e + 2^(e-1). A value exactly half-way between two
levels goes to the higher one. The code has five bits:

| bit 4 | bits 3..1 | bit 0 |
|-------|-----------|-------|
| sign  | exponent e | form: 0 = 2^e, 1 = 2^e + 2^(e-1) |

The paper's worked example gives 42 -> `01011` (2^5 + 2^4 = 48) and
-18 -> `11000` (-16). This RTL reproduces both by quantizing a negative value
through its one's complement (~x) and keeping the sign. Zero maps to +1 and -1
maps to -1, so every code is non-zero. `shift_detector` does this with a
leading-one search and three XOR/OR terms. The gate names follow the paper's
circuit figure; the wiring is this design's own and was chosen to reproduce the
printed values.

The product of two HLog codes is at most two powers of two, so a multiplier
becomes one exponent adder (`sja_cell`). With a and b the two exponents:

| forms | product |
|-------|---------|
| both two-term | 2^(a+b+1) + 2^(a+b-2) |
| one two-term | 2^(a+b) + 2^(a+b-1) |
| both one-term | 2^(a+b) |

The product is packed into nine bits: {sign, e1, e2}, with e2 = 4'hF when there
is no second term. The first and third rows are exact. The second is exact:
(2^a)(2^b + 2^(b-1)) = 2^(a+b) + 2^(a+b-1). The first:
(2^a + 2^(a-1))(2^b + 2^(b-1)) = 2.25 * 2^(a+b) = 2^(a+b+1) + 2^(a+b-2).

A dot product of such products is a sum of signed powers of two.
`hlog_converter` counts, for each exponent and each sign, how many terms
arrived. At the end it forms sum(count << e) for the positive and the negative
counters and subtracts the two. The result is the exact integer sum of the HLog
products.

## 2. The bit-level prediction unit

`bit_level_pred_unit` is an 8 x 128 outer-product array. Each cycle, 8 row
operands (tokens, or rows of predicted Q) and 128 column operands (weight
columns, or predicted keys) are quantized. Every cell (r, c) receives the
product of row r and column c and counts it in its own converter. After N
cycles, cell (r, c) holds the HLog dot product of length N. An arithmetic right
shift and saturation then give an int8 view (`q8`), which feeds the next
prediction step or top-k. The shift is a run-time input.

The same array is used three times per head:

* **Kp**: predicted K = HLog(X) x HLog(W_K) for every 8-token window. The
  columns are the 64 head dimensions; the reduction runs over D = 768.
* **Qpw**: predicted Q of the window's 8 tokens, computed the same way.
* **Apw**: predicted attention. The rows are the 8 predicted Q rows and the
  columns are the L = 128 predicted keys; the reduction runs over Dh = 64.

This design quantizes rows and columns at the same time, so it has 136 shift
detectors rather than the paper's 128. It also gives every cell its own
converter. The paper does not say how the converter is shared.

## 3. Top-k and the similarity window

`topk_unit` takes one 128-entry row of predicted attention and selects its k
largest entries, one per cycle, with the lowest index winning a tie. It returns
a mask, the list of selected indices, and the row with every unselected entry
set to zero. This last output is the *sparsified predicted attention* (SPA).
k is set at run time, up to K_MAX = 26 = 0.2 x 128, which is the top-k ratio
bound the paper uses for synthesis.

`local_sim_unit` receives the SPA of one window (8 rows, or fewer for the last
window when L is not a multiple of 8). It splits the rows into critical and
similar rows greedily, in row order:

1. The first unclaimed row becomes critical.
2. Every later unclaimed row whose L1 distance to that critical row is at most
   the threshold becomes *similar to* it and is claimed.
3. Repeat until no row is left.

The distance uses only the union of the two rows' top-k positions, because every
other position is zero in both rows. Each critical row takes two cycles:

* Phase 0 sums |a - b| over the candidate row's k positions.
* Phase 1 adds |c| over the critical row's positions that the candidate does not
  share.

Each phase uses K_MAX subtractors per row, which matches the paper's "8 x 26
subtractors". The threshold is an integer on the int8 SPA scale. The paper
quotes it as a fraction between 0.1 and 1.0 but does not give the scaling.

The unit also outputs:

* `crit`: the critical rows. Only these need a Q vector.
* `sim_to`: the row that each row copies.
* `kv_new`: the key positions kept by at least one row of the window that no
  earlier window of this head has already requested. Only these K and V rows
  are generated now.

## 4. Progressive generation in the top

`esact_top` runs one head at a time. Prediction and generation are two state
machines that pass work through a one-entry mailbox:

```
prediction:  Kp(all windows) | Qp0 Ap0 topk0 sim0 | Qp1 Ap1 topk1 sim1 | ...
generation:                                       | Q,K,V of window 0  | window 1 ...
```

When window w's similarity result is ready, it is posted to the mailbox, and the
prediction of window w+1 starts at once. Meanwhile the PE array generates the
window's critical Q rows and its new K and V rows. This overlap is the paper's
*progressive generation scheme*. The top counts the overlapped cycles in
`stat_overlap`. It also counts the cycles, the generated Q rows and the
generated K/V rows.

Generation is weight-stationary. For each matrix (Q, K, V), each group of 16
output columns and each 64-wide block of the embedding:

1. Each of the 16 PE lines loads one 64-element weight column block.
2. The selected tokens stream through, one per cycle.
3. Each line's adder tree gives one partial sum per cycle, which is added into
   the temp buffer by read-modify-write.

The generated Q, K and V rows are exact int8 x int8 products with 32-bit sums.

Buffer layouts, in 64-byte words:

* token buffer: address `t*KB + kb`; byte i holds `X[t][64*kb + i]`
* weight buffer: address `(m*Dh + n)*KB + kb`; byte i holds
  `W_m[64*kb + i][n]`, where m = 0 is Q, 1 is K and 2 is V. It holds one head's
  slices.
* temp buffer: address `(m*L + t)*CT + ct`; 32-bit lane j holds
  `out_m[t][16*ct + j]`

Here KB = D/64 and CT = Dh/16. The host writes the token and weight buffers
through ports that stand in for the external memory, and reads the temp buffer.

## 5. After the heads: MFI, dynamic allocation, recovery

The top keeps each head's similar-to map and its critical-row map. Three further
operations use them.

**MFI** (`mfi_start`). For each token, `mfi_unit` counts how many heads map the
token to each row of its window. The most frequent row wins; on a tie the token's
own index wins. The token skips the FFN (`ffn_skip`, `ffn_src`) when that row is
not its own and the count exceeds the FFN threshold.

**Dynamic allocation** (`da_start`, one group of 16 tokens). After the heads are
concatenated, token t has one block of work per head in which it is critical.
The blocks are uneven: a token that is similar in many heads has few. Keeping
each token on its own PE line (`da_naive_makespan`) leaves some lines idle.
`dyn_alloc` sets a budget of ceil(total / 16) blocks per line. It walks the
blocks token by token. A block stays on its own line while that line is under
budget; otherwise it goes to the lowest-numbered line still under budget. The
outputs are the per-line load, the makespan and the slot schedule
(`da_sched_tok`, `da_sched_head`). The paper does not give the matching policy;
this is the simplest policy that reaches the balanced bound.

**Recovery** (`rc_*`). The host writes the Psums of the critical blocks. For
each head in turn (one cycle per head), `psum_recover` pushes into each token's
FIFO either the token's own Psum or, if the token was similar in that head, the
Psum of the row it copies. An adder tree then sums the 12 FIFO entries. `rc_done`
comes H + 1 cycles after `rc_start`.

## 6. What the RTL does not contain

* The attention arithmetic itself (QK^T, softmax, attention x V), the output
  projection, LayerNorm and the FFN. The paper names a softmax and a LayerNorm
  unit but does not describe them, nor how the PE array schedules these steps.
  The top therefore ends at the generated Q/K/V and brings the MFI, allocation
  and recovery steps out as ports.
* External DRAM. Its role is taken by the buffer write ports.
* Causal masking for decoder models.
* Sequences longer than 128 tokens and models wider than D = 768: these need
  other parameter values and, for D > 768, a weight buffer layout that holds less
  than one head.

## 7. Parameters

Defaults are the paper's configuration (BERT-Base, L = 128):

| module | parameter | default | meaning |
|--------|-----------|---------|---------|
| esact_top | L, D, DH, H | 128, 768, 64, 12 | tokens, embedding, head dim, heads |
| esact_top | W | 8 | similarity window |
| esact_top | K_MAX | 26 | largest k (0.2 L) |
| esact_top | NL | 16 | PE lines of 64 PEs |
| esact_top | BC | 128 | prediction array columns |
| esact_top | TOK/WGT/TMP_DEPTH | 3072, 3072, 2048 | 192, 192, 128 KB of 64-byte words |
| bit_level_pred_unit | R x C | 8 x 128 | array size |
| local_sim_unit | DW | 16 | distance width |

The run-time configuration inputs of the top are:

* `cfg_head`: the head to run
* `cfg_ntok`: the number of valid tokens
* `cfg_k`: k
* `cfg_sim_thr`: the similarity threshold
* `cfg_qk_shift`, `cfg_att_shift`: the requantization shifts of the predicted Q/K
  and of the predicted attention
* `cfg_ffn_thr`: the MFI threshold f

## 8. Verification

Every block in `rtl/` has a testbench `tb/tb_<module>.sv`. Each testbench
compares the block against a model written separately in the testbench. Where
the paper gives a latency, the testbench also checks the cycle count. The
shift detector and the judgment cell are tested exhaustively over all inputs.
Every testbench ends by printing `TB_RESULT checks=N failures=M`.

* `tb_esact_top` runs the top at a reduced size: L = 32, D = 128, 2 heads, 30
  tokens. The reference model covers:
  * the HLog predictions of K, Q and attention
  * top-k and the similarity partition
  * the active and new K/V columns of each window
  * the exact generated Q/K/V rows
  * the MFI mask, the allocation schedule and the recovered sums

  It also counts nine mechanisms and fails if any of them never occurs:
  * top-k pruning
  * skipped similar Q rows
  * empty K/V columns
  * K/V rows generated progressively in a later window
  * overlap of prediction and generation
  * a short last window
  * MFI FFN skips
  * allocation that beats the naive makespan
  * recovered Psums
* `tb_esact_full` runs the same test on the top with all parameters at their
  defaults, for one head of 125 tokens: 26,137 checks and about 6 minutes,
  most of it compilation. With only one of the twelve heads run, no token has
  more than one block of work. MFI skips and an allocation gain therefore cannot
  happen, so this test reports those two counts but does not require them.

To simulate with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/esact_pkg.sv \
    $(ls rtl/*.sv | grep -v esact_pkg) tb/tb_esact_top.sv --top-module tb_esact_top
./obj_dir/Vtb_esact_top
```

Use another testbench name to run a different test. The end-to-end tests take a
few minutes each, most of it C++ compilation.
