# HADES verification unit: speculative-decoding verification in hardware

Speculative decoding speeds up a large language model (the *target* model) by
letting a small *draft* model guess several tokens ahead. The draft model runs
gamma times and proposes tokens x_0 .. x_{gamma-1}. The target model then
scores all gamma+1 positions in one pass. A *verification* step then decides
how many of the guesses to keep. That step reads only tokens and per-position
output distributions, never model weights. A few hundred kilobytes of data
therefore decide it, and a small dedicated unit placed next to any existing
LLM accelerator can run it.

This repository is the RTL of such a unit. The LLM accelerator writes the
target distributions q_0..q_gamma, the draft distributions p_0..p_{gamma-1}
and the draft tokens into a 480 KB on-chip buffer. The unit then runs the
standard speculative-sampling rule (Chen et al.):

```
for k = 0 .. gamma-1:
    r ~ U[0,1)
    if r < min(1, q_k[x_k] / p_k[x_k]):  accept x_k
    else: next token ~ normalise(max(0, q_k - p_k)); stop
if all gamma accepted: bonus token ~ q_gamma
```

It returns the number of accepted tokens and the next token. A greedy mode is
also provided. In greedy mode a draft token is accepted exactly when it is the
argmax of q_k, and the next token is that argmax.

## Architecture

```
            host / LLM accelerator write port
                         |
   +---------------------v----------------------+      +-----------+
   | local buffer, 480 KB                       |      | RNG queue |
   |  target_logits  240 x 1 KB lines ----------+--+   | xorshift32|
   |  draft_logits   240 x 1 KB lines ----------+--+-+ | + 8-entry |
   |  draft_tokens   16 x 16 bit  --------------+-+| | |   FIFO    |
   +--------------------------------------------+ || | +-----+-----+
                                                  || |       |
        +-----------------------------------------+v-v----+  |
        | FPU array: 8 rows x 64 FP ALUs = 512 lanes      |  |
        | lane i gets q[i], p[i] of one line + scalar r    |  |
        | stage 1: lane values / accept flags              |  |
        | stage 2: 8 row sums, line sum, line max+argmax   |  |
        +------------------------+-------------------------+  |
                                 |                            |
        +------------------------v----------------------------v--+
        | verification controller (Algorithm sequencer)          |
        | token reads, accept tests, SUM/SEARCH/ARGMAX passes,   |
        | row/lane scan, result registers                        |
        +--------------------------------------------------------+
```

The 480 KB buffer, the names of its three outputs, the 8 x 64 array of FP ALUs
and the RNG queue come from the source architecture's block diagram. The
diagram shows no controller, and it does not say how the RNG queue connects.
The controller, the reduction trees, the data formats and all the timing are
this design's own.

### Buffer layout

A buffer line holds 512 fp16 entries (1 KB). One line feeds all 512 lanes in a
cycle. A distribution over a vocabulary of V entries takes L = ceil(V/512)
lines. Distribution k starts at line k*L of its bank. Entries of the last line
beyond V are masked off inside the array, so whatever sits there carries no
weight. The target bank holds q_0..q_gamma, the draft bank holds
p_0..p_{gamma-1}, and the token bank holds x_0..x_{gamma-1}.

fp16 is used because ~50k vocabulary entries at 2 bytes give ~100 KB per
distribution. The source sizes the buffer from that figure.

## How the controller verifies a window

**Accept test (one token, 4 cycles).** The controller pops r from the RNG
queue and reads token x_k. It then reads the line that holds entry x_k of q_k
and p_k. Every lane evaluates `r*p < q or p == 0`, and the controller keeps the
flag of lane x_k mod 512. The test `r*p < q` equals `r < min(1, q/p)` for
r in [0,1), so no divider is needed.

**Sampling a token (inverse CDF).** This is the hardest part of the design.
Sampling has to turn one random number into one of ~50k indices. The array
does the wide work, and the controller walks the result from coarse to fine:

1. *SUM pass.* All L lines go through the array back to back, one per cycle,
   with the lanes computing max(0, q-p) (correction token) or q (bonus
   token). The line sums are accumulated into `total`. Because `total` is
   computed rather than assumed to be 1, unnormalised weights also work.
2. *Draw.* The controller pops u and sets `thr = u * total`.
3. *SEARCH pass.* The lines are streamed again, and their sums are accumulated
   in the same order as in the SUM pass. The first line whose running sum
   exceeds `thr` is selected. Issuing stops there, and the three lines already
   in flight are drained.
4. *Fetch and scan.* The selected line is read once more. Its 8 row sums are
   scanned (one per cycle), then the 64 lanes of the selected row. The result
   is the token `line*512 + row*64 + col`.

The tree sums of stage 2 and the sequential scan add in a different order.
Their results can therefore differ in the last bit, and the threshold could
fall "between" them. Each level then falls back to its last entry with
non-zero weight, so the unit always returns a token that has weight. If the
residual max(0, q-p) is zero everywhere, the unit samples from q_k instead.
That case cannot occur with normalised inputs; it can occur with rounding or
with unnormalised inputs.

**Greedy mode.** For each position an ARGMAX pass streams the L lines of q_k,
and stage 2 keeps the largest entry (lowest index on ties). Greedy mode
accepts signed logits, because it never sums them. The draft bank is not used.

## Latency

All counts run from the clock edge that samples `start` to the edge that raises
`done`. L = ceil(V/512).

| step | cycles |
|---|---|
| command check + result | 2 |
| accept test (sampling mode), per tested token | 4, + 1 per cycle the RNG queue is empty |
| sample of token t (line j, row r, column c) | (L+3) + 1 + (min(L-1, j+3) + 4) + 1 + 3 + (r+1) + (c+1) |
| extra SUM pass when the residual is empty | L+3 |
| greedy position (token read + ARGMAX pass) | L+5 |
| greedy bonus position | L+3 |

For GPT-2's vocabulary (L = 99), one verification with gamma = 1 in sampling
mode takes roughly 120 to 300 cycles, depending on where the sampled token lies; in greedy mode with the draft token accepted it takes 208 cycles. The testbenches check these formulas
exactly. The source gives no clock frequency and no cycle counts.

## Interface (`hades_top`)

| port | dir | meaning |
|---|---|---|
| `wr_en, wr_bank, wr_addr, wr_line[511:0][15:0], wr_tok` | in | write a line into the target/draft bank or a token into the token bank (ignored while busy) |
| `seed_load, seed[31:0]` | in | restart the random generator; a zero seed is replaced by a fixed constant |
| `start, mode, gamma[4:0], vocab_size[16:0]` | in | start a verification; `mode` 0 = sampling, 1 = greedy |
| `busy, done` | out | `done` pulses once when the results are valid |
| `n_accepted, next_token, all_accepted` | out | results, held until the next start |
| `cap_error` | out | window does not fit (see below); nothing was verified |
| `ev_accept, ev_reject, ev_bonus, ev_rng_stall, ev_resid_fallback` | out | one-cycle event pulses, for counters |

Reset `rst_n` is asynchronous and active low. The buffer memories are not
reset. The random queue refills one number per cycle. The controller takes at
most one number every four cycles, so it stalls only right after a seed load.

## Capacity

A window needs (gamma+1)*L target lines and, in sampling mode, gamma*L draft
lines. Each bank has 240 lines. With real vocabularies (GPT-2: 50257, OPT:
50272, so L = 99), sampling and greedy windows fit for gamma <= 1 only.
gamma = 2 already needs 297 target lines. The source's own estimate,
"(gamma+1) x 100 KB", counts only the target distributions. Even by that
count, the gamma = 4 and larger windows it evaluates do not fit in 480 KB.
With smaller vocabularies the full gamma range fits: gamma = 16 works for
V <= 7168. A window that does not fit raises `cap_error` with `done`.

## Number formats and accuracy

- Buffer entries are IEEE fp16. Subnormal fp16 values, which are common for
  probabilities near 1/50000, are widened to fp32 exactly.
- All lane arithmetic, the trees and the accumulators are fp32 with
  truncation (round toward zero). Subnormal results are flushed to zero.
  Infinities and NaNs are not handled, because the inputs are finite
  probabilities or logits.
- Random numbers are 24-bit fractions from xorshift32. The RNG queue converts
  them to fp32 exactly.

The sampled token therefore follows the intended distribution up to fp32
truncation in the cumulative sums. The testbenches accept a token when its
cumulative window contains `u*total` within 0.1 % of `total`.

## Departures from the source, and own choices

- The controller, the greedy mode, the inverse-CDF sampling scheme, the
  capacity check and the empty-residual fallback are all this design's own.
  The source describes only the algorithm and the block diagram.
- The source's experiments use greedy decoding, while its algorithm is the
  stochastic one. Both are built. Sampling is the default (`mode = 0`).
- The source calls the stored values "logits". Sampling mode needs
  non-negative weights (probabilities, normalised or not). Greedy mode works
  on raw logits.
- The split of 480 KB into 240 KB target + 240 KB draft, the 1 KB line and
  the 16-entry token store are choices of this design.
- The source compares against GPUs, a CPU and an HLS version. None of those
  are part of this design. The LLM accelerator that produces the
  distributions lies outside it as well: it connects through the buffer write
  port.

## Files

| file | content |
|---|---|
| `rtl/hades_pkg.sv` | sizes, types, fp16/fp32 conversion, fp32 add/mul/compare |
| `rtl/hades_fp_alu.sv` | one lane: pass q, residual max(0,q-p), accept test |
| `rtl/hades_fpu_array.sv` | 8 x 64 lanes, row/line sum trees, max/argmax tree, 2-stage pipeline |
| `rtl/hades_local_buffer.sv` | three-bank 480 KB buffer, one read port per bank |
| `rtl/hades_rng_queue.sv` | xorshift32 generator and FIFO |
| `rtl/hades_verify_ctrl.sv` | verification sequencer |
| `rtl/hades_top.sv` | top level |
| `tb/hades_tb_pkg.sv` | double-precision reference helpers, xorshift model |
| `tb/tb_hades_<module>.sv` | one self-checking testbench per module; `tb_hades_top` is the end-to-end test at full size |
| `tb/tb_hades_workloads.sv` | GPT-2 and OPT vocabularies: every gamma of the evaluation, verified where it fits and refused where it does not |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`. For example, the
end-to-end test at full size (a GPT-2-sized vocabulary, gamma from 0 to 16,
both modes, the capacity error and random windows):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/hades_pkg.sv tb/hades_tb_pkg.sv rtl/hades_fp_alu.sv rtl/hades_fpu_array.sv \
  rtl/hades_local_buffer.sv rtl/hades_rng_queue.sv rtl/hades_verify_ctrl.sv \
  rtl/hades_top.sv tb/tb_hades_top.sv --top-module tb_hades_top -j 8
./obj_dir/Vtb_hades_top
```

The build takes well under a minute, and the run takes under a second. The
other testbenches build the same way with their own module list. The
controller test (`tb_hades_verify_ctrl`) uses a 32-line buffer and drives the
random numbers itself, so that each accept/reject decision and each stall is
forced.

To change sizes, set `TGT_LINES`, `DRF_LINES` and `TOK_DEPTH` on
`hades_top`. The array geometry is fixed by `ROWS`/`COLS` in `hades_pkg`,
because the buffer line width follows it.
