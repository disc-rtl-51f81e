# DiSC core: sparse, token-reusing attention on a hash-balanced DPU array

Diffusion transformers run the same network for tens of denoising steps, and at high
resolution most of the work is self-attention, whose cost grows with the square of the token
count. This RTL implements one core of an accelerator that removes two kinds of redundant work:

* **Cached token reuse (CTR).** Between two denoising steps most latent patches barely move.
  The core compares `|z_t - z_{t-1}|` with a threshold, ORs the result over each patch, and gets
  one bit per token. Only tokens whose bit is 1 get a new query projection, a new attention row
  and a new output. The other tokens keep the output they had in the previous step. Keys and
  values are still projected for every token, because the surviving queries must see all keys.
* **Softmax thresholding with mask reuse (ST).** In a *dense* step the core computes the full
  attention row, normalises it, and marks every probability `P >= tau` in a sparsity mask.
  For the next few *sparse* steps (three by default) it reuses that mask:
  * `QK^T` becomes an SDDMM that computes only the masked scores;
  * `P·V` becomes an SpMM over the same non-zeros.

Sparse work on a wide array is only fast if every unit gets about the same share of
non-zeros. The core therefore does not give key `j` to DPU `j mod N`. It uses a
**multiplicative hash**:

    bank(j) = top log2(N) bits of ((j * 2053) mod 2^14)        N = 64

Key `j` is stored in, and processed by, DPU `bank(j)` and SIMD engine `bank(j)`. Nothing ever
has to be moved between banks, because the placement is decided when K and V are written.

## Organisation of one core

| unit | module | what it holds / does |
|---|---|---|
| DPU array | `dpu_array`, `dpu` | 64 DPUs, each with 64 multipliers, an adder tree, a bias/accumulator mux and an accumulator. Each DPU has its own WMEM bank and its own read address. |
| VPU | `vpu`, `simd_engine`, `reduction_bus` | 64 SIMD engines of 16 lanes each, one per bank, plus a pipelined sum/max tree across the engines. |
| token selector | `token_selector` | Compares latent differences with the threshold and ORs each patch into one token bit. |
| data aligner | `data_aligner`, `hash_unit` | Writes row `j` of K (or V) as one word into bank `bank(j)`, at the next free slot of that bank. |
| SDDMM issue | `sddmm_scheduler` | For one query row, each DPU walks its own mask word and issues one slot per cycle. |
| memories | `sram_bank` | IMEM (input rows), per-bank WMEM, OMEM, OPMEM and mask memory, and the index memory. |
| controller | `disc_top` | A command FSM that sequences everything above. |

Shared types live in `disc_pkg`:
* the fixed-point formats;
* the SIMD and reduction opcodes;
* the command struct `cmd_t`;
* a software copy of the hash.

## Data layout: what "hash-encoded" means here

This is the part that takes the most care to follow.

* **Slots.** Key `j` lives in bank `v = bank(j)` at *slot* `s` = the number of keys
  `j' < j` that hash to the same bank. The data aligner counts per bank as the rows stream
  past, so the slot is simply that count. With 14-bit indices and 64 banks, a bank has at most
  `SLOTS = 256` slots.
* **WMEM (K^T).** Bank `v` word `w_base + s` holds the whole K row of key `j`. Its width is the
  head dimension, up to 64 elements. For DPU `v` this word is column `j` of `K^T`. A dot product
  with a query therefore takes one cycle and needs no transposition at run time.
* **OPMEM (V).** Bank `v` word `v_base + s` holds V row `j`. SIMD engine `v` reads only its own
  bank.
* **Mask memory.** Bank `v` row `i` is a `SLOTS`-bit word. Bit `s` is set when key (v, s) is
  kept for query `i`. The mask is stored already hash-encoded, so a sparse step never decodes
  indices.
* **OMEM.** During attention, bank `v` receives the scores that DPU `v` produced. Each entry is
  `{slot, value}`, packed densely in issue order. Softmax and SpMM both work on these entries in
  place, so probabilities never leave the bank of their key.
* **Latents and index list.** Token `j`'s latents are in OPMEM bank `j mod 64`. Lanes 0–15 hold
  `z_{t-1}` and lanes 16–31 hold `z_t`. The index memory lists the numbers of the selected
  tokens in order.

## One attention row, step by step

For a selected query `i` (the index memory supplies `i` when `use_index` is set):

1. **Load.** The controller loads query row `i` from IMEM and reads mask row `i` from every
   bank.
2. **QK^T.**
   * The scheduler gives every DPU the set of slots to compute:
     * dense step: all of its stored slots;
     * sparse step: the set mask bits.
   * Each cycle every DPU with work left issues its lowest remaining slot. WMEM is read at that
     slot, and the score is written to the DPU's OMEM bank.
   * The row ends when the fullest bank is empty. The other DPUs sit idle for the difference;
     `ev_idle_slots` counts these idle DPU-cycles. The hash exists to keep that difference
     small.
3. **Row maximum.** Each SIMD engine scans its OMEM entries (MAX), and the reduction bus takes
   the maximum over the engines.
4. **Exponent and sum.** Each engine replaces its entries by `exp(s - max)` and sums them. The
   bus adds up the sums.
5. **Normalise and threshold.** Each engine divides by the row sum and writes `P` back. In a
   dense step it also sets mask bit `s` of its bank wherever `P >= tau`. This is where the ST
   mask is born.
6. **SpMM.**
   * For each group of 16 output columns, SIMD engine `v` multiply-accumulates `P(i, j) ·
     V(j, cols)` over its own entries. These FMAs read V from its own OPMEM bank.
   * The reduction bus then sums the 64 partial vectors: a row-wise product with two-stage
     accumulation.
   * The 16 results are written to IMEM row `out_base + i`.

Rows of pruned queries are never visited, so their old output rows stay as they were. That is
the CTR reuse.

## Commands

`cmd_valid`/`cmd_ready` accept one `cmd_t` when the core is idle. `done` pulses when the
command ends.

| `op` | effect |
|---|---|
| `CMD_TOKSEL` | For tokens `0..n_tok-1`: read both latents, take `|z_t - z_{t-1}|` on the VPU, threshold and OR on the token selector, append selected tokens to the index memory. `n_sel` gives the count. |
| `CMD_LINEAR` | For every token, or only selected tokens if `use_index`: `k_beats` beats of 64 inputs from IMEM times the weights in every WMEM bank, giving 64 outputs per token. `dst = DST_OMEM` keeps the row in OMEM row `out_base + j`. `DST_WMEM` / `DST_OPMEM` then run the data aligner, which places each row into its hash bank (K or V layout above). |
| `CMD_ATTN` | Runs the row procedure above for every selected query. It is dense or sparse according to `dense_step`. |
| `CMD_STEP` | Starts a new denoising step. The core is dense in one step out of `REUSE + 1`. |

The load/store port (`ext_*`) writes IMEM, WMEM or OPMEM rows and reads IMEM or OMEM rows. It
stands in for the path to the global scratchpad. The `ev_*` counters report:
* rows skipped by CTR;
* SDDMM issue cycles and outputs;
* idle DPU slots;
* dense and sparse rows;
* mask bits set.

## Number formats and arithmetic

All of this is the design's own choice; the accelerator it follows is specified against an
FP16 GPU.

* Activations, weights and scores are 16-bit Q8.8. Probabilities are Q1.15 in the same 16
  bits.
* DPUs accumulate exactly (46 bits) and truncate with saturation on write-back.
* `exp(x)` for `x <= 0`: the engine computes `x · log2(e)` with the constant 369/256, splits
  the result into an integer and a fraction, interpolates `2^f` linearly, and shifts.
  Normalisation is `(e << 15) / sum`, saturated to 32767.
* The testbenches model exactly this arithmetic in plain integer code, so every result is
  checked bit-exactly.

## Timing

| block | timing |
|---|---|
| DPU | one beat per cycle; result 1 cycle after the last beat |
| DPU array | result 2 cycles after the address, because the WMEM read adds a cycle |
| SIMD engine | 1 cycle |
| reduction bus | log2(64) = 6 cycles, fully pipelined |
| SDDMM issue time of a row | equal to the largest per-bank count of slots to compute (checked by the end-to-end test) |
| linear layer | one beat per cycle per token, plus a short drain |
| data aligner | a few cycles per row (index fetch, OMEM read, write) |

A row's phases run one after the other. They are not overlapped with each other or with the
next layer.

## Where this departs from the described accelerator

* **Aligner placement.** The original places K and V in hash order by having the controller
  emit projection rows in a pre-shuffled order, before a fixed transposing aligner. Here the
  rows are emitted in natural order and the aligner computes `bank(j)` and the slot itself. The
  resulting memory image is the same.
* **Head dimension.** Attention handles a head dimension of at most one 64-wide beat. The
  DiT-XL and PixArt-Σ heads are 72 wide, so those models would need a two-beat extension of the
  query/K words.
* **Missing operations.** The VPU implements the operations that CTR, softmax, ST and SpMM
  need: max, exp, normalise/threshold, FMA and absolute difference. It does not implement GELU
  or LayerNorm, so FFN blocks, normalisation, cross-attention with text keys and bias terms are
  outside this RTL.
* **Multi-core system.** Only one core is built. The 38-core system, the network-on-chip, the
  40 MB global scratchpad and HBM are not. The load/store port marks where they would connect.
* **Own choices where the description is silent.** The reuse count (3), all memory depths, the
  command set, and the choice of lowest slot first in the issue logic.

## Simulation

Every testbench is self-checking and ends with a `TB_RESULT checks=N failures=M` line. Example
with verilator:

    verilator --binary --timing --top-module tb_disc_top -y rtl -Irtl rtl/disc_pkg.sv tb/tb_disc_top.sv
    obj_dir/Vtb_disc_top

The block testbenches are `tb_hash_unit`, `tb_dpu`, `tb_dpu_array`, `tb_sram_bank`,
`tb_token_selector`, `tb_simd_engine`, `tb_reduction_bus`, `tb_vpu`, `tb_data_aligner` and
`tb_sddmm_scheduler`. They compare against models computed in the testbench, check
latencies, and have watchdogs.

**`tb_disc_top`** runs a small core: 8 banks of 8 lanes, 40 tokens and 2-beat projections.
The sequence is:
1. CTR selection;
2. K and V projection with hash re-mapping;
3. a CTR-gated projection;
4. one dense step, three sparse steps and one more dense step.

It checks every output row bit-exactly and checks that cached rows stay untouched. It checks
that each row's SDDMM time equals its largest bank count. It also counts each mechanism and
fails if one never happened: kept and pruned tokens, skipped rows, re-mapping, dense and sparse
rows, mask bits, idle slots from imbalance, and mode switches.

**`tb_disc_top_full`** runs the same flow on the core at its default size with no parameter
override. It uses 96 tokens and about 43,000 checks, and takes under a minute to build and run.
