# SOFA: a sparse-attention accelerator in SystemVerilog

## The design idea

Attention compares every query with every key, yet after the softmax only a
few keys matter for each query. This design finds those keys cheaply and then
does the exact work only for them:

1. **Cheap prediction (DLZS).** A multiplication x*y is replaced by a shift of
   x by the position of the leading one of y. Weights are stored as 4-bit
   leading-zero codes, queries get 5-bit codes on the fly. A 128x32 array of
   shifters predicts K-hat = X*W_k and then the score matrix A-hat = Q*K-hat^T.
   Zero operands are detected once and the PEs they feed stay idle.
2. **Top-k selection (SADS).** Every query row is sorted in chunks of 12
   scores plus the 4 best kept from the previous chunk, by a pruned bitonic
   16-to-4 sorter. Scores lower than both (max - radius) and the current
   4th-best are clipped before they enter the sorter.
3. **Scheduling (RASS).** The selected keys of all queries form a mask. Keys
   that serve disjoint query groups are issued together, largest group first,
   so that a key's K and V are generated once and every query that needs it
   sees it in one phase.
4. **Exact K/V and attention (KV PE array + SU-FA).** Only the selected keys
   go through the exact X*W_k and X*W_v. Each query line runs an on-line
   softmax over key pairs: two dot products, a max update or a max check,
   exp, rescale of the running sum and of the output vector, and finally one
   division per output element.

## Files

| file | block |
|------|-------|
| rtl/sofa_pkg.sv | shared types: log-domain codes, candidate record, control words |
| rtl/lzc8.sv, rtl/config_lze.sv | leading-zero encoder, 8-bit or 16-bit mode |
| rtl/zero_eliminator.sv | marks zero operands so the PEs skip them |
| rtl/dlzs_pe.sv, rtl/dlzs_array.sv, rtl/dlzs_unit.sv | DLZS shift array with row/column schedulers |
| rtl/sort16to4.sv, rtl/sads_line.sv, rtl/sads_unit.sv | SADS sorters with clipping |
| rtl/rass_scheduler.sv | RASS ID buffer, greedy phase picker, issuing FIFO |
| rtl/kv_pe_array.sv | exact K/V generation for the selected keys |
| rtl/exp_unit.sv, rtl/seq_div.sv, rtl/sufa_line.sv, rtl/sufa_unit.sv | SU-FA on-line softmax |
| rtl/sram_sp.sv, rtl/data_fetcher.sv | on-chip SRAM, DRAM-to-SRAM fetcher |
| rtl/sofa_ctrl.sv | tile controller |
| rtl/sofa_top.sv | top level |

Every file starts with a comment on what it does, how it works, its
interface and timing, and what follows the paper and what is this design's
choice.

## Number formats

- tokens, weights, Q, K, V: 16-bit signed; the predictor uses the upper byte
  of a token and the 4-bit code of a weight.
- SU-FA scores: Q8.8 (after a programmable shift), probabilities and the
  rescale factor alpha: Q1.15, running sum 32 bits, output accumulators 48
  bits; the output is 16 bits.
- exp(x) for x <= 0: 2^(x*log2 e), integer part as a shift, fraction by a
  linear step.

## The top level

`sofa_top` runs one tile: 128 queries against 128 keys of one head (D = 64,
hidden size H = 256). The external DRAM is not part of the design; its read
channel (512-bit beats, request/grant, any latency) and write port are ports
of the top. Layout, in 2048-bit words from `dram_in_base`: X^T rows, Q^T rows,
W_k|W_v rows, then the W_k codes (8 rows of H per word). O is written, one
2048-bit word per head dimension, from `dram_out_base`.

Counters on the top show which mechanisms were active: zero operands
eliminated, scores clipped by SADS, SU-FA max updates and max-check fixes,
RASS phases and KV groups.

## What is not here

- The external HBM2 DRAM (ports only).
- Multi-head and multi-tile sequencing above one tile, and the host
  interface.
- Self-checking testbenches exist for the leaf arithmetic blocks only
  (tb/); the array, sorter network, controller and top level are not yet
  covered by a testbench.

## Known differences from the paper and open points

- Sizes are one tile: T = 128 queries and keys, D = 64, H = 256. Longer
  sequences, larger hidden sizes and head dimension 128 (BERT-large, GPT-2,
  Bloom, Llama, PVT) need more key tiles and bigger SRAMs; merging the
  softmax state across key tiles is not built.
- The exp unit, the divider, the SRAM and DRAM word layouts, the 4- and
  5-bit code layouts and the mapping of the top-k mask to 4 query groups are
  this design's own; the paper only names or outlines them.
- The SU-FA "max assurance" is implemented as a check in computation mode:
  when a later key exceeds the assumed maximum, the line rescales anyway and
  the event is counted as a fix.
- The controller, the top level, the DLZS array, SADS lines, SU-FA lines,
  RASS scheduler, KV PE array, SRAM and fetcher compile but have no
  end-to-end simulation yet. The DLZS array at full size (128x32) is slow to
  elaborate in yosys; smaller sizes of the same file elaborate quickly.
