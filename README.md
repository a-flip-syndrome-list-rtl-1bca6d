# Flip-syndrome-list (FSL) polar decoder, L = 8, B = 16

A successive-cancellation list (SCL) decoder for polar codes spends most of its time
near the information-bit end of the decoding graph. There, each level has half as much
parallelism as the one before, and each information bit makes every list path split.
The FSL decoder stops the LLR recursion at the level where the nodes are B = 16 bits
long. It then decodes each 16-bit constituent block for all 8 list paths at once,
using a handful of bit-flip patterns instead of bit-by-bit path splitting:

* **Rate-1 and single-parity-check blocks**: for list size 8, the 8 most likely
  sub-paths of a parent path are always among **13 fixed flips** of the raw hard
  decision. The flips address bits by reliability rank (least reliable first).
* **General blocks** (any other frozen pattern with more than 6 information bits):
  flip the T = 3 least reliable bits in all 8 ways. Compute each result's
  **syndrome**, look up the L_sd = 8 lowest-weight error patterns stored for that
  syndrome, and obtain 64 valid codewords per path.
* **Low-rate blocks** (at most 6 information bits, rate-0 included): enumerate all
  2^K_B codewords.

Each parent keeps its 8 best sub-paths. The resulting 64 extended paths are pruned
back to 8 in one step, so path extension and pruning happen once per block, not once
per bit. This RTL builds that decoder for code lengths 32 to 16384, with 6-bit LLRs
and path metrics, 128 LLR processing elements and CRC-16-aided final path selection.

## Files

| file | role |
|---|---|
| `rtl/fsl_pkg.sv` | constants (L, B, T, L_sd, widths), block type enum, candidate struct, block classification |
| `rtl/fsl_decoder.sv` | top level: schedule, LLR / partial-sum / traceback memories, path pointers, pruning, CRC selection |
| `rtl/path_extend.sv` | one path, one block: hard decision, reliability order, block decoder by type, 8-best pre-selection |
| `rtl/r1_spc_extend.sv` | the 13 fixed patterns for rate-1 and SPC blocks |
| `rtl/gen_node_extend.sv` | flip-syndrome extension of general blocks |
| `rtl/ml_node_extend.sv` | exhaustive extension of low-rate blocks |
| `rtl/syndrome_calc.sv` | syndrome of a 16-bit vector for a block's frozen set |
| `rtl/syndrome_table.sv` | error-pattern RAM, 64 parallel read ports |
| `rtl/llr_sorter.sv` | reliability ranking of the 16 block positions |
| `rtl/min_k_select.sv` | "8 smallest, sorted" selector (per-path and global pruning) |
| `rtl/llr_pe.sv` | min-sum f / g processing element |
| `rtl/kron_transform.sv` | multiplication by F^(x)4 (codeword <-> information bits) |
| `rtl/crc16_check.sv` | CRC-16 over the information bits of a decoded path |

## Decoding schedule

The code has length N = 2^n. Stage s holds 2^s LLRs per path: stage n is the channel
and stage 4 is a 16-bit block. The decoder visits the N/16 blocks in natural order:

1. **LLR steps** (`S_OP`). For block 0 it runs f-steps from stage n-1 down to stage 4.
   For block i > 0, let h be the highest bit in which i and i-1 differ. The decoder
   runs one g-step at stage 4+h (the right child of the common ancestor) and then
   f-steps down to stage 4. Each step processes one word of 16 LLRs per path per
   cycle, with 16 `llr_pe` per path and 128 in total. A step at stage s takes 2^(s-4)
   cycles.
2. **Block extension** (`S_LEAF`, 1 cycle). All 8 `path_extend` instances run in
   parallel. They are purely combinational, and their 8 x 8 sorted candidates are
   registered.
3. **Pruning** (`S_PRUNE`, 1 cycle). `min_k_select` picks the 8 best of the 64
   candidates. Survivor k becomes path k, so paths are always sorted by metric and
   path 0 is the best. Each survivor:
   * inherits its parent's memory pointers;
   * gets the block's information bits (codeword x F^(x)4) and its parent index
     written to the traceback memory;
   * gets a path metric normalised to that of the best survivor.
4. **Partial-sum combine** (`S_COMB`). Described below.

After the last block, `S_TB` follows the parent links backwards, one block per cycle,
and writes the decoded u vector of list rank 0 into the output buffer. `S_CRC` then
runs the CRC over its information bits, one word per cycle. With `crc_en` set, a
failing path makes the decoder retry with ranks 1, 2, .... If no path passes, it
returns rank 0 with `crc_pass = 0`.

The cycle count of a decode that passes on rank 0 is exactly

    sum_{s=4}^{n-1} 2^(s-4)                      f-steps of block 0
  + sum_{i=1}^{N/16-1} (2^(h_i+1) - 1)           g- and f-steps of block i
  + sum_{i=0}^{N/16-2} 2^(t_i)                   combine of block i (t_i = trailing ones of i)
  + 2 * N/16 + N/16 + N/16 + 2                   extension+pruning, traceback, CRC, check/start

Each retry with another list rank adds 2 * N/16 + 1 cycles.

| N | rate | cycles (= ns at 1 GHz) | 16-bit FSL latency reported in the paper |
|---|---|---|---|
| 1024 | 1/3, 1/2 | 834 | 697 ns, 776 ns |
| 4096 | 1/3, 1/2 | 4098 | 3003 ns, 3501 ns |
| 16384 | 1/3, 1/2 | 19458 | 13461 ns, 15305 ns |

The paper's figures come from a synthesized design whose schedule is not described,
so this comparison only shows the order of magnitude. The schedule here does not
depend on the code rate, because every block takes the same two cycles. It does not
skip leading frozen bits, and it does not merge larger rate-0 or rate-1 subtrees.

## Memories and path pointers

The hardest part of a list decoder is giving each path its own history without
copying memory on every pruning. This design uses pointers:

* **LLR memory** `amem[path][word]`. Every stage s in 4..13 has a region of 2^(s-4)
  words in each path's copy, at word offset 2^(s-4) - 1. The channel LLRs (stage n)
  sit in one shared memory.
* **Partial-sum memory** `bmem[path][word]`. It has the same layout. It holds, for
  each stage s, the codeword of the most recent *left* child at stage s. The g-step
  of the right sibling needs it.
* **Pointers** `aptr[stage][path]` and `bptr[stage][path]` name the physical copy
  that a logical path reads at each stage. After pruning, survivor k takes its
  parent's whole pointer column, which is a 3-bit register move per stage.
* A step that writes stage s writes *every* path into its own copy, then resets that
  stage's pointers to the identity. This is safe for two reasons. A step reads only
  stage s+1 (LLRs) or stage s (partial sums) while it writes stage s. And old data at
  a stage is never needed again once the decoder has moved to a new node at that
  stage.

**Partial-sum combine.** Let r be the number of trailing ones in the index of a
finished block. The block is a right child at levels 4..4+r-1, so its codeword must
be folded with the left siblings stored at those levels. The result is written as
the left child at level t = 4 + r. Bit j of the word written at level t is the block
codeword bit (j mod 16), XORed with every stored left sibling at a level k in 4..t-1
whose bit k of j is 0, read at position j mod 2^k. Each of those levels has its own
region, so one 16-bit word is produced per path per cycle, and the write takes
2^(t-4) cycles. The last block (r = n - 4) needs no combine.

**Traceback memory.** For each block and path, it holds 16 information bits and a
3-bit parent index. It replaces a per-path copy of all decoded bits.

## Block decoders

All blocks start from the raw hard decision beta (the sign bits of the 16 stage-4
LLRs) and the positions ranked by |LLR| (`llr_sorter`, ties to the lower index).
A candidate's incremental metric is the sum of |LLR| over the positions where it
differs from beta. It saturates at 63.

**Block type** (`fsl_pkg::classify`, where K_B is the number of information bits):

| type | rule |
|---|---|
| R0 | K_B = 0 |
| R1 | K_B = 16 |
| SPC | only position 0 frozen |
| ML | K_B <= T + log2 L_sd = 6 |
| GEN | everything else |

**R1 / SPC** (`r1_spc_extend`). The 13 flip masks below are over reliability ranks
0..7, where e_k flips the k-th least reliable bit:

| t | R1 | SPC, beta even | SPC, beta odd |
|---|---|---|---|
| 0 | none | none | e0 |
| 1..7 | e_{t-1} | e0+e_t | e_t |
| 8 | e0+e1 | e1+e2 | e0+e1+e2 |
| 9 | e0+e2 | e1+e3 | e0+e1+e3 |
| 10 | e1+e2 | e1+e4 | e0+e2+e3 |
| 11 | e0+e3 | e2+e3 | e1+e2+e3 |
| 12 | e0+e1+e2 | e0+e1+e2+e3 | e0+e1+e4 |

For odd parity, rows 0..7 are the single flips e0..e7.

**General blocks** (`gen_node_extend`).

* Flip index t (0..7) flips rank k when bit k of t is set.
* Each flipped vector gets its syndrome (`syndrome_calc`): the block's frozen
  positions of (vector x F^(x)4), packed with the lowest frozen position as bit 0.
* The syndrome addresses the table at `base + syndrome`.
* The 8 patterns read there give the candidates.
* A candidate whose pattern touches one of the 3 flipped positions is dropped. This
  treats the flipped bits as infinitely reliable, so no position is flipped twice
  and no candidate appears twice.

**Low-rate blocks** (`ml_node_extend`). Candidate m puts bit k of m on the k-th
information position and encodes the result with `kron_transform`.

`path_extend` adds the parent metric and keeps the 8 best in ascending order. This is
the "13 -> 8" pre-selection, applied to every block type.

## Syndrome tables

The tables are computed offline and loaded through `st_we/st_waddr/st_wdata`. Each
general block (in block order) owns 2^(16-K_B) consecutive entries. The first entry
of a block's table is the sum of the sizes of the tables of all earlier general
blocks; the decoder computes that sum itself. Entry `base + d` holds 8 error patterns
e, 16 bits each, with pattern p in bits [16p+15:16p]. Each pattern has
syndrome(e) = d, and they are listed in ascending Hamming weight. The benches build
the tables by scanning all 2^16 patterns in weight order and keeping the first 8 per
syndrome. The capacity is 8192 entries. A polar code built with the polarization-weight
(PW) construction at N = 16384, K = 8192 + 16 needs 8100 entries, and at N = 8192 it
needs 5532.

## Interface

| signal | meaning |
|---|---|
| `log2n` | n, 5..14 |
| `llr_we, llr_waddr, llr_wdata[15:0][5:0]` | channel LLRs, 16 per word; word w holds positions 16w..16w+15; positive means bit 0 |
| `fz_we, fz_waddr, fz_wdata[15:0]` | frozen mask, 1 = frozen, same word layout |
| `st_we, st_waddr, st_wdata[7:0][15:0]` | syndrome-table entries |
| `crc_en` | choose the first list rank whose information bits pass CRC-16 |
| `start` -> `busy` ... `done` | one decode; `done` pulses once |
| `out_raddr` -> `out_rdata` | decoded u vector, combinational read, frozen positions are 0 |
| `crc_pass`, `out_rank` | result status and the list rank that was returned |
| `ev_leaf`, `ev_type` | one pulse per block with its type, for monitoring |

Load the LLRs, the mask and the tables while the decoder is idle, then pulse
`start`. The information bits are the unfrozen positions of u in ascending index. The
last 16 of them are the CRC: generator 0x1021, zero initial value, message bits fed
most significant first.

## Where this design departs from the paper

Taken from the paper:

* the one-shot block extension and its 13-pattern sets;
* syndrome decoding with the T smallest-LLR flips, and the "infinite LLR" rule for
  flipped bits;
* the Table II syndrome convention, which the `syndrome_calc` bench checks;
* the exhaustive-search switch point;
* L = 8, B = 16, T = 3, L_sd = 8, 6-bit LLRs and metrics, N_max = 16384 and
  128 processing elements.

This design's own choices:

* **Sorting structures.** Rank matrices, which give a one-cycle result, instead of
  the paper's 5-step comparison schedule for 13 -> 8 and its bitonic 64 -> 8 network.
* **Fixed 16-bit leaves.** Larger rate-0 and rate-1 subtrees are not merged, and
  leading frozen bits are not skipped.
* **Memory organisation.** The memories, the pointers and the whole cycle schedule.
* **Path-metric normalisation.** The best survivor's metric is subtracted after every
  pruning.
* **CRC handling.** The CRC polynomial, and the fallback when no path passes.
* **Table provisioning.** The syndrome-table capacity, and the rule for its base
  addresses.

Not built:

* **Hybrid-Polar outer codes** (simplex, eBCH and dual codes as outer codes). Decoding
  them would need each outer code's own information recovery and candidate encoder.
  It would also need generator matrices that are not all published.
* **The rate re-adjustment construction.** It only changes the frozen mask, which is
  an input here.

## Verification

Each module has a self-checking bench in `tb/` that compares it with an independent
model:

* The f/g rules are checked exhaustively.
* Kronecker products are checked against the matrix definition.
* The R1/SPC candidates are compared with a brute-force search over all 2^16 flips.
  This confirms that the 13 patterns always contain the 8 best sub-paths.
* Exhaustive and general extensions are checked for codeword validity and metrics.
* The Table II syndromes are reproduced.
* CRC is checked against polynomial long division.

The end-to-end benches cover the whole decoder:

* `tb_fsl_decoder` runs an N = 1024, K = 512 code:
  * noiseless-like and noisy frames;
  * low-SNR frames until the CRC picks a path other than the best one;
  * a pure-noise frame, which must be reported as a CRC failure.

  It counts all five block types.
* `tb_fsl_latency` decodes all six codes of the latency table and checks the cycle
  formula above.
* `tb_fsl_decoder_full` decodes one N = 16384 frame with every parameter at its
  default.

Run a bench with plain Verilator from the repository root, for example:

    verilator --binary --timing -Irtl rtl/fsl_pkg.sv tb/tb_fsl_decoder.sv --top-module tb_fsl_decoder
    ./obj_dir/Vtb_fsl_decoder

Each bench ends with `TB_RESULT checks=<n> failures=<n>`. The decoder benches take
seconds to simulate and about a minute to compile.

No BLER curve has been measured; doing so needs many more frames than RTL simulation
delivers. The combinational path from the stage-4 LLR memory through `path_extend`
into the candidate registers is long. A timing-driven implementation would pipeline
it, and the paper's own analysis counts 14 to 15 logic steps for that work.
