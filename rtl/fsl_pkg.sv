// fsl_pkg: constants and types shared by the flip-syndrome-list (FSL) polar decoder.
//
// The decoder stops the successive-cancellation LLR recursion at the stage whose
// nodes are B = 16 bits long and decodes every such constituent block in one step
// for all L = 8 list paths.  The numbers L = 8, B = 16, T = 3 flipped positions,
// L_sd = 8 syndrome patterns, 6-bit LLRs and path metrics and N_max = 16384 follow
// the paper's main configuration.  CRC-16 with polynomial 0x1021 is this design's
// choice (the paper only says a 16-bit CRC is used).
package fsl_pkg;

  localparam int unsigned L      = 8;      // list size
  localparam int unsigned B      = 16;     // constituent block length
  localparam int unsigned LOG2B  = 4;
  localparam int unsigned T      = 3;      // flipped positions for general nodes
  localparam int unsigned LSD    = 8;      // error patterns stored per syndrome
  localparam int unsigned LLR_W  = 6;      // signed LLR width
  localparam int unsigned PM_W   = 6;      // unsigned path metric width
  localparam int unsigned M_CAND = 64;     // sub-path slots per parent path (2^T * L_sd)
  localparam int unsigned NR13   = 13;     // candidates of a rate-1 / SPC node

  localparam logic [PM_W-1:0] PM_MAX = '1;   // saturation value, also "infinity"

  // Constituent block types (Table III of the paper uses the same names).
  typedef enum logic [2:0] {
    NODE_R0  = 3'd0,   // all bits frozen
    NODE_ML  = 3'd1,   // few information bits: exhaustive search
    NODE_GEN = 3'd2,   // general block: flip-syndrome-list decoding
    NODE_SPC = 3'd3,   // only the first bit frozen: single parity check
    NODE_R1  = 3'd4    // no bit frozen
  } node_t;

  // One candidate sub-path of one parent path.
  typedef struct packed {
    logic            valid;
    logic [B-1:0]    cw;      // candidate block codeword (hat beta)
    logic [PM_W-1:0] dpm;     // incremental path metric, saturated
  } cand_t;

  // Saturating unsigned add for path metrics.
  function automatic logic [PM_W-1:0] pm_add(input logic [PM_W-1:0] a,
                                            input logic [PM_W-1:0] b);
    logic [PM_W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[PM_W] ? PM_MAX : s[PM_W-1:0];
  endfunction

  // |LLR| of a signed LLR, clipped to the PM range.
  function automatic logic [PM_W-1:0] llr_mag(input logic signed [LLR_W-1:0] a);
    logic [LLR_W-1:0] m;
    m = a[LLR_W-1] ? LLR_W'(-a) : LLR_W'(a);
    return PM_W'(m);
  endfunction

  // Number of information bits of a block given its frozen mask (1 = frozen).
  function automatic logic [LOG2B:0] info_count(input logic [B-1:0] frozen);
    logic [LOG2B:0] k;
    k = '0;
    for (int j = 0; j < B; j++) k = k + (LOG2B+1)'(!frozen[j]);
    return k;
  endfunction

  // Block type from its frozen mask.  Exhaustive search is used while
  // K_B <= T + log2(L_sd) (Remark 3 of the paper), flip-syndrome decoding above.
  function automatic node_t classify(input logic [B-1:0] frozen);
    logic [LOG2B:0] k;
    k = info_count(frozen);
    if (k == 0)                                   return NODE_R0;
    if (k == (LOG2B+1)'(B))                       return NODE_R1;
    if (frozen == B'(1))                          return NODE_SPC;
    if (k <= (LOG2B+1)'(T + $clog2(LSD)))         return NODE_ML;
    return NODE_GEN;
  endfunction

  // Syndrome-table entries used by a block: 2^(B-K_B) for general blocks, else 0.
  function automatic int unsigned table_size(input logic [B-1:0] frozen);
    if (classify(frozen) != NODE_GEN) return 0;
    return 1 << (B - int'(info_count(frozen)));
  endfunction

endpackage
