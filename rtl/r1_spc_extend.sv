// r1_spc_extend: one-shot path extension of a rate-1 (R1) or single-parity-check
// (SPC) constituent block for one list path, with the 13 pre-stored error patterns.
//
// For list size 8 the paper proves (Propositions 1 and 2) that the 8 most likely
// sub-paths of a parent path are always among 13 fixed flips of its raw hard decision
// beta, where the flips address positions in ascending-reliability order (e_0 = least
// reliable bit).  The three pattern sets, copied from the paper, are stored below as
// 8-bit masks over sorted positions 0..7:
//   R1:        0, e0..e6, e0+e1, e0+e2, e1+e2, e0+e3, e0+e1+e2
//   SPC even:  0, e0+e1..e0+e7, e1+e2, e1+e3, e1+e4, e2+e3, e0+e1+e2+e3
//   SPC odd:   e0..e7, e0+e1+e2, e0+e1+e3, e0+e2+e3, e1+e2+e3, e0+e1+e4
// (SPC even/odd is the parity of beta.)  Each candidate's incremental path metric is
// the sum of |alpha| over the flipped positions (eq. (5)), saturated to PM_W bits.
// Combinational; the 13 candidates are produced in parallel.
module r1_spc_extend
  import fsl_pkg::*;
(
  input  logic              is_spc,
  input  logic [B-1:0]      beta,          // raw hard decision, natural order
  input  logic [LLR_W-1:0]  mag  [B],      // |alpha|, natural order
  input  logic [LOG2B-1:0]  ord  [B],      // ord[k] = k-th least reliable position
  output cand_t             cand [NR13]
);
  typedef logic [7:0] pmask_t;

  localparam pmask_t R1_PAT [NR13] = '{
    8'h00, 8'h01, 8'h02, 8'h04, 8'h08, 8'h10, 8'h20, 8'h40,
    8'h03, 8'h05, 8'h06, 8'h09, 8'h07 };
  localparam pmask_t SPC_EVEN_PAT [NR13] = '{
    8'h00, 8'h03, 8'h05, 8'h09, 8'h11, 8'h21, 8'h41, 8'h81,
    8'h06, 8'h0A, 8'h12, 8'h0C, 8'h0F };
  localparam pmask_t SPC_ODD_PAT [NR13] = '{
    8'h01, 8'h02, 8'h04, 8'h08, 8'h10, 8'h20, 8'h40, 8'h80,
    8'h07, 8'h0B, 8'h0D, 8'h0E, 8'h13 };

  logic   parity;
  pmask_t pm;
  logic [B-1:0]    flip;
  logic [PM_W-1:0] d;

  always_comb begin
    parity = ^beta;
    for (int t = 0; t < NR13; t++) begin
      if (!is_spc)     pm = R1_PAT[t];
      else if (parity) pm = SPC_ODD_PAT[t];
      else             pm = SPC_EVEN_PAT[t];
      flip = '0;
      d    = '0;
      for (int k = 0; k < 8; k++)
        if (pm[k]) begin
          flip[ord[k]] = 1'b1;
          d = pm_add(d, PM_W'(mag[ord[k]]));
        end
      cand[t].valid = 1'b1;
      cand[t].cw    = beta ^ flip;
      cand[t].dpm   = d;
    end
  end
endmodule
