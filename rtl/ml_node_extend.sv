// ml_node_extend: exhaustive-search path extension of a low-rate constituent block
// for one list path.
//
// For a block with few information bits K_B the paper recommends enumerating all
// 2^K_B information vectors instead of flip-syndrome decoding (Remark 3, "ML" nodes
// of Table III); it switches when K_B > T + log2 L_sd, i.e. at most 2^6 = 64
// candidates.  Candidate m places bit k of m on the k-th information position of the
// block (ascending index), encodes it with the Kronecker transform, and scores it
// with eq. (5): the sum of |alpha| where the codeword disagrees with the raw hard
// decision.  Candidates m >= 2^K_B are invalid.  A repetition block (K_B = 1) is just
// the two-candidate case.  Combinational.
module ml_node_extend
  import fsl_pkg::*;
(
  input  logic [B-1:0]      beta,
  input  logic [LLR_W-1:0]  mag  [B],
  input  logic [B-1:0]      frozen,
  output cand_t             cand [M_CAND]
);
  localparam int unsigned MB = $clog2(M_CAND);

  logic [LOG2B:0] kinfo;
  logic [B-1:0]   u  [M_CAND];
  logic [B-1:0]   cw [M_CAND];

  always_comb begin
    kinfo = '0;
    for (int j = 0; j < B; j++) kinfo = kinfo + (LOG2B+1)'(!frozen[j]);
    for (int m = 0; m < M_CAND; m++) begin
      int unsigned k;
      k    = 0;
      u[m] = '0;
      for (int j = 0; j < B; j++)
        if (!frozen[j]) begin
          if (k < MB) u[m][j] = m[k];
          k++;
        end
    end
  end

  for (genvar m = 0; m < M_CAND; m++) begin : g_enc
    kron_transform #(.B(B)) u_kron (.x(u[m]), .y(cw[m]));
  end

  always_comb
    for (int m = 0; m < M_CAND; m++) begin
      logic [B-1:0]    diff;
      logic [PM_W-1:0] d;
      diff = cw[m] ^ beta;
      d    = '0;
      for (int j = 0; j < B; j++)
        if (diff[j]) d = pm_add(d, PM_W'(mag[j]));
      cand[m].valid = (32'(m) < (32'd1 << kinfo));
      cand[m].cw    = cw[m];
      cand[m].dpm   = d;
    end
endmodule
