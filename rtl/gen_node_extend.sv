// gen_node_extend: flip-syndrome-list path extension of a general constituent block
// for one list path (Fig. 2 of the paper).
//
// 1. The T least reliable positions (from the LLR sorter) are flipped in all 2^T
//    combinations of the raw hard decision beta, giving the flipped vectors beta^t
//    (flip combination t: bit k of t flips the k-th least reliable position).
// 2. Each beta^t gets its syndrome (syndrome_calc); base + syndrome addresses the
//    syndrome table, which returns L_sd low-weight error patterns.
// 3. Candidate (t, l_sd) = beta^t XOR pattern.  Its incremental metric is the sum of
//    |alpha| over all flipped positions, where the T flip positions are treated as
//    infinitely reliable once flipped: a pattern that touches them would flip such a
//    bit twice, so the candidate is dropped (valid = 0).  This is the paper's rule
//    that keeps duplicate paths out of the list.
// Output slot t*L_sd + l_sd.  Combinational; table reads are the asynchronous ports
// of syndrome_table.
module gen_node_extend
  import fsl_pkg::*;
#(
  parameter int unsigned AW = 13                       // syndrome table address width
) (
  input  logic [B-1:0]           beta,
  input  logic [LLR_W-1:0]       mag    [B],
  input  logic [LOG2B-1:0]       ord    [B],
  input  logic [B-1:0]           frozen,
  input  logic [AW-1:0]          base,
  output logic [AW-1:0]          raddr  [1<<T],
  input  logic [LSD-1:0][B-1:0]  rdata  [1<<T],
  output cand_t                  cand   [(1<<T)*LSD]
);
  localparam int unsigned NF = 1 << T;

  logic [B-1:0]    tset;              // the T least reliable positions
  logic [B-1:0]    flip  [NF];
  logic [PM_W-1:0] fpm   [NF];
  logic [B-1:0]    bt    [NF];
  logic [B-1:0]    syn   [NF];

  always_comb begin
    tset = '0;
    for (int k = 0; k < T; k++) tset[ord[k]] = 1'b1;
    for (int t = 0; t < NF; t++) begin
      flip[t] = '0;
      fpm[t]  = '0;
      for (int k = 0; k < T; k++)
        if (t[k]) begin
          flip[t][ord[k]] = 1'b1;
          fpm[t] = pm_add(fpm[t], PM_W'(mag[ord[k]]));
        end
      bt[t] = beta ^ flip[t];
    end
  end

  for (genvar t = 0; t < NF; t++) begin : g_syn
    syndrome_calc #(.B(B)) u_syn (.beta(bt[t]), .frozen(frozen), .syn(syn[t]));
    assign raddr[t] = base + AW'(syn[t]);
  end

  always_comb begin
    for (int t = 0; t < NF; t++)
      for (int p = 0; p < LSD; p++) begin
        logic [B-1:0]    e;
        logic [PM_W-1:0] d;
        e = rdata[t][p];
        d = fpm[t];
        for (int j = 0; j < B; j++)
          if (e[j]) d = pm_add(d, PM_W'(mag[j]));
        cand[t*LSD+p].valid = ~|(e & tset);
        cand[t*LSD+p].cw    = bt[t] ^ e;
        cand[t*LSD+p].dpm   = d;
      end
  end
endmodule
