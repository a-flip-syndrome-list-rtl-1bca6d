// path_extend: complete one-shot extension of one list path over one constituent
// block, ending with its L best sub-paths in ascending metric order.
//
// Hard decision (beta = sign bit of alpha, eq. (1) of the paper), reliability
// ordering, then the block decoder chosen by the block type: 13 fixed patterns for
// R1 and SPC blocks (r1_spc_extend), flip-syndrome-list decoding for general blocks
// (gen_node_extend) and exhaustive search for blocks with at most T + log2 L_sd
// information bits, rate-0 blocks included (ml_node_extend).  Every candidate's
// metric is added to the parent's path metric and the L smallest are pre-selected
// (min_k_select), the "13 -> 8" step of the paper generalised to every block type.
// Combinational from LLRs to outputs, apart from the syndrome-table reads, which go
// out through raddr/rdata to the shared table.
module path_extend
  import fsl_pkg::*;
#(
  parameter int unsigned AW = 13
) (
  input  logic signed [LLR_W-1:0] llr    [B],
  input  logic [B-1:0]            frozen,
  input  logic [PM_W-1:0]         pm_in,
  input  logic [AW-1:0]           base,
  output logic [AW-1:0]           raddr  [1<<T],
  input  logic [LSD-1:0][B-1:0]   rdata  [1<<T],
  output logic                    out_valid [L],
  output logic [B-1:0]            out_cw    [L],
  output logic [PM_W-1:0]         out_pm    [L]
);
  node_t            ntype;
  logic [B-1:0]     beta;
  logic [LLR_W-1:0] mag [B];
  logic [LOG2B-1:0] ord [B];
  cand_t            c_rs  [NR13];
  cand_t            c_gen [M_CAND];
  cand_t            c_ml  [M_CAND];
  cand_t            c_all [M_CAND];
  logic             s_valid  [M_CAND];
  logic [PM_W-1:0]  s_metric [M_CAND];
  logic             k_valid  [L];
  logic [PM_W-1:0]  k_metric [L];
  logic [$clog2(M_CAND)-1:0] k_idx [L];

  always_comb begin
    ntype = classify(frozen);
    for (int j = 0; j < B; j++) beta[j] = llr[j][LLR_W-1];
  end

  llr_sorter #(.B(B), .LLR_W(LLR_W)) u_sort (.llr(llr), .mag(mag), .ord(ord));

  r1_spc_extend u_rs (.is_spc(ntype == NODE_SPC), .beta(beta), .mag(mag), .ord(ord),
                      .cand(c_rs));

  gen_node_extend #(.AW(AW)) u_gen (.beta(beta), .mag(mag), .ord(ord), .frozen(frozen),
                                    .base(base), .raddr(raddr), .rdata(rdata),
                                    .cand(c_gen));

  ml_node_extend u_ml (.beta(beta), .mag(mag), .frozen(frozen), .cand(c_ml));

  always_comb
    for (int m = 0; m < M_CAND; m++) begin
      unique case (ntype)
        NODE_R1, NODE_SPC: begin
          c_all[m] = (m < NR13) ? c_rs[m % NR13] : '0;
        end
        NODE_GEN: c_all[m] = c_gen[m];
        default:  c_all[m] = c_ml[m];
      endcase
      s_valid[m]  = c_all[m].valid;
      s_metric[m] = pm_add(pm_in, c_all[m].dpm);
    end

  min_k_select #(.N_IN(M_CAND), .K_OUT(L), .MW(PM_W)) u_pre (
    .in_valid(s_valid), .in_metric(s_metric),
    .out_valid(k_valid), .out_metric(k_metric), .out_idx(k_idx));

  always_comb
    for (int k = 0; k < L; k++) begin
      out_valid[k] = k_valid[k];
      out_cw[k]    = c_all[k_idx[k]].cw;
      out_pm[k]    = k_metric[k];
    end
endmodule
