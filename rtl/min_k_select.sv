// min_k_select: picks the K_OUT smallest of N_IN path metrics and lists them in
// ascending order.
//
// Used twice per constituent block: per parent path to pre-select its L best
// sub-paths (13 -> 8 for R1/SPC blocks, up to 64 -> 8 otherwise), and across the
// list to prune the L*L pre-selected sub-paths back to L survivors (64 -> 8), the
// "(13 -> 8 -> 64 -> 8) x 1" procedure of the paper.  Invalid inputs rank after
// every valid one.  The structure is a rank matrix: every input counts how many
// inputs beat it (smaller metric, or equal metric and lower index) and the input of
// rank k is routed to output k.  The paper uses a 5-step comparison schedule
// (Fig. 3) for 13 -> 8 and a bitonic network for 64 -> 8; this rank matrix produces
// the same ordered result in a single combinational step.
module min_k_select #(
  parameter int unsigned N_IN  = 64,
  parameter int unsigned K_OUT = 8,
  parameter int unsigned MW    = 6
) (
  input  logic                     in_valid  [N_IN],
  input  logic [MW-1:0]            in_metric [N_IN],
  output logic                     out_valid [K_OUT],
  output logic [MW-1:0]            out_metric[K_OUT],
  output logic [$clog2(N_IN)-1:0]  out_idx   [K_OUT]
);
  localparam int unsigned IW = $clog2(N_IN);

  logic [MW:0]  key  [N_IN];
  logic [IW:0]  rank [N_IN];

  // one rank counter per input, written as a generate loop so that each
  // procedural loop stays short
  for (genvar i = 0; i < N_IN; i++) begin : g_rank
    assign key[i] = {~in_valid[i], in_metric[i]};
    always_comb begin
      rank[i] = '0;
      for (int j = 0; j < N_IN; j++)
        if (j != i && ((key[j] < key[i]) || (key[j] == key[i] && j < i)))
          rank[i] = rank[i] + 1'b1;
    end
  end

  always_comb begin
    for (int k = 0; k < K_OUT; k++) begin
      out_idx[k]    = '0;
      out_valid[k]  = 1'b0;
      out_metric[k] = '0;
      for (int i = 0; i < N_IN; i++)
        if (rank[i] == (IW+1)'(k)) begin
          out_idx[k]    = IW'(i);
          out_valid[k]  = in_valid[i];
          out_metric[k] = in_metric[i];
        end
    end
  end
endmodule
