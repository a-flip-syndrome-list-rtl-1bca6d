// llr_sorter: orders the B positions of a constituent block by ascending reliability.
//
// The R1, SPC and general-node decoders all address "the k-th least reliable bit"
// of the block (Notation 1 of the paper: |alpha_0| < |alpha_1| < ...).  This unit
// produces that ordering: rank[i] = number of positions j with |alpha_j| < |alpha_i|,
// ties broken by the lower index, and ord[k] = the position whose rank is k.  It is a
// fully parallel comparison matrix of B*(B-1)/2 magnitude comparators, one of several
// possible sorter structures (the paper does not specify one).  Combinational.
module llr_sorter #(
  parameter int unsigned B     = 16,
  parameter int unsigned LLR_W = 6
) (
  input  logic signed [LLR_W-1:0]     llr [B],
  output logic        [LLR_W-1:0]     mag [B],        // |llr| in the original order
  output logic        [$clog2(B)-1:0] ord [B]         // ord[k]: position of k-th smallest
);
  localparam int unsigned IW = $clog2(B);

  logic [IW:0] rank [B];

  always_comb begin
    for (int i = 0; i < B; i++)
      mag[i] = llr[i][LLR_W-1] ? LLR_W'(-llr[i]) : LLR_W'(llr[i]);
    for (int i = 0; i < B; i++) begin
      rank[i] = '0;
      for (int j = 0; j < B; j++)
        if (j != i && ((mag[j] < mag[i]) || (mag[j] == mag[i] && j < i)))
          rank[i] = rank[i] + 1'b1;
    end
    for (int k = 0; k < B; k++) begin
      ord[k] = '0;
      for (int i = 0; i < B; i++)
        if (rank[i] == (IW+1)'(k)) ord[k] = IW'(i);
    end
  end
endmodule
