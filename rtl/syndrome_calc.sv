// syndrome_calc: syndrome of a hard block vector for a polar constituent code.
//
// The parity-check matrix H_B of a (B, K_B) polar block is the set of columns of
// F^{(x) log2 B} indexed by the block's frozen positions (Section III-C of the
// paper), so the syndrome d = H_B * beta is simply u = beta * F^{(x) log2 B} read at
// the frozen positions.  This unit reuses the Kronecker transform for that, then packs
// the B - K_B frozen bits densely: the lowest frozen position goes to syndrome bit 0.
// That packing reproduces the paper's Table II (B = 8, K_B = 6), where for example
// pattern 0x03 has syndrome "10".  Combinational.
module syndrome_calc #(
  parameter int unsigned B = 16
) (
  input  logic [B-1:0] beta,
  input  logic [B-1:0] frozen,     // 1 = frozen position of the block
  output logic [B-1:0] syn         // packed syndrome, bits above B-K_B are zero
);
  logic [B-1:0] u;

  kron_transform #(.B(B)) u_kron (.x(beta), .y(u));

  always_comb begin
    int unsigned k;
    syn = '0;
    k   = 0;
    for (int j = 0; j < B; j++)
      if (frozen[j]) begin
        syn[k] = u[j];
        k++;
      end
  end
endmodule
