// kron_transform: multiplies a B-bit row vector by the polar kernel F^{(x) log2 B},
// F = [1 0; 1 1], over GF(2).
//
// out[j] = XOR of in[i] over all i whose binary index contains j (j AND i == j).
// The same transform maps block information bits to the block codeword and back
// (F^{(x)m} is its own inverse), so the decoder uses it to recover u from a decoded
// block codeword (eq. (2) of the paper), to build syndromes of general blocks and to
// encode candidates of exhaustive-search blocks.  Combinational, log2 B XOR layers of
// butterflies, as in the polar encoder.
module kron_transform #(
  parameter int unsigned B = 16
) (
  input  logic [B-1:0] x,
  output logic [B-1:0] y
);
  localparam int unsigned M = $clog2(B);

  logic [B-1:0] stg [M+1];

  assign stg[0] = x;
  for (genvar s = 0; s < M; s++) begin : g_layer
    for (genvar i = 0; i < B; i++) begin : g_bit
      if ((i & (1 << s)) == 0) begin : g_up
        assign stg[s+1][i] = stg[s][i] ^ stg[s][i + (1 << s)];
      end else begin : g_dn
        assign stg[s+1][i] = stg[s][i];
      end
    end
  end
  assign y = stg[M];
endmodule
