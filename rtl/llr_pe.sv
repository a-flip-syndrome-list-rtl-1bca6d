// llr_pe: one LLR processing element of the successive-cancellation factor graph.
//
// It evaluates the two right-to-left update rules of the SC decoder:
//   f (is_g = 0):  out = sgn(a) * sgn(b) * min(|a|, |b|)
//   g (is_g = 1):  out = (1 - 2*beta) * a + b
// where a = alpha[s+1][i] and b = alpha[s+1][i + 2^s].  Both rules are the paper's
// min-sum form.  LLRs are signed two's complement of LLR_W bits (6 in the paper);
// results are saturated to the symmetric range +-(2^(LLR_W-1)-1), which is this
// design's choice.  Purely combinational; the decoder instantiates L*B = 128 of them.
module llr_pe #(
  parameter int unsigned LLR_W = 6
) (
  input  logic                    is_g,
  input  logic                    beta,
  input  logic signed [LLR_W-1:0] a,
  input  logic signed [LLR_W-1:0] b,
  output logic signed [LLR_W-1:0] y
);
  localparam logic signed [LLR_W+1:0] MAXV = (LLR_W+2)'((1 << (LLR_W-1)) - 1);

  logic signed [LLR_W+1:0] ax, bx, aa, ba, mn, sum;

  always_comb begin
    ax  = (LLR_W+2)'(a);
    bx  = (LLR_W+2)'(b);
    aa  = ax[LLR_W+1] ? -ax : ax;
    ba  = bx[LLR_W+1] ? -bx : bx;
    mn  = (aa < ba) ? aa : ba;
    if (mn > MAXV) mn = MAXV;
    sum = (beta ? -ax : ax) + bx;
    if (!is_g)
      y = LLR_W'((ax[LLR_W+1] ^ bx[LLR_W+1]) ? -mn : mn);
    else if (sum > MAXV)
      y = LLR_W'(MAXV);
    else if (sum < -MAXV)
      y = LLR_W'(-MAXV);
    else
      y = LLR_W'(sum);
  end
endmodule
