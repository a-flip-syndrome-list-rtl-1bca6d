// crc16_check: CRC-16 check of a decoded path, one B-bit word per cycle.
//
// The decoder keeps the first list path whose information bits pass the CRC (the
// paper appends 16 CRC bits to the K payload bits and uses them only to pick the
// final path).  Each cycle this unit absorbs the bits of one word of the decoded u
// vector whose 'take' bit is set (the information positions), lowest index first,
// into a shift-register CRC with generator POLY and zero initial value.  A message
// that carries its own CRC at its end leaves a zero remainder, flagged by 'ok'.
// POLY = 0x1021 (x^16 + x^12 + x^5 + 1) is this design's choice: the paper does not
// name the polynomial.  'clr' restarts the check; results are valid the cycle after
// the last word.
module crc16_check #(
  parameter int unsigned     W    = 16,
  parameter logic [15:0]     POLY = 16'h1021
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         en,
  input  logic [W-1:0] data,
  input  logic [W-1:0] take,
  output logic [15:0]  rem,
  output logic         ok
);
  logic [15:0] nxt;

  always_comb begin
    nxt = rem;
    for (int i = 0; i < W; i++)
      if (take[i]) nxt = {nxt[14:0], 1'b0} ^ ((nxt[15] ^ data[i]) ? POLY : 16'h0);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)   rem <= '0;
    else if (clr) rem <= '0;
    else if (en)  rem <= nxt;

  assign ok = (rem == 16'h0);
endmodule
