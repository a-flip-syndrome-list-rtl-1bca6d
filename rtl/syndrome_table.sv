// syndrome_table: look-up table of low-weight error patterns indexed by syndrome.
//
// For every general constituent block, the 2^(B-K_B) syndromes each own one entry
// holding L_sd error patterns of B bits, stored in ascending weight (Section III-C and
// Table II of the paper).  The patterns are computed offline and written here through
// a synchronous write port before decoding.  The tables of all general blocks of a
// code sit back to back in leaf order; the decoder addresses entry (base + syndrome),
// where base is the running sum of the table sizes of the preceding general blocks.
// NRD combinational read ports return the entries for all flipped vectors of all list
// paths at once (2^T * L = 64 ports), which is what makes the retrieval O(1).
// DEPTH = 8192 entries is this design's choice; the paper gives no table capacity.
module syndrome_table #(
  parameter int unsigned B     = 16,
  parameter int unsigned LSD   = 8,
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned NRD   = 64
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [$clog2(DEPTH)-1:0]         waddr,
  input  logic [LSD-1:0][B-1:0]            wdata,
  input  logic [$clog2(DEPTH)-1:0]         raddr [NRD],
  output logic [LSD-1:0][B-1:0]            rdata [NRD]
);
  logic [LSD-1:0][B-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  always_comb
    for (int r = 0; r < NRD; r++)
      rdata[r] = mem[raddr[r]];
endmodule
