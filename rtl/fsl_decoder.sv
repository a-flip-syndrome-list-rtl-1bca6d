// fsl_decoder: flip-syndrome-list (FSL) polar decoder, list size L = 8, block B = 16.
//
// What it does.  Decodes one polar codeword of length N = 2^log2n (32 .. N_MAX) from
// channel LLRs, given the frozen-bit mask, and returns the decoded u vector of the
// list path chosen by path metric and, optionally, CRC-16.  The SC recursion runs
// only down to stage log2 B; every length-16 constituent block is then decoded for
// all 8 paths in one step by error-pattern based path extension (path_extend), and
// the 64 pre-selected sub-paths are pruned back to 8 (min_k_select).
//
// How it works.  Per leaf block i (leaves in natural order):
//   S_OP    LLR recursion.  For i = 0: f-steps from stage log2n-1 down to 4.  For i > 0:
//           one g-step at the stage just below the common ancestor of leaves i-1 and
//           i, then f-steps down to 4.  Each step runs B LLR PEs per path (L*B = 128
//           in total), one 16-LLR word per cycle, 2^(s-4) cycles at stage s.
//   S_LEAF  All L paths extend their block at once; results are registered.
//   S_PRUNE Global 64 -> 8 selection; the survivors take their parent's memory
//           pointers, their path metrics are normalised to the best one, and the block
//           information bits and the parent index go to the traceback memory.
//   S_COMB  Partial sums: the block codeword is combined with the stored left-sibling
//           codewords of every level where the block is a right child, and the result
//           is written as the left-child codeword of the first level where it is a left
//           child.  2^(t-4) cycles for level t.
// After the last block, S_TB traces the best path back into the output buffer and
// S_CRC checks it; with crc_en the next path is tried until one passes (else the
// best-metric path is returned with crc_pass = 0).
//
// Memories.  LLR and partial-sum memories hold one copy per path for every stage
// 4 .. NLOG-1, addressed through per-stage path pointers (aptr, bptr): a new path
// inherits its parent's pointers instead of copying data, and a step that writes
// stage s writes every path's own copy and resets that stage's pointers.
// Syndrome tables for general blocks are stored back to back in leaf order.
//
// Interface.  Before 'start' (a one-cycle pulse while idle) load the channel LLRs
// (llr_we, one word of 16 LLRs per address), the frozen mask (fz_we, 1 = frozen) and
// the syndrome tables (st_we).  'done' pulses when the result is ready; the decoded u
// word at out_raddr is on out_rdata (combinational).  ev_leaf pulses once per block
// with its type on ev_type.
//
// From the paper: L, B, T, L_sd, 6-bit LLRs and path metrics, N_max = 16384, 128
// PEs, the R1/SPC patterns, the syndrome decoding and the one-shot extension.  This
// design's own choices: the memory organisation and pointers, the schedule above,
// path-metric normalisation, fixed 16-bit leaves (no larger R0/R1 nodes) and the CRC.
module fsl_decoder
  import fsl_pkg::*;
#(
  parameter int unsigned N_MAX     = 16384,
  parameter int unsigned SYN_DEPTH = 8192
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [3:0]                      log2n,
  input  logic                            crc_en,
  input  logic                            start,
  output logic                            busy,
  output logic                            done,
  input  logic                            llr_we,
  input  logic [$clog2(N_MAX/16)-1:0]     llr_waddr,
  input  logic [15:0][5:0]                llr_wdata,
  input  logic                            fz_we,
  input  logic [$clog2(N_MAX/16)-1:0]     fz_waddr,
  input  logic [15:0]                     fz_wdata,
  input  logic                            st_we,
  input  logic [$clog2(SYN_DEPTH)-1:0]    st_waddr,
  input  logic [7:0][15:0]                st_wdata,
  input  logic [$clog2(N_MAX/16)-1:0]     out_raddr,
  output logic [15:0]                     out_rdata,
  output logic                            crc_pass,
  output logic [2:0]                      out_rank,
  output logic                            ev_leaf,
  output node_t                           ev_type
);
  localparam int unsigned NLOG = $clog2(N_MAX);
  localparam int unsigned NW   = N_MAX / B;              // words = leaf blocks
  localparam int unsigned CWA  = $clog2(NW);
  localparam int unsigned NST  = NLOG - LOG2B;           // stored stages 4..NLOG-1
  localparam int unsigned AWD  = (1 << NST) - 1;         // words per path copy
  localparam int unsigned AAW  = $clog2(AWD + 1);
  localparam int unsigned SAW  = $clog2(SYN_DEPTH);
  localparam int unsigned LW   = $clog2(L);
  localparam int unsigned NF   = 1 << T;

  typedef logic [B-1:0][LLR_W-1:0] lword_t;
  typedef enum logic [2:0] {S_IDLE, S_OP, S_LEAF, S_PRUNE, S_COMB, S_TB, S_CRC, S_CHK} state_t;

  function automatic logic [AAW-1:0] off(input logic [4:0] s);
    return AAW'((1 << (int'(s) - LOG2B)) - 1);
  endfunction

  // ---------------------------------------------------------------- storage
  lword_t          chan_mem [NW];
  logic [B-1:0]    fz_mem   [NW];
  logic [B-1:0]    out_mem  [NW];
  lword_t          amem     [L][AWD];
  logic [B-1:0]    bmem     [L][AWD];
  logic [L-1:0][B-1:0]  tb_u   [NW];
  logic [L-1:0][LW-1:0] tb_par [NW];

  logic [LW-1:0]   aptr [NST][L];
  logic [LW-1:0]   bptr [NST][L];
  logic [PM_W-1:0] pm   [L];
  logic            pvalid [L];
  logic [B-1:0]    leaf_cw [L];

  // ---------------------------------------------------------------- control state
  state_t          st;
  logic [4:0]      stg;          // current stage of an LLR step, or combine level
  logic            is_g;
  logic [AAW-1:0]  wc;           // word counter
  logic [CWA-1:0]  leaf;
  logic [SAW-1:0]  base;
  logic [LW-1:0]   rank;
  logic [LW-1:0]   cur;
  logic            fallback;

  // registered per-path pre-selection
  logic            c_valid [L][L];
  logic [B-1:0]    c_cw    [L][L];
  logic [PM_W-1:0] c_pm    [L][L];

  // ---------------------------------------------------------------- LLR step datapath
  lword_t          src_a [L], src_b [L], pe_out [L];
  logic [B-1:0]    bw [L];
  logic [AAW-1:0]  half;

  always_comb begin
    half = AAW'(1) << (int'(stg) - LOG2B);
    for (int l = 0; l < L; l++) begin
      if (stg + 5'd1 == {1'b0, log2n}) begin
        src_a[l] = chan_mem[CWA'(wc)];
        src_b[l] = chan_mem[CWA'(wc + half)];
      end else begin
        src_a[l] = amem[aptr[(int'(stg) + 1 - LOG2B) % NST][l]][off(stg + 5'd1) + wc];
        src_b[l] = amem[aptr[(int'(stg) + 1 - LOG2B) % NST][l]][off(stg + 5'd1) + wc + half];
      end
      bw[l] = bmem[bptr[(int'(stg) - LOG2B) % NST][l]][off(stg) + wc];
    end
  end

  for (genvar l = 0; l < L; l++) begin : g_path_pe
    for (genvar q = 0; q < B; q++) begin : g_pe
      llr_pe #(.LLR_W(LLR_W)) u_pe (
        .is_g(is_g), .beta(bw[l][q]), .a(src_a[l][q]), .b(src_b[l][q]), .y(pe_out[l][q]));
    end
  end

  // ---------------------------------------------------------------- block extension
  logic [B-1:0]          leaf_fz;
  logic [SAW-1:0]        st_raddr [L*NF];
  logic [LSD-1:0][B-1:0] st_rdata [L*NF];
  logic                  x_valid [L][L];
  logic [B-1:0]          x_cw    [L][L];
  logic [PM_W-1:0]       x_pm    [L][L];

  assign leaf_fz = fz_mem[leaf];

  syndrome_table #(.B(B), .LSD(LSD), .DEPTH(SYN_DEPTH), .NRD(L*NF)) u_stab (
    .clk(clk), .we(st_we), .waddr(st_waddr), .wdata(st_wdata),
    .raddr(st_raddr), .rdata(st_rdata));

  for (genvar l = 0; l < L; l++) begin : g_ext
    logic signed [LLR_W-1:0] llr [B];
    logic [SAW-1:0]          ra [NF];
    logic [LSD-1:0][B-1:0]   rd [NF];
    lword_t                  aw;
    assign aw = amem[aptr[0][l]][0];
    for (genvar q = 0; q < B; q++) begin : g_q
      assign llr[q] = aw[q];
    end
    for (genvar t = 0; t < NF; t++) begin : g_t
      assign st_raddr[l*NF+t] = ra[t];
      assign rd[t]            = st_rdata[l*NF+t];
    end
    path_extend #(.AW(SAW)) u_ext (
      .llr(llr), .frozen(leaf_fz), .pm_in(pm[l]), .base(base),
      .raddr(ra), .rdata(rd),
      .out_valid(x_valid[l]), .out_cw(x_cw[l]), .out_pm(x_pm[l]));
  end

  // ---------------------------------------------------------------- global pruning
  logic            g_in_valid [L*L];
  logic [PM_W-1:0] g_in_pm    [L*L];
  logic            g_valid    [L];
  logic [PM_W-1:0] g_pm       [L];
  logic [$clog2(L*L)-1:0] g_idx [L];

  always_comb
    for (int p = 0; p < L; p++)
      for (int k = 0; k < L; k++) begin
        g_in_valid[p*L+k] = c_valid[p][k] & pvalid[p];
        g_in_pm[p*L+k]    = c_pm[p][k];
      end

  min_k_select #(.N_IN(L*L), .K_OUT(L), .MW(PM_W)) u_prune (
    .in_valid(g_in_valid), .in_metric(g_in_pm),
    .out_valid(g_valid), .out_metric(g_pm), .out_idx(g_idx));

  // survivor l descends from parent path g_par[l], sub-path g_sub[l]
  logic [LW-1:0] g_par [L], g_sub [L];
  logic [B-1:0]  u_blk [L];
  for (genvar l = 0; l < L; l++) begin : g_ublk
    assign g_par[l] = g_idx[l][2*LW-1:LW];
    assign g_sub[l] = g_idx[l][LW-1:0];
    kron_transform #(.B(B)) u_kron (.x(c_cw[g_par[l]][g_sub[l]]), .y(u_blk[l]));
  end

  // ---------------------------------------------------------------- partial-sum combine
  logic [B-1:0] comb_w [L];
  always_comb
    for (int l = 0; l < L; l++) begin
      comb_w[l] = leaf_cw[l];
      for (int k = 0; k < NST - 1; k++)
        if ((5'(k) + 5'(LOG2B) < stg) && !wc[k])
          comb_w[l] = comb_w[l] ^
            bmem[bptr[k][l]][off(5'(k + LOG2B)) + (wc & AAW'((1 << k) - 1))];
    end

  // ---------------------------------------------------------------- CRC
  logic        crc_clr, crc_go;
  logic [15:0] crc_rem;
  logic        crc_ok;
  crc16_check #(.W(B)) u_crc (
    .clk(clk), .rst_n(rst_n), .clr(crc_clr), .en(crc_go),
    .data(out_mem[CWA'(wc)]), .take(~fz_mem[CWA'(wc)]), .rem(crc_rem), .ok(crc_ok));

  assign crc_clr = (st == S_TB);
  assign crc_go  = (st == S_CRC);

  // ---------------------------------------------------------------- sequencing helpers
  logic [CWA-1:0] nleaves_m1;
  logic [CWA-1:0] nxt_leaf;
  logic [4:0]     g_stage;        // stage of the g-step that starts leaf nxt_leaf

  always_comb begin
    nleaves_m1 = CWA'((1 << (log2n - 4'(LOG2B))) - 1);
    nxt_leaf   = leaf + 1'b1;
    g_stage    = 5'(LOG2B);
    for (int b = 0; b < CWA; b++)
      if ((nxt_leaf ^ leaf) >> b != 0) g_stage = 5'(LOG2B + b);
  end

  // level into which the current leaf's codeword is combined: 4 + trailing ones
  logic [4:0] tz1;
  always_comb begin
    logic stop;
    tz1  = 5'(LOG2B);
    stop = 1'b0;
    for (int b = 0; b < CWA; b++)
      if (!stop) begin
        if (leaf[b]) tz1 = tz1 + 5'd1;
        else         stop = 1'b1;
      end
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk) begin
    if (llr_we) chan_mem[llr_waddr] <= llr_wdata;
    if (fz_we)  fz_mem[fz_waddr]    <= fz_wdata;

    if (st == S_OP)
      for (int l = 0; l < L; l++) amem[l][off(stg) + wc] <= pe_out[l];

    if (st == S_COMB)
      for (int l = 0; l < L; l++) bmem[l][off(stg) + wc] <= comb_w[l];

    if (st == S_PRUNE)
      for (int l = 0; l < L; l++) begin
        tb_u[leaf][l]   <= u_blk[l];
        tb_par[leaf][l] <= g_par[l];
      end

    if (st == S_TB) out_mem[CWA'(wc)] <= tb_u[CWA'(wc)][cur];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      stg      <= '0;
      is_g     <= 1'b0;
      wc       <= '0;
      leaf     <= '0;
      base     <= '0;
      rank     <= '0;
      cur      <= '0;
      fallback <= 1'b0;
      done     <= 1'b0;
      crc_pass <= 1'b0;
      out_rank <= '0;
      ev_leaf  <= 1'b0;
      ev_type  <= NODE_R0;
      for (int l = 0; l < L; l++) begin
        pm[l]      <= '0;
        pvalid[l]  <= 1'b0;
        leaf_cw[l] <= '0;
        for (int k = 0; k < L; k++) begin
          c_valid[l][k] <= 1'b0;
          c_cw[l][k]    <= '0;
          c_pm[l][k]    <= '0;
        end
        for (int s = 0; s < NST; s++) begin
          aptr[s][l] <= LW'(l);
          bptr[s][l] <= LW'(l);
        end
      end
    end else begin
      done    <= 1'b0;
      ev_leaf <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st   <= S_OP;
          stg  <= 5'({1'b0, log2n} - 5'd1);
          is_g <= 1'b0;
          wc   <= '0;
          leaf <= '0;
          base <= '0;
          fallback <= 1'b0;
          for (int l = 0; l < L; l++) begin
            pm[l]     <= (l == 0) ? '0 : PM_MAX;
            pvalid[l] <= (l == 0);
            for (int s = 0; s < NST; s++) begin
              aptr[s][l] <= LW'(l);
              bptr[s][l] <= LW'(l);
            end
          end
        end

        S_OP: begin
          if (wc == half - 1'b1) begin
            wc <= '0;
            for (int l = 0; l < L; l++) aptr[(int'(stg) - LOG2B) % NST][l] <= LW'(l);
            if (stg == 5'(LOG2B)) st <= S_LEAF;
            else begin
              stg  <= stg - 5'd1;
              is_g <= 1'b0;
            end
          end else
            wc <= wc + 1'b1;
        end

        S_LEAF: begin
          for (int l = 0; l < L; l++)
            for (int k = 0; k < L; k++) begin
              c_valid[l][k] <= x_valid[l][k];
              c_cw[l][k]    <= x_cw[l][k];
              c_pm[l][k]    <= x_pm[l][k];
            end
          ev_leaf <= 1'b1;
          ev_type <= classify(leaf_fz);
          base    <= base + SAW'(table_size(leaf_fz));
          st      <= S_PRUNE;
        end

        S_PRUNE: begin
          for (int l = 0; l < L; l++) begin
            pm[l]      <= g_valid[l] ? PM_W'(g_pm[l] - g_pm[0]) : PM_MAX;
            pvalid[l]  <= g_valid[l];
            leaf_cw[l] <= c_cw[g_par[l]][g_sub[l]];
            for (int s = 0; s < NST; s++) begin
              aptr[s][l] <= aptr[s][g_par[l]];
              bptr[s][l] <= bptr[s][g_par[l]];
            end
          end
          wc  <= '0;
          stg <= tz1;
          if (leaf == nleaves_m1) begin
            st   <= S_TB;
            rank <= '0;
            cur  <= '0;
            wc   <= AAW'(nleaves_m1);
          end else
            st <= S_COMB;
        end

        S_COMB: begin
          if (wc == (AAW'(1) << (int'(stg) - LOG2B)) - 1'b1) begin
            for (int l = 0; l < L; l++) bptr[(int'(stg) - LOG2B) % NST][l] <= LW'(l);
            leaf <= nxt_leaf;
            stg  <= g_stage;
            is_g <= 1'b1;
            wc   <= '0;
            st   <= S_OP;
          end else
            wc <= wc + 1'b1;
        end

        S_TB: begin
          // one leaf per cycle, last to first, following the parent links
          cur <= tb_par[CWA'(wc)][cur];
          if (wc == '0) begin
            st <= S_CRC;
          end else
            wc <= wc - 1'b1;
        end

        S_CRC: begin
          if (wc == AAW'(nleaves_m1)) st <= S_CHK;
          else wc <= wc + 1'b1;
        end

        S_CHK: begin
          if (!crc_en || crc_ok || fallback) begin
            crc_pass <= crc_ok && !fallback;
            out_rank <= rank;
            done     <= 1'b1;
            st       <= S_IDLE;
          end else if (rank != LW'(L - 1) && pvalid[rank + 1'b1]) begin
            rank <= rank + 1'b1;
            cur  <= rank + 1'b1;
            wc   <= AAW'(nleaves_m1);
            st   <= S_TB;
          end else begin
            // no path passed: return the best-metric path
            fallback <= 1'b1;
            rank     <= '0;
            cur      <= '0;
            wc       <= AAW'(nleaves_m1);
            st       <= S_TB;
          end
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy      = (st != S_IDLE);
  assign out_rdata = out_mem[out_raddr];
endmodule
