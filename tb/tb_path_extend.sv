// tb_path_extend: one-path block extension for R0, ML, SPC, R1 and general blocks.
// For every block type the L = 8 outputs must be in ascending metric order, be
// codewords of the block, and carry pm_in plus the sum of |alpha| over disagreements
// with the hard decision.  For R0, ML, SPC and R1 blocks the 8 output metrics must
// also equal the 8 best metrics over all codewords of the block (brute force), i.e.
// the one-shot extension loses nothing.  The syndrome table of the general block is
// built by the bench.
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: The brute-force optimality claim is what Propositions 1 and 2 state for R1 and SPC.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_path_extend;
  import fsl_pkg::*;
  logic signed [5:0] llr [16];
  logic [15:0] frozen;
  logic [5:0]  pm_in;
  logic [11:0] base;
  logic [11:0] raddr [8];
  logic [7:0][15:0] rdata [8];
  logic        out_valid [8];
  logic [15:0] out_cw [8];
  logic [5:0]  out_pm [8];
  logic [7:0][15:0] table_m [4096];
  int checks = 0, failures = 0;
  int type_seen [5];

  path_extend #(.AW(12)) dut (.*);

  always_comb for (int t = 0; t < 8; t++) rdata[t] = table_m[raddr[t]];

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] kr(input logic [15:0] x);
    logic [15:0] y;
    y = '0;
    for (int j = 0; j < 16; j++)
      for (int i = 0; i < 16; i++) if ((i & j) == j) y[j] ^= x[i];
    return y;
  endfunction

  logic [15:0] masks [5] = '{16'hFFFF, 16'hFEE8, 16'h011F, 16'h0001, 16'h0000};

  initial begin
    int cnt [64];
    base = 12'd0;
    for (int s = 0; s < 64; s++) cnt[s] = 0;
    for (int w = 0; w <= 16; w++)
      for (int p = 0; p < 65536; p++)
        if ($countones(p) == w) begin
          logic [15:0] u;
          int sy, k;
          u = kr(16'(p));
          sy = 0; k = 0;
          for (int q = 0; q < 16; q++) if (masks[2][q]) begin sy |= int'(u[q]) << k; k++; end
          if (cnt[sy] < 8) begin
            table_m[sy][cnt[sy]] = 16'(p);
            cnt[sy]++;
          end
        end
    for (int i = 0; i < 5; i++) type_seen[i] = 0;

    for (int n = 0; n < 100; n++) begin
      int pos [16];
      logic [15:0] beta;
      int mg [16];
      int ty;
      ty = n % 5;
      frozen = masks[ty];
      pm_in = 6'($urandom % 6);
      for (int i = 0; i < 16; i++) pos[i] = i;
      for (int i = 15; i > 0; i--) begin
        int j, t;
        j = int'($urandom % (i + 1));
        t = pos[i]; pos[i] = pos[j]; pos[j] = t;
      end
      for (int k = 0; k < 16; k++) begin
        mg[pos[k]] = k + 1;
        llr[pos[k]] = ($urandom & 1) ? -6'(k + 1) : 6'(k + 1);
      end
      for (int i = 0; i < 16; i++) beta[i] = llr[i][5];
      #1;
      type_seen[int'(classify(frozen))]++;
      for (int k = 0; k < 8; k++)
        if (out_valid[k]) begin
          logic [15:0] d;
          int dsum;
          d = out_cw[k] ^ beta;
          dsum = int'(pm_in);
          for (int i = 0; i < 16; i++) if (d[i]) dsum += mg[i];
          if (dsum > 63) dsum = 63;
          checks += 2;
          if ((kr(out_cw[k]) & frozen) != 0) begin
            failures++;
            $display("FAIL n=%0d k=%0d not a codeword", n, k);
          end
          if (int'(out_pm[k]) != dsum) begin
            failures++;
            $display("FAIL n=%0d k=%0d pm %0d exp %0d", n, k, out_pm[k], dsum);
          end
          if (k > 0) begin
            checks++;
            if (!out_valid[k-1] || out_pm[k] < out_pm[k-1]) begin
              failures++;
              $display("FAIL n=%0d k=%0d order", n, k);
            end
          end
        end
      if (ty != 2) begin
        // brute force over all 2^K_B codewords
        int kk, best [8], nb;
        logic [15:0] info_pos [16];
        kk = 0;
        for (int j = 0; j < 16; j++) if (!frozen[j]) begin info_pos[kk] = 16'(j); kk++; end
        for (int k = 0; k < 8; k++) best[k] = 1000;
        for (int m = 0; m < (1 << kk); m++) begin
          logic [15:0] u, c, d;
          int dsum;
          u = '0;
          for (int k = 0; k < kk; k++) u[info_pos[k]] = m[k];
          c = kr(u);
          d = c ^ beta;
          dsum = int'(pm_in);
          for (int i = 0; i < 16; i++) if (d[i]) dsum += mg[i];
          if (dsum > 63) dsum = 63;
          for (int k = 0; k < 8; k++)
            if (dsum < best[k]) begin
              for (int q = 7; q > k; q--) best[q] = best[q-1];
              best[k] = dsum;
              break;
            end
        end
        nb = (kk >= 3) ? 8 : (1 << kk);
        for (int k = 0; k < 8; k++) begin
          checks++;
          if (k < nb) begin
            if (!out_valid[k] || int'(out_pm[k]) != best[k]) begin
              failures++;
              $display("FAIL n=%0d type %0d rank %0d: pm %0d, brute force %0d",
                       n, ty, k, out_pm[k], best[k]);
            end
          end else if (out_valid[k]) begin
            failures++;
            $display("FAIL n=%0d rank %0d should be invalid", n, k);
          end
        end
      end
    end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (type_seen[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
