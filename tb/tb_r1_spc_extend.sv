// tb_r1_spc_extend: checks the 13 candidates of R1 and SPC blocks.
// (1) Each candidate equals beta flipped at the sorted positions listed in
//     Propositions 1 and 2 (pattern lists written out independently below), with
//     the metric summed from those positions.
// (2) Independently of the pattern lists, the 8 smallest candidate metrics equal
//     the 8 smallest incremental metrics over all 2^16 flips (R1) or over all flips
//     that make the block parity even (SPC), found by brute force.
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: The pattern lists are the published ones; brute force confirms them independently.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_r1_spc_extend;
  import fsl_pkg::*;
  logic        is_spc;
  logic [15:0] beta;
  logic [5:0]  mag [16];
  logic [3:0]  ord [16];
  cand_t       cand [13];
  int checks = 0, failures = 0;

  r1_spc_extend dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sorted positions flipped by each pattern (-1 terminates)
  int r1p  [13][4] = '{'{-1,0,0,0},'{0,-1,0,0},'{1,-1,0,0},'{2,-1,0,0},'{3,-1,0,0},
                       '{4,-1,0,0},'{5,-1,0,0},'{6,-1,0,0},'{0,1,-1,0},'{0,2,-1,0},
                       '{1,2,-1,0},'{0,3,-1,0},'{0,1,2,-1}};
  int evp  [13][5] = '{'{-1,0,0,0,0},'{0,1,-1,0,0},'{0,2,-1,0,0},'{0,3,-1,0,0},
                       '{0,4,-1,0,0},'{0,5,-1,0,0},'{0,6,-1,0,0},'{0,7,-1,0,0},
                       '{1,2,-1,0,0},'{1,3,-1,0,0},'{1,4,-1,0,0},'{2,3,-1,0,0},
                       '{0,1,2,3,-1}};
  int odp  [13][4] = '{'{0,-1,0,0},'{1,-1,0,0},'{2,-1,0,0},'{3,-1,0,0},'{4,-1,0,0},
                       '{5,-1,0,0},'{6,-1,0,0},'{7,-1,0,0},'{0,1,2,-1},'{0,1,3,-1},
                       '{0,2,3,-1},'{1,2,3,-1},'{0,1,4,-1}};

  initial begin
    for (int n = 0; n < 60; n++) begin
      int pos [16];
      int best [8];
      int got [13];
      bit par;
      // distinct magnitudes, small enough that 4-bit sums never saturate
      for (int i = 0; i < 16; i++) pos[i] = i;
      for (int i = 15; i > 0; i--) begin
        int j, t;
        j = int'($urandom % (i + 1));
        t = pos[i]; pos[i] = pos[j]; pos[j] = t;
      end
      for (int k = 0; k < 16; k++) begin
        mag[pos[k]] = 6'(k + 1);
        ord[k] = 4'(pos[k]);
      end
      beta   = 16'($urandom);
      is_spc = n[0];
      par    = ^beta;
      #1;
      // (1) explicit pattern lists
      for (int t = 0; t < 13; t++) begin
        logic [15:0] f;
        int d;
        f = '0;
        d = 0;
        for (int q = 0; q < 5; q++) begin
          int p;
          if (!is_spc) p = (q < 4) ? r1p[t][q] : -1;
          else if (par) p = (q < 4) ? odp[t][q] : -1;
          else p = evp[t][q];
          if (p < 0) break;
          f[pos[p]] = 1'b1;
          d += p + 1;
        end
        checks++;
        if (cand[t].cw != (beta ^ f) || int'(cand[t].dpm) != d || !cand[t].valid) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d t=%0d cw=%h exp=%h dpm=%0d exp=%0d",
                                      n, t, cand[t].cw, beta ^ f, cand[t].dpm, d);
        end
        got[t] = int'(cand[t].dpm);
      end
      // (2) brute force over all flips
      for (int k = 0; k < 8; k++) best[k] = 1000;
      for (int f = 0; f < 65536; f++) begin
        int d;
        if (is_spc && (($countones(f) % 2) != int'(par))) continue;
        d = 0;
        for (int i = 0; i < 16; i++) if ((f >> i) & 1) d += int'(mag[i]);
        for (int k = 0; k < 8; k++)
          if (d < best[k]) begin
            for (int m = 7; m > k; m--) best[m] = best[m-1];
            best[k] = d;
            break;
          end
      end
      got.sort();
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (got[k] != best[k]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d spc=%0d rank %0d: %0d vs brute force %0d",
                                      n, is_spc, k, got[k], best[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
