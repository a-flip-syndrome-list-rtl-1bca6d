// tb_ml_node_extend: exhaustive extension for random frozen masks with K_B = 0..6.
// Exactly 2^K_B candidates must be valid, all distinct codewords of the block (zero
// at the frozen positions after the Kronecker transform) carrying the information
// bits of their index, each with the metric sum of |alpha| over disagreements with
// the hard decision (saturated at 63).
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: Exhaustive search for K_B <= 6 follows the method; the metric saturation is ours.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_ml_node_extend;
  import fsl_pkg::*;
  logic [15:0] beta, frozen;
  logic [5:0]  mag [16];
  cand_t       cand [64];
  int checks = 0, failures = 0;

  ml_node_extend dut (.*);

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

  initial begin
    for (int n = 0; n < 300; n++) begin
      int kk, nvalid;
      kk = n % 7;
      frozen = '1;
      while (16 - $countones(frozen) < kk) frozen[$urandom % 16] = 1'b0;
      beta = 16'($urandom);
      for (int i = 0; i < 16; i++) mag[i] = 6'($urandom % ((n % 2) ? 32 : 8));
      #1;
      nvalid = 0;
      for (int m = 0; m < 64; m++) begin
        checks++;
        if (cand[m].valid != (m < (1 << kk))) begin
          failures++;
          $display("FAIL n=%0d m=%0d validity K=%0d", n, m, kk);
        end
        if (cand[m].valid) begin
          logic [15:0] u, d;
          int dsum, k;
          u = kr(cand[m].cw);
          d = cand[m].cw ^ beta;
          dsum = 0;
          for (int i = 0; i < 16; i++) if (d[i]) dsum += int'(mag[i]);
          if (dsum > 63) dsum = 63;
          k = 0;
          checks += 3;
          if ((u & frozen) != 0) begin failures++; $display("FAIL n=%0d not a codeword", n); end
          for (int j = 0; j < 16; j++)
            if (!frozen[j]) begin
              if (u[j] != ((m >> k) & 1)) begin
                failures++;
                $display("FAIL n=%0d m=%0d info bit %0d", n, m, j);
              end
              k++;
            end
          if (int'(cand[m].dpm) != dsum) begin
            failures++;
            $display("FAIL n=%0d m=%0d dpm %0d exp %0d", n, m, cand[m].dpm, dsum);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
