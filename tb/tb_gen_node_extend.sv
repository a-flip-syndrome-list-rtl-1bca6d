// tb_gen_node_extend: flip-syndrome extension of a (16, 10) polar block.  The bench
// builds the syndrome table itself (all 2^16 patterns scanned in ascending weight,
// 8 kept per syndrome), serves the table reads, and checks every candidate:
// a valid candidate is a codeword (zero at all frozen positions after the Kronecker
// transform), it flips exactly the T = 3 least reliable positions selected by its
// flip index, its metric is the sum of |alpha| over the positions where it differs
// from the hard decision, no two valid candidates coincide, and a candidate is
// invalid exactly when its table pattern touches one of the T positions.
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: The flip/lookup/guard rules follow the flip-syndrome-list method; the (16, 10) mask
// and the random LLRs are this bench's choices.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_gen_node_extend;
  import fsl_pkg::*;
  logic [15:0] beta, frozen;
  logic [5:0]  mag [16];
  logic [3:0]  ord [16];
  logic [11:0] base;
  logic [11:0] raddr [8];
  logic [7:0][15:0] rdata [8];
  cand_t       cand [64];
  logic [7:0][15:0] table_m [4096];
  int checks = 0, failures = 0;

  gen_node_extend #(.AW(12)) dut (.*);

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

  initial begin
    int cnt [64];
    frozen = 16'h011F;            // positions 0-4 and 8 frozen: K_B = 10
    base   = 12'd100;
    for (int s = 0; s < 64; s++) cnt[s] = 0;
    for (int w = 0; w <= 16; w++)
      for (int p = 0; p < 65536; p++)
        if ($countones(p) == w) begin
          logic [15:0] u;
          int sy, k;
          u = kr(16'(p));
          sy = 0; k = 0;
          for (int q = 0; q < 16; q++) if (frozen[q]) begin sy |= int'(u[q]) << k; k++; end
          if (cnt[sy] < 8) begin
            table_m[100 + sy][cnt[sy]] = 16'(p);
            cnt[sy]++;
          end
        end

    for (int n = 0; n < 200; n++) begin
      int pos [16];
      logic [15:0] tset;
      for (int i = 0; i < 16; i++) pos[i] = i;
      for (int i = 15; i > 0; i--) begin
        int j, t;
        j = int'($urandom % (i + 1));
        t = pos[i]; pos[i] = pos[j]; pos[j] = t;
      end
      for (int k = 0; k < 16; k++) begin
        mag[pos[k]] = 6'(k + ((n % 3 == 0) ? 20 : 1));
        ord[k] = 4'(pos[k]);
      end
      tset = '0;
      for (int k = 0; k < 3; k++) tset[pos[k]] = 1'b1;
      beta = 16'($urandom);
      #1;
      for (int t = 0; t < 8; t++)
        for (int p = 0; p < 8; p++) begin
          cand_t c;
          logic [15:0] e, fl, d;
          int dsum;
          c  = cand[t*8+p];
          e  = table_m[raddr[t]][p];
          fl = '0;
          for (int k = 0; k < 3; k++) if ((t >> k) & 1) fl[pos[k]] = 1'b1;
          checks++;
          if (c.valid != ((e & tset) == 0)) begin
            failures++;
            $display("FAIL n=%0d t=%0d p=%0d validity", n, t, p);
          end
          if (c.valid) begin
            d = c.cw ^ beta;
            dsum = 0;
            for (int i = 0; i < 16; i++) if (d[i]) dsum += int'(mag[i]);
            if (dsum > 63) dsum = 63;
            checks += 3;
            if ((kr(c.cw) & frozen) != 0) begin
              failures++;
              $display("FAIL n=%0d t=%0d p=%0d not a codeword", n, t, p);
            end
            if ((d & tset) != fl) begin
              failures++;
              $display("FAIL n=%0d t=%0d p=%0d flip set", n, t, p);
            end
            if (int'(c.dpm) != dsum) begin
              failures++;
              $display("FAIL n=%0d t=%0d p=%0d dpm %0d exp %0d", n, t, p, c.dpm, dsum);
            end
            for (int o = 0; o < t*8+p; o++)
              if (cand[o].valid && cand[o].cw == c.cw) begin
                failures++;
                $display("FAIL n=%0d duplicate candidate", n);
              end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
