// tb_llr_sorter: random LLR blocks (with many ties); checks that ord is a
// permutation listing positions by ascending |LLR|, ties by ascending index, and
// that mag holds the magnitudes.
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: Tie-breaking by index is this design's choice.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_llr_sorter;
  logic signed [5:0] llr [16];
  logic [5:0] mag [16];
  logic [3:0] ord [16];
  int checks = 0, failures = 0;

  llr_sorter #(.B(16), .LLR_W(6)) dut (.llr(llr), .mag(mag), .ord(ord));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      int idx [16];
      int m [16];
      for (int i = 0; i < 16; i++) begin
        int v;
        v = (n % 2) ? int'($urandom % 63) - 31 : int'($urandom % 9) - 4;
        llr[i] = 6'(v);
        m[i] = (v < 0) ? -v : v;
        idx[i] = i;
      end
      // reference: stable insertion sort on magnitude
      for (int i = 1; i < 16; i++) begin
        int v, j;
        v = idx[i];
        j = i - 1;
        while (j >= 0 && m[idx[j]] > m[v]) begin
          idx[j+1] = idx[j];
          j--;
        end
        idx[j+1] = v;
      end
      #1;
      for (int k = 0; k < 16; k++) begin
        checks += 2;
        if (int'(ord[k]) != idx[k]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d k=%0d ord=%0d exp=%0d", n, k, ord[k], idx[k]);
        end
        if (int'(mag[k]) != m[k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
