// tb_min_k_select: 64 -> 8 selection with random metrics and validity, compared with
// a reference stable sort in which invalid entries rank last.
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: Stable ordering and invalid-last ranking are this design's choices.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_min_k_select;
  logic       in_valid  [64];
  logic [5:0] in_metric [64];
  logic       out_valid [8];
  logic [5:0] out_metric[8];
  logic [5:0] out_idx   [8];
  int checks = 0, failures = 0;

  min_k_select #(.N_IN(64), .K_OUT(8), .MW(6)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      int idx [64];
      int key [64];
      for (int i = 0; i < 64; i++) begin
        in_valid[i]  = (n % 5 == 0) ? (i % 13 == 0) : ($urandom % 8 != 0);
        in_metric[i] = (n % 2) ? 6'($urandom) : 6'($urandom % 6);
        key[i] = (in_valid[i] ? 0 : 64) + int'(in_metric[i]);
        idx[i] = i;
      end
      for (int i = 1; i < 64; i++) begin
        int v, j;
        v = idx[i];
        j = i - 1;
        while (j >= 0 && key[idx[j]] > key[v]) begin
          idx[j+1] = idx[j];
          j--;
        end
        idx[j+1] = v;
      end
      #1;
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (int'(out_idx[k]) != idx[k] || out_valid[k] != in_valid[idx[k]] ||
            out_metric[k] != in_metric[idx[k]]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d k=%0d idx=%0d exp=%0d", n, k, out_idx[k], idx[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
