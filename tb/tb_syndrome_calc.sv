// tb_syndrome_calc: (1) reproduces Table II of the paper: for B = 8, K_B = 6 (frozen
// positions 0 and 1) every listed error pattern must give the syndrome of its row;
// (2) for B = 16 and random frozen masks the syndrome must equal H_B * beta with H_B
// built from the columns of F^{(x)4} at the frozen positions.
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: Table II values are the published ones; bit packing of the syndrome is inferred from them.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_syndrome_calc;
  logic [7:0]  b8, f8, s8;
  logic [15:0] b16, f16, s16;
  int checks = 0, failures = 0;

  syndrome_calc #(.B(8))  dut8  (.beta(b8),  .frozen(f8),  .syn(s8));
  syndrome_calc #(.B(16)) dut16 (.beta(b16), .frozen(f16), .syn(s16));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] tab [4][4] = '{'{8'h00, 8'h05, 8'h11, 8'h41},
                             '{8'h01, 8'h04, 8'h10, 8'h40},
                             '{8'h03, 8'h09, 8'h21, 8'h81},
                             '{8'h02, 8'h08, 8'h20, 8'h80}};

  initial begin
    f8 = 8'h03;
    b16 = '0; f16 = '0;
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++) begin
        b8 = tab[r][c];
        #1;
        checks++;
        if (s8 != 8'(r)) begin
          failures++;
          $display("FAIL Table II pattern %h: syndrome %b, row %0d", b8, s8[1:0], r);
        end
      end
    for (int n = 0; n < 2000; n++) begin
      logic [15:0] e;
      int k;
      b16 = 16'($urandom);
      f16 = 16'($urandom);
      #1;
      e = '0;
      k = 0;
      for (int j = 0; j < 16; j++)
        if (f16[j]) begin
          for (int i = 0; i < 16; i++)
            if ((i & j) == j) e[k] = e[k] ^ b16[i];
          k++;
        end
      checks++;
      if (s16 != e) begin
        failures++;
        if (failures < 10) $display("FAIL beta=%h frozen=%h syn=%h exp=%h", b16, f16, s16, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
