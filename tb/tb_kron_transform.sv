// tb_kron_transform: compares kron_transform (B = 16) with the matrix product
// y = x * F^{(x)4}, where entry (i, j) of F^{(x)4} is 1 exactly when every bit of j is
// also set in i, and checks that the transform is its own inverse.
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: The matrix definition is the standard polar kernel power.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_kron_transform;
  logic [15:0] x, y, x2, y2;
  int checks = 0, failures = 0;

  kron_transform #(.B(16)) dut  (.x(x),  .y(y));
  kron_transform #(.B(16)) dut2 (.x(x2), .y(y2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [15:0] e;
      x = (n < 16) ? 16'(1 << n) : 16'($urandom);
      #1;
      e = '0;
      for (int j = 0; j < 16; j++)
        for (int i = 0; i < 16; i++)
          if ((i & j) == j) e[j] = e[j] ^ x[i];
      x2 = y;
      #1;
      checks += 2;
      if (y != e)  begin failures++; $display("FAIL x=%h y=%h exp=%h", x, y, e); end
      if (y2 != x) begin failures++; $display("FAIL inverse x=%h got %h", x, y2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
