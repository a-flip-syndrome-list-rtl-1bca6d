// tb_llr_pe: exhaustive check of the f and g LLR rules of llr_pe for 6-bit LLRs
// against an integer reference (min-sum f, g with beta, saturation to +-31).
// Timing: the module under test is combinational; a stimulus is applied, 1 time unit
// passes, then the outputs are compared.  A time-based watchdog ends a hung run.
// Provenance: The min-sum f and g rules are the standard ones; saturation is this design's choice.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_llr_pe;
  logic is_g, beta;
  logic signed [5:0] a, b, y;
  int checks = 0, failures = 0;

  llr_pe #(.LLR_W(6)) dut (.is_g(is_g), .beta(beta), .a(a), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input int v);
    return (v > 31) ? 31 : (v < -31) ? -31 : v;
  endfunction

  initial begin
    for (int ia = -31; ia <= 31; ia++)
      for (int ib = -31; ib <= 31; ib++)
        for (int m = 0; m < 4; m++) begin
          int exp_v, ma, mb;
          a = 6'(ia); b = 6'(ib); is_g = m[0]; beta = m[1];
          #1;
          ma = (ia < 0) ? -ia : ia;
          mb = (ib < 0) ? -ib : ib;
          if (!is_g) exp_v = (((ia < 0) != (ib < 0)) ? -1 : 1) * ((ma < mb) ? ma : mb);
          else       exp_v = sat((beta ? -ia : ia) + ib);
          checks++;
          if (int'(y) != exp_v) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d g=%0d beta=%0d y=%0d exp=%0d",
                                        ia, ib, is_g, beta, y, exp_v);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
