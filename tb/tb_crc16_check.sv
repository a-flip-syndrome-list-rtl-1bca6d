// tb_crc16_check: random messages with their CRC-16 (generator 0x11021, computed here
// by polynomial long division) fed 16 bits per cycle with random 'take' masks; the
// remainder must be zero, and must not be after one bit is corrupted.
// Timing: clock period 2 time units; stimulus changes after the falling edge and
// results are sampled after the rising edge.  A cycle-count watchdog ends a hung run.
// Provenance: Generator 0x1021 follows the common CCITT choice; the decoder text only fixes a 16-bit CRC.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_crc16_check;
  logic clk = 0, rst_n = 0, clr, en;
  logic [15:0] data, take, rem;
  logic ok;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  crc16_check #(.W(16)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; en = 0; data = 0; take = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      bit msg [$];
      bit dv [$];
      int len, pos, corrupt;
      msg.delete();
      dv.delete();
      len = 20 + int'($urandom % 300);
      for (int i = 0; i < len; i++) msg.push_back(bit'($urandom & 1));
      // long division of msg * x^16 by x^16 + x^12 + x^5 + 1
      dv = msg;
      for (int i = 0; i < 16; i++) dv.push_back(1'b0);
      for (int i = 0; i < len; i++)
        if (dv[i]) begin
          dv[i] ^= 1'b1; dv[i+4] ^= 1'b1; dv[i+11] ^= 1'b1; dv[i+16] ^= 1'b1;
        end
      for (int i = 0; i < 16; i++) msg.push_back(dv[len+i]);
      corrupt = n % 2;
      if (corrupt) msg[$urandom % msg.size()] ^= 1'b1;
      clr = 1;
      @(negedge clk);
      clr = 0;
      pos = 0;
      while (pos < msg.size()) begin
        take = 16'($urandom) | 16'h0101;
        data = 16'($urandom);
        for (int q = 0; q < 16; q++)
          if (take[q]) begin
            if (pos < msg.size()) begin data[q] = msg[pos]; pos++; end
            else take[q] = 1'b0;
          end
        en = 1;
        @(negedge clk);
      end
      en = 0;
      @(negedge clk);
      checks++;
      if (ok == bit'(corrupt)) begin
        failures++;
        $display("FAIL n=%0d corrupt=%0d ok=%0d rem=%h", n, corrupt, ok, rem);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
