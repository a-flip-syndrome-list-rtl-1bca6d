// tb_syndrome_table: fills a small table with random entries, then reads random
// addresses on all read ports and compares with a shadow copy; also checks that a
// read sees a write only after the clock edge.
// Timing: clock period 2 time units; stimulus changes after the falling edge and
// results are sampled after the rising edge.  A cycle-count watchdog ends a hung run.
// Provenance: Table size and the read-port count are this design's choices.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_syndrome_table;
  localparam int DEPTH = 64, NRD = 8;
  logic clk = 0, we;
  logic [5:0] waddr;
  logic [7:0][15:0] wdata;
  logic [5:0] raddr [NRD];
  logic [7:0][15:0] rdata [NRD];
  logic [7:0][15:0] shadow [DEPTH];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  syndrome_table #(.B(16), .LSD(8), .DEPTH(DEPTH), .NRD(NRD)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0;
    for (int r = 0; r < NRD; r++) raddr[r] = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a);
      for (int p = 0; p < 8; p++) wdata[p] = 16'($urandom);
      shadow[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 200; n++) begin
      for (int r = 0; r < NRD; r++) raddr[r] = 6'($urandom);
      #0.5;
      for (int r = 0; r < NRD; r++) begin
        checks++;
        if (rdata[r] != shadow[raddr[r]]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d addr %0d", r, raddr[r]);
        end
      end
      @(negedge clk);
    end
    // write timing
    raddr[0] = 6'd5;
    we = 1; waddr = 6'd5; wdata = {8{16'hA5A5}};
    #0.5;
    checks++;
    if (rdata[0] != shadow[5]) failures++;
    @(negedge clk);
    we = 0;
    checks++;
    if (rdata[0] != {8{16'hA5A5}}) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
