// tb_fsl_latency: decodes one frame of each code of the paper's latency table
// (N = 1024, 4096, 16384 at rates 1/3 and 1/2; K payload bits + 16 CRC bits) and
// checks the measured cycle count against the decoder's schedule.  The paper's
// latencies (16-bit FSL, 1 GHz) are printed next to the measured cycles.
// Frame generation is the same as in tb_fsl_decoder:
//
// For each frame the bench builds a polar code with the polarization-weight
// construction, draws a random payload, appends CRC-16 (0x1021), encodes with
// F^{(x)n}, sends BPSK through Gaussian noise, quantises to 6-bit LLRs, loads the
// decoder (LLRs, frozen mask, syndrome tables computed here by enumerating error
// patterns in ascending weight) and checks that the decoded u vector equals the sent
// one.  The decoder keeps its default parameters.
// Interface and timing: drives the decoder's load ports one word per cycle with a
// 2-time-unit clock, pulses start, waits for done and reads the output buffer; a
// cycle-count watchdog ends a hung run.
// Provenance: The code list and reference latencies are the published ones; the expected cycle counts
// come from this design's own schedule, not from the publication.
// Reports TB_RESULT checks=<n> failures=<n> and finishes.
module tb_fsl_latency;
  import fsl_pkg::*;

  localparam int unsigned N_MAX = 16384;
  localparam int unsigned NW    = N_MAX / 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [3:0]  log2n;
  logic        crc_en, start, busy, done;
  logic        llr_we, fz_we, st_we;
  logic [9:0]  llr_waddr, fz_waddr, out_raddr;
  logic [15:0][5:0] llr_wdata;
  logic [15:0] fz_wdata, out_rdata;
  logic [12:0] st_waddr;
  logic [7:0][15:0] st_wdata;
  logic        crc_pass, ev_leaf;
  logic [2:0]  out_rank;
  node_t       ev_type;

  fsl_decoder dut (.*);

  int checks = 0, failures = 0;
  int type_cnt [5];
  int rank_gt0 = 0, crc_fail_seen = 0;

  // --------------------------------------------------------------- watchdog
  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (ev_leaf) type_cnt[int'(ev_type)]++;

  // --------------------------------------------------------------- reference helpers
  bit u_ref   [N_MAX];
  bit c_ref   [N_MAX];
  bit frozen  [N_MAX];
  real pw     [N_MAX];
  int  order  [N_MAX];
  logic [15:0] kr [65536];     // Kronecker transform of every 16-bit pattern
  int  wsort  [65536];         // patterns listed in ascending weight

  function automatic logic [15:0] kron16(input logic [15:0] x);
    logic [15:0] y;
    y = x;
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < 16; i++)
        if ((i & (1 << s)) == 0) y[i] = y[i] ^ y[i + (1 << s)];
    return y;
  endfunction

  function automatic real gauss();
    real acc;
    acc = 0.0;
    for (int i = 0; i < 12; i++) acc += real'($urandom % 65536) / 65536.0;
    return acc - 6.0;
  endfunction

  task automatic build_code(input int n, input int kk);
    int nn;
    nn = 1 << n;
    for (int i = 0; i < nn; i++) begin
      pw[i] = 0.0;
      for (int b = 0; b < n; b++) if ((i >> b) & 1) pw[i] += 2.0 ** (0.25 * b);
      order[i] = i;
    end
    // sort indices by descending reliability (insertion sort is enough here)
    for (int i = 1; i < nn; i++) begin
      int v, j;
      v = order[i];
      j = i - 1;
      while (j >= 0 && pw[order[j]] < pw[v]) begin
        order[j+1] = order[j];
        j--;
      end
      order[j+1] = v;
    end
    for (int i = 0; i < nn; i++) frozen[i] = 1'b1;
    for (int i = 0; i < kk + 16; i++) frozen[order[i]] = 1'b0;
  endtask

  task automatic make_frame(input int n, input int kk);
    int nn, p;
    logic [15:0] crc;
    bit msg [$];
    nn = 1 << n;
    crc = '0;
    for (int i = 0; i < kk; i++) begin
      bit b;
      b = bit'($urandom & 1);
      msg.push_back(b);
      crc = {crc[14:0], 1'b0} ^ ((crc[15] ^ b) ? 16'h1021 : 16'h0);
    end
    for (int i = 15; i >= 0; i--) msg.push_back(crc[i]);
    p = 0;
    for (int i = 0; i < nn; i++)
      if (frozen[i]) u_ref[i] = 1'b0;
      else begin
        u_ref[i] = msg[p];
        p++;
      end
    for (int i = 0; i < nn; i++) c_ref[i] = u_ref[i];
    for (int s = 0; s < n; s++)
      for (int i = 0; i < nn; i++)
        if ((i & (1 << s)) == 0) c_ref[i] = c_ref[i] ^ c_ref[i + (1 << s)];
  endtask

  // Syndrome tables of all general blocks, back to back in block order.
  task automatic load_tables(input int n);
    int nb, basev;
    nb = 1 << (n - 4);
    basev = 0;
    for (int blk = 0; blk < nb; blk++) begin
      logic [15:0] fz;
      for (int q = 0; q < 16; q++) fz[q] = frozen[blk*16+q];
      if (classify(fz) == NODE_GEN) begin
        int nsyn, filled;
        int cnt [512];
        logic [7:0][15:0] ent [512];
        nsyn = 1 << (16 - int'(info_count(fz)));
        for (int s = 0; s < nsyn; s++) cnt[s] = 0;
        filled = 0;
        for (int w = 0; w < 65536 && filled < nsyn * 8; w++) begin
          logic [15:0] e, u;
          int sy, k;
          e = 16'(wsort[w]);
          u = kr[wsort[w]];
          sy = 0;
          k = 0;
          for (int q = 0; q < 16; q++)
            if (fz[q]) begin
              sy |= int'(u[q]) << k;
              k++;
            end
          if (cnt[sy] < 8) begin
            ent[sy][cnt[sy]] = e;
            cnt[sy]++;
            filled++;
          end
        end
        for (int s = 0; s < nsyn; s++) begin
          @(negedge clk);
          st_we    = 1'b1;
          st_waddr = 13'(basev + s);
          st_wdata = ent[s];
        end
        basev += nsyn;
      end
    end
    @(negedge clk);
    st_we = 1'b0;
    if (basev > 8192) begin
      failures++;
      $display("syndrome tables need %0d entries", basev);
    end
  endtask

  task automatic load_channel(input int n, input real ebn0_db, input bit pure_noise,
                              input int kk);
    int nn;
    real rate, sigma;
    nn = 1 << n;
    rate  = real'(kk) / real'(nn);
    sigma = $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0_db / 10.0))));
    for (int w = 0; w < nn / 16; w++) begin
      @(negedge clk);
      llr_we    = 1'b1;
      llr_waddr = 10'(w);
      fz_we     = 1'b1;
      fz_waddr  = 10'(w);
      for (int q = 0; q < 16; q++) begin
        real y, l;
        int  li;
        y = pure_noise ? gauss() : (c_ref[w*16+q] ? -1.0 : 1.0) + sigma * gauss();
        l = y * 2.0 / (sigma * sigma) * 2.0;
        li = (l >= 0.0) ? int'(l + 0.5) : -int'(-l + 0.5);
        if (li > 31)  li = 31;
        if (li < -31) li = -31;
        llr_wdata[q] = 6'(li);
        fz_wdata[q]  = frozen[w*16+q];
      end
    end
    @(negedge clk);
    llr_we = 1'b0;
    fz_we  = 1'b0;
  endtask

  task automatic run_frame(input int n, input int kk, input real ebn0_db,
                           input bit pure_noise, output int cycles, output int errs);
    make_frame(n, kk);
    load_channel(n, ebn0_db, pure_noise, kk);
    @(negedge clk);
    log2n  = 4'(n);
    crc_en = 1'b1;
    start  = 1'b1;
    @(negedge clk);
    start  = 1'b0;
    cycles = 1;
    while (!done && cycles < (3 << n)) begin
      @(negedge clk);
      cycles++;
    end
    if (!done) begin
      failures++;
      $display("FAIL: no done within %0d cycles", 3 << n);
    end
    errs = 0;
    for (int w = 0; w < (1 << n) / 16; w++) begin
      out_raddr = 10'(w);
      #0.1;
      for (int q = 0; q < 16; q++) if (out_rdata[q] != u_ref[w*16+q]) errs++;
    end
  endtask

  int ns [6]       = '{10, 10, 12, 12, 14, 14};
  int ks [6]       = '{341, 512, 1365, 2048, 5461, 8192};
  int paper_ns [6] = '{697, 776, 3003, 3501, 13461, 15305};

  // Cycles of one decode by the schedule of fsl_decoder (a frame that passes the
  // CRC on the best path): LLR steps, 2 cycles per block, partial-sum combines,
  // traceback, CRC pass, final check, plus the start cycle.
  function automatic int sched_cycles(input int n);
    int nb, c;
    nb = 1 << (n - 4);
    c = 0;
    for (int s = 4; s < n; s++) c += 1 << (s - 4);
    for (int i = 1; i < nb; i++) begin
      int h;
      h = 0;
      for (int b = 0; b < 16; b++) if (((i ^ (i - 1)) >> b) != 0) h = b;
      c += (2 << h) - 1;
    end
    for (int i = 0; i < nb - 1; i++) begin
      int t;
      t = 0;
      while ((i >> t) & 1) t++;
      c += 1 << t;
    end
    return c + 2 * nb + nb + nb + 1 + 1;
  endfunction

  initial begin
    int cycles, errs;
    for (int i = 0; i < 5; i++) type_cnt[i] = 0;
    for (int p = 0; p < 65536; p++) kr[p] = kron16(16'(p));
    begin
      int k;
      k = 0;
      for (int w = 0; w <= 16; w++)
        for (int p = 0; p < 65536; p++)
          if ($countones(p) == w) begin
            wsort[k] = p;
            k++;
          end
    end
    {log2n, crc_en, start, llr_we, fz_we, st_we} = '0;
    {llr_waddr, fz_waddr, out_raddr, st_waddr} = '0;
    llr_wdata = '0;
    fz_wdata  = '0;
    st_wdata  = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    // The six (N, rate) points of the paper's latency table, one frame each.
    foreach (ns[i]) begin
      int exp_cyc;
      build_code(ns[i], ks[i]);
      load_tables(ns[i]);
      run_frame(ns[i], ks[i], 3.0, 1'b0, cycles, errs);
      exp_cyc = sched_cycles(ns[i]);
      $display("N=%0d K=%0d: %0d cycles (%0d ns at 1 GHz; paper 16b FSL: %0d ns), %0d bit errors",
               1 << ns[i], ks[i], cycles, cycles, paper_ns[i], errs);
      checks += 2;
      if (errs != 0 || !crc_pass || out_rank != 0) begin
        failures++;
        $display("FAIL: frame not decoded by the best path");
      end
      if (cycles != exp_cyc) begin
        failures++;
        $display("FAIL: %0d cycles, schedule predicts %0d", cycles, exp_cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
