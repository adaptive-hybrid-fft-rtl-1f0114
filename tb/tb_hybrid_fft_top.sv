// tb_hybrid_fft_top: end-to-end test of the hybrid FFT processor.
//
// The bench plays the host: it loads a chain configuration computed with the
// fft_pkg helper functions, streams random batches into the chains and
// compares every result with a double-precision DFT of the batch.  Scenarios
// (all in pipeline mode, all parameters at their defaults):
//   A  four parallel one-stage chains, N = 32, 16, 8, 2 (radix 2^5/2^4/2^3/2)
//   B  two two-stage chains MDC0->MDC3 and MDC1->MDC2, N = 1024 and 128
//   C  one three-stage chain MDC0->1->2, N = 4096 (radix 2^2, 2^5, 2^5),
//      three batches back to back
// Mechanisms counted (each must occur): mixed-radix bypass, non-trivial
// rotation, sigma_3 swap, in-place overwrite with a permuted write pattern,
// concurrent chains, continuous back-to-back batches.  The AGU conflict flags
// must stay low, and a chain must accept one batch every N/2 cycles.
`timescale 1ns/1ps
module tb_hybrid_fft_top;
  import fft_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic             cfg_we = 0, lgp_we = 0, start = 0;
  logic [1:0]       cfg_idx = 0, lgp_wdata = 1;
  stage_cfg_t       cfg_wdata;
  logic             in_v [NMDC];
  cpx_t             in_d0 [NMDC], in_d1 [NMDC];
  logic             out_v [NMDC];
  cpx_t             out_d0 [NMDC], out_d1 [NMDC];
  logic [TAG_W-1:0] out_tag [NMDC];
  logic             batch_done [NMDC], conflict [NMDC];

  hybrid_fft_top dut (.*);

  int checks = 0, failures = 0;
  real max_err = 0;
  // mechanism counters
  int n_bypass = 0, n_nt = 0, n_swap = 0, n_inplace = 0, n_concurrent = 0, n_b2b = 0;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk)
    for (int q = 0; q < NMDC; q++)
      if (!rst && conflict[q]) begin
        failures++;
        $display("conflict flagged on pair %0d", q);
      end

  function automatic int bitrev(int v, int w);
    int r = 0;
    for (int i = 0; i < w; i++) if ((v >> i) & 1) r |= 1 << (w - 1 - i);
    return r;
  endfunction

  // samples of each chain (indexed by its head MDC): batch b, point i
  int xr [NMDC][$], xi [NMDC][$];

  task automatic write_cfg(int idx, stage_cfg_t c);
    @(negedge clk);
    cfg_we = 1; cfg_idx = 2'(idx); cfg_wdata = c;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Configure a chain of MDC units for an n-bit FFT.
  task automatic config_chain(int n, int mdcs[]);
    int ss;
    stage_cfg_t c;
    ss = (n + KMAX - 1) / KMAX;
    for (int s = 1; s <= ss; s++) begin
      c = chain_stage_cfg(n, s);
      c.src = (s == 1) ? SRC_INPUT : 3'(mdcs[s-2]);
      write_cfg(mdcs[s-1], c);
      if (stage_k(n, s) < KMAX) n_bypass++;
      if (c.nt_en) n_nt++;
      if (c.cells[0][3]) n_swap++;  // enable bit of the first sigma_3 cell
    end
  endtask

  task automatic do_start();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (2) @(negedge clk);
  endtask

  // Stream nb batches into the chain whose first pair is q, back to back.
  task automatic drive(int q, int n, int nb);
    int half = 1 << (n - 1);
    for (int b = 0; b < nb; b++) begin
      for (int i = 0; i < (1 << n); i++) begin
        xr[q].push_back(int'($urandom_range(2000)) - 1000);
        xi[q].push_back(int'($urandom_range(2000)) - 1000);
      end
    end
    for (int b = 0; b < nb; b++)
      for (int t = 0; t < half; t++) begin
        in_v[q] = 1;
        in_d0[q].re = xr[q][b * (1 << n) + t];
        in_d0[q].im = xi[q][b * (1 << n) + t];
        in_d1[q].re = xr[q][b * (1 << n) + half + t];
        in_d1[q].im = xi[q][b * (1 << n) + half + t];
        @(negedge clk);
      end
    in_v[q] = 0;
  endtask

  // Collect and check nb batches leaving MDC tail (chain head q).
  task automatic check(int q, int tail, int n, int nb, bit inplace);
    int half = 1 << (n - 1);
    int cnt = 0, t_first = -1;
    real pi = 3.14159265358979323846;
    while (cnt < nb * half) begin
      @(posedge clk); #1;
      if (out_v[tail]) begin
        int b;
        b = cnt / half;
        if (t_first < 0) t_first = cyc;
        if (b > 0 && (cnt % half) == 0) begin
          // next batch must follow the previous one without a gap
          checks++;
          if (cyc - t_first != b * half) begin
            failures++;
            $display("chain %0d: batch %0d started at %0d, expected %0d",
                     q, b, cyc - t_first, b * half);
          end else n_b2b++;
          if (inplace) n_inplace++;
        end
        for (int l = 0; l < 2; l++) begin
          int lab, bin;
          real sr, si, a, er, ei, tol;
          cpx_t d;
          d = (l == 0) ? out_d0[tail] : out_d1[tail];
          lab = out_label(n, l, int'(out_tag[tail]));
          bin = bitrev(lab, n);
          sr = 0; si = 0;
          for (int i = 0; i < (1 << n); i++) begin
            a = -2.0 * pi * real'((i * bin) % (1 << n)) / real'(1 << n);
            sr += xr[q][b * (1 << n) + i] * $cos(a) - xi[q][b * (1 << n) + i] * $sin(a);
            si += xr[q][b * (1 << n) + i] * $sin(a) + xi[q][b * (1 << n) + i] * $cos(a);
          end
          er = real'(d.re) - sr; ei = real'(d.im) - si;
          if (er < 0) er = -er;
          if (ei < 0) ei = -ei;
          if (er > max_err) max_err = er;
          if (ei > max_err) max_err = ei;
          tol = 4.0 + 2.0 * real'(1 << ((n + 1) / 2));
          checks++;
          if (er > tol || ei > tol) begin
            failures++;
            if (failures < 10)
              $display("chain %0d n=%0d batch %0d bin %0d: got %0d,%0d exp %f,%f",
                       q, n, b, bin, d.re, d.im, sr, si);
          end
        end
        cnt++;
      end
    end
  endtask

  initial begin
    for (int q = 0; q < NMDC; q++) begin
      in_v[q] = 0; in_d0[q] = '0; in_d1[q] = '0;
    end
    cfg_wdata = '0;
    repeat (4) @(negedge clk);
    rst = 0;

    // ---- A: four one-stage chains in parallel (Fig. 2(a))
    config_chain(5, '{0});
    config_chain(4, '{1});
    config_chain(3, '{2});
    config_chain(1, '{3});
    do_start();
    n_concurrent++;
    fork
      drive(0, 5, 2); drive(1, 4, 2); drive(2, 3, 2); drive(3, 1, 2);
      check(0, 0, 5, 2, 0); check(1, 1, 4, 2, 0); check(2, 2, 3, 2, 0); check(3, 3, 1, 2, 0);
    join
    for (int q = 0; q < NMDC; q++) begin xr[q].delete(); xi[q].delete(); end
    $display("A done at cycle %0d, max error %f", cyc, max_err);

    // ---- B: two two-stage chains MDC0->MDC3, MDC1->MDC2 (Fig. 2(b))
    config_chain(10, '{0, 3});
    config_chain(7, '{1, 2});
    do_start();
    n_concurrent++;
    fork
      drive(0, 10, 2); drive(1, 7, 2);
      check(0, 3, 10, 2, 1); check(1, 2, 7, 2, 1);
    join
    for (int q = 0; q < NMDC; q++) begin xr[q].delete(); xi[q].delete(); end
    $display("B done at cycle %0d, max error %f", cyc, max_err);

    // ---- C: one chain MDC0->MDC1->MDC2, N = 4096 = 2^2 * 2^5 * 2^5 (Fig. 2(c))
    config_chain(12, '{0, 1, 2});
    do_start();
    fork
      drive(0, 12, 3);
      check(0, 2, 12, 3, 1);
    join
    $display("C done at cycle %0d, max error %f", cyc, max_err);

    $display("mechanisms: bypass=%0d nt=%0d swap=%0d inplace=%0d concurrent=%0d back_to_back=%0d",
             n_bypass, n_nt, n_swap, n_inplace, n_concurrent, n_b2b);
    checks++; if (n_bypass == 0) begin failures++; $display("bypass never used"); end
    checks++; if (n_nt == 0) begin failures++; $display("NT rotator never used"); end
    checks++; if (n_swap == 0) begin failures++; $display("sigma_3 swap never used"); end
    checks++; if (n_inplace == 0) begin failures++; $display("in-place never used"); end
    checks++; if (n_concurrent == 0) begin failures++; $display("no concurrent chains"); end
    checks++; if (n_b2b == 0) begin failures++; $display("no back-to-back batches"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
