// tb_hybrid_fft_sizes: every transform size from 2 to 256K points in the
// pipeline configuration the processor uses for it.
//
//   N = 2 .. 32      four one-stage chains, four batches at once (P = 4)
//   N = 64 .. 1024   two two-stage chains MDC0->MDC1 and MDC2->MDC3 (P = 2)
//   N = 2048 .. 256K one chain MDC0->MDC1->.. of ceil(log2 N / 5) stages (P = 1)
// (512K is covered by tb_hybrid_fft_full.)  Each chain gets one batch of
// random samples.  For every chain the bench checks that all N results
// appear exactly once (output order decoded with out_label) and leave in
// N/2 consecutive cycles; results are compared with a double-precision DFT,
// all of them up to N = 1024 and about 64 randomly chosen ones above.
`timescale 1ns/1ps
module tb_hybrid_fft_sizes;
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
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000000;
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

  int xr [NMDC][], xi [NMDC][];

  task automatic write_cfg(int idx, stage_cfg_t c);
    @(negedge clk);
    cfg_we = 1; cfg_idx = 2'(idx); cfg_wdata = c;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic config_chain(int n, int mdcs[]);
    stage_cfg_t c;
    for (int s = 1; s <= (n + KMAX - 1) / KMAX; s++) begin
      c = chain_stage_cfg(n, s);
      c.src = (s == 1) ? SRC_INPUT : 3'(mdcs[s-2]);
      write_cfg(mdcs[s-1], c);
    end
  endtask

  task automatic drive(int q, int n);
    int half = 1 << (n - 1);
    xr[q] = new[1 << n];
    xi[q] = new[1 << n];
    for (int i = 0; i < (1 << n); i++) begin
      xr[q][i] = int'($urandom_range(2000)) - 1000;
      xi[q][i] = int'($urandom_range(2000)) - 1000;
    end
    for (int t = 0; t < half; t++) begin
      in_v[q] = 1;
      in_d0[q] = '{re: DW'(xr[q][t]),        im: DW'(xi[q][t])};
      in_d1[q] = '{re: DW'(xr[q][half + t]), im: DW'(xi[q][half + t])};
      @(negedge clk);
    end
    in_v[q] = 0;
  endtask

  task automatic check(int q, int tail, int n);
    int half = 1 << (n - 1);
    int cnt = 0, t_first = -1, t_last = 0;
    bit seen [];
    real pi = 3.14159265358979323846;
    seen = new[1 << n];
    while (cnt < half) begin
      @(posedge clk); #1;
      if (out_v[tail]) begin
        if (t_first < 0) t_first = cyc;
        t_last = cyc;
        for (int l = 0; l < 2; l++) begin
          int lab, bin;
          cpx_t d;
          d = (l == 0) ? out_d0[tail] : out_d1[tail];
          lab = out_label(n, l, int'(out_tag[tail]));
          bin = bitrev(lab, n);
          if (seen[bin]) begin
            failures++;
            $display("n=%0d chain %0d: bin %0d delivered twice", n, q, bin);
          end
          seen[bin] = 1;
          if (n <= 10 || $urandom_range(half - 1) < 32) begin
            real sr, si, a, er, ei, tol;
            sr = 0; si = 0;
            for (int i = 0; i < (1 << n); i++) begin
              a = -2.0 * pi * real'((longint'(i) * bin) % (1 << n)) / real'(1 << n);
              sr += xr[q][i] * $cos(a) - xi[q][i] * $sin(a);
              si += xr[q][i] * $sin(a) + xi[q][i] * $cos(a);
            end
            er = real'(d.re) - sr; ei = real'(d.im) - si;
            tol = 4.0 + 2.0 * real'(1 << ((n + 1) / 2));
            checks++;
            if (er > tol || er < -tol || ei > tol || ei < -tol) begin
              failures++;
              if (failures < 10)
                $display("n=%0d chain %0d bin %0d: got %0d,%0d exp %f,%f",
                         n, q, bin, d.re, d.im, sr, si);
            end
          end
        end
        cnt++;
      end
    end
    checks++;
    if (t_last - t_first != half - 1) begin
      failures++;
      $display("n=%0d chain %0d: results spread over %0d cycles, expected %0d",
               n, q, t_last - t_first + 1, half);
    end
    checks++;
    foreach (seen[b]) if (!seen[b]) begin
      failures++;
      $display("n=%0d chain %0d: bin %0d missing", n, q, b);
      break;
    end
  endtask

  task automatic do_start();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    for (int q = 0; q < NMDC; q++) begin
      in_v[q] = 0; in_d0[q] = '0; in_d1[q] = '0;
    end
    cfg_wdata = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    for (int n = 1; n < N_MAX_LOG; n++) begin
      if (n <= KMAX) begin
        for (int q = 0; q < NMDC; q++) config_chain(n, '{q});
        do_start();
        fork
          drive(0, n); drive(1, n); drive(2, n); drive(3, n);
          check(0, 0, n); check(1, 1, n); check(2, 2, n); check(3, 3, n);
        join
      end else if (n <= 2 * KMAX) begin
        config_chain(n, '{0, 1});
        config_chain(n, '{2, 3});
        do_start();
        fork
          drive(0, n); drive(2, n);
          check(0, 1, n); check(2, 3, n);
        join
      end else begin
        config_chain(n, '{0, 1, 2, 3});
        do_start();
        fork
          drive(0, n);
          check(0, (n + KMAX - 1) / KMAX - 1, n);
        join
      end
      $display("N = %0d done at cycle %0d, %0d failures so far", 1 << n, cyc, failures);
      repeat (100) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
