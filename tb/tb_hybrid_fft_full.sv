// tb_hybrid_fft_full: one complete 512K-point transform at full size.
//
// All four MDC units form one pipeline chain (radix 2^4, 2^5, 2^5, 2^5) with
// the default 256K-word banks.  One batch of random 12-bit samples is
// streamed in; all 512K results are collected, each must appear exactly
// once (the output order is decoded with out_label), the batch must leave
// in N/2 consecutive cycles, and 200 randomly chosen bins are compared with
// a double-precision DFT.
`timescale 1ns/1ps
module tb_hybrid_fft_full;
  import fft_pkg::*;

  localparam int LGN = N_MAX_LOG;
  localparam int NP  = 1 << LGN;

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

  int   xr [NP], xi [NP];
  int   yr [NP], yi [NP];
  bit   seen [NP];
  real  ctab [NP], stab [NP];

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bitrev(int v, int w);
    int r = 0;
    for (int i = 0; i < w; i++) if ((v >> i) & 1) r |= 1 << (w - 1 - i);
    return r;
  endfunction

  initial begin
    int ss, cnt, t_first, t_last, dup;
    stage_cfg_t c;
    for (int q = 0; q < NMDC; q++) begin
      in_v[q] = 0; in_d0[q] = '0; in_d1[q] = '0;
    end
    cfg_wdata = '0;
    for (int i = 0; i < NP; i++) begin
      xr[i] = int'($urandom_range(4095)) - 2048;
      xi[i] = int'($urandom_range(4095)) - 2048;
      ctab[i] = $cos(2.0 * 3.14159265358979323846 * real'(i) / real'(NP));
      stab[i] = -$sin(2.0 * 3.14159265358979323846 * real'(i) / real'(NP));
    end
    repeat (4) @(negedge clk);
    rst = 0;
    ss = (LGN + KMAX - 1) / KMAX;
    for (int s = 1; s <= ss; s++) begin
      c = chain_stage_cfg(LGN, s);
      c.src = (s == 1) ? SRC_INPUT : 3'(s - 2);
      @(negedge clk);
      cfg_we = 1; cfg_idx = 2'(s - 1); cfg_wdata = c;
    end
    @(negedge clk);
    cfg_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (2) @(negedge clk);
    fork
      begin
        for (int t = 0; t < NP / 2; t++) begin
          in_v[0] = 1;
          in_d0[0].re = xr[t];          in_d0[0].im = xi[t];
          in_d1[0].re = xr[t + NP / 2]; in_d1[0].im = xi[t + NP / 2];
          @(negedge clk);
        end
        in_v[0] = 0;
      end
      begin
        cnt = 0; t_first = -1; t_last = 0; dup = 0;
        while (cnt < NP / 2) begin
          @(posedge clk); #1;
          if (conflict[0] || conflict[1] || conflict[2] || conflict[3]) dup++;
          if (out_v[ss - 1]) begin
            if (t_first < 0) t_first = cyc;
            t_last = cyc;
            for (int l = 0; l < 2; l++) begin
              int bin;
              cpx_t d;
              d = (l == 0) ? out_d0[ss - 1] : out_d1[ss - 1];
              bin = bitrev(out_label(LGN, l, int'(out_tag[ss - 1])), LGN);
              if (seen[bin]) dup++;
              seen[bin] = 1;
              yr[bin] = d.re; yi[bin] = d.im;
            end
            cnt++;
          end
        end
      end
    join
    $display("output from cycle %0d to %0d", t_first, t_last);
    checks++;
    if (t_last - t_first != NP / 2 - 1) begin
      failures++;
      $display("batch left in %0d cycles, expected %0d", t_last - t_first + 1, NP / 2);
    end
    checks++;
    if (dup != 0) begin
      failures++;
      $display("%0d duplicated bins or conflicts", dup);
    end
    for (int r = 0; r < 200; r++) begin
      int bin;
      real sr, si, er, ei;
      bin = (r < 4) ? r : int'($urandom_range(NP - 1));
      sr = 0; si = 0;
      for (int i = 0; i < NP; i++) begin
        int e;
        e = int'((longint'(i) * bin) % NP);
        sr += xr[i] * ctab[e] - xi[i] * stab[e];
        si += xr[i] * stab[e] + xi[i] * ctab[e];
      end
      er = real'(yr[bin]) - sr; ei = real'(yi[bin]) - si;
      checks++;
      if (!seen[bin] || er > 4096.0 || er < -4096.0 || ei > 4096.0 || ei < -4096.0) begin
        failures++;
        if (failures < 10)
          $display("bin %0d: got %0d,%0d exp %f,%f", bin, yr[bin], yi[bin], sr, si);
      end
      if (r < 3) $display("bin %0d: got %0d,%0d exp %f,%f", bin, yr[bin], yi[bin], sr, si);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
