// tb_mdc_unit: self-checking test of the mixed-radix MDC unit.
//
// For each case (radix 2^k, stride exponent e) the bench streams 2^e
// butterfly blocks of random samples, block j holding x[j + 2^e n'] with
// n' = r*2^(k-1) + c on lane r at local time c, and compares every output
// with a double-precision DFT of the block times the stage twiddle
// W_(2^(e+k))^(j k'), within 2^(k-1)+2 (integer rounding after each
// rotator, amplified by the butterflies that follow).  Lane l at local time t must carry bin
// bitrev(t) + l*2^(k-1).  The first output must appear exactly the unit's
// documented latency after the first input (26/16/10/6/3 cycles).  Two cases
// deliver the blocks in bit-reversed order with j_rev set, as the first stage
// of a chain does.
`timescale 1ns/1ps
module tb_mdc_unit;
  import fft_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [2:0] k;
  logic [4:0] log_eps;
  logic       nt_en;
  logic       jrev;
  elem_t      in0, in1, out0, out1;
  logic [N_MAX_LOG-1:0] ta0, ta1;
  tw_t        td0, td1;

  mdc_unit dut (.clk, .rst, .cfg_k(k), .cfg_log_eps(log_eps), .cfg_j_shift(1'b0), .cfg_j_rev(jrev),
                .cfg_nt_en(nt_en), .in0, .in1, .out0, .out1,
                .tw_addr0(ta0), .tw_addr1(ta1), .tw_data0(td0), .tw_data1(td1));
  twiddle_rom #(.NPORT(2)) rom (.clk, .addr({ta1, ta0}), .data({td1, td0}));

  int checks = 0, failures = 0;
  int x_re [4096], x_im [4096];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
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

  task automatic run_case(int kk, int ee, bit jr = 0);
    int half, nblk, nout, lat, t_first_in, t_first_out, cnt;
    real pi;
    pi = 3.14159265358979323846;
    half = 1 << (kk - 1);
    nblk = 1 << ee;
    lat = (kk == 5) ? 26 : (kk == 4) ? 16 : (kk == 3) ? 10 : (kk == 2) ? 6 : 3;
    k = 3'(kk); log_eps = 5'(ee); nt_en = (ee > 0); jrev = jr;
    for (int i = 0; i < (nblk << kk); i++) begin
      x_re[i] = int'($urandom_range(2000)) - 1000;
      x_im[i] = int'($urandom_range(2000)) - 1000;
    end
    in0 = '0; in1 = '0;
    nout = 0; t_first_out = -1;
    fork
      begin
        @(negedge clk);
        t_first_in = cyc;
        for (int jt = 0; jt < nblk; jt++)
          for (int c = 0; c < half; c++) begin
            int j;
            j = jr ? bitrev(jt, ee) : jt;
            in0.v = 1; in1.v = 1;
            in0.tag = TAG_W'(jt * half + c); in1.tag = in0.tag;
            in0.d.re = x_re[j + nblk * c];          in0.d.im = x_im[j + nblk * c];
            in1.d.re = x_re[j + nblk * (half + c)]; in1.d.im = x_im[j + nblk * (half + c)];
            @(negedge clk);
          end
        in0.v = 0; in1.v = 0;
      end
      begin
        cnt = 0;
        while (nout < nblk * half) begin
          @(posedge clk); #1;
          if (out0.v) begin
            if (t_first_out < 0) t_first_out = cyc;
            for (int l = 0; l < 2; l++) begin
              elem_t o;
              int j, t, kb;
              real sr, si, a, tr, ti, er, ei, tol;
              o = (l == 0) ? out0 : out1;
              j = int'(o.tag) >> (kk - 1);
              if (jr) j = bitrev(j, ee);
              t = int'(o.tag) & (half - 1);
              kb = bitrev(t, kk - 1) + l * half;
              sr = 0; si = 0;
              for (int nn = 0; nn < (1 << kk); nn++) begin
                a = -2.0 * pi * real'(nn * kb) / real'(1 << kk);
                sr += x_re[j + nblk * nn] * $cos(a) - x_im[j + nblk * nn] * $sin(a);
                si += x_re[j + nblk * nn] * $sin(a) + x_im[j + nblk * nn] * $cos(a);
              end
              a = -2.0 * pi * real'(j * kb) / real'(1 << (ee + kk));
              tr = sr * $cos(a) - si * $sin(a);
              ti = sr * $sin(a) + si * $cos(a);
              er = real'(o.d.re) - tr; ei = real'(o.d.im) - ti;
              checks++;
              tol = real'(half) + 2.0;
              if (er > tol || er < -tol || ei > tol || ei < -tol) begin
                failures++;
                if (failures < 10)
                  $display("k=%0d e=%0d blk %0d bin %0d: got %0d,%0d exp %f,%f",
                           kk, ee, j, kb, o.d.re, o.d.im, tr, ti);
              end
            end
            nout++;
          end
        end
      end
    join
    checks++;
    if (t_first_out - t_first_in != lat) begin
      failures++;
      $display("k=%0d latency %0d, expected %0d", kk, t_first_out - t_first_in, lat);
    end
    repeat (40) @(negedge clk);
  endtask

  initial begin
    k = 5; log_eps = 0; nt_en = 0; jrev = 0; in0 = '0; in1 = '0;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);
    run_case(5, 0);
    run_case(4, 0);
    run_case(3, 0);
    run_case(2, 0);
    run_case(1, 0);
    run_case(5, 3);
    run_case(2, 4);
    run_case(4, 2);
    run_case(5, 3, 1);
    run_case(3, 4, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
