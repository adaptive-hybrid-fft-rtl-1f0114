// tb_fft_core: the four MDC units working at the same time, each with its own
// radix and stride, all sharing the twiddle ROM.
//
// Unit q gets radix 2^K[q] and 2^E[q] butterfly blocks of random samples
// (block j holds x[j + 2^E n'], n' = r*2^(k-1) + c on lane r at local time
// c), with the non-trivial twiddle enabled.  All four streams start in the
// same cycle.  Every output is compared with a double-precision DFT of its
// block times W_(2^(E+K))^(j k') within 2^(k-1)+2, and each unit's first
// output must appear exactly its radix's latency after the first input.
`timescale 1ns/1ps
module tb_fft_core;
  import fft_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  stage_cfg_t cfg [NMDC];
  elem_t in0 [NMDC], in1 [NMDC], out0 [NMDC], out1 [NMDC];

  fft_core dut (.clk, .rst, .cfg, .in0, .in1, .out0, .out1);

  localparam int K [NMDC] = '{5, 4, 3, 2};
  localparam int E [NMDC] = '{2, 1, 3, 2};
  localparam int LAT [NMDC] = '{26, 16, 10, 6};

  int checks = 0, failures = 0;
  int x_re [NMDC][1024], x_im [NMDC][1024];
  int nout [NMDC], tfirst [NMDC];
  int cyc = 0, t0;
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

  task automatic check_out(int q, int l, elem_t o);
    int kk, ee, half, nblk, j, t, kb;
    real pi, sr, si, a, tr, ti, er, ei, tol;
    pi = 3.14159265358979323846;
    kk = K[q]; ee = E[q]; half = 1 << (kk - 1); nblk = 1 << ee;
    j = int'(o.tag) >> (kk - 1);
    t = int'(o.tag) & (half - 1);
    kb = bitrev(t, kk - 1) + l * half;
    sr = 0; si = 0;
    for (int nn = 0; nn < (1 << kk); nn++) begin
      a = -2.0 * pi * real'(nn * kb) / real'(1 << kk);
      sr += x_re[q][j + nblk * nn] * $cos(a) - x_im[q][j + nblk * nn] * $sin(a);
      si += x_re[q][j + nblk * nn] * $sin(a) + x_im[q][j + nblk * nn] * $cos(a);
    end
    a = -2.0 * pi * real'(j * kb) / real'(1 << (ee + kk));
    tr = sr * $cos(a) - si * $sin(a);
    ti = sr * $sin(a) + si * $cos(a);
    er = real'(o.d.re) - tr; ei = real'(o.d.im) - ti;
    tol = real'(half) + 2.0;
    checks++;
    if (er > tol || er < -tol || ei > tol || ei < -tol) begin
      failures++;
      if (failures < 10)
        $display("unit %0d blk %0d bin %0d: got %0d,%0d exp %f,%f",
                 q, j, kb, o.d.re, o.d.im, tr, ti);
    end
  endtask

  initial begin
    for (int q = 0; q < NMDC; q++) begin
      cfg[q] = '0;
      cfg[q].k = 3'(K[q]);
      cfg[q].log_eps = 5'(E[q]);
      cfg[q].nt_en = 1'b1;
      in0[q] = '0; in1[q] = '0;
      nout[q] = 0; tfirst[q] = -1;
      for (int i = 0; i < 1024; i++) begin
        x_re[q][i] = int'($urandom_range(2000)) - 1000;
        x_im[q][i] = int'($urandom_range(2000)) - 1000;
      end
    end
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);
    fork
      begin
        t0 = cyc;
        for (int s = 0; s < 64; s++) begin
          for (int q = 0; q < NMDC; q++) begin
            int half, nblk, j, c;
            half = 1 << (K[q] - 1); nblk = 1 << E[q];
            j = s / half; c = s % half;
            in0[q].v = (j < nblk); in1[q].v = (j < nblk);
            in0[q].tag = TAG_W'(s); in1[q].tag = TAG_W'(s);
            in0[q].d.re = x_re[q][(j + nblk * c) % 1024];
            in0[q].d.im = x_im[q][(j + nblk * c) % 1024];
            in1[q].d.re = x_re[q][(j + nblk * (half + c)) % 1024];
            in1[q].d.im = x_im[q][(j + nblk * (half + c)) % 1024];
          end
          @(negedge clk);
        end
        for (int q = 0; q < NMDC; q++) begin
          in0[q].v = 0; in1[q].v = 0;
        end
      end
      begin
        repeat (120) begin
          @(posedge clk); #1;
          for (int q = 0; q < NMDC; q++)
            if (out0[q].v) begin
              if (tfirst[q] < 0) tfirst[q] = cyc;
              check_out(q, 0, out0[q]);
              check_out(q, 1, out1[q]);
              nout[q]++;
            end
        end
      end
    join
    for (int q = 0; q < NMDC; q++) begin
      checks += 2;
      if (nout[q] != (1 << (E[q] + K[q] - 1))) begin
        failures++;
        $display("unit %0d: %0d outputs, expected %0d", q, nout[q], 1 << (E[q] + K[q] - 1));
      end
      if (tfirst[q] - t0 != LAT[q]) begin
        failures++;
        $display("unit %0d latency %0d, expected %0d", q, tfirst[q] - t0, LAT[q]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
