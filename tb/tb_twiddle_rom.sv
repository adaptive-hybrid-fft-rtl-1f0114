// tb_twiddle_rom: checks every port of the twiddle ROM against
// exp(-j 2 pi e / 2^19) for random exponents and for the quadrant
// boundaries, within 2 LSB of Q2.30, with the one-cycle read latency.
`timescale 1ns/1ps
module tb_twiddle_rom;
  import fft_pkg::*;
  localparam int NP = 2 * NMDC;

  logic clk = 0;
  always #5 clk = ~clk;
  logic [NP-1:0][N_MAX_LOG-1:0] addr;
  tw_t  [NP-1:0]                data;

  twiddle_rom dut (.clk, .addr, .data);

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [NP];
    real a, er, ei, sc;
    sc = real'(1 << TW_FRAC);
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        if (it < 8) e[p] = (it * NP + p) * (1 << (N_MAX_LOG - 5));   // multiples of N/32
        else        e[p] = int'($urandom_range((1 << N_MAX_LOG) - 1));
        addr[p] = N_MAX_LOG'(e[p]);
      end
      @(negedge clk);  // data registered at the posedge in between
      addr = '0;
      for (int p = 0; p < NP; p++) begin
        a = -2.0 * 3.14159265358979323846 * real'(e[p]) / real'(1 << N_MAX_LOG);
        er = real'(data[p].re) - $cos(a) * sc;
        ei = real'(data[p].im) - $sin(a) * sc;
        checks++;
        if (er > 2.0 || er < -2.0 || ei > 2.0 || ei < -2.0) begin
          failures++;
          if (failures < 10)
            $display("port %0d e=%0d: got %0d,%0d exp %f,%f", p, e[p],
                     data[p].re, data[p].im, $cos(a) * sc, $sin(a) * sc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
