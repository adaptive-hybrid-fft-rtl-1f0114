// tb_pbc: the parallel branch change circuit must send branch b to output
// bitrev_lgp(b) within its group of 2^lgp branches, for lgp = 0..3.
`timescale 1ns/1ps
module tb_pbc;
  import fft_pkg::*;

  logic [1:0] lgp;
  elem_t br [NBANK], o [NBANK];

  pbc dut (.lgp, .br, .o);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int grp, d;
    for (int w = 0; w < 4; w++) begin
      for (int it = 0; it < 20; it++) begin
        lgp = 2'(w);
        for (int b = 0; b < NBANK; b++) begin
          br[b].v = 1; br[b].tag = TAG_W'($urandom);
          br[b].d.re = $urandom; br[b].d.im = $urandom;
        end
        #1;
        for (int b = 0; b < NBANK; b++) begin
          grp = b & ~((1 << w) - 1);
          d = grp;
          for (int i = 0; i < w; i++) if ((b >> i) & 1) d |= 1 << (w - 1 - i);
          checks++;
          if (o[d] !== br[b]) begin
            failures++;
            if (failures < 10) $display("lgp=%0d branch %0d not at %0d", w, b, d);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
