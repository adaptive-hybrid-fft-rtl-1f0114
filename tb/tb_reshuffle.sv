// tb_reshuffle: series of sigma_3 cells.
// The six cells are set to the published first-stage series for N % 5 = 0,
// P = 1 (FIFO lengths 8, 1, 8, 4, 2, 4), then to a single cell, then all
// off.  Random samples stream in on both lanes with their stream position as
// tag; a reference model applies the same lane/serial-bit swaps to each
// sample's (lane, tag).  Each output must sit on the lane and carry the tag
// the model predicts, and the latency must equal the sum of the enabled
// FIFO lengths.  Outputs are sampled just before the clock edge because
// lane 1 of a cell is a combinational path from its lane-0 input.
`timescale 1ns/1ps
module tb_reshuffle;
  import fft_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [NCELL-1:0][$bits(swap_cfg_t)-1:0] cells;
  elem_t i0, i1, o0, o1;

  reshuffle dut (.clk, .rst, .cells, .i0, .i1, .o0, .o1);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int lgs[], int nblk);
    int lat, n, nout, t0, tfirst;
    int expect_lane [int], expect_tag [int];
    lat = 0;
    cells = '0;
    foreach (lgs[c]) begin
      cells[c] = {1'b1, 3'(lgs[c])};
      lat += 1 << lgs[c];
    end
    n = nblk * 64;
    // reference: data word (lane*65536 + t) -> final lane and tag
    for (int l = 0; l < 2; l++)
      for (int t = 0; t < n; t++) begin
        int ln, tg, b;
        ln = l; tg = t;
        foreach (lgs[c]) begin
          b = (tg >> lgs[c]) & 1;
          tg = (tg & ~(1 << lgs[c])) | (ln << lgs[c]);
          ln = b;
        end
        expect_lane[l * 65536 + t] = ln;
        expect_tag[l * 65536 + t] = tg;
      end
    nout = 0; tfirst = -1;
    fork
      begin
        @(negedge clk);
        t0 = cyc;
        for (int t = 0; t < n; t++) begin
          i0 = '{v: 1'b1, d: '{re: DW'(t), im: 0}, tag: TAG_W'(t)};
          i1 = '{v: 1'b1, d: '{re: DW'(65536 + t), im: 0}, tag: TAG_W'(t)};
          @(negedge clk);
        end
        i0.v = 0; i1.v = 0;
      end
      begin
        while (nout < 2 * n) begin
          @(negedge clk); #4;
          for (int l = 0; l < 2; l++) begin
            elem_t e;
            e = (l == 0) ? o0 : o1;
            if (e.v) begin
              if (tfirst < 0) tfirst = cyc;
              checks++;
              if (expect_lane[int'(e.d.re)] != l || expect_tag[int'(e.d.re)] != int'(e.tag)) begin
                failures++;
                if (failures < 10)
                  $display("sample %0d on lane %0d tag %0d, expected lane %0d tag %0d",
                           e.d.re, l, e.tag, expect_lane[int'(e.d.re)], expect_tag[int'(e.d.re)]);
              end
              nout++;
            end
          end
        end
      end
    join
    checks++;
    if (tfirst - t0 != lat) begin
      failures++;
      $display("latency %0d, expected %0d", tfirst - t0, lat);
    end
    repeat (40) @(negedge clk);
  endtask

  initial begin
    cells = '0; i0 = '0; i1 = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run('{3, 0, 3, 2, 1, 2}, 4);
    run('{4}, 4);
    run('{2, 1}, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
