// tb_agu: address generation unit.
//   1. The published reversal widths for a 4096-point, radix-2^5, P = 1
//      transform: w = 11, 6, 11 for stages 1..3.
//   2. With sigma_1 = reversal of the low 6 of 11 serial bits (stage 2 of
//      that example), four batches are written back to back into a
//      reference memory at the unit's write addresses while the previous
//      batch is read at its read addresses.  Every word read must be the one
//      the reordering asks for (written at count sigma(u) of the same batch),
//      so no word is overwritten before it is read; the read pattern must
//      alternate between reversed and natural order, and reading must start
//      the cycle after a batch is complete.
`timescale 1ns/1ps
module tb_agu;
  import fft_pkg::*;
  localparam int NS = 11;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic clear = 0, wr_v = 0;
  perm_t sigma;
  logic [ADDR_W-1:0] wr_addr, rd_addr;
  logic rd_v, batch_done, conflict;
  logic [TAG_W-1:0] rd_tag;

  agu dut (.clk, .rst, .clear, .n_ser(5'(NS)), .sigma, .wr_v, .wr_addr,
           .rd_v, .rd_addr, .rd_tag, .batch_done, .conflict);

  int checks = 0, failures = 0;
  int memv [1 << NS];
  int wb = 0, wc = 0, rb = 0;
  int rd_start_cyc [4], wr_end_cyc [4];
  int cyc = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int sig(int u);
    int r = 0;   // counter with its low 6 bits reversed
    r = u & ~63;
    for (int i = 0; i < 6; i++) if ((u >> i) & 1) r |= 1 << (5 - i);
    return r;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference memory: read-first, like mem_bank
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && rd_v) begin
      int got, u;
      u = int'(rd_tag);
      got = memv[rd_addr];
      if (u == 0) rd_start_cyc[rb] = cyc;
      chk(got == rb * 100000 + sig(u), $sformatf("batch %0d count %0d read %0d", rb, u, got));
      if (u == 1) begin
        // read pattern: reversed for odd batches, natural for even ones
        chk(int'(rd_addr) == ((rb % 2 == 0) ? sig(1) : 1), "read pattern alternates");
      end
      if (u == (1 << NS) - 1) rb++;
    end
    if (!rst && wr_v) begin
      memv[wr_addr] <= wb * 100000 + wc;
      if (wc == (1 << NS) - 1) begin wr_end_cyc[wb] = cyc; wb++; wc = 0; end
      else wc++;
    end
  end

  initial begin
    chk(pub_w(12, 1, 5, 0) == 11, "w(4096,s=1) = 11");
    chk(pub_w(12, 2, 5, 0) == 6,  "w(4096,s=2) = 6");
    chk(pub_w(12, 3, 5, 0) == 11, "w(4096,s=3) = 11");
    sigma = pub_sigma1(NS, pub_w(12, 2, 5, 0));
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    for (int b = 0; b < 4; b++)
      for (int t = 0; t < (1 << NS); t++) begin
        wr_v = 1;
        @(negedge clk);
      end
    wr_v = 0;
    repeat ((1 << NS) + 5) @(negedge clk);
    chk(rb == 4, "four batches read");
    for (int b = 0; b < 4; b++) chk(rd_start_cyc[b] == wr_end_cyc[b] + 1, "read starts after last write");
    chk(!conflict, "no conflict flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
