// tb_mem_bank: random writes and reads of a memory bank (reduced to 256
// words) against a reference array, one-cycle read latency, and read-first
// behaviour when a word is read and written in the same cycle.
`timescale 1ns/1ps
module tb_mem_bank;
  import fft_pkg::*;
  localparam int AW = 8;

  logic clk = 0;
  always #5 clk = ~clk;
  logic          we;
  logic [AW-1:0] waddr, raddr;
  cpx_t          wdata, rdata;

  mem_bank #(.AW(AW)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  int checks = 0, failures = 0;
  cpx_t ref_mem [1 << AW];

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cpx_t expv;
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int i = 0; i < (1 << AW); i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata.re = $urandom; wdata.im = $urandom;
      ref_mem[i] = wdata;
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      raddr = AW'($urandom);
      we = $urandom_range(1);
      waddr = (it % 3 == 0) ? raddr : AW'($urandom);
      wdata.re = $urandom; wdata.im = $urandom;
      expv = ref_mem[raddr];          // old word, also when waddr == raddr
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== expv) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h exp %h", raddr, rdata, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
