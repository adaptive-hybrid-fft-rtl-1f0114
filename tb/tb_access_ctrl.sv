// tb_access_ctrl: configuration registers (reset values, writes to each
// index, lgp), the one-cycle clear after start, and result routing: out[q]
// is valid only when MDC q ends a chain.
`timescale 1ns/1ps
module tb_access_ctrl;
  import fft_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic cfg_we = 0, lgp_we = 0, start = 0;
  logic [1:0] cfg_idx = 0, lgp_wdata = 0;
  stage_cfg_t cfg_wdata;
  stage_cfg_t cfg [NMDC];
  logic [1:0] lgp;
  logic clear;
  elem_t mdc_o0 [NMDC], mdc_o1 [NMDC];
  logic out_v [NMDC];
  cpx_t out_d0 [NMDC], out_d1 [NMDC];
  logic [TAG_W-1:0] out_tag [NMDC];

  access_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    stage_cfg_t w [NMDC];
    cfg_wdata = '0;
    for (int q = 0; q < NMDC; q++) begin mdc_o0[q] = '0; mdc_o1[q] = '0; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int q = 0; q < NMDC; q++) begin
      chk(cfg[q].k == 5 && cfg[q].src == SRC_INPUT && cfg[q].last, "reset config");
      chk(cfg[q].sigma == perm_identity(), "reset sigma");
    end
    for (int q = 0; q < NMDC; q++) begin
      w[q] = chain_stage_cfg(12, (q % 3) + 1);
      w[q].src = 3'(q);
      @(negedge clk);
      cfg_we = 1; cfg_idx = 2'(q); cfg_wdata = w[q];
    end
    @(negedge clk);
    cfg_we = 0;
    for (int q = 0; q < NMDC; q++) chk(cfg[q] == w[q], "written config");
    lgp_we = 1; lgp_wdata = 2'd3;
    @(negedge clk);
    lgp_we = 0;
    chk(lgp == 2'd3, "lgp written");
    chk(clear == 0, "clear idle");
    start = 1;
    @(negedge clk);
    start = 0;
    chk(clear == 1, "clear after start");
    @(negedge clk);
    chk(clear == 0, "clear one cycle");
    for (int q = 0; q < NMDC; q++) begin
      mdc_o0[q].v = 1; mdc_o0[q].d.re = q; mdc_o1[q].d.im = 10 + q;
      mdc_o0[q].tag = TAG_W'(q * 7);
    end
    #1;
    for (int q = 0; q < NMDC; q++) begin
      chk(out_v[q] == w[q].last, "out_v follows last");
      chk(out_d0[q].re == q && out_d1[q].im == 10 + q && out_tag[q] == TAG_W'(q * 7),
          "out data routed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
