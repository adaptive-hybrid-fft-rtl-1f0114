// fft_core: FFT core processor, four identical mixed-radix MDC computing
// units and the twiddle factor ROM they share.
//
// Unit q receives the two lanes prepared by reshuffle circuit q and its own
// stage configuration (radix, sub-FFT stride, block index position,
// non-trivial rotator on/off).  The ROM has two ports per unit, one per lane,
// and answers in one cycle, which the units' column-5 timing expects.
// Latency is that of the MDC units (see mdc_unit).
module fft_core
  import fft_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  stage_cfg_t cfg  [NMDC],
  input  elem_t      in0  [NMDC],
  input  elem_t      in1  [NMDC],
  output elem_t      out0 [NMDC],
  output elem_t      out1 [NMDC]
);
  logic [2*NMDC-1:0][N_MAX_LOG-1:0] ta;
  tw_t  [2*NMDC-1:0]                td;

  for (genvar q = 0; q < NMDC; q++) begin : g_mdc
    mdc_unit u_mdc (
      .clk, .rst,
      .cfg_k(cfg[q].k), .cfg_log_eps(cfg[q].log_eps),
      .cfg_j_shift(cfg[q].j_shift), .cfg_j_rev(cfg[q].j_rev), .cfg_nt_en(cfg[q].nt_en),
      .in0(in0[q]), .in1(in1[q]), .out0(out0[q]), .out1(out1[q]),
      .tw_addr0(ta[2*q]), .tw_addr1(ta[2*q+1]),
      .tw_data0(td[2*q]), .tw_data1(td[2*q+1])
    );
  end

  twiddle_rom #(.NPORT(2 * NMDC)) u_rom (.clk, .addr(ta), .data(td));
endmodule
