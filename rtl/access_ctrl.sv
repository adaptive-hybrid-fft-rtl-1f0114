// access_ctrl: access control module.
//
// Holds the configuration that selects the computational mode: one
// stage_cfg_t per MDC unit / bank pair (radix, twiddle stride, read-address
// permutation, reshuffle series, which MDC writes the pair, whether the
// MDC's results leave the processor) and the parallel-branch width lgp.  The
// host writes one register per cycle (cfg_we, cfg_idx, cfg_wdata; lgp_we,
// lgp_wdata); start then clears the address generators and the pipelines so
// the new configuration takes effect on an empty machine (clear is high for
// one cycle after start).  The module also routes the results: out[q] carries
// MDC q's two lanes whenever that MDC ends a chain; out_d0/out_d1/out_tag
// are wired straight from the MDC outputs and only out_v is gated, so a
// synthesis report lists those output bits as fed through.  All registers reset to
// a single-stage 32-point chain on every pair (pipeline mode with four
// parallel radix-2^5 units).  The published design names this module but
// does not describe it; register layout and reset values are this
// implementation's choices.
module access_ctrl
  import fft_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       cfg_we,
  input  logic [1:0] cfg_idx,
  input  stage_cfg_t cfg_wdata,
  input  logic       lgp_we,
  input  logic [1:0] lgp_wdata,
  input  logic       start,
  output stage_cfg_t cfg [NMDC],
  output logic [1:0] lgp,
  output logic       clear,
  input  elem_t      mdc_o0 [NMDC],
  input  elem_t      mdc_o1 [NMDC],
  output logic       out_v   [NMDC],
  output cpx_t       out_d0  [NMDC],
  output cpx_t       out_d1  [NMDC],
  output logic [TAG_W-1:0] out_tag [NMDC]
);
  function automatic stage_cfg_t reset_cfg();
    stage_cfg_t c;
    c = '0;
    c.k     = 3'd5;
    c.n_ser = 5'd4;
    c.sigma = perm_identity();
    c.src   = SRC_INPUT;
    c.last  = 1'b1;
    return c;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int q = 0; q < NMDC; q++) cfg[q] <= reset_cfg();
      lgp   <= 2'd1;
      clear <= 1'b1;
    end else begin
      if (cfg_we) cfg[cfg_idx] <= cfg_wdata;
      if (lgp_we) lgp <= lgp_wdata;
      clear <= start;
    end
  end

  always_comb begin
    for (int q = 0; q < NMDC; q++) begin
      out_v[q]   = mdc_o0[q].v && cfg[q].last;
      out_d0[q]  = mdc_o0[q].d;
      out_d1[q]  = mdc_o1[q].d;
      out_tag[q] = mdc_o0[q].tag;
    end
  end
endmodule
