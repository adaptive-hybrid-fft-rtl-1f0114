// hybrid_fft_top: adaptive hybrid FFT processor, pipeline modes.
//
// Four radix-2^5 mixed-radix MDC units (fft_core) and eight memory banks
// with address generation, parallel branch change and reshuffle circuits
// (data_reorder), configured by the access control module.  Bank pair q
// feeds MDC q; each pair is written either by the host or by another MDC, so
// the four units form P independent chains: four one-stage chains
// (N <= 32), two two-stage chains (N <= 1024) or one chain of up to four
// stages (N <= 512K), each chain processing its own stream of batches.
// Every stage reads its batch in the order required by its MDC (bit-dimension
// permutations sigma_1/sigma_2/sigma_3) while the next batch is written in
// place.  The memory-based (iterative) mode of the published design is not
// implemented.
//
// Interface: configure through cfg_* / lgp_* and pulse start.  Then stream
// each batch into a chain's first pair: in_v[q] with two samples per cycle,
// lane 0 = x[t], lane 1 = x[t + N/2], t = 0..N/2-1 (gaps allowed).  Results
// leave on out_*[q] of the chain's last MDC, two per cycle, in the order
// given by the chain configuration (see out_label in fft_pkg): the sample on
// lane l with tag t is X[bitreverse(label(l, t))].  Per stage the latency is
// N/2 cycles of filling plus the reshuffle and MDC latencies; a chain accepts
// a new batch every N/2 cycles.
module hybrid_fft_top
  import fft_pkg::*;
(
  input  logic             clk,
  input  logic             rst,
  input  logic             cfg_we,
  input  logic [1:0]       cfg_idx,
  input  stage_cfg_t       cfg_wdata,
  input  logic             lgp_we,
  input  logic [1:0]       lgp_wdata,
  input  logic             start,
  input  logic             in_v    [NMDC],
  input  cpx_t             in_d0   [NMDC],
  input  cpx_t             in_d1   [NMDC],
  output logic             out_v   [NMDC],
  output cpx_t             out_d0  [NMDC],
  output cpx_t             out_d1  [NMDC],
  output logic [TAG_W-1:0] out_tag [NMDC],
  output logic             batch_done [NMDC],
  output logic             conflict   [NMDC]
);
  stage_cfg_t cfg [NMDC];
  logic [1:0] lgp;
  logic       clear;
  elem_t      mi0 [NMDC], mi1 [NMDC], mo0 [NMDC], mo1 [NMDC];

  access_ctrl u_ctrl (
    .clk, .rst, .cfg_we, .cfg_idx, .cfg_wdata, .lgp_we, .lgp_wdata, .start,
    .cfg, .lgp, .clear, .mdc_o0(mo0), .mdc_o1(mo1),
    .out_v, .out_d0, .out_d1, .out_tag
  );

  data_reorder u_reorder (
    .clk, .rst, .clear, .cfg, .lgp, .in_v, .in_d0, .in_d1,
    .mdc_o0(mo0), .mdc_o1(mo1), .mdc_i0(mi0), .mdc_i1(mi1),
    .batch_done, .conflict
  );

  fft_core u_core (
    .clk, .rst(rst || clear), .cfg, .in0(mi0), .in1(mi1), .out0(mo0), .out1(mo1)
  );
endmodule
