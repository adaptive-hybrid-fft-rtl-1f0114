// data_reorder: data reordering module, the memory side of the processor.
//
// Eight banks form four bank pairs.  Pair q feeds MDC unit q: its address
// generation unit reads a stored batch in the order sigma_1 (serial bit
// permutation of the read counter), the parallel branch change circuit
// applies sigma_2 across the eight read branches, and reshuffle circuit q
// applies the sigma_3 series on the pair before the samples enter MDC q.
// The pair is written either with external samples (two per cycle, lane 0
// to bank 2q, lane 1 to bank 2q+1, natural order) or with the two outputs of
// the MDC named by cfg[q].src, so that any chain of MDCs can be formed: four
// one-stage chains, two two-stage chains or one four-stage chain (the
// pipeline modes), each with the whole memory of its pair.
//
// Timing: bank reads take one cycle; a batch of 2^n_ser words per bank is
// read starting the cycle after its last word is written, one word per bank
// per cycle, and may be overwritten by the next batch at the same time
// (in-place, see agu).  Each read sample carries its read count as tag.
// The bank pairing and source selection are this implementation's way of
// realising the published pipeline modes.
module data_reorder
  import fft_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       clear,
  input  stage_cfg_t cfg     [NMDC],
  input  logic [1:0] lgp,
  input  logic       in_v    [NMDC],
  input  cpx_t       in_d0   [NMDC],
  input  cpx_t       in_d1   [NMDC],
  input  elem_t      mdc_o0  [NMDC],
  input  elem_t      mdc_o1  [NMDC],
  output elem_t      mdc_i0  [NMDC],
  output elem_t      mdc_i1  [NMDC],
  output logic       batch_done [NMDC],
  output logic       conflict   [NMDC]
);
  elem_t br [NBANK];
  elem_t pb [NBANK];

  for (genvar q = 0; q < NMDC; q++) begin : g_pair
    logic              wv, rv, rv_q;
    cpx_t              wd0, wd1, rd0, rd1;
    logic [ADDR_W-1:0] wa, ra;
    logic [TAG_W-1:0]  rt, rt_q;

    always_comb begin
      wv = 1'b0; wd0 = in_d0[q]; wd1 = in_d1[q];
      if (cfg[q].src == SRC_INPUT) begin
        wv = in_v[q];
      end else begin
        for (int s = 0; s < NMDC; s++)
          if (int'(cfg[q].src) == s) begin
            wv  = mdc_o0[s].v;
            wd0 = mdc_o0[s].d;
            wd1 = mdc_o1[s].d;
          end
      end
    end

    agu u_agu (
      .clk, .rst, .clear, .n_ser(cfg[q].n_ser), .sigma(cfg[q].sigma),
      .wr_v(wv), .wr_addr(wa), .rd_v(rv), .rd_addr(ra), .rd_tag(rt),
      .batch_done(batch_done[q]), .conflict(conflict[q])
    );

    mem_bank u_bank0 (.clk, .we(wv), .waddr(wa), .wdata(wd0), .raddr(ra), .rdata(rd0));
    mem_bank u_bank1 (.clk, .we(wv), .waddr(wa), .wdata(wd1), .raddr(ra), .rdata(rd1));

    always_ff @(posedge clk) begin
      if (rst || clear) rv_q <= 1'b0;
      else              rv_q <= rv;
      rt_q <= rt;
    end

    assign br[2*q]   = '{v: rv_q, d: rd0, tag: rt_q};
    assign br[2*q+1] = '{v: rv_q, d: rd1, tag: rt_q};

    reshuffle u_resh (
      .clk, .rst(rst || clear), .cells(cfg[q].cells),
      .i0(pb[2*q]), .i1(pb[2*q+1]), .o0(mdc_i0[q]), .o1(mdc_i1[q])
    );
  end

  pbc u_pbc (.lgp, .br, .o(pb));
endmodule
