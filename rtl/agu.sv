// agu: address generation unit of one bank pair.
//
// Addresses are bit-dimension permutations of two circular counters, one for
// writing and one for reading a batch of 2^n_ser words per bank.  Address
// bit i is counter bit perm[i].  The read pattern of a batch is the write
// pattern it was written with, followed by the reordering permutation sigma
// (the serial part of the data reordering permutation).  The next batch is
// then written with exactly that read pattern, so each word is overwritten
// only after it has been read (in the same cycle at the latest): the memory
// is reused in place and the flow never stops.  For an involution such as
// a bit reversal the patterns alternate between natural and permuted order.
//
// Reading of a batch starts the cycle after its last word is written and
// takes 2^n_ser cycles; rd_tag is the read count, the sample's position in
// the stream sent on to the reshuffle circuit.  clear restores the natural
// write pattern and empties the unit.  conflict flags a batch that finished
// writing while the previous one was still being read, which continuous
// one-word-per-cycle flow never produces.
module agu
  import fft_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              clear,
  input  logic [4:0]        n_ser,
  input  perm_t             sigma,
  input  logic              wr_v,
  output logic [ADDR_W-1:0] wr_addr,
  output logic              rd_v,
  output logic [ADDR_W-1:0] rd_addr,
  output logic [TAG_W-1:0]  rd_tag,
  output logic              batch_done,
  output logic              conflict
);
  perm_t             p_wr, p_rd;
  logic [ADDR_W-1:0] wr_cnt, rd_cnt, last;
  logic              rd_act;

  assign last       = ADDR_W'((1 << n_ser) - 1);
  assign wr_addr    = perm_apply(p_wr, wr_cnt);
  assign rd_addr    = perm_apply(p_rd, rd_cnt);
  assign rd_v       = rd_act;
  assign rd_tag     = TAG_W'(rd_cnt);
  assign batch_done = wr_v && (wr_cnt == last);

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      p_wr     <= perm_identity();
      p_rd     <= perm_identity();
      wr_cnt   <= '0;
      rd_cnt   <= '0;
      rd_act   <= 1'b0;
      conflict <= 1'b0;
    end else begin
      if (rd_act) begin
        rd_cnt <= rd_cnt + 1'b1;
        if (rd_cnt == last) rd_act <= 1'b0;
      end
      if (wr_v) wr_cnt <= (wr_cnt == last) ? '0 : wr_cnt + 1'b1;
      if (batch_done) begin
        if (rd_act && rd_cnt != last) conflict <= 1'b1;
        p_rd   <= perm_compose(p_wr, sigma);
        p_wr   <= perm_compose(p_wr, sigma);
        rd_cnt <= '0;
        rd_act <= 1'b1;
      end
    end
  end

  // one word per cycle: the previous batch is fully read when the next ends
  a_no_conflict: assert property (@(posedge clk) disable iff (rst || clear)
                                  batch_done |-> !(rd_act && rd_cnt != last));
endmodule
