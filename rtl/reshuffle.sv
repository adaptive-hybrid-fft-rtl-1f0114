// reshuffle: reshuffle circuit of one branch pair, a series of sigma_3 cells.
//
// Each of the NCELL cells exchanges the pair's parallel bit with serial bit
// lg of the stream, using two FIFOs of length 2^lg and two multiplexers
// (dc_swap).  The cells are chained as in the published series of
// permutations sigma_3,I ... sigma_3,VI; a disabled cell passes the pair
// through without delay.  The latency is the sum of 2^lg over the enabled
// cells.  In this implementation the two inputs of a cell are always the two
// branches of one pair (distance h = 1); swaps between pairs (h = 2, 4) are
// not provided.  Configuration may change only while the circuit is empty.
module reshuffle
  import fft_pkg::*;
(
  input  logic                                   clk,
  input  logic                                   rst,
  input  logic [NCELL-1:0][$bits(swap_cfg_t)-1:0] cells,
  input  elem_t                                  i0,
  input  elem_t                                  i1,
  output elem_t                                  o0,
  output elem_t                                  o1
);
  elem_t s0 [NCELL+1], s1 [NCELL+1];
  assign s0[0] = i0;
  assign s1[0] = i1;

  for (genvar c = 0; c < NCELL; c++) begin : g_cell
    swap_cfg_t sc;
    assign sc = cells[c];
    dc_swap #(.LG_MAX(LG_LMAX)) u_cell (
      .clk, .rst, .en(sc.en), .lg(sc.lg),
      .a(s0[c]), .b(s1[c]), .o0(s0[c+1]), .o1(s1[c+1])
    );
  end

  assign o0 = s0[NCELL];
  assign o1 = s1[NCELL];
endmodule
