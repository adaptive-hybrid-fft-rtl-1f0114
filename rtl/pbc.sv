// pbc: parallel branch change circuit.
//
// Applies the parallel-dimension permutation sigma_2 to the NB branches read
// from the memory banks: within each group of 2^lgp branches the branch
// index bits are reversed, so branch b of a group is sent to output
// terminal bitrev_lgp(b).  lgp = log2(2P) for parallelism P; lgp = 0 or 1
// leaves every branch in place (a single bank pair has one parallel bit).
// Purely combinational.  The reversal follows the published sigma_2; the
// grouping of the eight branches by lgp is this implementation's choice.
module pbc
  import fft_pkg::*;
#(
  parameter int unsigned NB = NBANK
) (
  input  logic [1:0] lgp,
  input  elem_t      br [NB],
  output elem_t      o  [NB]
);
  function automatic int unsigned dest(int unsigned b, int unsigned w);
    int unsigned r;
    r = b & ~((1 << w) - 1);
    for (int i = 0; i < w; i++) if (((b >> i) & 1) != 0) r |= 1 << (w - 1 - i);
    return r;
  endfunction

  always_comb begin
    for (int b = 0; b < NB; b++) o[b] = br[b];
    for (int b = 0; b < NB; b++) o[dest(b, {30'd0, lgp})] = br[b];
  end
endmodule
