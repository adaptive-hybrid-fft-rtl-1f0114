// mem_bank: one data memory bank of the reordering module.
//
// A simple dual-port RAM of 2^AW complex words (32-bit real and imaginary
// parts, 64 bits per word): one write port and one read port, both
// synchronous.  Read data appears one clock after the read address.  When
// both ports address the same word in the same cycle the read returns the
// old word (read-first), which is what the in-place address scheme relies
// on: a new batch is written into the word that the previous batch is read
// from in that cycle.  The default depth, 256K words, is the published bank
// size; the read-first behaviour is this implementation's choice.  The array
// is not reset.
module mem_bank
  import fft_pkg::*;
#(
  parameter int unsigned AW = ADDR_W
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  cpx_t          wdata,
  input  logic [AW-1:0] raddr,
  output cpx_t          rdata
);
  cpx_t mem [1 << AW];

  always_ff @(posedge clk) begin
    rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end
endmodule
