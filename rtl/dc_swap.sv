// dc_swap: delay commutator that exchanges the lane bit of a two-lane stream
// with one serial (time) bit.
//
// This is the two-FIFO, two-multiplexer cell of the reshuffle circuit and
// also the shuffling structure between the butterfly columns of an MDC.
// Lane 1 is delayed by L = 2^lg cycles, the two multiplexers then xsel the
// lanes, and lane 0 is delayed by L more.  A sample on lane x whose tag has
// bit lg equal to y leaves on lane y with tag bit lg set to x: the lane and
// serial dimensions are swapped.  The crossing decision is taken from the
// delayed lane-1 sample while it is valid, else from the lane-0 sample, so
// the cell drains correctly when the stream stops.  Latency is L cycles for
// a continuous stream.  With en low the cell passes both lanes through with
// no delay.  lg may change only while the cell is empty.
module dc_swap
  import fft_pkg::*;
#(
  parameter int unsigned LG_MAX = 4
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        en,
  input  logic [2:0]                  lg,
  input  elem_t                       a,    // lane 0 (branch i)
  input  elem_t                       b,    // lane 1 (branch i+h)
  output elem_t                       o0,
  output elem_t                       o1
);
  localparam int unsigned D = 1 << LG_MAX;

  elem_t bsr [D];
  elem_t xsr [D];
  elem_t bd, x0, x1;
  logic  xsel;
  logic [4:0] tb;   // tag bit index

  assign tb = {2'b00, lg};

  always_comb begin
    bd    = bsr[(1 << lg) - 1];
    xsel = bd.v ? ~bd.tag[tb] : a.tag[tb];
    x0    = xsel ? bd : a;
    x1    = xsel ? a  : bd;
    // relabel: the exchanged tag bit now records the lane of origin
    x0.tag[tb] = xsel;
    x1.tag[tb] = ~xsel;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < D; i++) begin
        bsr[i].v <= 1'b0;
        xsr[i].v <= 1'b0;
      end
    end else begin
      bsr[0] <= b;
      xsr[0] <= x0;
      for (int i = 1; i < D; i++) begin
        bsr[i] <= bsr[i-1];
        xsr[i] <= xsr[i-1];
      end
    end
  end

  assign o0 = en ? xsr[(1 << lg) - 1] : a;
  assign o1 = en ? x1 : b;
endmodule
