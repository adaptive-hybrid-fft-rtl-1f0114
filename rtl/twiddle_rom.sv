// twiddle_rom: multi-port ROM of the non-trivial twiddle factors
// W_Nmax^e = exp(-j 2 pi e / Nmax), Nmax = 2^N_MAX_LOG (512K by default).
//
// Only a quarter period is stored: entry r (0 <= r < Nmax/4) holds
// W_Nmax^r.  An exponent e is split into its quadrant q = e >> (N_MAX_LOG-2)
// and remainder r, and the entry is rotated by (-j)^q, a swap/negation of
// the two parts.  A smaller transform of size Ns = 2^s uses exponent
// e * 2^(N_MAX_LOG - s).  Each port has its own address and returns the
// factor one clock after the address (registered output).  Contents are
// Q2.30, computed when the ROM is initialised.  The quarter-wave folding and
// the number of ports are choices of this implementation; the published
// design only says that block RAMs hold the sine and cosine coefficients.
module twiddle_rom
  import fft_pkg::*;
#(
  parameter int unsigned NPORT = 2 * NMDC,
  parameter int unsigned LGN   = N_MAX_LOG
) (
  input  logic                       clk,
  input  logic [NPORT-1:0][LGN-1:0]  addr,
  output tw_t  [NPORT-1:0]           data
);
  localparam int unsigned QN = 1 << (LGN - 2);

  tw_t rom [QN];
  initial for (int r = 0; r < QN; r++) rom[r] = twiddle(r, LGN);

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    tw_t       w;
    logic [1:0] q;
    always_comb begin
      q = addr[p][LGN-1 -: 2];
      w = rom[addr[p][LGN-3:0]];
    end
    always_ff @(posedge clk) begin
      unique case (q)
        2'd0: data[p] <= w;
        2'd1: begin data[p].re <= w.im;  data[p].im <= -w.re; end
        2'd2: begin data[p].re <= -w.re; data[p].im <= -w.im; end
        default: begin data[p].re <= -w.im; data[p].im <= w.re; end
      endcase
    end
  end
endmodule
