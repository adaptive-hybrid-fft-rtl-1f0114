// fft_pkg: types, constants and host-side helper functions shared by the
// adaptive hybrid FFT processor.
//
// Sample format: complex numbers with 32-bit two's-complement real and
// imaginary parts (the memories hold 32 bits per part).  Arithmetic is
// unscaled integer arithmetic: an N-point transform grows by log2(N) bits, so
// an input with at most 32-1-log2(N) significant bits cannot overflow.
// Twiddle factors are Q2.30 signed fixed point (1.0 = 2^30).
//
// Every sample travelling through the pipeline is an elem_t: a valid bit, the
// complex value and a tag.  The tag is the sample's position in the stream of
// its batch (cycle count within the batch).  Bit-dimension permutations and
// the MDC commutators move samples between the two lanes of a pair and
// relabel the tag bit they exchange, so the tag always tells a stage which
// bit dimensions a sample occupies.
//
// The functions at the end compute the configuration of a pipeline chain
// (radix split, read-address permutation sigma, reshuffle swaps) for a given
// FFT size.  The first stage uses the published recipe (reversal of w serial
// bits, then a fixed series of reshuffle cells chosen by n % 5); the later
// stages' read permutations and single swap are this design's own, derived
// from the bit order each MDC delivers and needs.  They model the host that loads the configuration registers and
// are not synthesised.
package fft_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_MAX_LOG = 19;            // 512K points
  localparam int unsigned ADDR_W    = N_MAX_LOG - 1; // 256K addresses per bank
  localparam int unsigned TAG_W     = ADDR_W;        // position within a batch
  localparam int unsigned DW        = 32;            // bits per real/imag part
  localparam int unsigned TWW       = 32;            // twiddle bits per part
  localparam int unsigned TW_FRAC   = 30;            // twiddle fraction bits
  localparam int unsigned KMAX      = 5;             // radix-2^5 MDC
  localparam int unsigned NMDC      = 4;             // MDC computing units
  localparam int unsigned NBANK     = 2 * NMDC;      // memory banks
  localparam int unsigned NCELL     = 6;             // sigma_3 cells per pair
  localparam int unsigned LG_LMAX   = 4;             // reshuffle FIFO up to 16
  localparam int unsigned PERM_W    = $clog2(ADDR_W);

  // ---------------------------------------------------------------- types
  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cpx_t;

  typedef struct packed {
    logic signed [TWW-1:0] re;
    logic signed [TWW-1:0] im;
  } tw_t;

  typedef struct packed {
    logic             v;
    cpx_t             d;
    logic [TAG_W-1:0] tag;
  } elem_t;

  // Address bit i is taken from counter bit perm[i].
  typedef logic [ADDR_W-1:0][PERM_W-1:0] perm_t;

  // One sigma_3 cell: swap the lane bit with serial bit lg (FIFO length 2^lg).
  typedef struct packed {
    logic               en;
    logic [2:0]         lg;
  } swap_cfg_t;

  // Configuration of one stage: bank pair q feeding MDC q.
  typedef struct packed {
    logic [2:0]         k;        // radix 2^k of this MDC, 1..5
    logic [4:0]         log_eps;  // log2 of the sub-FFT stride epsilon_s
    logic               j_shift;  // block index starts one bit higher
    logic               j_rev;    // block index arrives bit-reversed
    logic               nt_en;    // apply the non-trivial twiddle W_N
    logic [4:0]         n_ser;    // serial bits of a batch: log2(N/2)
    perm_t              sigma;    // read permutation of the circular counter
    logic [NCELL-1:0][$bits(swap_cfg_t)-1:0] cells; // reshuffle series
    logic [2:0]         src;      // writer of the pair: MDC 0..3, 4 = input
    logic               last;     // MDC output leaves the processor
  } stage_cfg_t;

  localparam logic [2:0] SRC_INPUT = 3'd4;

  // ------------------------------------------------------------ arithmetic
  function automatic cpx_t cadd(cpx_t a, cpx_t b);
    cadd.re = a.re + b.re;
    cadd.im = a.im + b.im;
  endfunction

  function automatic cpx_t csub(cpx_t a, cpx_t b);
    csub.re = a.re - b.re;
    csub.im = a.im - b.im;
  endfunction

  // Multiplication by the trivial factor -j.
  function automatic cpx_t mul_mj(cpx_t a);
    mul_mj.re = a.im;
    mul_mj.im = -a.re;
  endfunction

  // Full complex multiplication with round-half-up of the Q2.30 product.
  function automatic cpx_t cmul(cpx_t a, tw_t w);
    logic signed [DW+TWW:0] pr, pi;
    pr = (DW+TWW+1)'(a.re * w.re) - (DW+TWW+1)'(a.im * w.im);
    pi = (DW+TWW+1)'(a.re * w.im) + (DW+TWW+1)'(a.im * w.re);
    pr = pr + (DW+TWW+1)'(1 << (TW_FRAC - 1));
    pi = pi + (DW+TWW+1)'(1 << (TW_FRAC - 1));
    cmul.re = DW'(pr >>> TW_FRAC);
    cmul.im = DW'(pi >>> TW_FRAC);
  endfunction

  // exp(-j*2*pi*e/2^lgn) in Q2.30.
  function automatic tw_t twiddle(int unsigned e, int unsigned lgn);
    real ang;
    ang = -2.0 * 3.14159265358979323846 * real'(e) / real'(64'd1 << lgn);
    twiddle.re = TWW'($rtoi($floor($cos(ang) * real'(1 << TW_FRAC) + 0.5)));
    twiddle.im = TWW'($rtoi($floor($sin(ang) * real'(1 << TW_FRAC) + 0.5)));
  endfunction

  function automatic perm_t perm_identity();
    for (int i = 0; i < ADDR_W; i++) perm_identity[i] = PERM_W'(i);
  endfunction

  // Address pattern of "first A then B": result[i] = b[a[i]].
  function automatic perm_t perm_compose(perm_t a, perm_t b);
    for (int i = 0; i < ADDR_W; i++) perm_compose[i] = b[a[i]];
  endfunction

  function automatic logic [ADDR_W-1:0] perm_apply(perm_t p, logic [ADDR_W-1:0] c);
    for (int i = 0; i < ADDR_W; i++) perm_apply[i] = c[p[i]];
  endfunction

  // ------------------------------------------- published sigma_1 formulas
  // Number of reversed serial bits w for pipeline mode (N > 2^k).
  function automatic int pub_w(int n, int s, int k, int lgp);
    int ss;
    ss = (n + k - 1) / k;
    if (s == 1 || s == ss) return n - 1 - lgp;
    return k * ((n / k) + s - ss) + (n % k) - 1 - lgp;
  endfunction

  // sigma_1 on the n-p serial bits: reverse the low w bits, or all of them
  // when w exceeds the serial width.
  function automatic perm_t pub_sigma1(int n_ser, int w);
    perm_t p;
    int r;
    p = perm_identity();
    r = (n_ser - 1 >= w) ? w : n_ser;
    for (int i = 0; i < r; i++) p[i] = PERM_W'(r - 1 - i);
    return p;
  endfunction

  // ------------------------------------------------ host-side configuration
  // A stream order says which label (in-place index) bit each lane/time bit
  // carries: lane -> label bit lane, time bit i -> label bit t[i].
  typedef struct {
    int lane;
    int t[ADDR_W];
  } order_t;

  // Radix of each stage: k1 = n - k(S-1), the others k.
  function automatic int stage_k(int n, int s);
    int ss;
    ss = (n + KMAX - 1) / KMAX;
    return (s == 1) ? n - KMAX * (ss - 1) : KMAX;
  endfunction

  // Published first-stage sigma_3 series for 1-parallel radix-2^5: log2 of
  // the FIFO lengths, by n % 5 (0: 8,1,8,4,2,4; 3: 2,1,2; 4: 4,1,4; else none).
  function automatic int pub_cells(int n, int c);
    int t0 [6], t3 [3], t4 [3];
    t0 = '{3, 0, 3, 2, 1, 2};
    t3 = '{1, 0, 1};
    t4 = '{2, 0, 2};
    case (n % 5)
      0: return (c < 6) ? t0[c] : -1;
      3: return (c < 3) ? t3[c] : -1;
      4: return (c < 3) ? t4[c] : -1;
      default: return -1;
    endcase
  endfunction

  // Order at the first MDC of a chain: the input is read with the published
  // reversal of w serial bits and passed through the published cell series.
  // The butterfly-group bits land where the MDC needs them; the block index
  // bits arrive bit-reversed (hence j_rev in the first stage).
  function automatic order_t first_in_order(int n);
    order_t o;
    int r, w, tmp;
    o.lane = n - 1;
    foreach (o.t[i]) o.t[i] = i;
    w = pub_w(n, 1, KMAX, 0);
    r = (n - 2 >= w) ? w : n - 1;
    for (int i = 0; i < r; i++) o.t[i] = r - 1 - i;
    for (int c = 0; c < NCELL; c++)
      if (pub_cells(n, c) >= 0) begin
        tmp = o.lane;
        o.lane = o.t[pub_cells(n, c)];
        o.t[pub_cells(n, c)] = tmp;
      end
    return o;
  endfunction

  // Order an MDC needs at its input in stage s (1-based) of an n-bit FFT.
  function automatic order_t mdc_in_order(int n, int s);
    order_t o;
    int e, k, pos;
    if (s == 1) return first_in_order(n);
    e = n;
    for (int u = 1; u <= s; u++) e -= stage_k(n, u);
    k = stage_k(n, s);
    foreach (o.t[i]) o.t[i] = i;
    o.lane = e + k - 1;
    for (int i = 0; i < k - 1; i++) o.t[i] = e + i;
    pos = k - 1;
    if (s > 1) begin
      o.t[pos] = e + k;
      pos++;
    end
    for (int i = 0; i < e; i++) o.t[pos + i] = i;
    pos += e;
    for (int b = e + k + ((s > 1) ? 1 : 0); b < n; b++) begin
      o.t[pos] = b;
      pos++;
    end
    return o;
  endfunction

  // Order an MDC produces: DIF outputs land in bit-reversed block positions.
  function automatic order_t mdc_out_order(order_t m, int k);
    order_t o;
    o = m;
    o.lane = (k >= 2) ? m.t[0] : m.lane;
    for (int i = 0; i < k - 1; i++) o.t[i] = (i + 1 < k - 1) ? m.t[i + 1] : m.lane;
    return o;
  endfunction

  function automatic order_t input_order(int n);
    order_t o;
    foreach (o.t[i]) o.t[i] = i;
    o.lane = n - 1;
    return o;
  endfunction

  // Configuration of stage s of a pipeline chain for an n-bit FFT.
  function automatic stage_cfg_t chain_stage_cfg(int n, int s);
    stage_cfg_t c;
    order_t w, m, nu;
    int ss, e;
    logic [4:0] lsw;
    swap_cfg_t sc;
    ss = (n + KMAX - 1) / KMAX;
    e = n;
    for (int u = 1; u <= s; u++) e -= stage_k(n, u);
    w = input_order(n);
    for (int u = 1; u < s; u++) w = mdc_out_order(mdc_in_order(n, u), stage_k(n, u));
    m = mdc_in_order(n, s);
    c = '0;
    c.k = 3'(stage_k(n, s));
    c.log_eps = 5'(e);
    c.j_shift = (s > 1);
    c.j_rev = (s == 1);
    c.nt_en = (s < ss);
    c.n_ser = 5'(n - 1);
    c.last = (s == ss);
    if (s == 1) begin
      // published first stage: reversal of w serial bits, then the series
      c.sigma = pub_sigma1(n - 1, pub_w(n, 1, KMAX, 0));
      for (int i = 0; i < NCELL; i++)
        if (pub_cells(n, i) >= 0) begin
          sc.en = 1'b1;
          sc.lg = 3'(pub_cells(n, i));
          c.cells[i] = sc;
        end
      return c;
    end
    nu = m;
    lsw = '0;
    if (w.lane != m.lane) begin
      for (int i = 0; i < n - 1; i++) if (m.t[i] == w.lane) lsw = 5'(i);
      nu.t[lsw] = m.lane;
      sc.en = 1'b1;
      sc.lg = lsw[2:0];
      c.cells[0] = sc;
    end
    c.sigma = perm_identity();
    for (int j = 0; j < n - 1; j++)
      for (int i = 0; i < n - 1; i++)
        if (nu.t[i] == w.t[j]) c.sigma[j] = PERM_W'(i);
    return c;
  endfunction

  // Label (in-place index) of the sample leaving the last MDC of an n-bit
  // chain on lane ln with tag tg; the sample holds X[bitreverse_n(label)].
  function automatic int out_label(int n, int ln, int tg);
    order_t o;
    int ss, lab;
    ss = (n + KMAX - 1) / KMAX;
    o = mdc_out_order(mdc_in_order(n, ss), stage_k(n, ss));
    lab = ln << o.lane;
    for (int i = 0; i < n - 1; i++) lab |= ((tg >> i) & 1) << o.t[i];
    return lab;
  endfunction

endpackage
