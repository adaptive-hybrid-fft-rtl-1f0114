// mdc_unit: mixed-radix multipath delay commutator (MDC) computing unit for
// radix-2^5, 2^4, 2^3, 2^2 and 2 stages.
//
// The unit takes butterfly blocks of 2^k samples on two lanes, 2^(k-1)
// cycles per block, blocks back to back.  Within a block the sample on lane
// r at local time c is the block's element r*2^(k-1)+c, i.e. samples of
// block B(m) are x(m + d*(2^(k-1) r + c)) as in the block definition of the
// radix-2^k data reordering scheme.  The local time c is the low k-1 bits of
// each sample's tag.
//
// Structure (radix-2^5, five columns, following the modified radix-2^5
// factorisation):
//   column 1: radix-2 butterfly, constant rotator W32^(k1(8n2+4n3+2n4+n5))
//   column 2: butterfly, trivial rotator (-j)^(n3 k2)
//   column 3: butterfly, constant rotator W32^(2(k2+2k3)(2n4+n5))
//   column 4: butterfly, trivial rotator (-j)^(n5 k4)
//   column 5: butterfly, non-trivial rotator W_N^(n6 (k1+2k2+4k3+8k4+16k5))
// Between columns 1-2, 2-3, 3-4 and 4-5 delay commutators of length 8, 4, 2
// and 1 bring the next butterfly's operand pairs onto the two lanes.  For a
// radix 2^k < 2^5 the input enters at column 6-k and bypasses the columns
// before it through multiplexers; the same constant and trivial rotators
// then produce the W16 / W8 / W4 factors of the lower radices.
//
// Output: lane k5 and tag bits (k1 k2 k3 k4) from bit k-2 down, i.e. lane 0
// at local time t carries DFT bin bitrev(t) of the block and lane 1 carries
// bin bitrev(t)+2^(k-1); the upper tag bits (block index) are kept.
// The non-trivial rotator multiplies bin k' of the block with block index j
// (j = tag >> (k-1+j_shift), log_eps bits, bit-reversed when j_rev is set,
// as in the first stage of a chain) by W_(Ns)^(j k'), Ns = 2^(log_eps+k),
// reading W from the shared twiddle ROM (one cycle latency) at address
// (j k') << (N_MAX_LOG - log_eps - k).
//
// Timing: each column is butterfly register + rotator register (+ ROM cycle
// in column 5) followed by its commutator; latency from input to output is
// 26 cycles for radix-2^5, 16 for 2^4, 10 for 2^3, 6 for 2^2, 3 for 2.
// Arithmetic is unscaled (no division by 2 in the butterflies); constants and
// products are rounded Q2.30.  The column layout, the bypass multiplexers and
// the rotator classes follow the published design; the lane/tag conventions,
// register placement and rounding are this implementation's choices.
module mdc_unit
  import fft_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic [2:0]           cfg_k,
  input  logic [4:0]           cfg_log_eps,
  input  logic                 cfg_j_shift,
  input  logic                 cfg_j_rev,
  input  logic                 cfg_nt_en,
  input  elem_t                in0,
  input  elem_t                in1,
  output elem_t                out0,
  output elem_t                out1,
  output logic [N_MAX_LOG-1:0] tw_addr0,
  output logic [N_MAX_LOG-1:0] tw_addr1,
  input  tw_t                  tw_data0,
  input  tw_t                  tw_data1
);
  // Constant twiddle factors W32^e, e = 0..31 (constant-multiplier ROM).
  tw_t w32 [32];
  initial for (int e = 0; e < 32; e++) w32[e] = twiddle(e, 5);

  // column inputs/outputs, index 1..5
  elem_t cin0  [1:5], cin1  [1:5];
  elem_t bu0   [1:5], bu1   [1:5];
  elem_t tf0   [1:5], tf1   [1:5];
  elem_t cout0 [1:5], cout1 [1:5];

  logic [3:0] kmask;
  assign kmask = 4'((1 << (cfg_k - 3'd1)) - 1);

  for (genvar j = 1; j <= 5; j++) begin : g_col
    // bypass multiplexer: the first active column takes the unit's input
    if (j == 1) begin : g_first
      assign cin0[j] = in0;
      assign cin1[j] = in1;
    end else begin : g_next
      assign cin0[j] = (int'(cfg_k) == 6 - j) ? in0 : cout0[j-1];
      assign cin1[j] = (int'(cfg_k) == 6 - j) ? in1 : cout1[j-1];
    end

    // radix-2 butterfly: lane 0 = sum (k = 0), lane 1 = difference (k = 1)
    always_ff @(posedge clk) begin
      if (rst) begin
        bu0[j].v <= 1'b0;
        bu1[j].v <= 1'b0;
      end else begin
        bu0[j].v   <= cin0[j].v;
        bu1[j].v   <= cin0[j].v;
        bu0[j].tag <= cin0[j].tag;
        bu1[j].tag <= cin0[j].tag;
        bu0[j].d   <= cadd(cin0[j].d, cin1[j].d);
        bu1[j].d   <= csub(cin0[j].d, cin1[j].d);
      end
    end
  end

  // local 4-bit time of the radix-2^5 schedule (upper bits zero for k < 5)
  function automatic logic [3:0] ltime(logic [3:0] t, logic [3:0] m);
    return t & m;
  endfunction

  // ---------------------------------------------------------- rotators 1-4
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int j = 1; j <= 4; j++) begin
        tf0[j].v <= 1'b0;
        tf1[j].v <= 1'b0;
      end
    end else begin
      for (int j = 1; j <= 4; j++) begin
        tf0[j] <= bu0[j];
        tf1[j] <= bu1[j];
      end
      // column 1, constant: lane 1 (k1 = 1) times W32^(8n2+4n3+2n4+n5)
      tf1[1].d <= cmul(bu1[1].d, w32[{1'b0, ltime(bu1[1].tag[3:0], kmask)}]);
      // column 2, trivial: lane 1 (k2 = 1) times -j when n3 = 1
      if (ltime(bu1[2].tag[3:0], kmask) [2]) tf1[2].d <= mul_mj(bu1[2].d);
      // column 3, constant: W32^(2(k2+2k3)(2n4+n5)), k3 = lane, k2 = bit 2
      tf0[3].d <= cmul(bu0[3].d, w32[5'(2 * {1'b0, ltime(bu0[3].tag[3:0], kmask)[2]}
                                        * ltime(bu0[3].tag[3:0], kmask)[1:0])]);
      tf1[3].d <= cmul(bu1[3].d, w32[5'(2 * (32'(ltime(bu1[3].tag[3:0], kmask)[2]) + 2)
                                        * ltime(bu1[3].tag[3:0], kmask)[1:0])]);
      // column 4, trivial: lane 1 (k4 = 1) times -j when n5 = 1
      if (ltime(bu1[4].tag[3:0], kmask) [0]) tf1[4].d <= mul_mj(bu1[4].d);
    end
  end

  // ------------------------------------------------------- commutators 1-4
  for (genvar j = 1; j <= 4; j++) begin : g_comm
    dc_swap #(.LG_MAX(4 - j)) u_sw (
      .clk(clk), .rst(rst), .en(1'b1), .lg(3'(4 - j)),
      .a(tf0[j]), .b(tf1[j]), .o0(cout0[j]), .o1(cout1[j])
    );
  end

  // ------------------------------------------- column 5: non-trivial rotator
  // bin index k' of each lane and block index j from the tags
  logic [4:0]           kf0, kf1;   // bin in radix-2^5 numbering
  logic [4:0]           kb0, kb1;   // bin of the 2^k-point block
  logic [TAG_W-1:0]     jnat, jblk;
  logic [N_MAX_LOG-1:0] e0, e1;
  logic [4:0]           tw_sh;
  elem_t                nt0, nt1;   // waiting for the ROM

  always_comb begin
    logic [3:0] t4;
    t4   = ltime(bu0[5].tag[3:0], kmask);
    kf0  = {1'b0, t4[0], t4[1], t4[2], t4[3]};
    kf1  = kf0 | 5'd16;
    kb0  = kf0 >> (3'd5 - cfg_k);
    kb1  = kf1 >> (3'd5 - cfg_k);
    jnat = (bu0[5].tag >> (cfg_k - 3'd1 + 3'(cfg_j_shift)))
           & TAG_W'((1 << cfg_log_eps) - 1);
    jblk = jnat;
    if (cfg_j_rev)
      for (int i = 0; i < TAG_W; i++)
        jblk[i] = (i < int'(cfg_log_eps)) ? jnat[int'(cfg_log_eps) - 1 - i] : 1'b0;
    tw_sh = 5'(N_MAX_LOG) - cfg_log_eps - 5'(cfg_k);
    e0   = N_MAX_LOG'((jblk * kb0) << tw_sh);
    e1   = N_MAX_LOG'((jblk * kb1) << tw_sh);
  end

  assign tw_addr0 = e0;
  assign tw_addr1 = e1;

  always_ff @(posedge clk) begin
    if (rst) begin
      nt0.v <= 1'b0;
      nt1.v <= 1'b0;
      tf0[5].v <= 1'b0;
      tf1[5].v <= 1'b0;
    end else begin
      nt0 <= bu0[5];
      nt1 <= bu1[5];
      tf0[5] <= nt0;
      tf1[5] <= nt1;
      if (cfg_nt_en) begin
        tf0[5].d <= cmul(nt0.d, tw_data0);
        tf1[5].d <= cmul(nt1.d, tw_data1);
      end
    end
  end

  assign cout0[5] = tf0[5];
  assign cout1[5] = tf1[5];
  assign out0 = cout0[5];
  assign out1 = cout1[5];
endmodule
