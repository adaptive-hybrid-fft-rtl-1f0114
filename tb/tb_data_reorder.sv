// tb_data_reorder: memory banks, address generators, branch connector and
// reshuffle circuits of the data reordering unit.
//
// Pair 0 is written from the processor input: two batches of 64 words with a
// random read permutation sigma of the 6 serial bits and one reshuffle cell
// swapping the lane with serial bit 2.  Pair 1 is written from MDC 0's output
// port (driven by the bench): two batches of 32 words, sigma reversing the 5
// serial bits, no reshuffle.  Both pairs stream their batches back to back,
// so the second batch is written while the first is read (in-place update
// of the address pattern).  Words carry (batch, lane, write count).
//
// Reference: reading at count c returns the word written at count
// sigma(c) (address bit i of the read equals write-count bit sigma[i]); a
// reshuffle cell with bit lg sends the word read on lane x with count c to
// lane c[lg] with tag bit lg = x.  Every output word and tag is checked, and
// the first output of each batch must appear 2 + 2^lg cycles after the cycle
// in which the batch's last word is written (1 cycle to start reading, 1
// cycle memory read, 2^lg cycles reshuffle FIFO).
`timescale 1ns/1ps
module tb_data_reorder;
  import fft_pkg::*;

  logic clk = 0, rst = 1, clear = 0;
  always #5 clk = ~clk;

  stage_cfg_t cfg [NMDC];
  logic [1:0] lgp;
  logic       in_v  [NMDC];
  cpx_t       in_d0 [NMDC], in_d1 [NMDC];
  elem_t      mdc_o0 [NMDC], mdc_o1 [NMDC], mdc_i0 [NMDC], mdc_i1 [NMDC];
  logic       batch_done [NMDC], conflict [NMDC];

  data_reorder dut (.clk, .rst, .clear, .cfg, .lgp, .in_v, .in_d0, .in_d1,
                    .mdc_o0, .mdc_o1, .mdc_i0, .mdc_i1, .batch_done, .conflict);

  localparam int NS [2] = '{6, 5};   // serial bits per pair
  localparam int LG [2] = '{2, -1};  // reshuffle bit, -1 = none

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int sig [2][ADDR_W];
  int nout [2], tdone [2][2], tfirst [2][2];

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int apply_sig(int q, int c);
    int u = 0;
    for (int i = 0; i < NS[q]; i++) if ((c >> sig[q][i]) & 1) u |= 1 << i;
    return u;
  endfunction

  function automatic cpx_t word(int q, int b, int x, int u);
    return '{re: DW'(b * 1000000 + x * 100000 + u), im: DW'(q)};
  endfunction

  task automatic check_out(int q, int r, elem_t o);
    int tau, x, c, u, b;
    tau = int'(o.tag);
    if (LG[q] >= 0) begin
      x = (tau >> LG[q]) & 1;
      c = (tau & ~(1 << LG[q])) | (r << LG[q]);
    end else begin
      x = r;
      c = tau;
    end
    u = apply_sig(q, c);
    b = nout[q] / (2 << NS[q]);
    checks++;
    if (o.d != word(q, b, x, u)) begin
      failures++;
      if (failures < 10)
        $display("pair %0d lane %0d tag %0d: got %0d/%0d, expected %0d",
                 q, r, tau, o.d.re, o.d.im, b * 1000000 + x * 100000 + u);
    end
  endtask

  initial begin
    lgp = 2'd0;
    for (int q = 0; q < NMDC; q++) begin
      cfg[q] = '0;
      cfg[q].k = 3'd5;
      cfg[q].src = SRC_INPUT;
      cfg[q].n_ser = 5'd4;
      cfg[q].sigma = perm_identity();
      in_v[q] = 0; in_d0[q] = '0; in_d1[q] = '0;
      mdc_o0[q] = '0; mdc_o1[q] = '0;
    end
    // pair 0: random permutation of 6 bits, swap with bit 2
    for (int i = 0; i < ADDR_W; i++) sig[0][i] = i;
    for (int i = NS[0] - 1; i > 0; i--) begin
      int j, t;
      j = int'($urandom_range(i));
      t = sig[0][i]; sig[0][i] = sig[0][j]; sig[0][j] = t;
    end
    // pair 1: reversal of 5 bits, written by MDC 0's output
    for (int i = 0; i < ADDR_W; i++) sig[1][i] = (i < NS[1]) ? NS[1] - 1 - i : i;
    for (int q = 0; q < 2; q++) begin
      cfg[q].n_ser = 5'(NS[q]);
      for (int i = 0; i < ADDR_W; i++) cfg[q].sigma[i] = PERM_W'(sig[q][i]);
      if (LG[q] >= 0) cfg[q].cells[0] = {1'b1, 3'(LG[q])};
      nout[q] = 0;
      tfirst[q] = '{-1, -1};
    end
    cfg[1].src = 3'd0;

    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);
    fork
      // writer of pair 0 (processor input)
      begin
        for (int b = 0; b < 2; b++)
          for (int u = 0; u < (1 << NS[0]); u++) begin
            in_v[0] = 1;
            in_d0[0] = word(0, b, 0, u);
            in_d1[0] = word(0, b, 1, u);
            @(negedge clk);
          end
        in_v[0] = 0;
      end
      // writer of pair 1 (MDC 0 output port)
      begin
        for (int b = 0; b < 2; b++)
          for (int u = 0; u < (1 << NS[1]); u++) begin
            mdc_o0[0] = '{v: 1'b1, d: word(1, b, 0, u), tag: '0};
            mdc_o1[0] = '{v: 1'b1, d: word(1, b, 1, u), tag: '0};
            @(negedge clk);
          end
        mdc_o0[0].v = 0; mdc_o1[0].v = 0;
      end
      // monitor: sample just before each clock edge
      begin
        int nb [2];
        nb = '{0, 0};
        repeat (400) begin
          @(negedge clk); #4;
          for (int q = 0; q < 2; q++) begin
            if (batch_done[q]) begin
              tdone[q][nb[q]] = cyc;
              nb[q]++;
            end
            if (mdc_i0[q].v || mdc_i1[q].v) begin
              int b;
              b = nout[q] / (2 << NS[q]);
              if (tfirst[q][b] < 0) tfirst[q][b] = cyc;
            end
            if (mdc_i0[q].v) begin
              check_out(q, 0, mdc_i0[q]);
              nout[q]++;
            end
            if (mdc_i1[q].v) begin
              check_out(q, 1, mdc_i1[q]);
              nout[q]++;
            end
            checks++;
            if (conflict[q]) begin
              failures++;
              $display("pair %0d: read/write conflict", q);
            end
          end
        end
      end
    join
    for (int q = 0; q < 2; q++) begin
      checks++;
      if (nout[q] != 2 * (2 << NS[q])) begin
        failures++;
        $display("pair %0d: %0d outputs, expected %0d", q, nout[q], 2 * (2 << NS[q]));
      end
      for (int b = 0; b < 2; b++) begin
        int lat;
        lat = 2 + ((LG[q] >= 0) ? (1 << LG[q]) : 0);
        checks++;
        if (tfirst[q][b] - tdone[q][b] != lat) begin
          failures++;
          $display("pair %0d batch %0d: first output %0d cycles after last write, expected %0d",
                   q, b, tfirst[q][b] - tdone[q][b], lat);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
