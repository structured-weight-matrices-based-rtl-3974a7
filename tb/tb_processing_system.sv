// tb_processing_system: one block-circulant layer of P=3 output blocks and Q=4
// input blocks, followed by the same layer with ReLU off, is streamed through
// the processing system one block per cycle. The testbench models the weight
// memory (synchronous read) and the bias register file. Weights are random
// real circulant vectors w_ij; the memory holds their spectra, computed here
// in real arithmetic and rounded to Q5.10. Expected results are the circular
// convolutions sum_j (w_ij (*) x_j) + b_i in real arithmetic, then ReLU, in
// Q8.8 (tolerance 3 LSB). Each result must appear 17 cycles after the last
// block of its sum.
module tb_processing_system;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  localparam int P = 3, Q = 4;
  real wt [P][Q][N];     // time-domain weights (real)
  real xt [Q][N];        // inputs (real, Q8.8-representable)
  real bt [P][N];        // biases

  wcplx_t wmem [P*Q][N];
  act_t   bmem [P][N];
  act_t   xq   [Q][N];

  logic   in_valid;
  tag_t   in_tag;
  act_t   x_row [N];
  logic   w_rd_en;
  logic [7:0] w_addr;
  wcplx_t w_row [N];
  logic [4:0] b_addr;
  act_t   b_row [N];
  logic   out_valid;
  tag_t   out_tag;
  act_t   out_act [N];

  processing_system #(.NP(N)) dut (.clk, .rst_n, .in_valid, .in_tag, .x_row, .w_rd_en, .w_addr,
      .w_row, .b_addr, .b_row, .out_valid, .out_tag, .out_act);

  always @(posedge clk) if (w_rd_en) w_row <= wmem[w_addr];
  always_comb b_row = bmem[b_addr % P];

  int cyc = 0;
  always @(posedge clk) cyc++;
  int last_cyc [2*P];
  int nout = 0, relu_zero = 0;

  always @(negedge clk) if (out_valid) begin
    int i;
    i = nout % P;
    `CHECK(cyc - last_cyc[nout] == 17, "latency 17 cycles")
    `CHECK(out_tag.row == 3'(i), "destination row")
    for (int r = 0; r < N; r++) begin
      real e;
      e = bt[i][r];
      for (int j = 0; j < Q; j++)
        for (int c = 0; c < N; c++) e += wt[i][j][c] * xt[j][(r - c + N) % N];
      if (nout < P && e < 0.0) begin e = 0.0; relu_zero++; end
      `CHECK_NEAR(out_act[r], e * 256.0, 3.0, "activation")
    end
    nout++;
  end

  initial begin
    in_valid = 0; in_tag = '0;
    for (int i = 0; i < P; i++) for (int j = 0; j < Q; j++) for (int c = 0; c < N; c++)
      wt[i][j][c] = (real'($urandom_range(0, 2000)) - 1000.0) / 8000.0;
    for (int j = 0; j < Q; j++) for (int c = 0; c < N; c++) begin
      xq[j][c] = act_t'($urandom_range(0, 511));
      xt[j][c] = real'(xq[j][c]) / 256.0;
    end
    for (int i = 0; i < P; i++) for (int c = 0; c < N; c++) begin
      bmem[i][c] = act_t'($signed($urandom_range(0, 511)) - 256);
      bt[i][c] = real'(bmem[i][c]) / 256.0;
    end
    for (int i = 0; i < P; i++) for (int j = 0; j < Q; j++) for (int k = 0; k < N; k++) begin
      real er, ei, ang;
      er = 0.0; ei = 0.0;
      for (int c = 0; c < N; c++) begin
        ang = -6.283185307179586 * real'(k * c) / real'(N);
        er += wt[i][j][c] * $cos(ang);
        ei += wt[i][j][c] * $sin(ang);
      end
      er *= 1024.0; ei *= 1024.0;
      wmem[i*Q+j][k].re = act_t'($rtoi(er >= 0 ? er + 0.5 : er - 0.5));
      wmem[i*Q+j][k].im = act_t'($rtoi(ei >= 0 ? ei + 0.5 : ei - 0.5));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < P; i++)
        for (int j = 0; j < Q; j++) begin
          @(negedge clk);
          in_valid = 1;
          in_tag = '0;
          in_tag.row = 3'(i); in_tag.lanes = '1; in_tag.wrow = 8'(i*Q + j);
          in_tag.brow = 5'(i); in_tag.relu = (pass == 0);
          in_tag.first = (j == 0); in_tag.last = (j == Q - 1);
          x_row = xq[j];
          if (j == Q - 1) last_cyc[pass*P + i] = cyc;
        end
    @(negedge clk) in_valid = 0;
    repeat (25) @(posedge clk);
    `CHECK(nout == 2*P, "all output blocks")
    `CHECK(relu_zero > 0, "ReLU clamped some lanes")
    `FINISH
  end
endmodule
