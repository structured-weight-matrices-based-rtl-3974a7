// tb_bias_add: random sums and biases; out = in + sign-extended bias exactly,
// one cycle later, tag passed along.
module tb_bias_add;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  cpart_t din [N], dout [N];
  act_t b [N];
  logic vi, vo;
  tag_t ti, to;
  longint exp_v [N];
  bias_add #(.NP(N)) dut (.clk, .rst_n, .in_valid(vi), .in_tag(ti), .in_data(din), .bias(b),
      .out_valid(vo), .out_tag(to), .out_data(dout));
  initial begin
    vi = 0; ti = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      vi = 1; ti = '0; ti.brow = 5'(t);
      for (int k = 0; k < N; k++) begin
        din[k] = cpart_t'($signed($urandom_range(0, 1 << 24)) - (1 << 23));
        b[k] = act_t'($urandom);
        exp_v[k] = longint'(din[k]) + longint'(b[k]);
      end
      @(negedge clk);
      vi = 0;
      `CHECK(vo && to.brow == 5'(t), "valid/tag")
      for (int k = 0; k < N; k++) `CHECK(longint'(dout[k]) == exp_v[k], "biased value")
    end
    `FINISH
  end
endmodule
