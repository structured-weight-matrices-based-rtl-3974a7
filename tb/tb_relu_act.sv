// tb_relu_act: random values spanning beyond the 16-bit range, with ReLU on and
// off. Expected: ReLU clamps negatives to 0 when enabled, then values saturate
// to [-32768, 32767]; one cycle latency.
module tb_relu_act;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  cpart_t din [N];
  act_t dout [N];
  logic vi, vo;
  tag_t ti, to;
  longint e [N];
  int clamped = 0, saturated = 0;
  relu_act #(.NP(N)) dut (.clk, .rst_n, .in_valid(vi), .in_tag(ti), .in_data(din),
      .out_valid(vo), .out_tag(to), .out_data(dout));
  initial begin
    vi = 0; ti = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      vi = 1; ti = '0; ti.relu = t[0]; ti.row = 3'(t);
      for (int k = 0; k < N; k++) begin
        longint v;
        v = longint'($signed($urandom_range(0, 1 << 17)) - (1 << 16));
        din[k] = cpart_t'(v);
        if (ti.relu && v < 0) begin v = 0; clamped++; end
        if (v > 32767) begin v = 32767; saturated++; end
        if (v < -32768) begin v = -32768; saturated++; end
        e[k] = v;
      end
      @(negedge clk);
      vi = 0;
      `CHECK(vo && to.row == 3'(t), "valid/tag")
      for (int k = 0; k < N; k++) `CHECK(longint'(dout[k]) == e[k], "activation")
    end
    `CHECK(clamped > 0 && saturated > 0, "both clamp and saturation exercised")
    `FINISH
  end
endmodule
