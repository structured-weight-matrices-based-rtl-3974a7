// tb_accumulator: groups of 1..8 random vectors framed by first/last are
// streamed, with idle cycles between some of them. The output must show the
// exact sum of each group once, one cycle after its last vector, and the tag
// of that last vector.
module tb_accumulator;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  cpart_t din [N], dout [N];
  logic vi, vo;
  tag_t ti, to;
  accumulator #(.NP(N)) dut (.clk, .rst_n, .in_valid(vi), .in_tag(ti), .in_data(din),
      .out_valid(vo), .out_tag(to), .out_data(dout));

  longint sum [N];
  int outs = 0;
  initial begin
    vi = 0; ti = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 60; g++) begin
      int q;
      q = $urandom_range(1, 8);
      for (int k = 0; k < N; k++) sum[k] = 0;
      for (int j = 0; j < q; j++) begin
        @(negedge clk);
        `CHECK(!vo, "no output inside a group")
        if ($urandom_range(0, 3) == 0) begin vi = 0; @(negedge clk); end
        vi = 1; ti = '0; ti.first = (j == 0); ti.last = (j == q - 1); ti.row = 3'(g);
        for (int k = 0; k < N; k++) begin
          din[k] = cpart_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
          sum[k] += longint'(din[k]);
        end
      end
      @(negedge clk);
      vi = 0;
      `CHECK(vo && to.row == 3'(g), "sum valid one cycle after last")
      for (int k = 0; k < N; k++) `CHECK(longint'(dout[k]) == sum[k], "sum value")
      outs++;
    end
    `CHECK(outs == 60, "groups")
    `FINISH
  end
endmodule
