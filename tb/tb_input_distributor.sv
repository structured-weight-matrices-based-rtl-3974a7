// tb_input_distributor: random words arrive with random gaps; rows of 64 and
// 128 words are assembled. row_valid must rise exactly when `need` words are
// held, input must stall while the row waits (row_ready held low for a random
// time) and the row words must be the input words in order.
module tb_input_distributor;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 100000)

  logic [8:0] need;
  logic in_valid, in_ready, row_valid, row_ready;
  logic [IO_W-1:0] in_data, row_words [2*N];
  logic [IO_W-1:0] sent [2*N];
  int stalls = 0;

  input_distributor #(.NP(N)) dut (.clk, .rst_n, .need, .in_valid, .in_ready, .in_data,
      .row_valid, .row_ready, .row_words);

  initial begin
    need = 0; in_valid = 0; row_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      int n, got, wait_c;
      n = (r % 2 == 0) ? N : 2*N;
      need = 9'(n);
      got = 0;
      while (got < n) begin
        @(negedge clk);
        `CHECK(!row_valid, "row not early")
        in_valid = ($urandom_range(0, 3) != 0);
        in_data = IO_W'($urandom);
        @(posedge clk);
        if (in_valid && in_ready) begin sent[got] = in_data; got++; end
      end
      @(negedge clk);
      in_valid = 1;
      `CHECK(row_valid, "row valid when full")
      wait_c = $urandom_range(0, 4);
      for (int w = 0; w < wait_c; w++) begin
        `CHECK(!in_ready, "input stalls while row waits")
        stalls++;
        @(negedge clk);
      end
      row_ready = 1;
      for (int k = 0; k < n; k++) `CHECK(row_words[k] == sent[k], "row word")
      @(negedge clk);
      row_ready = 0; in_valid = 0;
    end
    `CHECK(stalls > 0, "stall exercised")
    `FINISH
  end
endmodule
