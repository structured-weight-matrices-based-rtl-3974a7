// tb_output_distributor: a random activation row is captured on start (the
// row input is changed right after) and lanes 0..9 must come out in order
// under random backpressure, after which busy drops. Repeated for many rows.
module tb_output_distributor;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  logic start, busy, out_valid, out_ready;
  act_t row_data [N], keep [N];
  logic [IO_W-1:0] out_data;
  output_distributor #(.NP(N), .NOUT(NUM_OUT)) dut (.clk, .rst_n, .start, .row_data, .busy,
      .out_valid, .out_ready, .out_data);

  initial begin
    start = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      int got;
      @(negedge clk);
      for (int k = 0; k < N; k++) begin row_data[k] = act_t'($urandom); keep[k] = row_data[k]; end
      start = 1;
      @(negedge clk);
      start = 0;
      for (int k = 0; k < N; k++) row_data[k] = act_t'($urandom);
      got = 0;
      while (got < NUM_OUT) begin
        out_ready = ($urandom_range(0, 2) != 0);
        `CHECK(busy && out_valid, "busy while sending")
        if (out_ready) begin
          `CHECK(out_data == IO_W'(keep[got]), "lane order and value")
          got++;
        end
        @(negedge clk);
      end
      `CHECK(!busy && !out_valid, "idle after the last lane")
    end
    `FINISH
  end
endmodule
