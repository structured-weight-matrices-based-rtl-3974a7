// tb_io_buffer: random push and pop traffic against a queue model. Every
// popped word must be the oldest pushed one; in_ready must be low exactly when
// DEPTH words are held and out_valid high exactly when any are held. Both the
// full and the empty condition must occur.
module tb_io_buffer;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  localparam int DEPTH = 16;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [15:0] q [$];
  int fulls = 0, empties = 0, popped = 0;
  io_buffer #(.W(16), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
      .out_valid, .out_ready, .out_data);

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int phase;
      phase = (t / 300) % 2;
      @(negedge clk);
      // alternate between mostly-filling and mostly-draining phases
      in_valid  = ($urandom_range(0, 9) < (phase == 0 ? 8 : 3));
      out_ready = ($urandom_range(0, 9) < (phase == 0 ? 3 : 8));
      in_data   = 16'($urandom);
      #1;
      `CHECK(in_ready == (q.size() < DEPTH), "in_ready")
      `CHECK(out_valid == (q.size() > 0), "out_valid")
      if (q.size() == DEPTH) fulls++;
      if (q.size() == 0) empties++;
      if (out_valid && out_ready) begin
        `CHECK(out_data == q[0], "order")
        popped++;
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    `CHECK(fulls > 0 && empties > 0 && popped > 500, "full and empty reached")
    `FINISH
  end
endmodule
