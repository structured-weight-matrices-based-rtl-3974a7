// tb_pingpong_buffer: random writes (bank, row, lane mask) checked against a
// reference copy of both register files; every cycle the multiplexed read of
// a random bank/row must match the reference.
module tb_pingpong_buffer;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  logic wr_en, wr_bank, rd_bank;
  logic [2:0] wr_row, rd_row;
  logic [N-1:0] wr_lanes;
  act_t wr_data [N], rd_data [N];
  act_t ref_m [2][8][N];
  pingpong_buffer #(.NP(N), .ROWS(8)) dut (.clk, .wr_en, .wr_bank, .wr_row, .wr_lanes, .wr_data,
      .rd_bank, .rd_row, .rd_data);

  initial begin
    // fill everything once so the reference is known
    wr_en = 1; wr_lanes = '1;
    for (int b = 0; b < 2; b++) for (int r = 0; r < 8; r++) begin
      @(negedge clk);
      wr_bank = b[0]; wr_row = 3'(r);
      for (int k = 0; k < N; k++) begin wr_data[k] = act_t'($urandom); ref_m[b][r][k] = wr_data[k]; end
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1)[0];
      wr_bank = $urandom_range(0, 1)[0]; wr_row = 3'($urandom_range(0, 7));
      wr_lanes = {$urandom, $urandom};
      for (int k = 0; k < N; k++) begin
        wr_data[k] = act_t'($urandom);
        if (wr_en && wr_lanes[k]) ref_m[wr_bank][wr_row][k] = wr_data[k];
      end
      rd_bank = $urandom_range(0, 1)[0]; rd_row = 3'($urandom_range(0, 7));
      @(posedge clk); #1;
      for (int k = 0; k < N; k++) `CHECK(rd_data[k] == ref_m[rd_bank][rd_row][k], "read data")
    end
    `FINISH
  end
endmodule
