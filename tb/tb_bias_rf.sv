// tb_bias_rf: fills the 18 bias rows, then interleaved random writes and
// combinational reads checked against a reference copy.
module tb_bias_rf;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  logic wr_en;
  logic [4:0] wr_addr, rd_addr;
  act_t wr_data [N], rd_data [N];
  act_t ref_m [BIAS_ROWS][N];
  bias_rf #(.NP(N), .ROWS(BIAS_ROWS)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  initial begin
    wr_en = 1;
    for (int r = 0; r < BIAS_ROWS; r++) begin
      @(negedge clk);
      wr_addr = 5'(r);
      for (int k = 0; k < N; k++) begin wr_data[k] = act_t'($urandom); ref_m[r][k] = wr_data[k]; end
    end
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1)[0]; wr_addr = 5'($urandom_range(0, BIAS_ROWS - 1));
      for (int k = 0; k < N; k++) begin
        wr_data[k] = act_t'($urandom);
        if (wr_en) ref_m[wr_addr][k] = wr_data[k];
      end
      rd_addr = 5'($urandom_range(0, BIAS_ROWS - 1));
      @(posedge clk); #1;
      for (int k = 0; k < N; k++) `CHECK(rd_data[k] == ref_m[rd_addr][k], "bias read")
    end
    `FINISH
  end
endmodule
