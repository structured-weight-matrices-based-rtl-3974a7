// tb_weight_bank: fills all 146 rows, then random reads and writes; a read
// returns the row one cycle after rd_en and holds it while rd_en is low, even when the address changes.
module tb_weight_bank;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  logic wr_en, rd_en;
  logic [7:0] wr_addr, rd_addr;
  wcplx_t wr_data [N], rd_data [N];
  wcplx_t ref_m [WB_ROWS][N];
  wcplx_t expect_row [N];
  weight_bank #(.NP(N), .ROWS(WB_ROWS)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    rd_en = 0; wr_en = 1;
    for (int r = 0; r < WB_ROWS; r++) begin
      @(negedge clk);
      wr_addr = 8'(r);
      for (int k = 0; k < N; k++) begin wr_data[k] = wcplx_t'($urandom); ref_m[r][k] = wr_data[k]; end
    end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 8'($urandom_range(0, WB_ROWS - 1));
      expect_row = ref_m[rd_addr];
      wr_en = $urandom_range(0, 1)[0]; wr_addr = 8'($urandom_range(0, WB_ROWS - 1));
      if (wr_addr == rd_addr) wr_en = 0;
      for (int k = 0; k < N; k++) begin
        wr_data[k] = wcplx_t'($urandom);
        if (wr_en) ref_m[wr_addr][k] = wr_data[k];
      end
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      rd_addr = 8'((int'(rd_addr) + 1) % WB_ROWS);   // a new address without rd_en must not be read
      for (int k = 0; k < N; k++) `CHECK(rd_data[k] == expect_row[k], "read row")
      @(negedge clk);
      for (int k = 0; k < N; k++) `CHECK(rd_data[k] == expect_row[k], "read row held")
    end
    `FINISH
  end
endmodule
