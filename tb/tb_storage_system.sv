// tb_storage_system: loads weight, bias and activation rows through the
// distributor-side port (checking the re/im word interleave of weight rows),
// then writes processing results with lane masks and checks that they land in
// the ping-pong half opposite to pp_sel, while loads land in half pp_sel.
module tb_storage_system;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  logic load_valid, pp_sel, ps_wr_valid, w_rd_en;
  target_e load_target;
  logic [7:0] load_row, w_addr;
  logic [IO_W-1:0] load_words [2*N];
  logic [2:0] act_rd_row, ps_wr_row;
  act_t act_rd_data [N], ps_wr_data [N], b_rd_data [N];
  logic [N-1:0] ps_wr_lanes;
  wcplx_t w_rd_data [N];
  logic [4:0] b_addr;

  storage_system #(.NP(N)) dut (.clk, .load_valid, .load_target, .load_row, .load_words, .pp_sel,
      .act_rd_row, .act_rd_data, .ps_wr_valid, .ps_wr_row, .ps_wr_lanes, .ps_wr_data,
      .w_rd_en, .w_addr, .w_rd_data, .b_addr, .b_rd_data);

  logic [IO_W-1:0] wref [4][2*N];
  act_t aref [2][8][N];

  task automatic load(input target_e tg, input int row, input logic [IO_W-1:0] wds [2*N]);
    @(negedge clk);
    load_valid = 1; load_target = tg; load_row = 8'(row); load_words = wds;
    @(negedge clk);
    load_valid = 0;
  endtask

  initial begin
    load_valid = 0; ps_wr_valid = 0; w_rd_en = 0; pp_sel = 0; act_rd_row = 0; b_addr = 0;
    ps_wr_lanes = '0; ps_wr_row = 0; w_addr = 0; load_target = TGT_ACT; load_row = 0;
    // weights rows 0, 77, 145 ; bias row 17 ; activation rows in both halves
    for (int r = 0; r < 4; r++) for (int k = 0; k < 2*N; k++) wref[r][k] = IO_W'($urandom);
    load(TGT_WEIGHT, 0, wref[0]);
    load(TGT_WEIGHT, 77, wref[1]);
    load(TGT_WEIGHT, 145, wref[2]);
    load(TGT_BIAS, 17, wref[3]);
    for (int h = 0; h < 2; h++) for (int r = 0; r < 8; r++) begin
      logic [IO_W-1:0] wds [2*N];
      pp_sel = h[0];
      for (int k = 0; k < 2*N; k++) wds[k] = IO_W'($urandom);
      for (int k = 0; k < N; k++) aref[h][r][k] = act_t'(wds[k]);
      load(TGT_ACT, r, wds);
    end
    // weight read back: bin k = (word 2k, word 2k+1)
    foreach (wref[i]) if (i < 3) begin
      @(negedge clk);
      w_rd_en = 1; w_addr = (i == 0) ? 8'd0 : (i == 1) ? 8'd77 : 8'd145;
      @(negedge clk);
      w_rd_en = 0;
      for (int k = 0; k < N; k++) begin
        `CHECK(w_rd_data[k].re == act_t'(wref[i][2*k]), "weight re")
        `CHECK(w_rd_data[k].im == act_t'(wref[i][2*k+1]), "weight im")
      end
    end
    b_addr = 5'd17; #1;
    for (int k = 0; k < N; k++) `CHECK(b_rd_data[k] == act_t'(wref[3][k]), "bias row")
    // activation reads from half pp_sel
    for (int h = 0; h < 2; h++) for (int r = 0; r < 8; r++) begin
      pp_sel = h[0]; act_rd_row = 3'(r); #1;
      for (int k = 0; k < N; k++) `CHECK(act_rd_data[k] == aref[h][r][k], "activation row")
    end
    // processing write-back goes to the other half
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      pp_sel = $urandom_range(0, 1)[0];
      ps_wr_valid = 1; ps_wr_row = 3'($urandom_range(0, 7)); ps_wr_lanes = {$urandom, $urandom};
      for (int k = 0; k < N; k++) begin
        ps_wr_data[k] = act_t'($urandom);
        if (ps_wr_lanes[k]) aref[!pp_sel][ps_wr_row][k] = ps_wr_data[k];
      end
      @(negedge clk);
      ps_wr_valid = 0;
      pp_sel = !pp_sel; act_rd_row = ps_wr_row; #1;
      for (int k = 0; k < N; k++) `CHECK(act_rd_data[k] == aref[pp_sel][ps_wr_row][k], "write-back lands opposite")
      pp_sel = !pp_sel; #1;
      for (int k = 0; k < N; k++) `CHECK(act_rd_data[k] == aref[pp_sel][ps_wr_row][k], "other half untouched")
    end
    `FINISH
  end
endmodule
