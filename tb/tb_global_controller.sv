// tb_global_controller: the controller is driven with the three commands.
// The input distributor is modelled as offering a finished row every few
// cycles; the processing system as a 17-cycle delay line that reports one
// result per block whose tag has `last` set; the output distributor as busy
// for 10 cycles. Checked: row counts, targets and addresses of the loads, the
// word count per row, the exact issue sequence of every layer (weight row,
// input row, bias row, destination row/lanes, ReLU, first/last), the ping-pong
// flips, and the run length of 218 cycles from first issue to output start.
module tb_global_controller;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  logic cmd_valid, cmd_ready, dist_row_valid, dist_row_ready, load_valid, pp_sel;
  cmd_e cmd;
  logic [8:0] dist_need;
  target_e load_target;
  logic [7:0] load_row;
  logic [2:0] act_rd_row;
  logic ps_in_valid, ps_out_valid, od_start, od_busy, busy;
  tag_t ps_in_tag;
  logic [1:0] layer;

  global_controller #(.NP(N)) dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .dist_need,
      .dist_row_valid, .dist_row_ready, .load_valid, .load_target, .load_row, .pp_sel,
      .act_rd_row, .ps_in_valid, .ps_in_tag, .ps_out_valid, .od_start, .od_busy, .busy, .layer);

  // processing system model: 17-cycle delay, one result per finished sum
  logic [16:0] dl;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) dl <= '0;
    else dl <= {dl[15:0], ps_in_valid && ps_in_tag.last};
  assign ps_out_valid = dl[16];

  // output distributor model
  int od_cnt = 0;
  always @(posedge clk) if (od_start) od_cnt <= 10; else if (od_cnt > 0) od_cnt <= od_cnt - 1;
  assign od_busy = (od_cnt > 0);

  // distributor model: a row is ready every 3rd cycle while words are needed
  int dcnt = 0;
  always @(posedge clk) dcnt <= (dcnt + 1) % 3;
  assign dist_row_valid = (dist_need != 0) && (dcnt == 2);

  int cyc = 0;
  always @(posedge clk) cyc++;

  // load monitor
  int nloads [3] = '{0, 0, 0};
  logic [8:0] exp_need;
  always @(negedge clk) if (load_valid) begin
    `CHECK(int'(load_row) == nloads[load_target], "load row address increments")
    `CHECK(dist_need == ((load_target == TGT_WEIGHT) ? 9'd128 : 9'd64), "words per row")
    nloads[load_target]++;
  end

  // issue monitor
  int issued = 0, first_issue = -1, od_cyc = -1, flips = 0;
  int exp_l = 0, exp_i = 0, exp_j = 0;
  logic last_pp;
  always @(negedge clk) begin
    if (rst_n && pp_sel != last_pp) flips++;
    last_pp = pp_sel;
    if (od_start) od_cyc = cyc;
    if (ps_in_valid) begin
      layer_t L;
      L = LAYERS[exp_l];
      if (first_issue < 0) first_issue = cyc;
      `CHECK(int'(layer) == exp_l, "layer")
      `CHECK(int'(ps_in_tag.wrow) == int'(L.wbase) + exp_i*int'(L.q) + exp_j, "weight row")
      `CHECK(int'(act_rd_row) == exp_j, "input row")
      `CHECK(int'(ps_in_tag.brow) == int'(L.bbase) + (L.dense ? 0 : exp_i), "bias row")
      `CHECK(int'(ps_in_tag.row) == (L.dense ? 0 : exp_i), "destination row")
      `CHECK(ps_in_tag.lanes == (L.dense ? (64'd1 << exp_i) : '1), "lanes")
      `CHECK(ps_in_tag.relu == L.relu, "relu")
      `CHECK(ps_in_tag.first == (exp_j == 0) && ps_in_tag.last == (exp_j == int'(L.q) - 1), "first/last")
      issued++;
      exp_j++;
      if (exp_j == int'(L.q)) begin exp_j = 0; exp_i++; end
      if (exp_i == int'(L.p)) begin exp_i = 0; exp_l = (exp_l + 1) % NUM_LAYERS; end
    end
  end

  task automatic command(input cmd_e c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    cmd_valid = 0; cmd = CMD_LOAD_WEIGHTS; last_pp = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    command(CMD_LOAD_WEIGHTS);
    `CHECK(nloads[TGT_WEIGHT] == WB_ROWS, "146 weight rows")
    command(CMD_LOAD_BIASES);
    `CHECK(nloads[TGT_BIAS] == BIAS_ROWS, "18 bias rows")
    for (int img = 0; img < 2; img++) begin
      nloads[TGT_ACT] = 0; first_issue = -1; od_cyc = -1;
      command(CMD_RUN_IMAGE);
      `CHECK(nloads[TGT_ACT] == ACT_ROWS, "8 image rows")
      `CHECK(od_cyc - first_issue == 218, "run length 218 cycles")
      $display("run: %0d cycles from first block to output start", od_cyc - first_issue);
    end
    `CHECK(issued == 2 * 146, "146 block products per image")
    `CHECK(flips == 8, "ping-pong flips once per layer")
    `FINISH
  end
endmodule
