// global_controller: command decoding, data routing and layer sequencing.
//
// Commands (cmd_valid/cmd_ready, accepted only when idle):
//   CMD_LOAD_WEIGHTS  take WB_ROWS weight rows of 2*NP pad words each
//   CMD_LOAD_BIASES   take BIAS_ROWS bias rows of NP words each
//   CMD_RUN_IMAGE     take ACT_ROWS image rows of NP words each, run all
//                     layers, then send the NUM_OUT output scores
// During a load the controller tells the input distributor how many words make
// a row (dist_need), accepts each finished row and routes it to the storage
// target with an incrementing row address.
//
// Run schedule, for each layer of swm_pkg::LAYERS: for output block i = 0..P-1,
// for input block j = 0..Q-1, one block per clock is issued to the processing
// system: activation row j of the ping-pong half pp_sel, weight row
// wbase + i*Q + j, and a tag with bias row, destination row/lanes, ReLU enable
// and first/last flags. Circulant layers write row i (all lanes) with bias row
// bbase+i; the dense output layer writes lane i of row 0 with bias row bbase.
// After the last block the controller waits until all P results have been
// written back, flips pp_sel and starts the next layer. After the last layer it
// starts the output distributor on row 0 and returns to idle when it is done.
// A layer takes P*Q + 18 cycles (issue, 17-cycle pipeline drain, 1 cycle to
// switch). The command set and this schedule are this design's own; the chip
// only states that the global controller decides where data flows and
// generates the control signals.
module global_controller
  import swm_pkg::*;
#(
  parameter int NP = swm_pkg::N
) (
  input  logic          clk,
  input  logic          rst_n,
  // host commands
  input  logic          cmd_valid,
  input  cmd_e          cmd,
  output logic          cmd_ready,
  // input distributor
  output logic [8:0]    dist_need,
  input  logic          dist_row_valid,
  output logic          dist_row_ready,
  // storage loads
  output logic          load_valid,
  output target_e       load_target,
  output logic [7:0]    load_row,
  // storage / processing system
  output logic          pp_sel,
  output logic [2:0]    act_rd_row,
  output logic          ps_in_valid,
  output tag_t          ps_in_tag,
  input  logic          ps_out_valid,
  // output distributor
  output logic          od_start,
  input  logic          od_busy,
  // status
  output logic          busy,
  output logic [1:0]    layer
);
  typedef enum logic [2:0] {
    S_IDLE, S_LOAD, S_ISSUE, S_DRAIN, S_OUT, S_OUT_WAIT
  } state_e;

  state_e     state;
  target_e    tgt;
  logic       run_after;
  logic [7:0] rows_left;
  logic [4:0] bi;        // output block / pass
  logic [3:0] bj;        // input block
  logic [4:0] done_cnt;  // results written back in this layer

  layer_t L;
  assign L = LAYERS[layer];

  assign cmd_ready      = (state == S_IDLE);
  assign busy           = (state != S_IDLE);
  assign dist_need      = (state != S_LOAD) ? 9'd0 :
                          (tgt == TGT_WEIGHT) ? 9'(2*NP) : 9'(NP);
  assign dist_row_ready = (state == S_LOAD);
  assign load_valid     = (state == S_LOAD) && dist_row_valid;
  assign load_target    = tgt;
  assign ps_in_valid    = (state == S_ISSUE);
  assign act_rd_row     = (state == S_ISSUE) ? bj[2:0] : 3'd0;
  assign od_start       = (state == S_OUT);

  always_comb begin
    ps_in_tag       = '0;
    ps_in_tag.row   = L.dense ? 3'd0 : bi[2:0];
    ps_in_tag.lanes = L.dense ? (NP'(1) << bi) : '1;
    ps_in_tag.wrow  = L.wbase + 8'(bi) * 8'(L.q) + 8'(bj);
    ps_in_tag.brow  = L.dense ? L.bbase : L.bbase + bi;
    ps_in_tag.relu  = L.relu;
    ps_in_tag.first = (bj == 4'd0);
    ps_in_tag.last  = (bj == L.q - 4'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      tgt       <= TGT_ACT;
      run_after <= 1'b0;
      rows_left <= '0;
      load_row  <= '0;
      pp_sel    <= 1'b0;
      layer     <= '0;
      bi        <= '0;
      bj        <= '0;
      done_cnt  <= '0;
    end else begin
      if (ps_out_valid) done_cnt <= done_cnt + 5'd1;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          state     <= S_LOAD;
          load_row  <= '0;
          run_after <= (cmd == CMD_RUN_IMAGE);
          unique case (cmd)
            CMD_LOAD_WEIGHTS: begin tgt <= TGT_WEIGHT; rows_left <= 8'(WB_ROWS);   end
            CMD_LOAD_BIASES:  begin tgt <= TGT_BIAS;   rows_left <= 8'(BIAS_ROWS); end
            default:          begin tgt <= TGT_ACT;    rows_left <= 8'(ACT_ROWS);  end
          endcase
        end
        S_LOAD: if (dist_row_valid) begin
          load_row  <= load_row + 8'd1;
          rows_left <= rows_left - 8'd1;
          if (rows_left == 8'd1) begin
            if (run_after) begin
              state    <= S_ISSUE;
              layer    <= '0;
              bi       <= '0;
              bj       <= '0;
              done_cnt <= '0;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        S_ISSUE: begin
          if (bj == L.q - 4'd1) begin
            bj <= '0;
            if (bi == L.p - 5'd1) begin
              bi    <= '0;
              state <= S_DRAIN;
            end else begin
              bi <= bi + 5'd1;
            end
          end else begin
            bj <= bj + 4'd1;
          end
        end
        S_DRAIN: if (done_cnt == L.p) begin
          pp_sel   <= !pp_sel;
          done_cnt <= '0;
          if (32'(layer) == NUM_LAYERS - 1) begin
            state <= S_OUT;
          end else begin
            layer <= layer + 2'd1;
            state <= S_ISSUE;
          end
        end
        S_OUT:      state <= S_OUT_WAIT;
        S_OUT_WAIT: if (!od_busy) state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  // A layer's results are all written back before the next layer starts.
  a_drain: assert property (@(posedge clk) disable iff (!rst_n)
                            (state == S_DRAIN && done_cnt == L.p) |=> !ps_out_valid);
endmodule
