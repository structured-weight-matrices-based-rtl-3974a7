// storage_system: on-chip storage of the chip.
//
// Three parts: the weights memory bank (frequency-domain weights), the bias
// register file and the ping-pong activation buffer. Rows assembled by the
// input distributor arrive as 2*NP pad words and are routed by load_target:
//   TGT_ACT    words 0..NP-1 -> activation row load_row of bank pp_sel
//   TGT_BIAS   words 0..NP-1 -> bias row load_row
//   TGT_WEIGHT words 2k, 2k+1 -> real, imaginary part of bin k of weight row
// The processing system writes its results into bank !pp_sel; compute reads
// (and the final read for the output distributor) come from bank pp_sel.
// The global controller toggles pp_sel between layers. A load and a
// processing-system write never coincide (the controller loads only when
// idle); the load has priority. The word order and the priority are this
// design's choices.
module storage_system
  import swm_pkg::*;
#(
  parameter int NP = swm_pkg::N
) (
  input  logic            clk,
  // rows from the input distributor
  input  logic            load_valid,
  input  target_e         load_target,
  input  logic [7:0]      load_row,
  input  logic [IO_W-1:0] load_words [2*NP],
  // ping-pong bank read by the layer being computed
  input  logic            pp_sel,
  // activation read
  input  logic [2:0]      act_rd_row,
  output act_t            act_rd_data [NP],
  // processing-system write-back
  input  logic            ps_wr_valid,
  input  logic [2:0]      ps_wr_row,
  input  logic [NP-1:0]   ps_wr_lanes,
  input  act_t            ps_wr_data [NP],
  // weight read
  input  logic            w_rd_en,
  input  logic [7:0]      w_addr,
  output wcplx_t          w_rd_data [NP],
  // bias read
  input  logic [4:0]      b_addr,
  output act_t            b_rd_data [NP]
);
  act_t   load_act [NP];
  wcplx_t load_w   [NP];

  always_comb begin
    for (int k = 0; k < NP; k++) begin
      load_act[k]  = act_t'(load_words[k]);
      load_w[k].re = act_t'(load_words[2*k]);
      load_w[k].im = act_t'(load_words[2*k+1]);
    end
  end

  // ping-pong activation buffer
  logic        pp_wr_en, pp_wr_bank;
  logic [2:0]  pp_wr_row;
  logic [NP-1:0] pp_wr_lanes;
  act_t        pp_wr_data [NP];

  always_comb begin
    if (load_valid && load_target == TGT_ACT) begin
      pp_wr_en    = 1'b1;
      pp_wr_bank  = pp_sel;
      pp_wr_row   = load_row[2:0];
      pp_wr_lanes = '1;
      pp_wr_data  = load_act;
    end else begin
      pp_wr_en    = ps_wr_valid;
      pp_wr_bank  = !pp_sel;
      pp_wr_row   = ps_wr_row;
      pp_wr_lanes = ps_wr_lanes;
      pp_wr_data  = ps_wr_data;
    end
  end

  pingpong_buffer #(.NP(NP), .ROWS(ACT_ROWS)) u_pp (
    .clk,
    .wr_en   (pp_wr_en),
    .wr_bank (pp_wr_bank),
    .wr_row  (pp_wr_row),
    .wr_lanes(pp_wr_lanes),
    .wr_data (pp_wr_data),
    .rd_bank (pp_sel),
    .rd_row  (act_rd_row),
    .rd_data (act_rd_data)
  );

  weight_bank #(.NP(NP), .ROWS(WB_ROWS)) u_wb (
    .clk,
    .wr_en  (load_valid && load_target == TGT_WEIGHT),
    .wr_addr(load_row),
    .wr_data(load_w),
    .rd_en  (w_rd_en),
    .rd_addr(w_addr),
    .rd_data(w_rd_data)
  );

  bias_rf #(.NP(NP), .ROWS(BIAS_ROWS)) u_brf (
    .clk,
    .wr_en  (load_valid && load_target == TGT_BIAS),
    .wr_addr(load_row[4:0]),
    .wr_data(load_act),
    .rd_addr(b_addr),
    .rd_data(b_rd_data)
  );
endmodule
