// swm_chip: top level of the block-circulant (SWM) neural-network chip.
//
// The chip runs a four-layer fully connected network (512-512-512-64-10, the
// first three layers made of 64x64 circulant blocks) on one image at a time.
// Data path (after the published block diagram):
//   input pads -> input IO buffer -> input distributor -> storage system
//   storage system <-> processing system (FFT, Mult, IFFT, Accu, Bias, ReLU)
//   storage system -> output distributor -> output IO buffer -> output pads
// with the global controller steering the interfaces, the storage system and
// the processing system.
//
// Interface: a host first sends CMD_LOAD_WEIGHTS followed by 146 rows of 128
// pad words (frequency-domain weights, re/im interleaved per bin), then
// CMD_LOAD_BIASES followed by 18 rows of 64 words. Each CMD_RUN_IMAGE is
// followed by 8 rows of 64 words (the 512 input activations, Q8.8); the chip
// then answers with 10 words on the output pads, the class scores. Pad words
// use valid/ready. The pads themselves are not modelled: the pad-side signals
// are the ports.
//
// Timing: one 64-point block product per clock. A run takes
// sum over layers of (P*Q + 18) = 146 + 4*18 = 218 cycles from the last
// image word to the first score, plus the 8-row image load.
module swm_chip
  import swm_pkg::*;
#(
  parameter int IN_DEPTH  = 16,
  parameter int OUT_DEPTH = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // host command
  input  logic            cmd_valid,
  input  cmd_e            cmd,
  output logic            cmd_ready,
  // input pads
  input  logic            pad_in_valid,
  output logic            pad_in_ready,
  input  logic [IO_W-1:0] pad_in_data,
  // output pads
  output logic            pad_out_valid,
  input  logic            pad_out_ready,
  output logic [IO_W-1:0] pad_out_data,
  // status
  output logic            busy,
  output logic [1:0]      layer
);
  // ---- input interface ----------------------------------------------------
  logic            ib_valid, ib_ready;
  logic [IO_W-1:0] ib_data;

  io_buffer #(.W(IO_W), .DEPTH(IN_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .in_valid (pad_in_valid),
    .in_ready (pad_in_ready),
    .in_data  (pad_in_data),
    .out_valid(ib_valid),
    .out_ready(ib_ready),
    .out_data (ib_data)
  );

  logic [8:0]      dist_need;
  logic            dist_row_valid, dist_row_ready;
  logic [IO_W-1:0] dist_words [2*N];

  input_distributor #(.NP(N)) u_in_dist (
    .clk, .rst_n,
    .need     (dist_need),
    .in_valid (ib_valid),
    .in_ready (ib_ready),
    .in_data  (ib_data),
    .row_valid(dist_row_valid),
    .row_ready(dist_row_ready),
    .row_words(dist_words)
  );

  // ---- global controller --------------------------------------------------
  logic        load_valid;
  target_e     load_target;
  logic [7:0]  load_row;
  logic        pp_sel;
  logic [2:0]  act_rd_row;
  logic        ps_in_valid;
  tag_t        ps_in_tag;
  logic        ps_out_valid;
  tag_t        ps_out_tag;
  logic        od_start, od_busy;

  global_controller #(.NP(N)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd, .cmd_ready,
    .dist_need,
    .dist_row_valid,
    .dist_row_ready,
    .load_valid, .load_target, .load_row,
    .pp_sel, .act_rd_row,
    .ps_in_valid, .ps_in_tag,
    .ps_out_valid,
    .od_start, .od_busy,
    .busy, .layer
  );

  // ---- storage system -----------------------------------------------------
  act_t       act_rd_data [N];
  act_t       ps_out_act  [N];
  logic       w_rd_en;
  logic [7:0] w_addr;
  wcplx_t     w_rd_data [N];
  logic [4:0] b_addr;
  act_t       b_rd_data [N];

  storage_system #(.NP(N)) u_store (
    .clk,
    .load_valid, .load_target, .load_row,
    .load_words (dist_words),
    .pp_sel,
    .act_rd_row,
    .act_rd_data,
    .ps_wr_valid(ps_out_valid),
    .ps_wr_row  (ps_out_tag.row),
    .ps_wr_lanes(ps_out_tag.lanes),
    .ps_wr_data (ps_out_act),
    .w_rd_en, .w_addr,
    .w_rd_data,
    .b_addr,
    .b_rd_data
  );

  // ---- processing system --------------------------------------------------
  processing_system #(.NP(N)) u_proc (
    .clk, .rst_n,
    .in_valid (ps_in_valid),
    .in_tag   (ps_in_tag),
    .x_row    (act_rd_data),
    .w_rd_en, .w_addr,
    .w_row    (w_rd_data),
    .b_addr,
    .b_row    (b_rd_data),
    .out_valid(ps_out_valid),
    .out_tag  (ps_out_tag),
    .out_act  (ps_out_act)
  );

  // ---- output interface ---------------------------------------------------
  logic            od_valid, od_ready;
  logic [IO_W-1:0] od_data;

  output_distributor #(.NP(N), .NOUT(NUM_OUT)) u_out_dist (
    .clk, .rst_n,
    .start    (od_start),
    .row_data (act_rd_data),
    .busy     (od_busy),
    .out_valid(od_valid),
    .out_ready(od_ready),
    .out_data (od_data)
  );

  io_buffer #(.W(IO_W), .DEPTH(OUT_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .in_valid (od_valid),
    .in_ready (od_ready),
    .in_data  (od_data),
    .out_valid(pad_out_valid),
    .out_ready(pad_out_ready),
    .out_data (pad_out_data)
  );
endmodule
