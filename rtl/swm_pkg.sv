// swm_pkg: constants and types shared by the block-circulant (structured
// weight matrix, SWM) neural-network chip.
//
// The chip evaluates fully connected layers whose weight matrices are made of
// k x k circulant blocks (k = N = 64). Each block product W_ij * x_j is done as
// IFFT(FFT(w_ij) o FFT(x_j)), with FFT(w_ij) stored, so the package fixes:
//   * the block size N and the data formats of activations, stored weight
//     spectra, the internal complex datapath and the twiddle factors;
//   * the layer schedule of the evaluated MNIST network
//     512x512 - 512x512 - 512x64 - 64x10, i.e. 8x8, 8x8 and 1x8 grids of
//     64-point circulant blocks and a dense 64x10 output layer.
// N = 64 and the layer shapes follow the published network; all bit widths and
// fraction lengths are this design's choice (the chip's widths are not given).
package swm_pkg;

  // Block size (FFT length) and its log.
  localparam int N      = 64;
  localparam int LOGN   = $clog2(N);

  // Activation words: signed, DW bits, ACT_FRAC fraction bits.
  localparam int DW       = 16;
  localparam int ACT_FRAC = 8;
  // Stored weight spectrum parts: signed, DW bits, WF_FRAC fraction bits.
  localparam int WF_FRAC  = 10;
  // Internal complex datapath part width and twiddle format (Q1.TW_FRAC).
  localparam int CW       = 32;
  localparam int TW_W     = 16;
  localparam int TW_FRAC  = 14;
  // Pad word width.
  localparam int IO_W     = 16;

  typedef logic signed [DW-1:0] act_t;
  typedef logic signed [CW-1:0] cpart_t;
  typedef struct packed { cpart_t re; cpart_t im; } cplx_t;
  typedef struct packed { act_t re; act_t im; } wcplx_t;

  typedef act_t   act_row_t  [N];
  typedef wcplx_t w_row_t    [N];
  typedef cplx_t  cvec_t     [N];
  typedef cpart_t rvec_t     [N];

  // Network: four layers. Circulant layers have P output blocks and Q input
  // blocks; the dense output layer is done as NUM_OUT single-block passes whose
  // weight rows hold one matrix row each (see README), written lane by lane.
  localparam int NUM_LAYERS = 4;
  localparam int NUM_OUT    = 10;
  localparam int ACT_ROWS   = 8;     // 512 activations / 64 lanes

  typedef struct packed {
    logic [4:0] p;        // output blocks (passes) of the layer
    logic [3:0] q;        // input blocks summed per output block
    logic [7:0] wbase;    // first weight-bank row
    logic [4:0] bbase;    // first bias row
    logic       dense;    // 1: pass i writes only lane i of output row 0
    logic       relu;     // 1: apply ReLU
  } layer_t;

  typedef layer_t layer_tab_t [NUM_LAYERS];
  localparam layer_tab_t LAYERS = '{
    '{p: 5'd8,  q: 4'd8, wbase: 8'd0,   bbase: 5'd0,  dense: 1'b0, relu: 1'b1},
    '{p: 5'd8,  q: 4'd8, wbase: 8'd64,  bbase: 5'd8,  dense: 1'b0, relu: 1'b1},
    '{p: 5'd1,  q: 4'd8, wbase: 8'd128, bbase: 5'd16, dense: 1'b0, relu: 1'b1},
    '{p: 5'd10, q: 4'd1, wbase: 8'd136, bbase: 5'd17, dense: 1'b1, relu: 1'b0}
  };
  localparam int WB_ROWS   = 146;    // 64 + 64 + 8 + 10
  localparam int BIAS_ROWS = 18;     // 8 + 8 + 1 + 1

  // Destination tag that travels with a block through the processing system.
  typedef struct packed {
    logic [2:0]   row;    // activation row written
    logic [N-1:0] lanes;  // lanes written
    logic [7:0]   wrow;   // weight-bank row multiplied
    logic [4:0]   brow;   // bias row added
    logic         relu;   // ReLU enable
    logic         first;  // first input block of a sum
    logic         last;   // last input block of a sum
  } tag_t;

  // Host commands.
  typedef enum logic [1:0] {
    CMD_LOAD_WEIGHTS = 2'd0,
    CMD_LOAD_BIASES  = 2'd1,
    CMD_RUN_IMAGE    = 2'd2
  } cmd_e;

  // Storage write targets for distributor rows.
  typedef enum logic [1:0] {
    TGT_ACT    = 2'd0,
    TGT_WEIGHT = 2'd1,
    TGT_BIAS   = 2'd2
  } target_e;

endpackage
