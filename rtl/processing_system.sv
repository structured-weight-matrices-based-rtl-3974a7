// processing_system: the per-layer compute pipeline of the chip.
//
// Computes, for one output block i of a block-circulant layer,
//   y_i = h( sum_j IFFT( FFT(w_ij) o FFT(x_j) ) + b_i )
// with the module chain FFT -> Mult -> IFFT -> Accu -> Bias -> ReLU. One input
// block x_j (NP activations) is accepted per cycle together with a tag that
// names the weight-bank row of w_ij, the bias row, the destination row and
// lanes, ReLU on/off and the first/last input block of the sum.
//
// Timing: x_j enters the FFT (log2 NP stages). When its spectrum leaves the FFT
// the module requests the weight row named in the tag (w_rd_en/w_addr); the
// synchronous weight memory answers on w_row one cycle later, while the
// spectrum waits in a holding register. Mult (1) and IFFT (log2 NP) follow;
// the real parts go to the accumulator, which emits the sum after the last j.
// The bias row is read combinationally through b_addr/b_row, then Bias (1) and
// ReLU (1). From the last x_j of a block to out_valid takes
// 2*log2(NP) + 5 cycles (17 for NP = 64); blocks stream back to back.
// Only real input vectors are supported; the imaginary part of the IFFT output
// (rounding noise for real data) is dropped.
module processing_system
  import swm_pkg::*;
#(
  parameter int NP = swm_pkg::N
) (
  input  logic         clk,
  input  logic         rst_n,
  // block input
  input  logic         in_valid,
  input  tag_t         in_tag,
  input  act_t         x_row  [NP],
  // weight memory read (1-cycle latency)
  output logic         w_rd_en,
  output logic [7:0]   w_addr,
  input  wcplx_t       w_row  [NP],
  // bias register file read (combinational)
  output logic [4:0]   b_addr,
  input  act_t         b_row  [NP],
  // activation output
  output logic         out_valid,
  output tag_t         out_tag,
  output act_t         out_act [NP]
);
  localparam int TAGW = $bits(tag_t);

  // ---- FFT ---------------------------------------------------------------
  cplx_t            fft_in  [NP];
  cplx_t            fft_out [NP];
  logic             fft_v;
  logic [TAGW-1:0]  fft_tag;

  always_comb begin
    for (int k = 0; k < NP; k++) begin
      fft_in[k].re = CW'(x_row[k]);
      fft_in[k].im = '0;
    end
  end

  fft_core #(.NP(NP), .TAGW(TAGW)) u_fft (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_tag   (TAGW'(in_tag)),
    .in_data  (fft_in),
    .out_valid(fft_v),
    .out_tag  (fft_tag),
    .out_data (fft_out)
  );

  // ---- weight fetch and holding register ----------------------------------
  tag_t            fft_tag_s;
  assign fft_tag_s = tag_t'(fft_tag);
  assign w_rd_en   = fft_v;
  assign w_addr    = fft_tag_s.wrow;

  cplx_t           hold   [NP];
  logic            hold_v;
  logic [TAGW-1:0] hold_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v   <= 1'b0;
      hold_tag <= '0;
    end else begin
      hold_v   <= fft_v;
      hold_tag <= fft_tag;
    end
  end
  always_ff @(posedge clk) hold <= fft_out;

  // ---- Mult ----------------------------------------------------------------
  cplx_t           mul_out [NP];
  logic            mul_v;
  logic [TAGW-1:0] mul_tag;

  cmul_array #(.NP(NP), .TAGW(TAGW)) u_mult (
    .clk, .rst_n,
    .in_valid (hold_v),
    .in_tag   (hold_tag),
    .x        (hold),
    .w        (w_row),
    .out_valid(mul_v),
    .out_tag  (mul_tag),
    .out_data (mul_out)
  );

  // ---- IFFT ----------------------------------------------------------------
  cplx_t           ifft_out [NP];
  logic            ifft_v;
  logic [TAGW-1:0] ifft_tag;

  ifft_core #(.NP(NP), .TAGW(TAGW)) u_ifft (
    .clk, .rst_n,
    .in_valid (mul_v),
    .in_tag   (mul_tag),
    .in_data  (mul_out),
    .out_valid(ifft_v),
    .out_tag  (ifft_tag),
    .out_data (ifft_out)
  );

  cpart_t ifft_re [NP];
  always_comb for (int k = 0; k < NP; k++) ifft_re[k] = ifft_out[k].re;

  // ---- Accu ----------------------------------------------------------------
  cpart_t acc_out [NP];
  logic   acc_v;
  tag_t   acc_tag;

  accumulator #(.NP(NP)) u_acc (
    .clk, .rst_n,
    .in_valid (ifft_v),
    .in_tag   (tag_t'(ifft_tag)),
    .in_data  (ifft_re),
    .out_valid(acc_v),
    .out_tag  (acc_tag),
    .out_data (acc_out)
  );

  // ---- Bias ----------------------------------------------------------------
  assign b_addr = acc_tag.brow;

  cpart_t bias_out [NP];
  logic   bias_v;
  tag_t   bias_tag;

  bias_add #(.NP(NP)) u_bias (
    .clk, .rst_n,
    .in_valid (acc_v),
    .in_tag   (acc_tag),
    .in_data  (acc_out),
    .bias     (b_row),
    .out_valid(bias_v),
    .out_tag  (bias_tag),
    .out_data (bias_out)
  );

  // ---- ReLU ----------------------------------------------------------------
  relu_act #(.NP(NP)) u_relu (
    .clk, .rst_n,
    .in_valid (bias_v),
    .in_tag   (bias_tag),
    .in_data  (bias_out),
    .out_valid(out_valid),
    .out_tag  (out_tag),
    .out_data (out_act)
  );
endmodule
