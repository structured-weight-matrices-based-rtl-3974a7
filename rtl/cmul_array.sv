// cmul_array: element-wise complex multiplier (the Mult module).
//
// Multiplies lane by lane the spectrum of an input block, FFT(x_j), by the
// stored spectrum of a weight block, FFT(w_ij):
//   out[k] = x[k] * w[k],  rounded to nearest and shifted right by WF_FRAC
// so that the product keeps the fraction length of x. One complex multiplier
// (four real products) per lane, one register stage: out_valid/out_tag follow
// in_valid/in_tag by one cycle. The weight spectrum format (DW-bit parts with
// WF_FRAC fraction bits) is this design's choice.
module cmul_array
  import swm_pkg::*;
#(
  parameter int NP   = swm_pkg::N,
  parameter int TAGW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [TAGW-1:0] in_tag,
  input  cplx_t           x   [NP],
  input  wcplx_t          w   [NP],
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output cplx_t           out_data [NP]
);
  localparam int PW = CW + DW + 1;
  localparam logic signed [PW-1:0] RND = PW'(1) <<< (WF_FRAC - 1);

  cplx_t prod [NP];

  always_comb begin
    for (int k = 0; k < NP; k++) begin
      logic signed [PW-1:0] pr, pi;
      pr = PW'(x[k].re) * PW'(w[k].re) - PW'(x[k].im) * PW'(w[k].im) + RND;
      pi = PW'(x[k].re) * PW'(w[k].im) + PW'(x[k].im) * PW'(w[k].re) + RND;
      prod[k].re = CW'(pr >>> WF_FRAC);
      prod[k].im = CW'(pi >>> WF_FRAC);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
    end
  end

  always_ff @(posedge clk) out_data <= prod;
endmodule
