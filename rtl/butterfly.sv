// butterfly: radix-2 decimation-in-time butterfly, the unit the FFT network is
// built from.
//
// The lower input b is multiplied by the twiddle factor w (complex, Q1.TW_FRAC,
// product rounded to nearest), then the unit outputs
//   ya = a + b*w      yb = a - b*w
// which is the "Mul" on the lower branch and the two "Add" nodes (the lower one
// subtracting) of the published butterfly drawing. Purely combinational; the
// enclosing FFT places registers between butterfly columns. Operand widths and
// the rounding are this design's choice.
module butterfly
  import swm_pkg::*;
(
  input  cplx_t                     a,
  input  cplx_t                     b,
  input  logic signed [TW_W-1:0]    w_re,
  input  logic signed [TW_W-1:0]    w_im,
  output cplx_t                     ya,
  output cplx_t                     yb
);
  localparam int PW = CW + TW_W + 1;
  localparam logic signed [PW-1:0] RND = PW'(1) <<< (TW_FRAC - 1);

  logic signed [PW-1:0] pr, pi;
  cplx_t bw;

  always_comb begin
    pr = PW'(b.re) * PW'(w_re) - PW'(b.im) * PW'(w_im) + RND;
    pi = PW'(b.re) * PW'(w_im) + PW'(b.im) * PW'(w_re) + RND;
    bw.re = CW'(pr >>> TW_FRAC);
    bw.im = CW'(pi >>> TW_FRAC);
    ya.re = a.re + bw.re;
    ya.im = a.im + bw.im;
    yb.re = a.re - bw.re;
    yb.im = a.im - bw.im;
  end
endmodule
