// ifft_core: inverse FFT built from the forward FFT (the IFFT module).
//
// IFFT(X) = conj(FFT(conj(X))) / NP. The input is conjugated, passed through an
// fft_core, conjugated again and divided by NP with an arithmetic right shift
// by log2(NP), rounded to nearest. This is the published recipe (the N-input
// basic computing unit plus a division by N and two conjugations); the rounding
// is this design's choice. Latency log2(NP) cycles, one vector per cycle; the
// tag is delayed alongside the data.
module ifft_core
  import swm_pkg::*;
#(
  parameter int NP   = swm_pkg::N,
  parameter int TAGW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [TAGW-1:0] in_tag,
  input  cplx_t           in_data  [NP],
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output cplx_t           out_data [NP]
);
  localparam int LG = $clog2(NP);
  localparam cpart_t RND = cpart_t'(NP / 2);

  cplx_t cin [NP];
  cplx_t fo  [NP];

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      cin[i].re = in_data[i].re;
      cin[i].im = -in_data[i].im;
    end
  end

  fft_core #(.NP(NP), .TAGW(TAGW)) u_fft (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_tag   (in_tag),
    .in_data  (cin),
    .out_valid(out_valid),
    .out_tag  (out_tag),
    .out_data (fo)
  );

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      out_data[i].re = (fo[i].re + RND) >>> LG;
      out_data[i].im = ((-fo[i].im) + RND) >>> LG;
    end
  end
endmodule
