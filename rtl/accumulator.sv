// accumulator: sums block products over the input blocks (the Accu module).
//
// For output block i the processing system delivers the q vectors
// IFFT(FFT(w_ij) o FFT(x_j)), j = 1..q, on consecutive valid cycles; the
// tag marks the first and the last of them. Only real parts arrive (the
// product of real vectors is real). On `first` the running sum is loaded,
// otherwise added to; on `last` the finished sum is presented for one cycle on
// out_valid, one cycle after the last input. The first/last framing is this
// design's choice. Sums wrap at CW bits.
module accumulator
  import swm_pkg::*;
#(
  parameter int NP = swm_pkg::N
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  tag_t   in_tag,
  input  cpart_t in_data  [NP],
  output logic   out_valid,
  output tag_t   out_tag,
  output cpart_t out_data [NP]
);
  cpart_t acc [NP];
  cpart_t nxt [NP];

  always_comb begin
    for (int k = 0; k < NP; k++)
      nxt[k] = in_tag.first ? in_data[k] : acc[k] + in_data[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid && in_tag.last;
      if (in_valid) out_tag <= in_tag;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) acc <= nxt;
  end

  assign out_data = acc;
endmodule
