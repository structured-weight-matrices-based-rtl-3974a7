// bias_add: adds the bias vector to a finished dot-product vector (the Bias
// module).
//
// out[k] = in[k] + b[k], with b a DW-bit activation-format word sign-extended
// to the CW-bit datapath (both carry ACT_FRAC fraction bits). The bias row is
// read by the caller from the bias register file using the row in in_tag, in
// the same cycle. One register stage.
module bias_add
  import swm_pkg::*;
#(
  parameter int NP = swm_pkg::N
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  tag_t   in_tag,
  input  cpart_t in_data  [NP],
  input  act_t   bias     [NP],
  output logic   out_valid,
  output tag_t   out_tag,
  output cpart_t out_data [NP]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < NP; k++)
      out_data[k] <= in_data[k] + CW'(bias[k]);
  end
endmodule
