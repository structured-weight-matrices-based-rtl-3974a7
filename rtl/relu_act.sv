// relu_act: activation stage (the ReLU module).
//
// When in_tag.relu is set each lane becomes max(0, in); otherwise the value
// passes unchanged (used for the output layer, whose scores are signed). The
// result is then saturated from the CW-bit datapath to a DW-bit activation.
// One register stage. ReLU is the published activation; the bypass and the
// saturation are this design's choices.
module relu_act
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
  output act_t   out_data [NP]
);
  localparam cpart_t MAXV = cpart_t'((1 <<< (DW - 1)) - 1);
  localparam cpart_t MINV = -cpart_t'(1 <<< (DW - 1));

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
    for (int k = 0; k < NP; k++) begin
      if (in_tag.relu && in_data[k] < 0)  out_data[k] <= '0;
      else if (in_data[k] > MAXV)         out_data[k] <= act_t'(MAXV);
      else if (in_data[k] < MINV)         out_data[k] <= act_t'(MINV);
      else                                out_data[k] <= act_t'(in_data[k]);
    end
  end
endmodule
