// bias_rf: bias register file.
//
// ROWS rows of NP biases (18 for the evaluated network: one row per output
// block of each layer). Written one row at a time from the input distributor;
// combinational read for the Bias module.
module bias_rf
  import swm_pkg::*;
#(
  parameter int NP   = swm_pkg::N,
  parameter int ROWS = swm_pkg::BIAS_ROWS
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic [4:0]  wr_addr,
  input  act_t        wr_data [NP],
  input  logic [4:0]  rd_addr,
  output act_t        rd_data [NP]
);
  act_t rf [ROWS][NP];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < ROWS) rf[wr_addr] <= wr_data;
  end

  assign rd_data = (32'(rd_addr) < ROWS) ? rf[rd_addr] : rf[0];
endmodule
