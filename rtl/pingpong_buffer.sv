// pingpong_buffer: two alternating activation register files and their output
// multiplexer.
//
// Register File 1 and Register File 2 each hold ROWS rows of NP activations
// (ROWS*NP = 512 for the evaluated network, one whole layer input). While a
// layer runs, the input vectors are read from one file and the results are
// written into the other; the roles swap between layers, so no activation is
// copied. Both files sit on the same write bus: wr_bank picks the file, wr_row
// the row, wr_lanes the lanes written. rd_bank drives the output multiplexer;
// the read is combinational (register file). The file size follows from the
// network; per-lane write enables are this design's choice.
module pingpong_buffer
  import swm_pkg::*;
#(
  parameter int NP   = swm_pkg::N,
  parameter int ROWS = swm_pkg::ACT_ROWS
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic                    wr_bank,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [NP-1:0]           wr_lanes,
  input  act_t                    wr_data [NP],
  input  logic                    rd_bank,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output act_t                    rd_data [NP]
);
  act_t rf1 [ROWS][NP];
  act_t rf2 [ROWS][NP];

  always_ff @(posedge clk) begin
    for (int k = 0; k < NP; k++) begin
      if (wr_en && !wr_bank && wr_lanes[k]) rf1[wr_row][k] <= wr_data[k];
      if (wr_en &&  wr_bank && wr_lanes[k]) rf2[wr_row][k] <= wr_data[k];
    end
  end

  assign rd_data = rd_bank ? rf2[rd_row] : rf1[rd_row];
endmodule
