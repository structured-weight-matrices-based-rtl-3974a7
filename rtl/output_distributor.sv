// output_distributor: narrows a final activation row to the pad stream.
//
// On `start` it captures the activation row shown on row_data (read from the
// storage system) and then offers lanes 0..NOUT-1, one word per cycle, to the
// output IO buffer with valid/ready; a lane advances only when accepted. `busy`
// is high from the cycle after start until the last word is accepted. Only the
// first NOUT lanes (the ten class scores of the evaluated network) are sent.
module output_distributor
  import swm_pkg::*;
#(
  parameter int NP   = swm_pkg::N,
  parameter int NOUT = swm_pkg::NUM_OUT
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  act_t            row_data [NP],
  output logic            busy,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [IO_W-1:0] out_data
);
  act_t       held [NP];
  logic [6:0] idx;

  assign out_valid = busy;
  assign out_data  = IO_W'(held[idx[5:0]]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
    end else if (start && !busy) begin
      busy <= 1'b1;
      idx  <= '0;
    end else if (busy && out_ready) begin
      if (32'(idx) == NOUT - 1) busy <= 1'b0;
      idx <= idx + 7'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (start && !busy) held <= row_data;
  end
endmodule
