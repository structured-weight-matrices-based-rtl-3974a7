// input_distributor: widens the narrow pad stream to the storage row width.
//
// Words from the input IO buffer (valid/ready) are stored at positions
// 0, 1, 2, ... of a row register of 2*NP words until `need` words are held
// (NP for an activation or bias row, 2*NP for a weight row, set by the global
// controller). Then row_valid rises and no more words are taken until the
// controller accepts the row with row_ready; the count restarts at 0 in the
// cycle after. A full row is thus handed to the storage system in one cycle.
// While need is 0 (no load in progress) no words are taken, so words sent
// ahead of their command wait in the input IO buffer.
// Unused positions of a short row keep old values. The handshake is this
// design's choice.
module input_distributor
  import swm_pkg::*;
#(
  parameter int NP = swm_pkg::N
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [8:0]      need,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [IO_W-1:0] in_data,
  output logic            row_valid,
  input  logic            row_ready,
  output logic [IO_W-1:0] row_words [2*NP]
);
  logic [8:0] cnt;

  assign row_valid = (cnt >= need) && (need != '0);
  assign in_ready  = !row_valid && (need != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
    end else if (row_valid) begin
      if (row_ready) cnt <= '0;
    end else if (in_valid && in_ready) begin
      cnt <= cnt + 9'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && 32'(cnt) < 2*NP) row_words[cnt[$clog2(2*NP)-1:0]] <= in_data;
  end
endmodule
