// weight_bank: the weights memory bank.
//
// Holds the frequency-domain weights FFT(w_ij) of every circulant block of
// every layer, one row of NP complex values per block (146 rows for the
// evaluated network). Written one row at a time from the input distributor,
// read one row per cycle by the processing system. Synchronous single-port
// style memory: rd_data shows the row addressed by rd_addr one cycle after
// rd_en. The full NP-bin spectrum is stored (the half spectrum of a real
// vector would suffice); that, the latency and the widths are this design's
// choices. In silicon this array is an SRAM macro.
module weight_bank
  import swm_pkg::*;
#(
  parameter int NP   = swm_pkg::N,
  parameter int ROWS = swm_pkg::WB_ROWS
) (
  input  logic        clk,
  input  logic        wr_en,
  input  logic [7:0]  wr_addr,
  input  wcplx_t      wr_data [NP],
  input  logic        rd_en,
  input  logic [7:0]  rd_addr,
  output wcplx_t      rd_data [NP]
);
  wcplx_t mem [ROWS][NP];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < ROWS) mem[wr_addr] <= wr_data;
    if (rd_en && 32'(rd_addr) < ROWS) rd_data <= mem[rd_addr];
  end
endmodule
