// tb_ifft_core: random real time-domain vectors x are transformed to their
// spectra X in real arithmetic; X (rounded) is fed to the IFFT one vector per
// cycle. The output must equal x within 2 LSB, with a ~0 imaginary part, and
// appear log2(64) = 6 cycles after its input.
module tb_ifft_core;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  localparam int NV = 30;
  cplx_t din [64], dout [64];
  logic v_in, v_out;
  logic [7:0] tag_in, tag_out;
  real xr [NV][64];
  int cyc = 0, sent_cyc [NV], got = 0;
  always @(posedge clk) cyc++;

  ifft_core #(.NP(64), .TAGW(8)) dut (.clk, .rst_n, .in_valid(v_in), .in_tag(tag_in),
      .in_data(din), .out_valid(v_out), .out_tag(tag_out), .out_data(dout));

  always @(negedge clk) if (v_out) begin
    `CHECK(cyc - sent_cyc[tag_out] == 6, "ifft latency")
    for (int t = 0; t < 64; t++) begin
      `CHECK_NEAR(dout[t].re, xr[tag_out][t], 2.0, "ifft re")
      `CHECK_NEAR(dout[t].im, 0.0, 2.0, "ifft im")
    end
    got++;
  end

  initial begin
    v_in = 0; tag_in = 0;
    for (int v = 0; v < NV; v++)
      for (int t = 0; t < 64; t++)
        xr[v][t] = real'($signed($urandom_range(0, 8191)) - 4096);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      v_in = 1; tag_in = 8'(v); sent_cyc[v] = cyc;
      for (int k = 0; k < 64; k++) begin
        real er, ei;
        er = 0.0; ei = 0.0;
        for (int t = 0; t < 64; t++) begin
          real ang;
          ang = -6.283185307179586 * real'(k * t) / 64.0;
          er += xr[v][t] * $cos(ang);
          ei += xr[v][t] * $sin(ang);
        end
        din[k].re = cpart_t'($rtoi(er >= 0 ? er + 0.5 : er - 0.5));
        din[k].im = cpart_t'($rtoi(ei >= 0 ? ei + 0.5 : ei - 0.5));
      end
    end
    @(negedge clk) v_in = 0;
    repeat (10) @(posedge clk);
    `CHECK(got == NV, "all vectors out")
    `FINISH
  end
endmodule
