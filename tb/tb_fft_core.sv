// tb_fft_core: an 8-point and a 64-point FFT are fed random complex vectors
// back to back, one per cycle. Each output vector is compared with a direct
// DFT computed in real arithmetic, and must appear log2(N) cycles after its
// input (the tag carries the vector number).
module tb_fft_core;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  localparam int NV = 40;

  cplx_t in8 [8], out8 [8];
  cplx_t in64 [64], out64 [64];
  logic v_in, v8, v64;
  logic [7:0] tag_in, tag8, tag64;
  real xr [NV][64], xi [NV][64];
  int cyc = 0, sent_cyc [NV];
  always @(posedge clk) cyc++;

  fft_core #(.NP(8),  .TAGW(8)) dut8  (.clk, .rst_n, .in_valid(v_in), .in_tag(tag_in),
      .in_data(in8), .out_valid(v8), .out_tag(tag8), .out_data(out8));
  fft_core #(.NP(64), .TAGW(8)) dut64 (.clk, .rst_n, .in_valid(v_in), .in_tag(tag_in),
      .in_data(in64), .out_valid(v64), .out_tag(tag64), .out_data(out64));

  function automatic void dft(input int n, input int v, input int k, output real er, output real ei);
    er = 0.0; ei = 0.0;
    for (int t = 0; t < n; t++) begin
      real ang = -6.283185307179586 * real'(k * t) / real'(n);
      er += xr[v][t] * $cos(ang) - xi[v][t] * $sin(ang);
      ei += xr[v][t] * $sin(ang) + xi[v][t] * $cos(ang);
    end
  endfunction

  // Twiddles are rounded to Q1.14: allow 4 LSB plus 4e-5 of the input's L1 norm.
  function automatic real tol64(input int v);
    real l1 = 0.0;
    for (int t = 0; t < 64; t++) l1 += (xr[v][t] < 0 ? -xr[v][t] : xr[v][t]) + (xi[v][t] < 0 ? -xi[v][t] : xi[v][t]);
    return 4.0 + 4.0e-5 * l1;
  endfunction

  int got8 = 0, got64 = 0;
  // outputs are sampled at the falling edge, when they are stable
  always @(negedge clk) begin
    real er, ei;
    if (v8) begin
      `CHECK(cyc - sent_cyc[tag8] == 3, "fft8 latency")
      for (int k = 0; k < 8; k++) begin
        dft(8, tag8, k, er, ei);
        `CHECK_NEAR(out8[k].re, er, 3.0, "fft8 re")
        `CHECK_NEAR(out8[k].im, ei, 3.0, "fft8 im")
      end
      got8++;
    end
    if (v64) begin
      `CHECK(cyc - sent_cyc[tag64] == 6, "fft64 latency")
      for (int k = 0; k < 64; k++) begin
        dft(64, tag64, k, er, ei);
        `CHECK_NEAR(out64[k].re, er, tol64(tag64), "fft64 re")
        `CHECK_NEAR(out64[k].im, ei, tol64(tag64), "fft64 im")
      end
      got64++;
    end
  end

  initial begin
    v_in = 0; tag_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      for (int t = 0; t < 64; t++) begin
        // first vector: unit impulse (spectrum all ones); others random 16-bit
        if (v == 0) begin xr[v][t] = (t == 0) ? 1000.0 : 0.0; xi[v][t] = 0.0; end
        else begin
          xr[v][t] = real'($signed($urandom_range(0, 65535)) - 32768);
          xi[v][t] = (v % 2 == 1) ? 0.0 : real'($signed($urandom_range(0, 65535)) - 32768);
        end
      end
    end
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      v_in = 1; tag_in = 8'(v);
      for (int t = 0; t < 64; t++) begin
        in64[t].re = cpart_t'($rtoi(xr[v][t])); in64[t].im = cpart_t'($rtoi(xi[v][t]));
        if (t < 8) begin in8[t].re = in64[t].re; in8[t].im = in64[t].im; end
      end
      sent_cyc[v] = cyc;
    end
    @(negedge clk) v_in = 0;
    repeat (12) @(posedge clk);
    `CHECK(got8 == NV, "all fft8 vectors out")
    `CHECK(got64 == NV, "all fft64 vectors out")
    `FINISH
  end
endmodule
