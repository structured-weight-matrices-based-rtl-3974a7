// tb_butterfly: random operands and twiddles; the outputs are compared with
// a + b*w and a - b*w computed in real arithmetic (tolerance 1 LSB for the
// rounded twiddle product).
module tb_butterfly;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 100000)

  cplx_t a, b, ya, yb;
  logic signed [TW_W-1:0] wr, wi;
  butterfly dut (.a, .b, .w_re(wr), .w_im(wi), .ya, .yb);

  initial begin
    real br, bi, ang, pr, pi;
    for (int t = 0; t < 2000; t++) begin
      a.re = cpart_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
      a.im = cpart_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
      b.re = cpart_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
      b.im = cpart_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
      ang  = 6.283185307179586 * real'($urandom_range(0, 63)) / 64.0;
      wr   = TW_W'($rtoi($cos(ang) * 16384.0));
      wi   = TW_W'($rtoi(-$sin(ang) * 16384.0));
      #1;
      br = real'(b.re); bi = real'(b.im);
      pr = (br * real'(wr) - bi * real'(wi)) / 16384.0;
      pi = (br * real'(wi) + bi * real'(wr)) / 16384.0;
      `CHECK_NEAR(ya.re, real'(a.re) + pr, 1.0, "ya.re")
      `CHECK_NEAR(ya.im, real'(a.im) + pi, 1.0, "ya.im")
      `CHECK_NEAR(yb.re, real'(a.re) - pr, 1.0, "yb.re")
      `CHECK_NEAR(yb.im, real'(a.im) - pi, 1.0, "yb.im")
    end
    `FINISH
  end
endmodule
