// tb_cmul_array: random complex spectra and weights; each lane must equal the
// complex product scaled by 2^-WF_FRAC (real arithmetic, 1 LSB tolerance),
// one cycle after the input, with the tag passed along.
module tb_cmul_array;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 20000)

  cplx_t  x [N], y [N];
  wcplx_t w [N];
  logic vi, vo;
  logic [7:0] ti, to;
  real er [N], ei [N];
  cmul_array #(.NP(N), .TAGW(8)) dut (.clk, .rst_n, .in_valid(vi), .in_tag(ti), .x, .w,
      .out_valid(vo), .out_tag(to), .out_data(y));

  initial begin
    vi = 0; ti = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      vi = 1; ti = 8'(t);
      for (int k = 0; k < N; k++) begin
        x[k].re = cpart_t'($signed($urandom_range(0, 1 << 22)) - (1 << 21));
        x[k].im = cpart_t'($signed($urandom_range(0, 1 << 22)) - (1 << 21));
        w[k].re = act_t'($urandom);
        w[k].im = act_t'($urandom);
        er[k] = (real'(x[k].re) * real'(w[k].re) - real'(x[k].im) * real'(w[k].im)) / real'(1 << WF_FRAC);
        ei[k] = (real'(x[k].re) * real'(w[k].im) + real'(x[k].im) * real'(w[k].re)) / real'(1 << WF_FRAC);
      end
      @(negedge clk);
      vi = 0;
      `CHECK(vo && to == 8'(t), "valid/tag one cycle later")
      for (int k = 0; k < N; k++) begin
        `CHECK_NEAR(y[k].re, er[k], 1.0, "re")
        `CHECK_NEAR(y[k].im, ei[k], 1.0, "im")
      end
    end
    @(negedge clk);
    `CHECK(!vo, "valid drops")
    `FINISH
  end
endmodule
