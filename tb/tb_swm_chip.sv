// tb_swm_chip: end-to-end test of the whole chip at its default parameters.
//
// A random 512-512-512-64-10 network is generated: layers 1-3 as 64x64
// circulant blocks (random defining vectors w_ij), layer 4 as a dense 10x64
// matrix. The testbench computes the stored spectra (FFT(w_ij), rounded to
// Q5.10; for the dense layer the vector of pass r holds matrix row r mirrored
// about lane r, so that lane r of the circular convolution is the dot
// product), loads them and the biases over the input pads, then runs three
// images. Expected scores come from a real-arithmetic model of the network
// (circular convolutions, bias, ReLU, Q8.8 rounding after every layer);
// tolerance 8 LSB. Pads see random gaps on the input and random backpressure
// on the output. Every mechanism of the chip is counted and must occur:
// weight/bias/image row loads, input-pad stall, output-pad backpressure,
// ping-pong flips, ReLU clamping, dense (per-lane) write-back, all four
// layers. The run length from first block product to output start must be
// 218 cycles.
module tb_swm_chip;
  import swm_pkg::*;
  `include "tb/tb_util.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  `WATCHDOG(clk, 200000)

  logic cmd_valid, cmd_ready, pad_in_valid, pad_in_ready, pad_out_valid, pad_out_ready, busy;
  cmd_e cmd;
  logic [IO_W-1:0] pad_in_data, pad_out_data;
  logic [1:0] layer;

  swm_chip dut (.clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .pad_in_valid, .pad_in_ready,
      .pad_in_data, .pad_out_valid, .pad_out_ready, .pad_out_data, .busy, .layer);

  // ---- network --------------------------------------------------------
  real wt  [WB_ROWS][N];        // time-domain defining vector of each weight row
  real bia [BIAS_ROWS][N];
  logic [IO_W-1:0] wwords [WB_ROWS][2*N];
  logic [IO_W-1:0] bwords [BIAS_ROWS][N];
  real ctab [N], stab [N];

  function automatic int rnd(input real v);
    return $rtoi(v >= 0.0 ? v + 0.5 : v - 0.5);
  endfunction

  function automatic real q88(input real v);
    int t;
    t = rnd(v * 256.0);
    if (t > 32767) t = 32767;
    if (t < -32768) t = -32768;
    return real'(t) / 256.0;
  endfunction

  // Layer table copied into variables at run time, so that the reference
  // model below is an ordinary loop nest and not unrolled by the compiler.
  int lp [NUM_LAYERS], lq [NUM_LAYERS], lwb [NUM_LAYERS], lbb [NUM_LAYERS];
  bit ldense [NUM_LAYERS], lrelu [NUM_LAYERS];
  int nlanes = 0;

  // reference model of one image; x holds the 512 inputs
  task automatic reference(input real x [512], output real y [NUM_OUT]);
    real a [512], b [512];
    a = x;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      for (int i = 0; i < lp[l]; i++) begin
        for (int r = 0; r < nlanes; r++) begin
          real s;
          int row;
          if (ldense[l] && r != i) continue;
          row = ldense[l] ? lbb[l] : lbb[l] + i;
          s = bia[row][r];
          for (int j = 0; j < lq[l]; j++)
            for (int c = 0; c < nlanes; c++)
              s += wt[lwb[l] + i*lq[l] + j][c] * a[j*nlanes + (r - c + nlanes) % nlanes];
          if (lrelu[l] && s < 0.0) s = 0.0;
          b[(ldense[l] ? 0 : i*nlanes) + r] = q88(s);
        end
      end
      a = b;
    end
    for (int k = 0; k < NUM_OUT; k++) y[k] = a[k];
  endtask

  task automatic make_network();
    for (int k = 0; k < N; k++) begin
      ctab[k] = $cos(6.283185307179586 * real'(k) / real'(N));
      stab[k] = $sin(6.283185307179586 * real'(k) / real'(N));
    end
    for (int r = 0; r < WB_ROWS; r++) begin
      if (r < 136) begin
        for (int c = 0; c < N; c++) wt[r][c] = (real'($urandom_range(0, 2000)) - 1000.0) / 8000.0;
      end else begin
        // dense row m = r-136: matrix row M[m][c]; stored mirrored about lane m
        real mrow [N];
        for (int c = 0; c < N; c++) mrow[c] = (real'($urandom_range(0, 2000)) - 1000.0) / 4000.0;
        for (int c = 0; c < N; c++) wt[r][(r - 136 - c + N) % N] = mrow[c];
      end
      for (int k = 0; k < N; k++) begin
        real er, ei;
        er = 0.0; ei = 0.0;
        for (int c = 0; c < N; c++) begin
          er += wt[r][c] * ctab[(k * c) % N];
          ei -= wt[r][c] * stab[(k * c) % N];
        end
        wwords[r][2*k]   = IO_W'(rnd(er * real'(1 << WF_FRAC)));
        wwords[r][2*k+1] = IO_W'(rnd(ei * real'(1 << WF_FRAC)));
      end
      // the reference uses the weights the chip actually holds: time-domain
      // vector recovered from the rounded spectrum
      for (int c = 0; c < N; c++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < N; k++)
          s += real'($signed(wwords[r][2*k])) * ctab[(k * c) % N] - real'($signed(wwords[r][2*k+1])) * stab[(k * c) % N];
        wt[r][c] = s / real'(N) / real'(1 << WF_FRAC);
      end
    end
    for (int r = 0; r < BIAS_ROWS; r++)
      for (int c = 0; c < N; c++) begin
        bwords[r][c] = IO_W'($signed($urandom_range(0, 128)) - 64);
        bia[r][c] = real'($signed(bwords[r][c])) / 256.0;
      end
  endtask

  // ---- pad drivers ------------------------------------------------------
  int in_stalls = 0, out_stalls = 0;
  task automatic send_word(input logic [IO_W-1:0] w);
    if ($urandom_range(0, 7) == 0) begin pad_in_valid = 0; @(negedge clk); end
    pad_in_valid = 1; pad_in_data = w;
    @(posedge clk);
    while (!pad_in_ready) begin in_stalls++; @(posedge clk); end
    @(negedge clk);
    pad_in_valid = 0;
  endtask

  task automatic command(input cmd_e c);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  always @(negedge clk) pad_out_ready = ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && pad_out_valid && !pad_out_ready) out_stalls++;

  logic [IO_W-1:0] outq [$];
  always @(posedge clk) if (rst_n && pad_out_valid && pad_out_ready) outq.push_back(pad_out_data);

  // ---- mechanism monitors -------------------------------------------------
  int wrows = 0, brows = 0, irows = 0, flips = 0, relu_clamps = 0, dense_writes = 0;
  int layer_seen [NUM_LAYERS] = '{0, 0, 0, 0};
  int cyc = 0, first_issue = -1, od_cyc = -1;
  logic last_pp = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.load_valid && dut.load_target == TGT_WEIGHT) wrows++;
    if (dut.load_valid && dut.load_target == TGT_BIAS)   brows++;
    if (dut.load_valid && dut.load_target == TGT_ACT)    irows++;
    if (rst_n && dut.pp_sel != last_pp) flips++;
    last_pp <= dut.pp_sel;
    if (dut.ps_in_valid) begin
      layer_seen[layer]++;
      if (first_issue < 0) first_issue = cyc;
    end
    if (dut.od_start) od_cyc = cyc;
    if (dut.u_proc.bias_v && dut.u_proc.bias_tag.relu)
      for (int k = 0; k < N; k++) if (dut.u_proc.bias_out[k] < 0) relu_clamps++;
    if (dut.ps_out_valid && dut.ps_out_tag.lanes != '1) dense_writes++;
  end

  // ---- test ------------------------------------------------------------------
  initial begin
    real x [512];
    real y [NUM_OUT];
    cmd_valid = 0; cmd = CMD_LOAD_WEIGHTS; pad_in_valid = 0; pad_in_data = 0;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      lp[l] = int'(LAYERS[l].p); lq[l] = int'(LAYERS[l].q);
      lwb[l] = int'(LAYERS[l].wbase); lbb[l] = int'(LAYERS[l].bbase);
      ldense[l] = LAYERS[l].dense; lrelu[l] = LAYERS[l].relu;
    end
    nlanes = N;
    make_network();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    command(CMD_LOAD_WEIGHTS);
    for (int r = 0; r < WB_ROWS; r++) for (int k = 0; k < 2*N; k++) send_word(wwords[r][k]);
    command(CMD_LOAD_BIASES);
    for (int r = 0; r < BIAS_ROWS; r++) for (int k = 0; k < N; k++) send_word(bwords[r][k]);
    for (int img = 0; img < 3; img++) begin
      first_issue = -1; od_cyc = -1;
      for (int k = 0; k < 512; k++) x[k] = real'($urandom_range(0, 255)) / 256.0;
      reference(x, y);
      if (img == 1) begin
        // image words sent ahead of the command fill the input IO buffer and
        // stall the pad until the command arrives
        fork
          for (int k = 0; k < 512; k++) send_word(IO_W'(rnd(x[k] * 256.0)));
          begin repeat (60) @(negedge clk); command(CMD_RUN_IMAGE); end
        join
      end else begin
        command(CMD_RUN_IMAGE);
        for (int k = 0; k < 512; k++) send_word(IO_W'(rnd(x[k] * 256.0)));
      end
      while (outq.size() < NUM_OUT) @(negedge clk);
      for (int k = 0; k < NUM_OUT; k++) begin
        logic [IO_W-1:0] w;
        w = outq.pop_front();
        `CHECK_NEAR($signed(w), y[k] * 256.0, 8.0, "class score")
      end
      $display("image %0d: %0d cycles from first block product to output start (paper: 200 MHz / 1.14e6 images/s = 175)",
               img, od_cyc - first_issue);
      `CHECK(od_cyc - first_issue == 218, "run length")
    end
    repeat (5) @(negedge clk);
    `CHECK(outq.size() == 0, "no extra output words")
    $display("mechanisms: weight rows %0d, bias rows %0d, image rows %0d, input stalls %0d, output stalls %0d",
             wrows, brows, irows, in_stalls, out_stalls);
    $display("            ping-pong flips %0d, ReLU clamps %0d, dense lane writes %0d, blocks per layer %0d/%0d/%0d/%0d",
             flips, relu_clamps, dense_writes, layer_seen[0], layer_seen[1], layer_seen[2], layer_seen[3]);
    `CHECK(wrows == WB_ROWS, "weight rows loaded")
    `CHECK(brows == BIAS_ROWS, "bias rows loaded")
    `CHECK(irows == 3 * ACT_ROWS, "image rows loaded")
    `CHECK(in_stalls > 0, "input pad stall happened")
    `CHECK(out_stalls > 0, "output backpressure happened")
    `CHECK(flips == 3 * NUM_LAYERS, "ping-pong flips")
    `CHECK(relu_clamps > 0, "ReLU clamped")
    `CHECK(dense_writes == 3 * NUM_OUT, "dense output-layer lane writes")
    `CHECK(layer_seen[0] == 3*64 && layer_seen[1] == 3*64 && layer_seen[2] == 3*8 && layer_seen[3] == 3*10,
           "block products per layer")
    `FINISH
  end
endmodule
