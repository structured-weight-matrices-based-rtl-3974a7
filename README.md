# A block-circulant neural-network chip: FFT-based fully connected layers

This is synthesizable SystemVerilog for a small inference chip whose fully
connected layers use *structured weight matrices*: every weight matrix is cut
into k x k sub-blocks and each sub-block is a circulant matrix. A circulant
block is defined by a single length-k vector, so a layer stores k times fewer
weights, and its product with an input block is a circular convolution, which
an FFT turns into an element-wise product:

    W_ij x_j = IFFT( FFT(w_ij) o FFT(x_j) )         (o = element-wise product)
    y_i      = h( sum_j W_ij x_j + b_i )

The chip keeps the spectra FFT(w_ij) in memory and, per clock, takes one input
block x_j of k = 64 activations through a 64-point FFT, multiplies it by one
stored spectrum, transforms the product back with an IFFT, and adds it to the
running sum of output block i. A layer with p x q blocks therefore takes p*q
clocks of work instead of the (64p)(64q) multiply-accumulates of a dense layer.

The design follows a published architecture for this chip: the block diagram
(input/output IO buffers and distributors, storage system, processing system,
global controller), the storage system (weight memory bank, bias register file,
ping-pong pair of activation register files), the processing chain
FFT -> Mult -> IFFT -> Accu -> Bias -> ReLU, a 64-point FFT built from radix-2
butterflies in the decimation-in-time arrangement, the IFFT built from the FFT
with two conjugations and a divide by N, and the evaluated network
512-512-512-64-10 (512 inputs, 10 classes, an MNIST recognition task) at 200 MHz. Everything else
(bit widths, handshakes, the command protocol, the schedule, pipelining, the
handling of the dense output layer) is this implementation's own and is
called out below.

## The network the chip runs

| layer | shape (rows x cols) | circulant blocks p x q | weight-bank rows | bias rows | ReLU |
|---|---|---|---|---|---|
| 1 | 512 x 512 | 8 x 8 | 0..63 | 0..7 | yes |
| 2 | 512 x 512 | 8 x 8 | 64..127 | 8..15 | yes |
| 3 | 64 x 512 | 1 x 8 | 128..135 | 16 | yes |
| 4 | 10 x 64 (dense) | 10 passes of 1 x 1 | 136..145 | 17 | no |

The table is `swm_pkg::LAYERS`; the controller walks it. Changing the network
means editing that table and `WB_ROWS`/`BIAS_ROWS`/`ACT_ROWS`.

**The dense output layer.** The last layer is not block-circulant. Rather
than adding a separate multiply-accumulate unit, the chip runs it through the
same FFT pipeline: for output r it performs one circulant pass whose defining
vector is matrix row r mirrored about lane r, `v_r[(r - c) mod 64] = M[r][c]`.
Lane r of that circular convolution is then exactly `sum_c M[r][c] x[c]`, and
only lane r is written back (a per-lane write mask). Ten passes give the ten
scores. The memory holds 64 numbers' worth of spectrum per row, the same count
as the dense row. This mapping is this design's choice; the published text
only says that the output layer keeps its original 64 x 10 structure.

**Circulant convention.** The hardware computes `IFFT(FFT(w) o FFT(x))`, which
is the product with the circulant matrix whose *first column* is `w`
(`y[r] = sum_c w[c] x[(r - c) mod 64]`). The source text calls `w` the first
row while giving the same FFT formula; the formula is what is built. Whoever
prepares weights must use this convention.

## Data formats

| quantity | format |
|---|---|
| activations, inputs, biases, scores | 16-bit signed, 8 fraction bits (Q8.8) |
| stored weight spectra | 16-bit signed real and imaginary parts, 10 fraction bits |
| internal FFT / IFFT / accumulator datapath | 32-bit signed per real/imaginary part, Q8.8 scale |
| twiddle factors | 16-bit, Q1.14, computed at elaboration from cos/sin |

The FFT does not scale between its columns; a 16-bit input grows by at most 6
bits through 64 points, which the 32-bit datapath holds. The IFFT divides by 64
at its output. Products with the stored spectra are rounded back to Q8.8.
ReLU outputs are saturated to 16 bits. None of these widths is given by the
published design (its FPGA versions used 12 and 16 bits); they can be changed
in `swm_pkg`.

## Blocks

* `fft_core`: fully parallel N-point FFT, N inputs per clock, log2 N columns of
  N/2 `butterfly` units, a register after every column (latency 6 for N = 64).
  Inputs enter in bit-reversed order, outputs leave in natural order; column s
  pairs elements 2^s apart with twiddle `exp(-j 2 pi k / 2^(s+1))`.
* `butterfly`: `ya = a + b*w`, `yb = a - b*w`, the twiddle multiply rounded.
* `ifft_core`: conjugate, `fft_core`, conjugate, round and shift right by
  log2 N.
* `cmul_array`: 64 complex multipliers, one stage.
* `accumulator`: loads on the first block of a sum, adds on the others,
  emits on the last. Only real parts are kept (products of real vectors).
* `bias_add`, `relu_act`: one stage each; ReLU is bypassed for the last layer.
* `processing_system`: the chain above. A tag (weight row, bias row,
  destination row and lanes, ReLU, first/last) travels with every block. When
  a spectrum leaves the FFT, its weight row is requested from the synchronous
  weight memory and the spectrum waits one cycle in a holding register.
  Latency from the last block of a sum to its result: 2 log2 N + 5 = 17 cycles.
* `weight_bank`: 146 rows of 64 complex values, synchronous read (in silicon
  an SRAM macro; here an array). The full 64-bin spectrum is stored, although
  a real vector's spectrum is conjugate-symmetric and half would do.
* `bias_rf`: 18 rows of 64 biases, combinational read.
* `pingpong_buffer`: two register files of 8 rows x 64 activations and the
  read multiplexer. Layer l reads one file and writes the other; the
  controller swaps them after each layer, so the final scores end up in the
  file that is read next.
* `storage_system`: the three stores plus routing of loads (image rows go to
  the file being read, results to the other file).
* `io_buffer`: valid/ready FIFO (16 words of 16 bits), used as the input and
  as the output IO buffer.
* `input_distributor`: collects pad words into a row of 64 (activations,
  biases) or 128 (weights: re0, im0, re1, im1, ...) words, then hands the whole
  row to storage in one cycle. It takes no words unless a load is in progress.
* `output_distributor`: captures the final row and sends lanes 0..9 to the
  output IO buffer.
* `global_controller`: command decoding and the run schedule (next section).
* `swm_chip`: the top, wired as the published block diagram.

IO pads are not modelled; the pad-side signals are the top's ports.

## Host protocol and timing

Commands are given on `cmd`/`cmd_valid` (accepted when `cmd_ready`), pad
words on `pad_in_*` and `pad_out_*` (valid/ready, 16 bits):

1. `CMD_LOAD_WEIGHTS`, then 146 rows x 128 words: the spectrum of each weight
   row, real and imaginary parts interleaved, bins 0..63.
2. `CMD_LOAD_BIASES`, then 18 rows x 64 words.
3. `CMD_RUN_IMAGE`, then 8 rows x 64 words of input (Q8.8). The chip computes
   and returns 10 words, the scores. Repeat for each image.

Words may be sent before their command; they wait in the input IO buffer.

Run schedule: for every layer, for output block i, for input block j, one
block product per clock. After the last block of a layer the controller waits
for the 17-cycle pipeline to drain and write back, then swaps the ping-pong
files (one cycle). A layer takes p*q + 18 cycles, an image
146 + 4 x 18 = 218 cycles from the first block product to the start of output.
At 200 MHz that is 0.92 million images per second of compute, against the
published 1.14 million (175 cycles). The difference is the per-layer drain; the
published design does not say how (or whether) it hides it. In addition, with
a single 16-bit input pad the 512 input words of an image take 512 cycles and
the load does not overlap computation, so the end-to-end rate of this RTL is
about 0.27 million images per second. A wider pad or loading the next image
during computation would be needed to reach the published rate; neither is
built, because the pad count is not given.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench (usually real arithmetic),
checks latencies, and prints `TB_RESULT checks=N failures=M`. Notable ones:

* `tb_fft_core`: 8- and 64-point FFTs against a direct DFT, 6-cycle latency.
* `tb_processing_system`: a 3 x 4-block layer against circular convolution in
  real arithmetic, with ReLU on and off, 17-cycle latency.
* `tb_global_controller`: the exact issue sequence of all four layers and the
  218-cycle run length.
* `tb_swm_chip`: the whole chip at its default parameters. A random network is
  generated, its spectra computed and loaded over the pads, three images run
  and the ten scores compared (8 LSB tolerance) with a real-arithmetic model of
  the network that rounds to Q8.8 after each layer. It also counts input-pad
  stalls, output backpressure, ping-pong swaps, ReLU clamping and dense-layer
  lane writes and fails if any never happened.

Run one with plain Verilator from the directory that holds `rtl/` and `tb/`
(testbenches include `tb/tb_util.svh` by that path):

    verilator --binary --timing --assert -Wno-fatal -I. --top-module tb_swm_chip \
        rtl/swm_pkg.sv rtl/*.sv tb/tb_swm_chip.sv
    ./obj_dir/Vtb_swm_chip

(`swm_pkg.sv` must come first; listing it twice only gives a warning.) The
full-chip test builds in well under a minute and runs in seconds.

## Where this departs from, or goes beyond, the published design

* All bit widths, fixed-point formats, rounding and saturation are chosen here.
* The command protocol, the row formats on the pads, the valid/ready
  handshakes and the IO buffer depth are chosen here.
* The FFT is fully pipelined (one register per butterfly column); the source
  gives parallelism N and depth log N but no pipelining.
* Twiddles are constants computed at elaboration, not a memory.
* The dense output layer is mapped onto the circulant datapath as described
  above.
* The spectrum FFT(x_j) of an input block is recomputed for every output
  block i that uses it (p times per layer) rather than stored; this keeps the
  pipeline a plain stream at the cost of FFT activity, not of throughput.
* The schedule does not hide the pipeline drain between layers, nor overlap
  image loading with computation; see the throughput figures above.
* The published FPGA versions of the architecture (host CPU, DDR, preprocess
  block, and a peripheral block with tanh, sigmoid and pooling for CNN and
  LSTM models) are not part of this chip and are not provided.
