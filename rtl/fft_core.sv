// fft_core: fully parallel, pipelined radix-2 FFT (the "basic computing
// block" / FFT module).
//
// All NP complex inputs arrive together in natural order with in_valid. They
// are wired into the network in bit-reversed order and pass through log2(NP)
// columns of NP/2 butterflies; column s pairs elements 2^s apart and uses
// twiddle W_{2^(s+1)}^k = exp(-j*2*pi*k/2^(s+1)), exactly the decimation-in-time
// graph of the published 8-point example (bit-reversed inputs, W8^0 in the
// first column, W8^0/W8^2 in the second, W8^0..W8^3 in the third), grown to NP
// points. The outputs X(0)..X(NP-1) come out in natural order.
//
// Timing: a register follows every butterfly column, so the latency is
// log2(NP) cycles and a new vector is accepted every cycle. in_tag is delayed
// alongside the data. No scaling is applied between columns: the output grows
// by up to log2(NP) bits over the input, which the CW-bit datapath holds for
// 16-bit inputs. Twiddles are computed at elaboration (cos/sin rounded to
// Q1.TW_FRAC); the published FPGA version keeps them in block RAM instead.
module fft_core
  import swm_pkg::*;
#(
  parameter int NP   = swm_pkg::N,
  parameter int TAGW = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [TAGW-1:0] in_tag,
  input  cplx_t           in_data  [NP],
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output cplx_t           out_data [NP]
);
  localparam int LG = $clog2(NP);

  typedef logic signed [TW_W-1:0] tw_arr_t [NP/2];

  function automatic tw_arr_t mk_tw(input bit imag);
    tw_arr_t r;
    real ang, v;
    for (int k = 0; k < NP/2; k++) begin
      ang = 2.0 * 3.14159265358979323846 * real'(k) / real'(NP);
      v   = imag ? -$sin(ang) : $cos(ang);
      v   = v * real'(1 << TW_FRAC);
      r[k] = TW_W'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
    end
    return r;
  endfunction

  localparam tw_arr_t TW_RE = mk_tw(1'b0);
  localparam tw_arr_t TW_IM = mk_tw(1'b1);

  function automatic int bitrev(input int v);
    int r = 0;
    for (int b = 0; b < LG; b++) if (v[b]) r |= 1 << (LG - 1 - b);
    return r;
  endfunction

  cplx_t            stg   [LG+1][NP];   // stg[s] = input of column s (registered for s>0)
  cplx_t            nxt   [LG][NP];     // combinational output of column s
  logic             vld   [LG+1];
  logic [TAGW-1:0]  tag   [LG+1];

  for (genvar i = 0; i < NP; i++) begin : g_in
    assign stg[0][i] = in_data[bitrev(i)];
  end
  assign vld[0] = in_valid;
  assign tag[0] = in_tag;

  for (genvar s = 0; s < LG; s++) begin : g_col
    localparam int HALF = 1 << s;
    for (genvar b = 0; b < NP/2; b++) begin : g_bf
      localparam int I  = (b / HALF) * 2 * HALF + (b % HALF);
      localparam int K  = (b % HALF) * (NP / (2 * HALF));
      butterfly u_bf (
        .a   (stg[s][I]),
        .b   (stg[s][I + HALF]),
        .w_re(TW_RE[K]),
        .w_im(TW_IM[K]),
        .ya  (nxt[s][I]),
        .yb  (nxt[s][I + HALF])
      );
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[s+1] <= 1'b0;
        tag[s+1] <= '0;
      end else begin
        vld[s+1] <= vld[s];
        tag[s+1] <= tag[s];
      end
    end
    always_ff @(posedge clk) begin
      stg[s+1] <= nxt[s];
    end
  end

  assign out_valid = vld[LG];
  assign out_tag   = tag[LG];
  assign out_data  = stg[LG];
endmodule
