// mcfft_arch3_top: two-channel, 16-point radix-2 DIF FFT built by
// interleaving the two channels into one R2MDC pipeline.
//
// Data path, all stages streaming one sample per channel per cycle:
//   x_in, y_in --> pre-processing DSD (delay N/2) --> r2mdc_core
//   --> post-processing DSD (delay N/2) --> bitrev_half (per channel)
//   --> x_out, y_out
// The pre-processing DSD turns the two parallel channels into the pair
// stream (x[n], x[n+N/2]) for n = 0..N/2-1, then (y[n], y[n+N/2]), so that
// the first butterfly needs no delay line of its own and every butterfly of
// the MDC pipeline is busy each cycle (one channel fills the other's idle
// half). The post-processing DSD puts each channel back on its own output;
// each channel then comes out as two halves in bit-reversed order of a
// log2(N/2)-bit index, which a half-size bit reversal (3 registers)
// restores to natural order. Registers for N = 16: 16 (pre) + 14 (FFT) +
// 16 (post) + 2 x 3 (reordering) words, plus the control counter.
//
// Interface: one complex sample of each channel per clock, no gaps. in_sop
// marks sample 0 of a frame (it must be given for the first frame; later
// frames follow every N cycles). out_sop marks bin 0 of both outputs,
// LAT = 26 cycles after in_sop; bins 1..N-1 follow on the next cycles in
// natural order. out_valid is high from the first out_sop on.
// Outputs are unscaled (DW = IN_W + log2(N) + 1 bits): X[k] = sum x[n]W^nk
// up to twiddle rounding. Word widths and the sop/valid signals are choices
// of this design; the pipeline structure is that of the interleaved R2MDC
// architecture ("Architecture 3").
module mcfft_arch3_top
  import fft_pkg::*;
#(
  parameter int unsigned N = N_FFT
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_sop,
  input  cin_t  x_in,
  input  cin_t  y_in,
  output logic  out_sop,
  output logic  out_valid,
  output cplx_t x_out,
  output cplx_t y_out
);
  localparam int S = $clog2(N);

  // The pipeline interleaves exactly two channels.
  if (CHANNELS != 2) begin : g_chk
    $error("mcfft_arch3_top: CHANNELS must be 2");
  end

  logic          post_sel;
  logic [S-1:0]  in_pos, a_idx;
  cplx_t         chan_in [2], pre_lane [2];
  logic [S-2:0]  br_pos;
  cplx_t         pre_u, pre_l, fft_u, fft_l, post_u, post_l;

  function automatic int br_delay(input int nb);
    int b, l;
    b = $clog2(nb);
    l = 0;
    for (int i = 0; i < b / 2; i++) l += (1 << (b - 1 - i)) - (1 << i);
    return l;
  endfunction

  fft_ctrl #(.N(N), .BR_LAT(br_delay(N/2))) u_ctrl (
    .clk(clk), .rst_n(rst_n), .in_sop(in_sop),
    .in_pos(in_pos), .a_idx(a_idx), .post_sel(post_sel), .br_pos(br_pos),
    .out_sop(out_sop), .out_valid(out_valid));

  // pre-processing: the M-channel DSD interleaver with M = 2, i.e. one
  // N/2-DSD; channel X on the direct input, channel Y on the delayed one
  assign chan_in[0] = widen(x_in);
  assign chan_in[1] = widen(y_in);
  mc_interleaver #(.M(2), .N(N), .D0(N/2)) u_pre (
    .clk(clk), .rst_n(rst_n), .pos(in_pos), .in_ch(chan_in), .out_lane(pre_lane));
  assign pre_u = pre_lane[0];
  assign pre_l = pre_lane[1];

  r2mdc_core #(.N(N)) u_core (
    .clk(clk), .rst_n(rst_n), .a_idx(a_idx),
    .in_u(pre_u), .in_l(pre_l), .out_u(fft_u), .out_l(fft_l));

  // post-processing: separates the channels again
  dsd #(.DELAY(N/2)) u_post (
    .clk(clk), .rst_n(rst_n), .sel(post_sel),
    .in_u(fft_u), .in_l(fft_l),
    .out_u(post_u), .out_l(post_l));

  bitrev_half #(.NB(N/2)) u_br_x (
    .clk(clk), .rst_n(rst_n), .pos(br_pos), .d(post_u), .q(x_out));
  bitrev_half #(.NB(N/2)) u_br_y (
    .clk(clk), .rst_n(rst_n), .pos(br_pos), .d(post_l), .q(y_out));
endmodule
