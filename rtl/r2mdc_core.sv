// r2mdc_core: radix-2 multipath delay commutator (R2MDC) DIF FFT of N points,
// run with two channels interleaved.
//
// The input is the pair stream made by the pre-processing DSD: on cycle n of
// a channel's half frame, in_u = x[n] and in_l = x[n+N/2], n = 0 .. N/2-1,
// first for channel X, then (next N/2 cycles) for channel Y, with no gap.
// Butterfly stage 0 (BF A) works on these pairs directly; stages s = 1 ..
// log2(N)-1 are each preceded by an mdc_commutator of delay N/2^(s+1)
// (4D, 2D, 1D for N = 16). A plain R2MDC keeps its butterflies busy only half
// of the time; here the idle half of every stage runs the other channel, so
// all butterflies are busy every cycle (folding sets of the interleaved
// R2MDC: A = {A0..A7, A'0..A'7}, B = {B'4..B'7, B0..B7, B'0..B'3}, ...).
//
// a_idx is the position (0 .. N-1) of the pair now at BF A within the
// 2-channel frame (channel X: 0 .. N/2-1, channel Y: N/2 .. N-1). Every
// switch and twiddle control is a constant offset of it:
//   t_s     = t_(s-1) - N/2^(s+1)          (time index seen at stage s)
//   swap_s  = bit log2(N/2^(s+1)) of t_(s-1)
//   twiddle exponent of stage s = (t_s mod N/2^(s+1)) * 2^s
// Output: out_u / out_l carry, N/2 - 1 cycles after the pair entered, the
// DFT bins X[br(j)] and X[br(j) + N/2], j = 0 .. N/2-1, where br reverses
// a log2(N/2)-bit index; channel X first, then channel Y.
// The structure follows the interleaved R2MDC block diagram; the twiddle
// arithmetic is in bf_r2. Registers: 2*(N/4 + N/8 + ... + 1) = 14 words.
module r2mdc_core
  import fft_pkg::*;
#(
  parameter int unsigned N = N_FFT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [$clog2(N)-1:0]  a_idx,
  input  cplx_t                 in_u,
  input  cplx_t                 in_l,
  output cplx_t                 out_u,
  output cplx_t                 out_l
);
  localparam int S  = $clog2(N);
  localparam int EW = $clog2(N/2);

  // time index at each butterfly stage
  logic [S-1:0] t [S];
  // butterfly inputs and outputs per stage
  cplx_t bf_a [S], bf_b [S], bf_s [S], bf_d [S];

  assign t[0]    = a_idx;
  assign bf_a[0] = in_u;
  assign bf_b[0] = in_l;

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int SPAN = (N >> (s + 1));  // butterfly span of this stage
    logic [EW-1:0] tw_exp;

    if (s > 0) begin : g_comm
      logic swap;
      assign t[s]  = t[s-1] - S'(SPAN);
      assign swap = t[s-1][$clog2(SPAN)];
      mdc_commutator #(.DELAY(SPAN)) u_comm (
        .clk(clk), .rst_n(rst_n), .swap(swap),
        .in_u(bf_s[s-1]), .in_l(bf_d[s-1]),
        .out_u(bf_a[s]), .out_l(bf_b[s]));
    end

    // (t mod SPAN) * 2^s, kept to EW bits (exponent < N/2)
    assign tw_exp = EW'((32'(t[s]) % SPAN) << s);

    bf_r2 #(.N(N), .HAS_TW(s < S - 1)) u_bf (
      .a(bf_a[s]), .b(bf_b[s]), .tw_exp(tw_exp),
      .sum(bf_s[s]), .dif(bf_d[s]));
  end

  assign out_u = bf_s[S-1];
  assign out_l = bf_d[S-1];
endmodule
