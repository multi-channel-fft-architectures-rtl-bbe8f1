// bf_r2: radix-2 decimation-in-frequency butterfly (nodes A..D of the data
// flow graph, "BF" boxes of the block diagram).
//
//   sum = a + b
//   dif = (a - b) * W_N^k      (k = tw_exp, W_N = exp(-j*2*pi/N))
//
// The twiddle factors come from a constant table of N/2 entries built with
// fft_pkg::twiddle (16-bit, 14 fraction bits). The complex product uses four
// real multiplies; the result is shifted right by 14 with truncation toward
// minus infinity (arithmetic shift). HAS_TW = 0 leaves out the multiplier for
// the last stage, whose twiddle is always W^0 = 1. The butterfly is purely
// combinational: the architecture counts only the delay registers, so no
// pipeline register is added here. Word widths, rounding and the multiplier
// form are choices of this design; the architecture gives only the function.
module bf_r2
  import fft_pkg::*;
#(
  parameter int unsigned N      = N_FFT,
  parameter bit          HAS_TW = 1'b1
) (
  input  cplx_t                       a,
  input  cplx_t                       b,
  input  logic [$clog2(N/2)-1:0]      tw_exp,
  output cplx_t                       sum,
  output cplx_t                       dif
);
  localparam int PW = DW + TW_W;

  // Constant twiddle table W_N^k, k = 0 .. N/2-1.
  tw_t rom [N/2];
  for (genvar k = 0; k < int'(N/2); k++) begin : g_rom
    localparam tw_t TW_K = twiddle(k, N);
    assign rom[k] = TW_K;
  end

  cplx_t d;
  tw_t   w;
  logic signed [PW:0] pr, pi;

  always_comb begin
    sum.re = a.re + b.re;
    sum.im = a.im + b.im;
    d.re   = a.re - b.re;
    d.im   = a.im - b.im;
    w      = rom[tw_exp];
    pr = (PW+1)'(d.re) * (PW+1)'(w.re) - (PW+1)'(d.im) * (PW+1)'(w.im);
    pi = (PW+1)'(d.re) * (PW+1)'(w.im) + (PW+1)'(d.im) * (PW+1)'(w.re);
    if (HAS_TW) begin
      dif.re = DW'(pr >>> TW_FRAC);
      dif.im = DW'(pi >>> TW_FRAC);
    end else begin
      dif = d;
    end
  end
endmodule
