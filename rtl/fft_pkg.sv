// fft_pkg: shared sizes, the complex sample types and the twiddle-factor
// function of the two-channel interleaved 16-point FFT.
//
// The transform size (N = 16) and the channel count (2) are the values the
// architecture is built for. Word widths are not fixed by the architecture
// and are choices of this design: 16-bit two's-complement input parts, an
// internal width of IN_W + log2(N) + 1 = 21 bits so that no butterfly can
// overflow (a rotation can move |z| into one component, hence the extra bit),
// and 16-bit twiddle factors scaled by 2^14.
package fft_pkg;

  localparam int unsigned N_FFT    = 16;             // transform size
  localparam int unsigned LOG2N    = $clog2(N_FFT);  // number of butterfly stages
  localparam int unsigned CHANNELS = 2;              // interleaved channels
  localparam int unsigned IN_W     = 16;             // input real/imag width
  localparam int unsigned DW       = IN_W + LOG2N + 1; // internal/output width
  localparam int unsigned TW_W     = 16;             // twiddle real/imag width
  localparam int unsigned TW_FRAC  = 14;             // twiddle fraction bits

  typedef struct packed {
    logic signed [IN_W-1:0] re;
    logic signed [IN_W-1:0] im;
  } cin_t;

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [TW_W-1:0] re;
    logic signed [TW_W-1:0] im;
  } tw_t;

  // Sign-extend an input sample to the internal width.
  function automatic cplx_t widen(input cin_t s);
    cplx_t r;
    r.re = DW'(s.re);
    r.im = DW'(s.im);
    return r;
  endfunction

  // W_n^k = exp(-j*2*pi*k/n), rounded to TW_FRAC fraction bits. Used only in
  // constant expressions (twiddle ROM contents), so it costs no hardware.
  function automatic tw_t twiddle(input int unsigned k, input int unsigned n);
    tw_t t;
    real ang;
    ang = 6.283185307179586 * real'(k) / real'(n);
    t.re = TW_W'($rtoi((2.0 ** TW_FRAC) * $cos(ang) + (($cos(ang) >= 0.0) ? 0.5 : -0.5)));
    t.im = TW_W'($rtoi(-(2.0 ** TW_FRAC) * $sin(ang) + ((-$sin(ang) >= 0.0) ? 0.5 : -0.5)));
    return t;
  endfunction

endpackage
