// dsd: delay-switch-delay (DELAY-DSD) circuit.
//
// Two serial streams enter on in_u and in_l. in_l first passes a DELAY-register
// line; then a 2x2 switch either passes both straight (sel = 1: in_u goes up,
// delayed in_l goes down) or crosses them (sel = 0: delayed in_l goes up, in_u
// goes down); the upper switch output passes a second DELAY-register line.
// Driving sel with a square wave of period 2*DELAY, high for the first DELAY
// cycles of a 2*DELAY frame, exchanges the second half of the in_u frame with
// the first half of the in_l frame:
//   in_u  a0 .. a(2D-1), in_l b0 .. b(2D-1)
//   out_u a0 .. a(D-1) b0 .. b(D-1)      (DELAY cycles after a0 entered)
//   out_l a(D) .. a(2D-1) b(D) .. b(2D-1) (same cycles)
// With DELAY = N/2 this interleaves two channels into the pair stream of a
// radix-2 MDC FFT (pre-processing) and, applied to the FFT outputs, separates
// the channels again (post-processing); with DELAY = 1 it is the 1-DSD.
// The structure (mux input numbering, delay placement) follows the DSD figures
// of the architecture; registers are reset to zero (design choice).
// Latency: DELAY cycles on both outputs. Registers: 2*DELAY words.
module dsd
  import fft_pkg::*;
#(
  parameter int unsigned DELAY = N_FFT / 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  sel,     // 1: straight, 0: cross
  input  cplx_t in_u,
  input  cplx_t in_l,
  output cplx_t out_u,
  output cplx_t out_l
);
  cplx_t l_dly, mux_u;

  delay_line #(.W($bits(cplx_t)), .DEPTH(DELAY)) u_dly_in (
    .clk(clk), .rst_n(rst_n), .d(in_l), .q(l_dly));

  always_comb begin
    mux_u = sel ? in_u  : l_dly;
    out_l = sel ? l_dly : in_u;
  end

  delay_line #(.W($bits(cplx_t)), .DEPTH(DELAY)) u_dly_out (
    .clk(clk), .rst_n(rst_n), .d(mux_u), .q(out_u));
endmodule
