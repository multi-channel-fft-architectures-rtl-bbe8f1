// mdc_commutator: the delay commutator between two butterfly stages of a
// radix-2 multipath delay commutator (R2MDC) FFT ("switch" box with its two
// DELAY-register lines).
//
// The lower butterfly output is delayed by DELAY, then a 2x2 switch passes
// (swap = 0) or exchanges (swap = 1) the two paths; the upper switch output
// is delayed by DELAY again. With swap high for the second DELAY cycles of
// every 2*DELAY cycles, samples DELAY apart on one path are brought together
// on the two inputs of the next butterfly. Registers: 2*DELAY words. Latency
// from the upper input to the next butterfly: DELAY cycles.
// The delay placement is that of the R2MDC block diagram; the swap timing is
// supplied from outside (r2mdc_core derives it from the operation schedule),
// and the reset of the registers to zero is this design's choice.
module mdc_commutator
  import fft_pkg::*;
#(
  parameter int unsigned DELAY = N_FFT / 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  swap,
  input  cplx_t in_u,
  input  cplx_t in_l,
  output cplx_t out_u,
  output cplx_t out_l
);
  cplx_t l_dly, sw_u;

  delay_line #(.W($bits(cplx_t)), .DEPTH(DELAY)) u_dly_in (
    .clk(clk), .rst_n(rst_n), .d(in_l), .q(l_dly));

  always_comb begin
    sw_u  = swap ? l_dly : in_u;
    out_l = swap ? in_u  : l_dly;
  end

  delay_line #(.W($bits(cplx_t)), .DEPTH(DELAY)) u_dly_out (
    .clk(clk), .rst_n(rst_n), .d(sw_u), .q(out_u));
endmodule
