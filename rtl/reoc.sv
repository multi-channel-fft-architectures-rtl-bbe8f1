// reoc: reorder circuit (REOC) that swaps samples lying DELAY positions apart
// in a serial stream.
//
// A DELAY-register line sits between two 2:1 multiplexers controlled by the
// same signal s. s = 1: the line takes the input and the output is the line's
// end (a plain delay). s = 0: the output takes the input directly (bypass)
// and the sample leaving the line is fed back into it (held DELAY cycles
// more). A sample bypassed at time t thus overtakes the one that entered at
// t - DELAY, which swaps the two. Mux input numbering follows the RO boxes of
// the pre-processing figure. Latency DELAY, registers DELAY words.
module reoc
  import fft_pkg::*;
#(
  parameter int unsigned DELAY = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s,
  input  cplx_t d,
  output cplx_t q
);
  cplx_t line_in, line_out;

  delay_line #(.W($bits(cplx_t)), .DEPTH(DELAY)) u_line (
    .clk(clk), .rst_n(rst_n), .d(line_in), .q(line_out));

  always_comb begin
    line_in = s ? d : line_out;
    q       = s ? line_out : d;
  end
endmodule
