// bitrev_half: serial bit reversal of NB-point blocks (NB = N/2 = 8 here).
//
// After the post-processing DSD each channel carries, per transform, its two
// halves X[0..N/2-1] and X[N/2..N-1], each in bit-reversed order of a
// log2(N/2)-bit index. Bit reversal of a B-bit index is done by swapping bit
// i with bit B-1-i for i < B/2; each swap is one reoc with delay
// 2^(B-1-i) - 2^i, cascaded. For NB = 8 this is one reoc of 3 registers,
// the "3 registers per output channel" of the architecture.
//
// pos is the position (0 .. NB-1) inside its block of the sample now at d.
// A swap stage bypasses (s = 0) the samples whose bit B-1-i is 1 and bit i
// is 0; all other cycles it delays. Each later stage sees positions shifted
// by the earlier stages' delays. Latency: sum of the stage delays (3 for
// NB = 8); the first output sample of a block is its natural index 0.
// The control rule is this design's derivation of the serial bit-reversal
// circuit the architecture cites.
module bitrev_half
  import fft_pkg::*;
#(
  parameter int unsigned NB = N_FFT / 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [$clog2(NB)-1:0]  pos,
  input  cplx_t                  d,
  output cplx_t                  q
);
  localparam int B  = $clog2(NB);
  localparam int NS = B / 2;

  function automatic int stage_delay(input int i);
    return (1 << (B - 1 - i)) - (1 << i);
  endfunction

  function automatic int lat_before(input int i);
    int l;
    l = 0;
    for (int k = 0; k < i; k++) l += stage_delay(k);
    return l;
  endfunction

  cplx_t chain [NS+1];
  assign chain[0] = d;

  for (genvar i = 0; i < NS; i++) begin : g_stage
    logic [B-1:0] p;
    logic         s;
    always_comb begin
      p = pos - B'(lat_before(i));
      s = !(p[B-1-i] && !p[i]);
    end
    reoc #(.DELAY(stage_delay(i))) u_swap (
      .clk(clk), .rst_n(rst_n), .s(s), .d(chain[i]), .q(chain[i+1]));
  end

  assign q = chain[NS];
endmodule
