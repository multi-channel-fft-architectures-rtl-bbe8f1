// mc_interleaver: pre-processing that interleaves M channels (M a power of
// 2) into M parallel lanes, built only from DSD circuits.
//
// Stage s (s = 0 .. log2(M)-1) holds M/2 DSDs of delay D0/2^s and merges
// lanes h = M/2^(s+1) apart: lanes a and a+h go into one DSD, whose upper
// output goes back to lane a and lower output to lane a+h. For M = 8 this is
// "merge channels that are 4 apart" (delay i), "2 apart" (delay j), "1 apart"
// (delay k). With D0 = N/2 (interleaved R2MDC, i/j/k = 32/16/8 for N = 64)
// every output cycle carries M samples of one channel whose indices are
// n + r*N/M, one per lane, i.e. the operand set of the first radix-2 stages;
// the channels follow each other every N/M cycles. Registers: M*(N/2 + N/4
// + ...) = (M-1)*N words; latency (M-1)*N/M cycles, as the comparison of
// pre-processing circuits gives for this structure. With D0 = M/2 instead
// (i/j/k = 4/2/1 for M = 8) every cycle carries M consecutive samples of one
// channel, the channel changing every cycle: the input form of an M-parallel
// FFT.
//
// pos is the frame position (0 .. N-1) of the samples now at the inputs (all
// channels are frame aligned). Stage s uses the position delayed by the
// earlier stages: its DSD select is high for the first D_s cycles of each
// 2*D_s window. The lane wiring follows the M-channel interleaver figure;
// the select timing is derived here. Channel c enters on in_ch[c].
module mc_interleaver
  import fft_pkg::*;
#(
  parameter int unsigned M  = 8,
  parameter int unsigned N  = 64,
  parameter int unsigned D0 = N / 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [$clog2(N)-1:0]  pos,
  input  cplx_t                 in_ch [M],
  output cplx_t                 out_lane [M]
);
  localparam int L = $clog2(M);
  localparam int S = $clog2(N);

  function automatic int offset(input int s);
    int o = 0;
    for (int r = 0; r < s; r++) o += int'(D0) >> r;
    return o;
  endfunction

  for (genvar s = 0; s < L; s++) begin : g_stage
    localparam int H = int'(M) >> (s + 1);
    localparam int D = int'(D0) >> s;
    logic [S-1:0] p;
    logic         sel;
    cplx_t        cur [M];   // lanes entering this stage
    cplx_t        nxt [M];   // lanes leaving this stage
    if (s == 0) begin : g_first
      assign cur = in_ch;
    end else begin : g_next
      assign cur = g_stage[s-1].nxt;
    end
    always_comb begin
      p   = pos - S'(offset(s));
      sel = (32'(p) % (2 * D)) < D;
    end
    for (genvar a = 0; a < int'(M); a++) begin : g_lane
      if ((a % (2 * H)) < H) begin : g_dsd
        dsd #(.DELAY(D)) u_dsd (
          .clk(clk), .rst_n(rst_n), .sel(sel),
          .in_u(cur[a]), .in_l(cur[a+H]),
          .out_u(nxt[a]), .out_l(nxt[a+H]));
      end
    end
  end

  assign out_lane = g_stage[L-1].nxt;
endmodule
