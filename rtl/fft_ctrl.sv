// fft_ctrl: the counter that sequences the whole two-channel FFT.
//
// A log2(N)-bit counter gives the position, within the current frame, of the
// sample pair (x, y) now at the chip inputs. in_sop marks sample 0 of a frame
// and forces the position to 0 in that cycle; without it the counter keeps
// counting, so frames follow each other with no gap. Every control is a fixed
// offset of this one count (counter-based control, no tables):
//   in_pos   = pos                       pre-processing interleaver
//   a_idx    = pos - N/2                 pair index at the first butterfly
//   post_sel = (a_idx - (N/2-1)) < N/2   post-processing DSD
//   br_pos   = (a_idx - (N/2-1)) mod N/2 position entering the bit reversal
// out_sop is in_sop delayed by the total latency LAT (N/2 pre-processing,
// N/2-1 FFT, N/2 post-processing, bit-reversal delay): it marks bin 0 of both
// outputs. out_valid rises with the first out_sop and stays high.
// The offsets are derived in this design from the dataflow timing; the
// architecture states only that the control is counter based.
module fft_ctrl
  import fft_pkg::*;
#(
  parameter int unsigned N      = N_FFT,
  parameter int unsigned BR_LAT = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_sop,
  output logic [$clog2(N)-1:0]  in_pos,
  output logic [$clog2(N)-1:0]  a_idx,
  output logic                  post_sel,
  output logic [$clog2(N)-2:0]  br_pos,
  output logic                  out_sop,
  output logic                  out_valid
);
  localparam int S   = $clog2(N);
  localparam int LAT = N/2 + (N/2 - 1) + N/2 + BR_LAT;

  logic [S-1:0] cnt_q, pos, d_idx;
  logic [LAT-1:0] sop_sr;
  logic           valid_q;

  assign pos = in_sop ? '0 : cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_q <= '0;
    else        cnt_q <= pos + 1'b1;
  end

  always_comb begin
    in_pos   = pos;
    a_idx    = pos - S'(N/2);
    d_idx    = a_idx - S'(N/2 - 1);
    post_sel = (d_idx < S'(N/2));
    br_pos   = d_idx[S-2:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sop_sr  <= '0;
      valid_q <= 1'b0;
    end else begin
      sop_sr <= {sop_sr[LAT-2:0], in_sop};
      if (sop_sr[LAT-1]) valid_q <= 1'b1;
    end
  end
  assign out_sop   = sop_sr[LAT-1];
  assign out_valid = valid_q | out_sop;

  // Once running, a new frame may only start where the counter wraps.
  a_sop_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (in_sop && valid_q) |-> (cnt_q == '0))
    else $error("fft_ctrl: in_sop off the frame boundary");
endmodule
