// tb_mcfft_arch3_n64: end-to-end test of the same two-channel pipeline built
// for N = 64 (the 64-point size of the multi-channel example): pre- and
// post-processing 32-DSDs, commutators 16D..1D, and a 32-point bit reversal
// of two swap stages (delays 15 and 6). Inputs are limited to 14 bits so the
// fixed internal width (21 bits) has room for the six stages of growth.
// Otherwise as the 16-point test:
//
// Drives back-to-back frames on both channels (impulse, DC, full-scale
// extremes, random), computes for every frame and channel a reference with an
// independent fixed-point radix-2 DIF model (same word widths, 14-fraction-bit
// rounded twiddles, truncating shifts), and compares every output bin bit for
// bit. It also checks the result against a floating-point DFT within a small
// tolerance, checks that out_sop comes exactly LAT = 26 cycles after in_sop,
// and counts how often each switching mechanism of the pipeline was used
// (DSD straight/cross, each commutator straight/swap, reorder
// bypass/recirculation); a mechanism never used is a failure.
module tb_mcfft_arch3_n64;
  import fft_pkg::*;

  localparam int NT     = 64;
  localparam int LAT    = 32 + 31 + 32 + 21;
  localparam int FRAMES = 6;

  logic  clk = 1'b0, rst_n = 1'b0, in_sop = 1'b0;
  cin_t  x_in, y_in;
  logic  out_sop, out_valid;
  cplx_t x_out, y_out;

  mcfft_arch3_top #(.N(NT)) dut (
    .clk(clk), .rst_n(rst_n), .in_sop(in_sop), .x_in(x_in), .y_in(y_in),
    .out_sop(out_sop), .out_valid(out_valid), .x_out(x_out), .y_out(y_out));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // stimulus [frame][channel][sample]
  longint sre [FRAMES][2][NT], sim [FRAMES][2][NT];
  longint rre [FRAMES][2][NT], rim [FRAMES][2][NT];

  // ---------------- independent reference model ----------------
  function automatic longint rnd(input real v);
    return (v >= 0.0) ? longint'($floor(v + 0.5)) : -longint'($floor(-v + 0.5));
  endfunction

  function automatic int bitrev(input int v, input int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  task automatic ref_fft(input int f, input int c);
    longint vr [NT], vi [NT];
    int lg = $clog2(NT);
    for (int n = 0; n < NT; n++) begin vr[n] = sre[f][c][n]; vi[n] = sim[f][c][n]; end
    for (int s = 0; s < lg; s++) begin
      int span = NT >> (s + 1);
      for (int g = 0; g < NT; g += 2 * span)
        for (int k = 0; k < span; k++) begin
          longint ar = vr[g+k], ai = vi[g+k], br = vr[g+k+span], bi = vi[g+k+span];
          longint dr = ar - br, di = ai - bi;
          real ang = 2.0 * 3.141592653589793 * real'(k << s) / real'(NT);
          longint wr = rnd(16384.0 * $cos(ang)), wi = rnd(-16384.0 * $sin(ang));
          vr[g+k] = ar + br; vi[g+k] = ai + bi;
          if (s == lg - 1) begin
            vr[g+k+span] = dr; vi[g+k+span] = di;
          end else begin
            vr[g+k+span] = (dr * wr - di * wi) >>> 14;
            vi[g+k+span] = (dr * wi + di * wr) >>> 14;
          end
        end
    end
    for (int n = 0; n < NT; n++) begin
      rre[f][c][bitrev(n, lg)] = vr[n];
      rim[f][c][bitrev(n, lg)] = vi[n];
    end
    // sanity of the model itself against a floating-point DFT
    for (int k = 0; k < NT; k++) begin
      real fr = 0.0, fi = 0.0;
      for (int n = 0; n < NT; n++) begin
        real a = -2.0 * 3.141592653589793 * real'(n * k) / real'(NT);
        fr += real'(sre[f][c][n]) * $cos(a) - real'(sim[f][c][n]) * $sin(a);
        fi += real'(sre[f][c][n]) * $sin(a) + real'(sim[f][c][n]) * $cos(a);
      end
      checks++;
      if ((fr - real'(rre[f][c][k]) > 80.0) || (real'(rre[f][c][k]) - fr > 80.0) ||
          (fi - real'(rim[f][c][k]) > 80.0) || (real'(rim[f][c][k]) - fi > 80.0)) begin
        failures++;
        $display("MODEL MISMATCH f%0d c%0d k%0d: %f %f vs %0d %0d", f, c, k, fr, fi,
                 rre[f][c][k], rim[f][c][k]);
      end
    end
  endtask

  // ---------------- stimulus ----------------
  function automatic longint rs16();
    return longint'($signed(14'($urandom)));
  endfunction

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int c = 0; c < 2; c++)
        for (int n = 0; n < NT; n++) begin
          case (f)
            0: begin sre[f][c][n] = (n == ((c != 0) ? 3 : 0)) ? 1000 : 0; sim[f][c][n] = 0; end
            1: begin sre[f][c][n] = (c != 0) ? -2000 : 1500; sim[f][c][n] = (c != 0) ? 700 : 0; end
            2: begin sre[f][c][n] = -8192; sim[f][c][n] = -8192; end
            3: begin sre[f][c][n] = n[0] ? -8192 : 8191; sim[f][c][n] = n[1] ? 8191 : -8192; end
            default: begin sre[f][c][n] = rs16(); sim[f][c][n] = rs16(); end
          endcase
        end
    for (int f = 0; f < FRAMES; f++) for (int c = 0; c < 2; c++) ref_fft(f, c);
  end

  // mechanism counters
  int n_pre_straight = 0, n_pre_cross = 0, n_post_straight = 0, n_post_cross = 0;
  int n_sw_straight [5] = '{0, 0, 0, 0, 0};
  int n_sw_swap     [5] = '{0, 0, 0, 0, 0};
  int n_br_bypass = 0, n_br_delay = 0, n_frames_out = 0;

  int cyc = 0, last_sop_in = -1;
  int sop_in_times [$];

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.u_pre.g_stage[0].sel) n_pre_straight++; else n_pre_cross++;
    if (dut.post_sel) n_post_straight++; else n_post_cross++;
    if (dut.u_core.g_stage[1].g_comm.swap) n_sw_swap[0]++; else n_sw_straight[0]++;
    if (dut.u_core.g_stage[2].g_comm.swap) n_sw_swap[1]++; else n_sw_straight[1]++;
    if (dut.u_core.g_stage[3].g_comm.swap) n_sw_swap[2]++; else n_sw_straight[2]++;
    if (dut.u_core.g_stage[4].g_comm.swap) n_sw_swap[3]++; else n_sw_straight[3]++;
    if (dut.u_core.g_stage[5].g_comm.swap) n_sw_swap[4]++; else n_sw_straight[4]++;
    if (dut.u_br_x.g_stage[0].s && dut.u_br_x.g_stage[1].s) n_br_delay++; else n_br_bypass++;
  end

  // output checker
  int of = 0, ok = -1;
  always @(negedge clk) if (rst_n) begin
    if (out_sop) begin
      int t_in;
      checks++;
      t_in = (sop_in_times.size() > 0) ? sop_in_times.pop_front() : -1000;
      if (cyc - t_in != LAT) begin
        failures++;
        $display("LATENCY FAIL: out_sop at %0d, in_sop at %0d", cyc, t_in);
      end
      ok = 0;
    end
    if (ok >= 0 && of < FRAMES) begin
      checks += 2;
      if (longint'(x_out.re) != rre[of][0][ok] || longint'(x_out.im) != rim[of][0][ok]) begin
        failures++;
        $display("X MISMATCH frame %0d bin %0d: got %0d %0d exp %0d %0d", of, ok,
                 x_out.re, x_out.im, rre[of][0][ok], rim[of][0][ok]);
      end
      if (longint'(y_out.re) != rre[of][1][ok] || longint'(y_out.im) != rim[of][1][ok]) begin
        failures++;
        $display("Y MISMATCH frame %0d bin %0d: got %0d %0d exp %0d %0d", of, ok,
                 y_out.re, y_out.im, rre[of][1][ok], rim[of][1][ok]);
      end
      if (!out_valid) begin failures++; $display("out_valid low during output"); end
      ok++;
      if (ok == NT) begin ok = -1; of++; n_frames_out++; end
    end
  end

  // driver
  initial begin
    x_in = '0; y_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < NT; n++) begin
        @(negedge clk);
        in_sop = (n == 0);
        if (n == 0) sop_in_times.push_back(cyc);
        x_in.re = 16'(sre[f][0][n]); x_in.im = 16'(sim[f][0][n]);
        y_in.re = 16'(sre[f][1][n]); y_in.im = 16'(sim[f][1][n]);
      end
    @(negedge clk); in_sop = 1'b0; x_in = '0; y_in = '0;
    repeat (LAT + NT + 4) @(posedge clk);
    checks++;
    if (n_frames_out != FRAMES) begin
      failures++; $display("only %0d of %0d frames came out", n_frames_out, FRAMES);
    end
    $display("mechanisms: pre straight %0d cross %0d | post straight %0d cross %0d",
             n_pre_straight, n_pre_cross, n_post_straight, n_post_cross);
    for (int i = 0; i < 5; i++)
      $display("mechanisms: commutator %0d straight %0d swap %0d", i + 1,
               n_sw_straight[i], n_sw_swap[i]);
    $display("mechanisms: bit reversal delay %0d bypass/recirculate %0d, frames %0d",
             n_br_delay, n_br_bypass, n_frames_out);
    checks += 12;
    if (n_pre_straight == 0 || n_pre_cross == 0) failures++;
    if (n_post_straight == 0 || n_post_cross == 0) failures++;
    for (int i = 0; i < 5; i++) begin
      if (n_sw_straight[i] == 0) failures++;
      if (n_sw_swap[i] == 0) failures++;
    end
    if (n_br_bypass == 0 || n_br_delay == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (FRAMES * NT + 200) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
