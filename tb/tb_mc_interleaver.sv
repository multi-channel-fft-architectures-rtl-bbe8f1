// tb_mc_interleaver: checks the M-channel DSD interleaver for
// (M, N, D0) = (8, 64, 32) (the 64-point, 8-channel example, i/j/k =
// 32/16/8), (8, 16, 8) (16-point, i/j/k = 8/4/2) and (4, 16, 8), all with
// D0 = N/2 for the R2MDC pipeline, and for D0 = M/2 as used in front of a
// parallel FFT: (8, 16, 4) (i/j/k = 4/2/1) and (2, 16, 1) (the 1-DSD).
// Every input sample is tagged with its channel, index and frame. From
// LAT = 2*D0*(M-1)/M cycles after the first frame on, every output cycle must
// carry M samples of one channel and one frame whose indices are
// n0 + r*STRIDE (r = 0..M-1; STRIDE = N/M for D0 = N/2, 1 for D0 = M/2),
// each lane always holding the same r; over every window of N cycles each
// channel must appear for exactly N/M cycles.
module tb_mc_interleaver;
  import fft_pkg::*;

  logic clk, rst_n;
  initial begin clk = 1'b0; rst_n = 1'b0; end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int t = -1;

  function automatic cplx_t tag(input int ch, input int n, input int f);
    cplx_t v;
    v.re = DW'(ch * 1000 + n);
    v.im = DW'(f);
    return v;
  endfunction

  // one instance plus its checker
  `define MCI_INST(NAME, MM, NN, DD, ST)                                         \
    cplx_t NAME``_in [MM], NAME``_out [MM];                                     \
    logic [$clog2(NN)-1:0] NAME``_pos;                                          \
    mc_interleaver #(.M(MM), .N(NN), .D0(DD)) NAME (                            \
      .clk(clk), .rst_n(rst_n), .pos(NAME``_pos), .in_ch(NAME``_in),            \
      .out_lane(NAME``_out));                                                   \
    always_comb begin                                                           \
      NAME``_pos = $clog2(NN)'((t < 0) ? 0 : t);                                \
      for (int c = 0; c < MM; c++)                                              \
        NAME``_in[c] = tag(c, (t < 0) ? 0 : t % NN, (t < 0) ? 0 : t / NN);      \
    end                                                                         \
    int NAME``_perm [MM];                                                       \
    int NAME``_seen [MM];                                                       \
    always @(negedge clk) if (t >= 2 * DD * (MM - 1) / MM) begin               \
      automatic int tau = t - 2 * DD * (MM - 1) / MM;                           \
      automatic int ch0 = int'(NAME``_out[0].re) / 1000;                        \
      automatic int n00 = int'(NAME``_out[0].re) % 1000;                        \
      automatic int fr0 = int'(NAME``_out[0].im);                               \
      automatic int base = n00 - ((n00 / ST) % MM) * ST;                        \
      if (tau % NN == 0) for (int c = 0; c < MM; c++) NAME``_seen[c] = 0;       \
      NAME``_seen[ch0 % MM]++;                                                  \
      for (int r = 0; r < MM; r++) begin                                        \
        automatic int ch = int'(NAME``_out[r].re) / 1000;                       \
        automatic int n  = int'(NAME``_out[r].re) % 1000;                       \
        automatic int grp = (n / ST) % MM;                                      \
        checks++;                                                               \
        if (ch != ch0 || int'(NAME``_out[r].im) != fr0 ||                       \
            n - grp * ST != base ||   (tau >= NN && NAME``_perm[r] != grp)) begin \
          failures++;                                                           \
          $display("%s t=%0d lane %0d: ch %0d n %0d f %0d", `"NAME`", t, r, ch, n, \
                   int'(NAME``_out[r].im));                                     \
        end                                                                     \
        if (tau < NN) NAME``_perm[r] = grp;                                     \
      end                                                                       \
      if (tau % NN == NN - 1) for (int c = 0; c < MM; c++) begin                \
        checks++;                                                               \
        if (NAME``_seen[c] != NN / MM) begin                                    \
          failures++; $display("%s channel %0d seen %0d", `"NAME`", c, NAME``_seen[c]); \
        end                                                                     \
      end                                                                       \
    end

  `MCI_INST(dut_a, 8, 64, 32, 8)
  `MCI_INST(dut_b, 8, 16, 8, 2)
  `MCI_INST(dut_c, 4, 16, 8, 4)
  `MCI_INST(dut_d, 8, 16, 4, 1)
  `MCI_INST(dut_e, 2, 16, 1, 1)

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 64 * 5; k++) begin
      @(posedge clk);
      #1 t = k;
    end
    @(posedge clk);
    $display("lane groups (8,64): %0d %0d %0d %0d %0d %0d %0d %0d", dut_a_perm[0], dut_a_perm[1],
             dut_a_perm[2], dut_a_perm[3], dut_a_perm[4], dut_a_perm[5], dut_a_perm[6], dut_a_perm[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
