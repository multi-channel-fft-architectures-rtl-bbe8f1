// tb_dsd: checks the delay-switch-delay circuit at DELAY = 8 (the 8-DSD) and
// DELAY = 1 (the 1-DSD). Two streams of distinct tagged words are fed with the
// select high for the first DELAY cycles of every 2*DELAY-cycle frame; the
// expected outputs are the block exchange
//   out_u = a0..a(D-1), b0..b(D-1);  out_l = a(D)..a(2D-1), b(D)..b(2D-1)
// DELAY cycles after a0 entered. Several consecutive frames are checked.
module tb_dsd;
  import fft_pkg::*;

  logic clk, rst_n;
  initial begin clk = 1'b0; rst_n = 1'b0; end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  sel8, sel1;
  cplx_t a, b, u8, l8, u1, l1;

  dsd #(.DELAY(8)) dut8 (.clk(clk), .rst_n(rst_n), .sel(sel8), .in_u(a), .in_l(b), .out_u(u8), .out_l(l8));
  dsd #(.DELAY(1)) dut1 (.clk(clk), .rst_n(rst_n), .sel(sel1), .in_u(a), .in_l(b), .out_u(u1), .out_l(l1));

  // tag: channel (0 = a, 1 = b), frame, index
  function automatic cplx_t tag(input int ch, input int fr, input int idx);
    cplx_t t;
    t.re = DW'(ch * 100000 + fr * 100 + idx);
    t.im = DW'(-(ch * 100000 + fr * 100 + idx));
    return t;
  endfunction

  function automatic cplx_t expect_u(input int d, input int t);
    // t = cycles since stream start; frame of length 2d
    int tt = t - d, fr = tt / (2 * d), j = tt % (2 * d);
    return (j < d) ? tag(0, fr, j) : tag(1, fr, j - d);
  endfunction
  function automatic cplx_t expect_l(input int d, input int t);
    int tt = t - d, fr = tt / (2 * d), j = tt % (2 * d);
    return (j < d) ? tag(0, fr, j + d) : tag(1, fr, j);
  endfunction

  int t = 0;
  initial begin
    a = '0; b = '0; sel8 = 1'b1; sel1 = 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (t = 0; t < 80; t++) begin
      @(negedge clk);
      // check outputs produced by earlier inputs (combinational outputs of this cycle's inputs come below)
      // drive: the 8-DSD sees 16-cycle frames, the 1-DSD 2-cycle frames
      sel8 = ((t % 16) < 8);
      sel1 = ((t % 2) < 1);
      a = tag(0, t / 16, t % 16);
      b = tag(1, t / 16, t % 16);
      #1;
      if (t >= 8) begin
        checks += 2;
        if (u8 != expect_u(8, t) || l8 != expect_l(8, t)) begin
          failures++;
          $display("8-DSD t=%0d got %0d/%0d exp %0d/%0d", t, u8.re, l8.re, expect_u(8, t).re, expect_l(8, t).re);
        end
      end
    end
    // 1-DSD with its own 2-cycle frames
    rst_n = 1'b0; #1 rst_n = 1'b1;
    for (t = 0; t < 40; t++) begin
      @(negedge clk);
      sel1 = ((t % 2) < 1);
      a = tag(0, t / 2, t % 2);
      b = tag(1, t / 2, t % 2);
      #1;
      if (t >= 1) begin
        checks += 2;
        if (u1 != expect_u(1, t) || l1 != expect_l(1, t)) begin
          failures++;
          $display("1-DSD t=%0d got %0d/%0d exp %0d/%0d", t, u1.re, l1.re, expect_u(1, t).re, expect_l(1, t).re);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
