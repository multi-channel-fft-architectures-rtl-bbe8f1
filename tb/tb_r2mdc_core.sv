// tb_r2mdc_core: checks the interleaved R2MDC FFT core on its own. The pair
// stream the pre-processing would make is generated directly: on cycle n of a
// frame, (x[n], x[n+8]) for n = 0..7, then (y[n], y[n+8]); a_idx counts 0..15.
// Seven cycles after pair j entered, out_u / out_l must carry X[br(j)] and
// X[br(j)+8] (br: 3-bit index reversal), first for channel X then Y. The
// expected bins come from an independent fixed-point radix-2 DIF model with
// the same widths, rounded 14-fraction-bit twiddles and truncating shifts.
module tb_r2mdc_core;
  import fft_pkg::*;

  localparam int NT = 16, FR = 5, LATC = 7;
  logic clk, rst_n;
  initial begin clk = 1'b0; rst_n = 1'b0; end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] a_idx;
  cplx_t iu, il, ou, ol;
  r2mdc_core dut (.clk(clk), .rst_n(rst_n), .a_idx(a_idx), .in_u(iu), .in_l(il), .out_u(ou), .out_l(ol));

  longint sre [FR][2][NT], sim [FR][2][NT], rre [FR][2][NT], rim [FR][2][NT];

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
    for (int n = 0; n < NT; n++) begin vr[n] = sre[f][c][n]; vi[n] = sim[f][c][n]; end
    for (int s = 0; s < 4; s++) begin
      int span = NT >> (s + 1);
      for (int g = 0; g < NT; g += 2 * span)
        for (int k = 0; k < span; k++) begin
          longint ar = vr[g+k], ai = vi[g+k], br = vr[g+k+span], bi = vi[g+k+span];
          longint dr = ar - br, di = ai - bi;
          real ang = 2.0 * 3.141592653589793 * real'(k << s) / real'(NT);
          longint wr = rnd(16384.0 * $cos(ang)), wi = rnd(-16384.0 * $sin(ang));
          vr[g+k] = ar + br; vi[g+k] = ai + bi;
          vr[g+k+span] = (dr * wr - di * wi) >>> 14;
          vi[g+k+span] = (dr * wi + di * wr) >>> 14;
        end
    end
    for (int n = 0; n < NT; n++) begin
      rre[f][c][bitrev(n, 4)] = vr[n];
      rim[f][c][bitrev(n, 4)] = vi[n];
    end
  endtask

  initial begin
    for (int f = 0; f < FR; f++) for (int c = 0; c < 2; c++) begin
      for (int n = 0; n < NT; n++) begin
        sre[f][c][n] = longint'($signed(16'($urandom)));
        sim[f][c][n] = longint'($signed(16'($urandom)));
      end
      ref_fft(f, c);
    end
    iu = '0; il = '0; a_idx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < FR * NT + LATC; t++) begin
      @(negedge clk);
      a_idx = 4'(t);
      if (t < FR * NT) begin
        automatic int f = t / NT, c = (t % NT) / 8, n = t % 8;
        iu.re = DW'(sre[f][c][n]);     iu.im = DW'(sim[f][c][n]);
        il.re = DW'(sre[f][c][n + 8]); il.im = DW'(sim[f][c][n + 8]);
      end else begin
        iu = '0; il = '0;
      end
      #1;
      if (t >= LATC) begin
        automatic int o = t - LATC;
        automatic int f = o / NT, c = (o % NT) / 8, j = o % 8;
        automatic int k = bitrev(j, 3);
        checks += 2;
        if (longint'(ou.re) != rre[f][c][k] || longint'(ou.im) != rim[f][c][k]) begin
          failures++; $display("f%0d c%0d X[%0d] got %0d exp %0d", f, c, k, ou.re, rre[f][c][k]);
        end
        if (longint'(ol.re) != rre[f][c][k + 8] || longint'(ol.im) != rim[f][c][k + 8]) begin
          failures++; $display("f%0d c%0d X[%0d] got %0d exp %0d", f, c, k + 8, ol.re, rre[f][c][k + 8]);
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
