// tb_bf_r2: checks the radix-2 DIF butterfly. For random inputs and every
// twiddle exponent k = 0..7 the sum output must be a + b, and the difference
// output ((a - b) * W16^k) >>> 14 computed here in 64-bit arithmetic with
// twiddles rounded from cos/sin. A second instance without multiplier must
// give a - b unchanged. Also checks the twiddles against a floating-point
// product within one LSB-scale tolerance.
module tb_bf_r2;
  import fft_pkg::*;

  int checks = 0, failures = 0;
  cplx_t a, b, s1, d1, s0, d0;
  logic [2:0] k;

  bf_r2 #(.N(16), .HAS_TW(1'b1)) dut  (.a(a), .b(b), .tw_exp(k), .sum(s1), .dif(d1));
  bf_r2 #(.N(16), .HAS_TW(1'b0)) dut0 (.a(a), .b(b), .tw_exp(k), .sum(s0), .dif(d0));

  function automatic longint rnd(input real v);
    return (v >= 0.0) ? longint'($floor(v + 0.5)) : -longint'($floor(-v + 0.5));
  endfunction

  function automatic longint rsx(input int bits);
    longint v = longint'($urandom) & ((64'd1 << bits) - 1);
    return v - (64'd1 << (bits - 1));
  endfunction

  initial begin
    for (int it = 0; it < 400; it++) begin
      automatic longint ar = rsx(19), ai = rsx(19), br = rsx(19), bi = rsx(19);
      longint dr, di, wr, wi, er, ei;
      real ang;
      if (it < 4) begin ar = 262143; ai = -262144; br = -262144; bi = 262143; end
      k = 3'(it);
      a.re = DW'(ar); a.im = DW'(ai); b.re = DW'(br); b.im = DW'(bi);
      #1;
      dr = ar - br; di = ai - bi;
      ang = 2.0 * 3.141592653589793 * real'(int'(k)) / 16.0;
      wr = rnd(16384.0 * $cos(ang)); wi = rnd(-16384.0 * $sin(ang));
      er = (dr * wr - di * wi) >>> 14;
      ei = (dr * wi + di * wr) >>> 14;
      checks += 4;
      if (longint'(s1.re) != ar + br || longint'(s1.im) != ai + bi) begin
        failures++; $display("sum mismatch it=%0d", it);
      end
      if (longint'(d1.re) != er || longint'(d1.im) != ei) begin
        failures++; $display("dif mismatch it=%0d k=%0d got %0d %0d exp %0d %0d", it, k, d1.re, d1.im, er, ei);
      end
      if (longint'(d0.re) != dr || longint'(d0.im) != di || s0 != s1) begin
        failures++; $display("no-twiddle mismatch it=%0d", it);
      end
      begin
        automatic real fr = real'(dr) * $cos(ang) + real'(di) * $sin(ang);
        if (real'(d1.re) - fr > 100.0 || fr - real'(d1.re) > 100.0) begin
          failures++; $display("float mismatch it=%0d", it);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
