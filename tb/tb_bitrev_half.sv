// tb_bitrev_half: checks the serial bit-reversal circuit for NB = 8 (one
// swap stage, delay 3, the size used by the 16-point FFT) and NB = 32 (two
// swap stages, delays 15 and 6, as a 64-point FFT would need). A stream of
// numbered samples with a free-running block position must come out, after
// the total stage delay, with each block in bit-reversed index order.
module tb_bitrev_half;
  import fft_pkg::*;

  logic clk, rst_n;
  initial begin clk = 1'b0; rst_n = 1'b0; end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0] pos8;
  logic [4:0] pos32;
  cplx_t d, q8, q32;

  bitrev_half #(.NB(8))  dut8  (.clk(clk), .rst_n(rst_n), .pos(pos8),  .d(d), .q(q8));
  bitrev_half #(.NB(32)) dut32 (.clk(clk), .rst_n(rst_n), .pos(pos32), .d(d), .q(q32));

  function automatic int bitrev(input int v, input int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) if (v[i]) r |= 1 << (bits - 1 - i);
    return r;
  endfunction

  task automatic check(input int t, input int nb, input int lat, input cplx_t q);
    int o, e;
    o = t - lat;
    if (o < nb) return;
    e = (o / nb) * nb + bitrev(o % nb, $clog2(nb));
    checks++;
    if (q.re != DW'(e)) begin
      failures++;
      $display("NB=%0d t=%0d got %0d exp %0d", nb, t, q.re, e);
    end
  endtask

  initial begin
    d = '0; pos8 = '0; pos32 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      pos8 = 3'(t); pos32 = 5'(t);
      d.re = DW'(t); d.im = '0;
      #1;
      check(t, 8, 3, q8);
      check(t, 32, 21, q32);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
