// tb_mdc_commutator: checks the R2MDC delay commutator at DELAY = 4 with the
// swap control high for the second 4 cycles of every 8. The test feeds the
// upper and lower butterfly-output streams u(t), l(t) with distinct tags and
// checks the pairing the next butterfly needs: at every cycle t where both
// outputs carry data,
//   swap phase (t mod 8 in 4..7): out_u = u(t-4), out_l = u(t)
//   straight phase (t mod 8 in 0..3): out_u = l(t-8), out_l = l(t-4)
// i.e. the next butterfly pairs samples 4 apart of the same path.
module tb_mdc_commutator;
  import fft_pkg::*;

  localparam int D = 4;
  logic clk, rst_n;
  initial begin clk = 1'b0; rst_n = 1'b0; end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  swp;
  cplx_t u, l, ou, ol;
  mdc_commutator #(.DELAY(D)) dut (.clk(clk), .rst_n(rst_n), .swap(swp),
    .in_u(u), .in_l(l), .out_u(ou), .out_l(ol));

  function automatic cplx_t tag(input int path, input int t);
    cplx_t v;
    v.re = DW'(path * 10000 + t);
    v.im = DW'(t);
    return v;
  endfunction

  int n_swap = 0, n_straight = 0;
  initial begin
    u = '0; l = '0; swp = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      swp = ((t % (2 * D)) >= D);
      u = tag(1, t); l = tag(2, t);
      #1;
      if (t >= 2 * D) begin
        cplx_t eu, el;
        if (swp) begin eu = tag(1, t - D); el = tag(1, t); n_swap++; end
        else     begin eu = tag(2, t - 2 * D); el = tag(2, t - D); n_straight++; end
        checks += 2;
        if (ou != eu) begin failures++; $display("t=%0d out_u %0d exp %0d", t, ou.re, eu.re); end
        if (ol != el) begin failures++; $display("t=%0d out_l %0d exp %0d", t, ol.re, el.re); end
      end
    end
    checks++;
    if (n_swap == 0 || n_straight == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("WATCHDOG timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
