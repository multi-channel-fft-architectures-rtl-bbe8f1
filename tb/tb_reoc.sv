// tb_reoc: checks the reorder circuit with DELAY = 3 used as an 8-point bit
// reversal: the control is low (bypass / recirculate) at block positions 4
// and 6 and high elsewhere. Input blocks 0..7 must come out 3 cycles later in
// the order 0 4 2 6 1 5 3 7 (3-bit index reversed), block after block.
module tb_reoc;
  import fft_pkg::*;

  logic clk, rst_n;
  initial begin clk = 1'b0; rst_n = 1'b0; end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  s;
  cplx_t d, q;
  reoc #(.DELAY(3)) dut (.clk(clk), .rst_n(rst_n), .s(s), .d(d), .q(q));

  localparam int BR [8] = '{0, 4, 2, 6, 1, 5, 3, 7};

  initial begin
    d = '0; s = 1'b1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 64; t++) begin
      @(negedge clk);
      s = !((t % 8) == 4 || (t % 8) == 6);
      d.re = DW'(1000 + t); d.im = DW'(-t);
      #1;
      if (t >= 3 + 8) begin
        automatic int o = t - 3;                         // output slot
        automatic int e = (o / 8) * 8 + BR[o % 8];       // expected input index
        checks++;
        if (q.re != DW'(1000 + e) || q.im != DW'(-e)) begin
          failures++;
          $display("t=%0d got %0d exp %0d", t, q.re, 1000 + e);
        end
      end
    end
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
