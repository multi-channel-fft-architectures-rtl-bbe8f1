// tb_fft_ctrl: checks the control counter for N = 16. After an in_sop the
// frame position counts 0..15 and wraps; in_pos must equal it, a_idx = position - 8, post_sel high when (position - 15) mod 16 < 8,
// br_pos = (position - 15) mod 8; out_sop must follow each in_sop by exactly
// 26 cycles and out_valid must rise with the first out_sop. A second in_sop
// in the middle of a frame (before any output) must restart the count.
module tb_fft_ctrl;
  import fft_pkg::*;

  logic clk, rst_n;
  initial begin clk = 1'b0; rst_n = 1'b0; end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_sop, post_sel, out_sop, out_valid;
  logic [3:0] in_pos;
  logic [3:0] a_idx;
  logic [2:0] br_pos;
  fft_ctrl #(.N(16), .BR_LAT(3)) dut (.clk(clk), .rst_n(rst_n), .in_sop(in_sop),
    .in_pos(in_pos), .a_idx(a_idx), .post_sel(post_sel), .br_pos(br_pos),
    .out_sop(out_sop), .out_valid(out_valid));

  int pos = -1, t = 0;
  int sop_t [$];
  int n_restart = 0, n_out = 0;

  initial begin
    in_sop = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (t = 0; t < 140; t++) begin
      @(negedge clk);
      in_sop = (t == 3) || (t == 10) || (t == 26) || (t == 42) || (t == 58);
      if (t == 10) n_restart++;
      if (in_sop) begin pos = 0; sop_t.push_back(t); end
      else if (pos >= 0) pos = (pos + 1) % 16;
      #1;
      if (pos >= 0) begin
        automatic int dd = (pos - 15 + 32) % 16;
        checks += 4;
        if (in_pos != 4'(pos)) begin failures++; $display("t=%0d in_pos", t); end
        if (a_idx != 4'((pos + 8) % 16)) begin failures++; $display("t=%0d a_idx", t); end
        if (post_sel != (dd < 8)) begin failures++; $display("t=%0d post_sel", t); end
        if (br_pos != 3'(dd % 8)) begin failures++; $display("t=%0d br_pos", t); end
      end
      checks++;
      if (out_sop != (sop_t.size() > 0 && t - sop_t[0] == 26)) begin
        failures++; $display("t=%0d out_sop %0d", t, out_sop);
      end
      if (out_sop) begin void'(sop_t.pop_front()); n_out++; end
      checks++;
      if (out_valid != (n_out > 0)) begin failures++; $display("t=%0d out_valid", t); end
    end
    checks++;
    if (n_out != 5 || n_restart == 0) failures++;
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
