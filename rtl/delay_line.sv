// delay_line: a chain of DEPTH registers ("nD" box in the block diagrams).
// Output is the input DEPTH clock cycles earlier. DEPTH = 0 is a wire.
// The registers are reset to zero so that nothing undefined is ever read.
module delay_line #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] sr [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < int'(DEPTH); i++) sr[i] <= '0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < int'(DEPTH); i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[DEPTH-1];
  end
endmodule
