// delay_line: W-bit shift register of DEPTH stages (DEPTH = 0 is a wire). Used to keep the
// unpaired operand of an odd-sized adder-tree level, and valid/tag bits, aligned with the
// pipelined arithmetic.
module delay_line #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 9
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] stage [DEPTH];
    always_ff @(posedge clk) begin
      stage[0] <= d;
      for (int unsigned i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
    assign q = stage[DEPTH-1];
  end
endmodule
