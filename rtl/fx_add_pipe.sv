// fx_add_pipe: pipelined 32-bit adder, the LUT-mapped adder of the convolution adder trees.
//
// s = a + b (wrapping) appears LAT clock cycles after a and b are presented; one new pair per
// cycle. The paper builds its adders from LUTs and gives them the same 9-cycle initial latency as
// the multipliers; the sum is formed in the first stage and delayed through the rest.
module fx_add_pipe
  import decoil_pkg::*;
#(
  parameter int unsigned LAT = OP_LAT
) (
  input  logic  clk,
  input  word_t a,
  input  word_t b,
  output word_t s
);
  word_t stage [LAT];

  always_ff @(posedge clk) begin
    stage[0] <= a + b;
    for (int unsigned i = 1; i < LAT; i++) stage[i] <= stage[i-1];
  end

  assign s = stage[LAT-1];
endmodule
