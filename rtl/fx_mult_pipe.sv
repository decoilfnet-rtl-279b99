// fx_mult_pipe: pipelined fixed-point multiplier, the DSP-mapped multiplier of the convolution
// datapath.
//
// p = (a * b) >>> FRAC, truncated to 32 bits, appears LAT clock cycles after a and b are
// presented; a new pair can be presented every cycle. The product is formed in the first
// register stage and then carried through LAT-1 further registers, modelling the 9-cycle initial
// latency the paper gives for its multipliers (how those stages are split inside the DSP is not
// given, so retiming is left to the synthesis tool). No valid signal is carried here: the caller
// keeps a matching valid pipeline. Datapath registers have no reset.
module fx_mult_pipe
  import decoil_pkg::*;
#(
  parameter int unsigned LAT = OP_LAT
) (
  input  logic  clk,
  input  word_t a,
  input  word_t b,
  output word_t p
);
  word_t stage [LAT];

  always_ff @(posedge clk) begin
    stage[0] <= fx_mul(a, b);
    for (int unsigned i = 1; i < LAT; i++) stage[i] <= stage[i-1];
  end

  assign p = stage[LAT-1];
endmodule
