// conv2d_pipe: pipelined 2-D convolution of one w x w window slice with one w x w filter slice.
//
// The w*w products are formed in parallel by fx_mult_pipe (DSPs) and summed by a pipelined
// adder tree (LUT adders). One window/filter pair is accepted every cycle and its dot product
// appears LAT * (1 + ceil(log2 w*w)) cycles later: 45 cycles for w = 3 and LAT = 9, the figure
// the paper gives for its 2-D convolution module. Window and filter elements are in raster order
// (index r*KW + c). There is no valid signal: the enclosing 3-D unit tracks validity.
module conv2d_pipe
  import decoil_pkg::*;
#(
  parameter int unsigned KW  = 3,
  parameter int unsigned LAT = OP_LAT
) (
  input  logic  clk,
  input  word_t win  [KW*KW],
  input  word_t filt [KW*KW],
  output word_t dot
);
  localparam int unsigned KK = KW * KW;

  word_t prod [KK];

  for (genvar i = 0; i < KK; i++) begin : g_mul
    fx_mult_pipe #(.LAT(LAT)) u_mul (.clk(clk), .a(win[i]), .b(filt[i]), .p(prod[i]));
  end

  adder_tree #(.N(KK), .LAT(LAT)) u_tree (.clk(clk), .in(prod), .sum(dot));
endmodule
