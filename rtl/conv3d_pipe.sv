// conv3d_pipe: pipelined 3-D convolution of a depth-flattened window with one 3-D filter,
// followed by ReLU.
//
// The depth-concatenated window and filter are split into D independent 2-D slices (Fig. 4 of
// the paper); D conv2d_pipe units work on them in parallel and a second adder tree sums their D
// results into one output value. ReLU is applied to that value combinationally at the output, so
// it adds no cycle (the paper folds ReLU into this module "without any computation overhead").
// One window/filter pair is accepted per cycle (in_valid) and its result leaves
// LATENCY = LAT * (1 + ceil(log2 KW*KW) + ceil(log2 D)) cycles later with out_valid and the tag
// that came with it: 63 cycles for KW = 3, D = 3, LAT = 9, as in the paper. The tag (the filter
// index in this design) lets the consumer put serially produced filter outputs in order.
// Only the valid pipeline is reset.
module conv3d_pipe
  import decoil_pkg::*;
#(
  parameter int unsigned KW   = 3,
  parameter int unsigned D    = 3,
  parameter int unsigned TAGW = 8,
  parameter int unsigned LAT  = OP_LAT,
  parameter bit          RELU = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [TAGW-1:0] in_tag,
  input  word_t           win  [D][KW*KW],
  input  word_t           filt [D][KW*KW],
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output word_t           out_data
);
  localparam int unsigned KK      = KW * KW;
  localparam int unsigned LATENCY = LAT * (1 + tree_levels(KK) + tree_levels(D));

  word_t slice_dot [D];
  word_t sum;

  for (genvar d = 0; d < D; d++) begin : g_slice
    conv2d_pipe #(.KW(KW), .LAT(LAT)) u_c2d (
      .clk(clk), .win(win[d]), .filt(filt[d]), .dot(slice_dot[d])
    );
  end

  adder_tree #(.N(D), .LAT(LAT)) u_depth_tree (.clk(clk), .in(slice_dot), .sum(sum));

  // Valid pipeline (reset) and tag pipeline (no reset) matching the arithmetic latency.
  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], in_valid};
  end

  delay_line #(.W(TAGW), .DEPTH(LATENCY)) u_tag (.clk(clk), .d(in_tag), .q(out_tag));

  assign out_valid = vpipe[LATENCY-1];
  assign out_data  = (RELU && sum[DW-1]) ? '0 : sum;
endmodule
