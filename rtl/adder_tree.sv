// adder_tree: pipelined binary adder tree summing N fixed-point words.
//
// The tree has ceil(log2 N) levels; each level adds neighbouring pairs with fx_add_pipe, and an
// unpaired last value is carried through a delay line of the same latency, so the sum appears
// LAT * ceil(log2 N) cycles after the inputs (0 cycles for N = 1). A new input vector is accepted
// every cycle. This is the adder structure behind the paper's latency formula
// 9 * (1 + ceil(log2 w^2) + ceil(log2 d)): one tree over the w*w products of a 2-D window and
// one over the d depth slices.
module adder_tree
  import decoil_pkg::*;
#(
  parameter int unsigned N   = 9,
  parameter int unsigned LAT = OP_LAT
) (
  input  logic  clk,
  input  word_t in [N],
  output word_t sum
);
  localparam int unsigned LEVELS = tree_levels(N);

  // lvl_val[l][i]: value i at the input of level l (level LEVELS holds the result).
  word_t lvl_val [LEVELS+1][N];

  for (genvar i = 0; i < N; i++) begin : g_in
    assign lvl_val[0][i] = in[i];
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    localparam int unsigned WI = tree_width(N, l);
    localparam int unsigned WO = tree_width(N, l + 1);
    for (genvar j = 0; j < WI / 2; j++) begin : g_add
      fx_add_pipe #(.LAT(LAT)) u_add (
        .clk(clk), .a(lvl_val[l][2*j]), .b(lvl_val[l][2*j+1]), .s(lvl_val[l+1][j])
      );
    end
    if (WI % 2 == 1) begin : g_odd
      delay_line #(.W(DW), .DEPTH(LAT)) u_dly (
        .clk(clk), .d(lvl_val[l][WI-1]), .q(lvl_val[l+1][WO-1])
      );
    end
    for (genvar j = WO; j < N; j++) begin : g_unused
      assign lvl_val[l+1][j] = '0;
    end
  end

  assign sum = lvl_val[LEVELS][0];
endmodule
