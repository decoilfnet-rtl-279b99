// depth_group_acc: accumulator for iterative depth decomposition.
//
// When a layer's input depth is too large to convolve all slices at once, the depth is cut into
// G groups that go through the 3-D convolution pipeline one after another, one group per cycle;
// the pipeline then delivers G partial sums per filter, in order. This block adds them up: the
// first partial sum of a filter (in_first) loads the accumulator, the others add to it, and with
// the last one (in_last) the total leaves, after ReLU, on the next cycle with out_valid and the
// filter's tag. One result per G input cycles; latency one cycle. The paper describes the
// technique ("We divide the depth into multiple groups of parallel computation, and process
// these groups serially") but not its circuit: the single-cycle accumulator is this design's
// choice (a 9-cycle pipelined adder could not take back-to-back partial sums of one filter).
module depth_group_acc
  import decoil_pkg::*;
#(
  parameter int unsigned TAGW = 8,
  parameter bit          RELU = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic            in_first,
  input  logic            in_last,
  input  logic [TAGW-1:0] in_tag,
  input  word_t           in_data,
  output logic            out_valid,
  output logic [TAGW-1:0] out_tag,
  output word_t           out_data
);
  word_t acc, total;

  assign total = in_first ? in_data : acc + in_data;

  always_ff @(posedge clk) begin
    if (in_valid) acc <= total;
    if (in_valid && in_last) begin
      out_data <= (RELU && total[DW-1]) ? '0 : total;
      out_tag  <= in_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_last;
  end
endmodule
