// depth_packer: gathers the K serially produced filter outputs of one output pixel into one
// depth-concatenated word (filter f in bits [f*32 +: 32]) for the next layer's line buffer.
//
// The convolution engine computes the K filters of a window one after another; the next layer,
// like the first, wants its input as a depth-concatenated stream, so this block waits for the
// whole output volume of a pixel before streaming it on (Sec. III-E of the paper). Scalars come
// in with in_valid/in_ready together with their filter index in_idx, which must count 0..K-1
// (asserted); the pixel is offered with out_valid/out_ready. The first scalar of the next pixel
// may be accepted in the cycle the full pixel leaves, so one pixel per K cycles is sustained.
module depth_packer
  import decoil_pkg::*;
#(
  parameter int unsigned K = 64,
  localparam int unsigned IW = (K > 1) ? $clog2(K) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [IW-1:0]   in_idx,
  input  word_t           in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [K*DW-1:0] out_data
);
  logic [$clog2(K+1)-1:0] cnt;
  logic [IW-1:0]          lane;
  logic                   accept, emit;

  assign out_valid = (cnt == K);
  assign emit      = out_valid && out_ready;
  assign in_ready  = !out_valid || out_ready;
  assign accept    = in_valid && in_ready;
  assign lane      = out_valid ? '0 : IW'(cnt);

  always_ff @(posedge clk) begin
    if (accept) out_data[lane*DW +: DW] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (accept) cnt <= emit ? 1 : cnt + 1'b1;
    else if (emit)   cnt <= '0;
  end

  a_lane_order: assert property (@(posedge clk) disable iff (!rst_n) accept |-> in_idx == lane);
endmodule
