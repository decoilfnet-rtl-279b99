// pad_mux: zero-padding multiplexer in front of a line buffer.
//
// Turns an IH x IW stream of depth-concatenated pixels (raster order) into the
// (IH+2P) x (IW+2P) zero-padded stream a stride-1 convolution expects. A counter walks the padded
// frame; at border positions the multiplexer selects constant zero and emits it without taking
// anything from the input, at interior positions it passes the input through. This corresponds
// to the MUX with a constant-0 input and a select line in Fig. 3 of the paper, which writes zeros
// around the convolution outputs in the buffer feeding the next fused layer; placing it at the
// input of each layer's line buffer, and driving the select line from a position counter, is
// this design's choice. Handshake: valid/ready on both sides, data moves when both are high.
module pad_mux
  import decoil_pkg::*;
#(
  parameter int unsigned IH  = 224,
  parameter int unsigned IW  = 224,
  parameter int unsigned D   = 3,
  parameter int unsigned PAD = 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [D*DW-1:0] in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [D*DW-1:0] out_data,
  output logic            out_is_pad
);
  localparam int unsigned PH = IH + 2 * PAD;
  localparam int unsigned PW = IW + 2 * PAD;

  logic [$clog2(PH+1)-1:0] row;
  logic [$clog2(PW+1)-1:0] col;
  logic interior;

  assign interior   = (row >= PAD) && (row < PAD + IH) && (col >= PAD) && (col < PAD + IW);
  assign out_is_pad = !interior;
  assign out_valid  = interior ? in_valid : 1'b1;
  assign out_data   = interior ? in_data  : '0;
  assign in_ready   = interior && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0;
      col <= '0;
    end else if (out_valid && out_ready) begin
      if (col == PW - 1) begin
        col <= '0;
        row <= (row == PH - 1) ? '0 : row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
    end
  end
endmodule
