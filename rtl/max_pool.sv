// max_pool: 2 x 2, stride-2 max pooling over a stream of depth-concatenated pixels, with a pool
// line buffer as the paper describes it.
//
// The input is an IH x IW frame of K-lane pixels in raster order (lane = filter, 32-bit signed
// fixed point). The pool buffer has one K-lane entry per output column. For each input pixel at
// (r, c), the output column address is c/2: on the first pixel of a 2 x 2 window (r and c even)
// the pixel is written to the entry; on the others the entry is replaced by the lane-wise maximum
// of the stored value and the new pixel, and on the last one (r and c odd) that maximum is the
// pooled output. A trailing odd row or column (odd IH or IW) is dropped, as floor-mode pooling
// does. Handshake: valid/ready on both sides; one output register, so a held output stalls the
// input. out_last marks the last pooled pixel of a frame.
module max_pool
  import decoil_pkg::*;
#(
  parameter int unsigned IH = 224,
  parameter int unsigned IW = 224,
  parameter int unsigned K  = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [K*DW-1:0] in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [K*DW-1:0] out_data,
  output logic            out_last
);
  localparam int unsigned OH = IH / 2;
  localparam int unsigned OW = IW / 2;

  logic [K*DW-1:0] pool_buf [OW];

  logic [$clog2(IH+1)-1:0] row;
  logic [$clog2(IW+1)-1:0] col;
  logic [$clog2(OW+1)-1:0] addr;
  logic accept, in_frame, first, final_px;
  logic [K*DW-1:0] merged;

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign in_frame   = (row < 2 * OH) && (col < 2 * OW);
  assign addr     = col[$bits(col)-1:1];
  assign first    = !row[0] && !col[0];
  assign final_px = row[0] && col[0];

  always_comb begin
    for (int unsigned k = 0; k < K; k++) begin
      merged[k*DW +: DW] = ($signed(pool_buf[addr][k*DW +: DW]) > $signed(in_data[k*DW +: DW]))
                           ? pool_buf[addr][k*DW +: DW] : in_data[k*DW +: DW];
    end
  end

  always_ff @(posedge clk) begin
    if (accept && in_frame) begin
      if (first) pool_buf[addr] <= in_data;
      else if (!final_px) pool_buf[addr] <= merged;
      if (final_px) out_data <= merged;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row       <= '0;
      col       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      if (accept) begin
        out_valid <= in_frame && final_px;
        out_last  <= in_frame && final_px && (row == 2 * OH - 1) && (col == 2 * OW - 1);
        if (col == IW - 1) begin
          col <= '0;
          row <= (row == IH - 1) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
