// line_buffer_window: line buffer and window buffer that turn a serial stream of
// depth-concatenated pixels into KW x KW x D convolution windows.
//
// The stream is a padded frame of PH x PW pixels in raster order, each pixel D words wide
// (depth flattening: all D slices of a pixel travel together). KW-1 line memories of PW words
// hold the previous rows; a column pointer selects the entry that the new pixel passes through.
// On each accepted pixel the KW x KW window register shifts one column left and takes a new right
// column made of the KW-1 stored pixels of this column plus the incoming one, while the line
// memories shift that column up by one row. After the initial filling (the first window is
// complete with the pixel at row KW-1, column KW-1), every accepted pixel yields a new window,
// except the KW-1 windows at the start of each row, which straddle the row wrap and are
// discarded (the "invalid windows for 2 cycles" of Fig. 2 in the paper). So a frame gives
// (PH-KW+1) x (PW-KW+1) windows.
// The paper's figure draws KW lines with a circular column pointer; KW-1 lines plus the window
// register hold the same data and are this design's choice.
// Handshake: in_valid/in_ready for pixels, out_valid/out_ready for windows. A held window stalls
// the input until it is taken. out_win[d][r*KW+c] is depth slice d, window row r, column c;
// out_last marks the last window of a frame; out_discard pulses for each discarded window.
module line_buffer_window
  import decoil_pkg::*;
#(
  parameter int unsigned PH = 226,
  parameter int unsigned PW = 226,
  parameter int unsigned D  = 3,
  parameter int unsigned KW = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [D*DW-1:0] in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output word_t           out_win [D][KW*KW],
  output logic            out_last,
  output logic            out_discard
);
  typedef logic [D*DW-1:0] pix_t;

  // Pixel entering each window row's right column, and the line memory contents per row.
  pix_t col_in [KW];

  logic [$clog2(PH+1)-1:0] row;
  logic [$clog2(PW+1)-1:0] col;
  logic accept, complete;

  assign in_ready    = !out_valid || out_ready;
  assign accept      = in_valid && in_ready;
  assign complete    = (row >= KW - 1) && (col >= KW - 1);
  assign out_discard = accept && (row >= KW - 1) && (col < KW - 1);

  // Line memories: the column at the pointer moves up one row; the new pixel enters the last
  // memory. Row r of the window takes its new right column from memory r (the incoming pixel
  // for the bottom row).
  for (genvar r = 0; r < KW - 1; r++) begin : g_line
    pix_t mem [PW];
    assign col_in[r] = mem[col];
    always_ff @(posedge clk) if (accept) mem[col] <= col_in[r+1];
  end
  assign col_in[KW-1] = in_data;

  // Window register: each row shifts one column left and takes its new right column.
  for (genvar r = 0; r < KW; r++) begin : g_win
    pix_t q [KW];
    always_ff @(posedge clk) begin
      if (accept) begin
        for (int unsigned c = 0; c + 1 < KW; c++) q[c] <= q[c+1];
        q[KW-1] <= col_in[r];
      end
    end
    for (genvar d = 0; d < D; d++) begin : g_split
      for (genvar c = 0; c < KW; c++) begin : g_c
        assign out_win[d][r*KW+c] = q[c][d*DW +: DW];
      end
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
        out_valid <= complete;
        out_last  <= (row == PH - 1) && (col == PW - 1);
        if (col == PW - 1) begin
          col <= '0;
          row <= (row == PH - 1) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
