// tb_pad_mux: streams a 3 x 4 frame of 2-lane pixels (and a second frame) through the padding
// multiplexer with random valid and ready patterns, and checks that the output is the
// 5 x 6 zero-padded frame in raster order, with the padding flag on the border positions.
module tb_pad_mux;
  import decoil_pkg::*;
  localparam int IH = 3, IW = 4, D = 2, PH = 5, PW = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready, out_is_pad;
  logic [D*DW-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  int in_idx = 0, out_idx = 0;

  pad_mux #(.IH(IH), .IW(IW), .D(D), .PAD(1)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [D*DW-1:0] pix(input int n);
    return {32'(n * 7 + 1000), 32'(n * 3 + 5)};
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) in_idx <= in_idx + 1;
      if (out_valid && out_ready) begin
        int f, p, r, c;
        logic border;
        f = out_idx / (PH * PW);
        p = out_idx % (PH * PW);
        r = p / PW; c = p % PW;
        border = (r == 0 || r == PH - 1 || c == 0 || c == PW - 1);
        checks++;
        if (border) begin
          if (out_data !== '0 || !out_is_pad) begin failures++; $display("border %0d,%0d wrong", r, c); end
        end else if (out_data !== pix(f * IH * IW + (r - 1) * IW + (c - 1)) || out_is_pad) begin
          failures++; $display("interior %0d,%0d wrong", r, c);
        end
        out_idx <= out_idx + 1;
      end
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (out_idx < 2 * PH * PW) begin
      in_valid  = (in_idx < 2 * IH * IW) && ($urandom_range(0, 2) != 0);
      in_data   = pix(in_idx);
      out_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
    end
    checks++;
    if (in_idx != 2 * IH * IW) begin failures++; $display("consumed %0d inputs", in_idx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
