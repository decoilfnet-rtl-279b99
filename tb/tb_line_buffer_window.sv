// tb_line_buffer_window: streams two 6 x 7 frames of 2-lane pixels into the line buffer with
// random valid and ready patterns. Every emitted 3x3x2 window must equal the window of the
// reference image at the next expected position (row-wrap windows skipped), there must be
// 4 x 5 windows per frame, 2 discarded windows per full row, and out_last on the last one.
// With the input always valid and the output always ready, it also checks the initial fill:
// the first window appears 2*PW+3 pixels (cycles) after the first pixel.
module tb_line_buffer_window;
  import decoil_pkg::*;
  localparam int PH = 6, PW = 7, D = 2, KW = 3;
  localparam int OH = PH - 2, OW = PW - 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready, out_last, out_discard;
  logic [D*DW-1:0] in_data;
  word_t out_win [D][KW*KW];
  int checks = 0, failures = 0, in_idx = 0, nwin = 0, ndisc = 0, cyc = 0, first_win_cyc = -1;
  bit free_run = 1;

  line_buffer_window #(.PH(PH), .PW(PW), .D(D), .KW(KW)) dut (.*);

  always #5 clk = ~clk;

  function automatic word_t pixv(input int frame, input int r, input int c, input int d);
    return word_t'(frame * 100000 + r * 1000 + c * 10 + d);
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid && in_ready) in_idx <= in_idx + 1;
      if (out_discard) ndisc <= ndisc + 1;
      if (out_valid && out_ready) begin
        int f, p, orow, ocol;
        f = nwin / (OH * OW); p = nwin % (OH * OW);
        orow = p / OW; ocol = p % OW;
        if (first_win_cyc < 0) first_win_cyc <= cyc;
        for (int d = 0; d < D; d++)
          for (int r = 0; r < KW; r++)
            for (int c = 0; c < KW; c++) begin
              checks++;
              if (out_win[d][r*KW+c] !== pixv(f, orow + r, ocol + c, d)) begin
                failures++;
                if (failures < 6) $display("win %0d d%0d r%0d c%0d got %0d exp %0d", nwin, d, r, c,
                                           out_win[d][r*KW+c], pixv(f, orow + r, ocol + c, d));
              end
            end
        checks++;
        if (out_last !== (p == OH * OW - 1)) begin failures++; $display("out_last wrong at %0d", nwin); end
        nwin <= nwin + 1;
      end
    end
  end

  initial begin
    int start_cyc;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    start_cyc = cyc;
    while (in_idx < 2 * PH * PW || out_valid) begin
      int f, p;
      free_run = (in_idx < PH * PW);
      in_valid  = (in_idx < 2 * PH * PW) && (free_run || $urandom_range(0, 2) != 0);
      out_ready = free_run || ($urandom_range(0, 2) != 0);
      f = in_idx / (PH * PW); p = in_idx % (PH * PW);
      for (int d = 0; d < D; d++) in_data[d*DW +: DW] = pixv(f, p / PW, p % PW, d);
      @(posedge clk); #1;
    end
    repeat (3) @(posedge clk);
    checks += 3;
    if (nwin != 2 * OH * OW) begin failures++; $display("windows %0d", nwin); end
    if (ndisc != 2 * (KW - 1) * OH) begin failures++; $display("discards %0d", ndisc); end
    if (first_win_cyc - start_cyc != 2 * PW + 3) begin
      failures++; $display("first window after %0d cycles", first_win_cyc - start_cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
