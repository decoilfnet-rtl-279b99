// tb_conv2d_pipe: feeds a random 3x3 window and filter every cycle into the 2-D convolution unit
// and checks each dot product (fixed-point Q16.16, truncated products, wrapping sum) exactly
// 45 cycles later, the 2-D convolution latency 9 * (1 + ceil(log2 9)) stated for the design.
module tb_conv2d_pipe;
  import decoil_pkg::*;
  localparam int T   = 200;
  localparam int LAT = 45;

  logic  clk = 1'b0;
  word_t win [9], filt [9], dot;
  word_t exp_q [T];
  int    checks = 0, failures = 0;

  conv2d_pipe #(.KW(3)) dut (.clk, .win, .filt, .dot);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint pr;
    for (int t = 0; t < T + LAT; t++) begin
      if (t < T) begin
        exp_q[t] = '0;
        for (int i = 0; i < 9; i++) begin
          win[i]  = word_t'($signed($urandom_range(0, 1 << 19)) - (1 << 18));
          filt[i] = word_t'($signed($urandom_range(0, 1 << 17)) - (1 << 16));
          pr = longint'(win[i]) * longint'(filt[i]);
          exp_q[t] += word_t'(pr >>> 16);
        end
      end
      @(posedge clk);
      #1;
      if (t - (LAT - 1) >= 0 && t - (LAT - 1) < T) begin
        checks++;
        if (dot !== exp_q[t-(LAT-1)]) begin
          failures++;
          if (failures < 5) $display("mismatch t=%0d got %h exp %h", t, dot, exp_q[t-(LAT-1)]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
