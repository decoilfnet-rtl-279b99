// tb_fx_mult_pipe: drives a new random operand pair into the pipelined fixed-point multiplier
// every cycle and checks each product, computed here with 64-bit integer arithmetic, exactly
// 9 cycles later (the multiplier latency of the design).
module tb_fx_mult_pipe;
  import decoil_pkg::*;
  localparam int LAT = 9;
  localparam int N   = 400;

  logic  clk = 1'b0;
  word_t a, b, p;
  int    checks = 0, failures = 0;
  int    exp_q [N + LAT];

  fx_mult_pipe #(.LAT(LAT)) dut (.clk, .a, .b, .p);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint prod;
    for (int t = 0; t < N + LAT; t++) begin
      if (t < N) begin
        a = (t % 4 == 0) ? $urandom : word_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
        b = (t % 3 == 0) ? $urandom : word_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
        prod = longint'(a) * longint'(b);
        exp_q[t] = int'(prod >>> 16);
      end
      @(posedge clk);
      #1;
      if (t >= LAT - 1 && t - (LAT - 1) < N) begin
        checks++;
        if (p !== word_t'(exp_q[t - (LAT - 1)])) begin
          failures++;
          if (failures < 5) $display("mismatch at %0d: got %h exp %h", t, p, exp_q[t-(LAT-1)]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
