// tb_adder_tree: checks pipelined adder trees of 9, 3 and 64 inputs (the 2-D window tree, the
// depth tree of the 3-input first layer and of the 64-channel second layer). A new random vector
// enters each cycle; each sum is compared, exactly 9 * ceil(log2 N) cycles later, with a sum
// computed here.
module tb_adder_tree;
  import decoil_pkg::*;
  localparam int T = 200;

  logic  clk = 1'b0;
  word_t in9 [9], in3 [3], in64 [64];
  word_t s9, s3, s64;
  word_t e9 [T], e3 [T], e64 [T];
  int    checks = 0, failures = 0;

  adder_tree #(.N(9))  u9  (.clk, .in(in9),  .sum(s9));
  adder_tree #(.N(3))  u3  (.clk, .in(in3),  .sum(s3));
  adder_tree #(.N(64)) u64 (.clk, .in(in64), .sum(s64));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input word_t got, input word_t exp, input string nm);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 6) $display("%s mismatch: got %h exp %h", nm, got, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < T + 60; t++) begin
      if (t < T) begin
        e9[t] = '0; e3[t] = '0; e64[t] = '0;
        foreach (in9[i])  begin in9[i]  = $urandom; e9[t]  += in9[i];  end
        foreach (in3[i])  begin in3[i]  = $urandom; e3[t]  += in3[i];  end
        foreach (in64[i]) begin in64[i] = $urandom; e64[t] += in64[i]; end
      end
      @(posedge clk);
      #1;
      // after this edge the value entered at cycle t-L+1 is at the output
      if (t - 35 >= 0 && t - 35 < T) chk(s9,  e9[t-35],  "N=9");
      if (t - 17 >= 0 && t - 17 < T) chk(s3,  e3[t-17],  "N=3");
      if (t - 53 >= 0 && t - 53 < T) chk(s64, e64[t-53], "N=64");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
