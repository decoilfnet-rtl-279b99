// tb_max_pool: streams two 5 x 6 frames of 3-lane signed pixels into the pooling unit with random
// valid and ready patterns and checks every pooled pixel against a 2x2 stride-2 maximum computed
// here (the odd last row dropped): 2 x 3 outputs per frame, out_last on the final one.
module tb_max_pool;
  import decoil_pkg::*;
  localparam int IH = 5, IW = 6, K = 3, OH = 2, OW = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [K*DW-1:0] in_data, out_data;
  word_t img [2][IH][IW][K];
  int checks = 0, failures = 0, in_idx = 0, nout = 0;

  max_pool #(.IH(IH), .IW(IW), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (in_valid && in_ready) in_idx <= in_idx + 1;
      if (out_valid && out_ready) begin
        int f, p, pr, pc;
        f = nout / (OH * OW); p = nout % (OH * OW); pr = p / OW; pc = p % OW;
        for (int k = 0; k < K; k++) begin
          word_t m;
          m = img[f][2*pr][2*pc][k];
          if (img[f][2*pr][2*pc+1][k]   > m) m = img[f][2*pr][2*pc+1][k];
          if (img[f][2*pr+1][2*pc][k]   > m) m = img[f][2*pr+1][2*pc][k];
          if (img[f][2*pr+1][2*pc+1][k] > m) m = img[f][2*pr+1][2*pc+1][k];
          checks++;
          if (out_data[k*DW +: DW] !== m) begin
            failures++;
            $display("out %0d lane %0d got %0d exp %0d", nout, k, $signed(out_data[k*DW +: DW]), m);
          end
        end
        checks++;
        if (out_last !== (p == OH * OW - 1)) begin failures++; $display("out_last wrong"); end
        nout <= nout + 1;
      end
    end
  end

  initial begin
    foreach (img[f, r, c, k]) img[f][r][c][k] = word_t'($signed($urandom_range(0, 2000)) - 1000);
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (in_idx < 2 * IH * IW || out_valid) begin
      int f, p;
      in_valid  = (in_idx < 2 * IH * IW) && ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 2) != 0);
      f = in_idx / (IH * IW); p = in_idx % (IH * IW);
      if (f < 2) for (int k = 0; k < K; k++) in_data[k*DW +: DW] = img[f][p / IW][p % IW][k];
      @(posedge clk); #1;
    end
    checks++;
    if (nout != 2 * OH * OW) begin failures++; $display("outputs %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
