// tb_conv3d_pipe: 3-D convolution unit with D = 3 (the first layer's depth). Random windows and
// filters enter with a random valid pattern and a tag; every output must carry the right tag,
// appear exactly 63 cycles after its input (the paper's 9 * (1 + ceil(log2 9) + ceil(log2 3))),
// and equal the ReLU of the depth sum of three 2-D dot products computed here.
module tb_conv3d_pipe;
  import decoil_pkg::*;
  localparam int T   = 300;
  localparam int LAT = 63;
  localparam int D   = 3;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       in_valid, out_valid;
  logic [7:0] in_tag, out_tag;
  word_t      win [D][9], filt [D][9], out_data;
  word_t      exp_d [T];
  logic       exp_v [T];
  logic [7:0] exp_t [T];
  int         checks = 0, failures = 0, negatives = 0;

  conv3d_pipe #(.KW(3), .D(D), .TAGW(8)) dut (
    .clk, .rst_n, .in_valid, .in_tag, .win, .filt, .out_valid, .out_tag, .out_data
  );

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint pr;
    word_t  acc;
    in_valid = 1'b0;
    in_tag   = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < T + LAT; t++) begin
      if (t < T) begin
        in_valid = ($urandom_range(0, 3) != 0);
        in_tag   = 8'($urandom);
        acc = '0;
        for (int d = 0; d < D; d++)
          for (int i = 0; i < 9; i++) begin
            win[d][i]  = word_t'($signed($urandom_range(0, 1 << 19)) - (1 << 18));
            filt[d][i] = word_t'($signed($urandom_range(0, 1 << 17)) - (1 << 16));
            pr = longint'(win[d][i]) * longint'(filt[d][i]);
            acc += word_t'(pr >>> 16);
          end
        if (acc < 0 && in_valid) negatives++;
        exp_d[t] = (acc < 0) ? '0 : acc;
        exp_v[t] = in_valid;
        exp_t[t] = in_tag;
      end else begin
        in_valid = 1'b0;
      end
      @(posedge clk);
      #1;
      if (t - (LAT - 1) >= 0 && t - (LAT - 1) < T) begin
        int s;
        s = t - (LAT - 1);
        checks++;
        if (out_valid !== exp_v[s]) begin
          failures++;
          $display("valid mismatch t=%0d", t);
        end else if (out_valid && (out_data !== exp_d[s] || out_tag !== exp_t[s])) begin
          failures++;
          if (failures < 5) $display("data mismatch t=%0d got %h/%0d exp %h/%0d", t, out_data, out_tag, exp_d[s], exp_t[s]);
        end
      end
    end
    checks++;
    if (negatives == 0) begin
      failures++;
      $display("ReLU never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
