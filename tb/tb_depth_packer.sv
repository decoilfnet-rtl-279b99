// tb_depth_packer: feeds scalars tagged 0..K-1 (K = 4) into the packer with random valid and
// ready patterns and checks each emitted K-lane word; with both sides always ready it also
// checks that one word leaves every K cycles.
module tb_depth_packer;
  import decoil_pkg::*;
  localparam int K = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [1:0] in_idx;
  word_t in_data;
  logic [K*DW-1:0] out_data;
  int checks = 0, failures = 0, sent = 0, got = 0, cyc = 0, last_out = -1, gaps_ok = 0;
  bit full_rate = 0;

  depth_packer #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid && in_ready) sent <= sent + 1;
      if (out_valid && out_ready) begin
        for (int k = 0; k < K; k++) begin
          checks++;
          if (out_data[k*DW +: DW] !== word_t'(32'hA000 + (got * K + k) * 13)) begin
            failures++;
            $display("word %0d lane %0d got %h", got, k, out_data[k*DW +: DW]);
          end
        end
        if (got >= 32 && last_out >= 0) begin
          checks++;
          if (cyc - last_out != K) begin failures++; $display("interval %0d", cyc - last_out); end
          else gaps_ok++;
        end
        last_out <= cyc;
        got <= got + 1;
      end
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_idx = 0; in_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (got < 60) begin
      full_rate = (got >= 30);
      in_valid  = full_rate || ($urandom_range(0, 2) != 0);
      out_ready = full_rate || ($urandom_range(0, 2) != 0);
      in_idx    = 2'(sent % K);
      in_data   = word_t'(32'hA000 + sent * 13);
      @(posedge clk); #1;
    end
    checks++;
    if (gaps_ok < 20) begin failures++; $display("full rate not observed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
