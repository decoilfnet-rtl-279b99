// tb_filter_bank: loads K = 8 random 3x3x3 filters tap by tap through the write port, then reads
// filters back in random order, one per cycle, and checks that the next cycle presents the whole
// 3-D filter split into its 3 depth slices.
module tb_filter_bank;
  import decoil_pkg::*;
  localparam int KW = 3, D = 3, K = 8, KK = 9;

  logic          clk = 1'b0;
  logic          wr_en, rd_en;
  logic [3:0]    wr_tap;
  logic [2:0]    wr_addr, rd_addr;
  logic [D*DW-1:0] wr_data;
  word_t         filt [D][KK];
  word_t         ref_w [K][D][KK];
  int            checks = 0, failures = 0;

  filter_bank #(.KW(KW), .D(D), .K(K)) dut (.clk, .wr_en, .wr_tap, .wr_addr, .wr_data,
                                            .rd_en, .rd_addr, .filt);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_tap = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int f = 0; f < K; f++)
      for (int t = 0; t < KK; t++) begin
        for (int d = 0; d < D; d++) begin
          ref_w[f][d][t] = $urandom;
          wr_data[d*DW +: DW] = ref_w[f][d][t];
        end
        wr_en = 1; wr_tap = 4'(t); wr_addr = 3'(f);
        @(posedge clk); #1;
      end
    wr_en = 0;
    for (int n = 0; n < 40; n++) begin
      int f;
      f = $urandom_range(0, K - 1);
      rd_en = 1; rd_addr = 3'(f);
      @(posedge clk); #1;
      rd_en = 0;
      for (int d = 0; d < D; d++)
        for (int t = 0; t < KK; t++) begin
          checks++;
          if (filt[d][t] !== ref_w[f][d][t]) begin
            failures++;
            if (failures < 5) $display("f%0d d%0d t%0d got %h exp %h", f, d, t, filt[d][t], ref_w[f][d][t]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
