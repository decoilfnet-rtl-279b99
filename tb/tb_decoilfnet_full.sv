// tb_decoilfnet_full: the fused pipeline at its default size, VGG-16 conv1_1 -> conv1_2 ->
// pool1: a 224 x 224 x 3 image, 64 + 64 filters, 112 x 112 x 64 pooled output.
// Weights and pixels are generated from a hash of their index. The full reference would need
// about 1.9e9 multiply-accumulates, so sixteen pooled pixels (all 64 channels each: the four
// corners and twelve hashed positions) are computed here from their receptive fields and
// compared; every other output is counted and its frame position checked through out_last.
// It also checks that the frame takes no more than 1% over H*W*K2 cycles, the time the second
// layer needs to issue its 64 filters for every one of its 224 x 224 windows.
module tb_decoilfnet_full;
  import decoil_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 224, W = 224, D0 = 3, K1 = 64, K2 = 64;
  localparam int OH = H / 2, OW = W / 2, NS = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [D0*DW-1:0] in_data;
  logic w_en [2];
  logic [3:0] w_tap [2];
  logic [5:0] w_addr [2];
  logic [K1*DW-1:0] w_data [2];
  logic [K2*DW-1:0] out_data;
  logic [1:0] ev_pad, ev_discard, ev_credit_stall;

  int checks = 0, failures = 0, in_idx = 0, nout = 0, cyc = 0, first_in_cyc = -1, last_out_cyc = 0;
  int sample_pos [NS];
  int sample_ref [NS][K2];

  decoilfnet_top dut (.*);

  always #5 clk = ~clk;

  function automatic int pixel(input int y, input int x, input int d);
    return hval(21, (y * W + x) * D0 + d, 1 << 18);
  endfunction
  function automatic int wt1(input int k, input int d, input int t);
    return hval(22, (k * D0 + d) * 9 + t, 1 << 16);
  endfunction
  function automatic int wt2(input int k, input int d, input int t);
    return hval(23, (k * K1 + d) * 9 + t, 1 << 16);
  endfunction

  // conv1_1 output (after ReLU) at (y, x), all K1 channels; zero outside the image (padding
  // of the second layer).
  function automatic void l1_at(input int y, input int x, output int v[K1]);
    for (int k = 0; k < K1; k++) begin
      int acc;
      acc = 0;
      if (y >= 0 && y < H && x >= 0 && x < W) begin
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++)
            if (y + r - 1 >= 0 && y + r - 1 < H && x + c - 1 >= 0 && x + c - 1 < W)
              for (int d = 0; d < D0; d++)
                acc += fxm(pixel(y + r - 1, x + c - 1, d), wt1(k, d, r * 3 + c));
      end
      v[k] = (acc < 0) ? 0 : acc;
    end
  endfunction

  function automatic void pooled_at(input int py, input int px, output int v[K2]);
    int patch [4][4][K1];
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        int t [K1];
        l1_at(2 * py - 1 + i, 2 * px - 1 + j, t);
        patch[i][j] = t;
      end
    for (int k = 0; k < K2; k++) begin
      int m;
      m = 0;   // conv1_2 outputs are ReLU'd, so the maximum is at least 0
      for (int dy = 0; dy < 2; dy++)
        for (int dx = 0; dx < 2; dx++) begin
          int acc;
          acc = 0;
          for (int r = 0; r < 3; r++)
            for (int c = 0; c < 3; c++)
              for (int d = 0; d < K1; d++)
                acc += fxm(patch[dy + r][dx + c][d], wt2(k, d, r * 3 + c));
          if (acc > m) m = acc;
        end
      v[k] = m;
    end
  endfunction

  initial begin
    #60000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid && in_ready) begin
        in_idx <= in_idx + 1;
        if (first_in_cyc < 0) first_in_cyc <= cyc;
      end
      if (out_valid && out_ready) begin
        for (int s = 0; s < NS; s++)
          if (sample_pos[s] == nout)
            for (int k = 0; k < K2; k++) begin
              checks++;
              if (out_data[k*DW +: DW] !== sample_ref[s][k]) begin
                failures++;
                if (failures < 6) $display("pooled %0d ch %0d got %h exp %h", nout, k, out_data[k*DW +: DW], sample_ref[s][k]);
              end
            end
        checks++;
        if (out_last !== (nout == OH * OW - 1)) begin failures++; $display("out_last wrong at %0d", nout); end
        last_out_cyc <= cyc;
        nout <= nout + 1;
      end
    end
  end

  initial begin
    for (int s = 0; s < NS; s++) begin
      int py, px, v [K2];
      case (s)
        0: begin py = 0; px = 0; end
        1: begin py = 0; px = OW - 1; end
        2: begin py = OH - 1; px = 0; end
        3: begin py = OH - 1; px = OW - 1; end
        default: begin
          py = hval(31, s, OH) + OH / 2;
          px = hval(32, s, OW) + OW / 2;
        end
      endcase
      sample_pos[s] = py * OW + px;
      pooled_at(py, px, v);
      sample_ref[s] = v;
    end
    in_valid = 0; out_ready = 1; in_data = '0;
    for (int l = 0; l < 2; l++) begin
      w_en[l] = 0; w_tap[l] = 0; w_addr[l] = 0; w_data[l] = '0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 64; k++)
      for (int t = 0; t < 9; t++) begin
        for (int l = 0; l < 2; l++) begin
          w_en[l] = 1; w_tap[l] = 4'(t); w_addr[l] = 6'(k);
        end
        for (int d = 0; d < D0; d++) w_data[0][d*DW +: DW] = wt1(k, d, t);
        for (int d = 0; d < K1; d++) w_data[1][d*DW +: DW] = wt2(k, d, t);
        @(posedge clk); #1;
      end
    w_en[0] = 0; w_en[1] = 0;
    while (nout < OH * OW) begin
      int p;
      p = in_idx % (H * W);
      in_valid = (in_idx < H * W);
      for (int d = 0; d < D0; d++) in_data[d*DW +: DW] = pixel(p / W, p % W, d);
      @(posedge clk); #1;
    end
    checks++;
    if (last_out_cyc - first_in_cyc > (H * W * K2) + (H * W * K2) / 100) begin
      failures++;
      $display("frame took %0d cycles", last_out_cyc - first_in_cyc);
    end
    $display("frame: %0d cycles from first pixel in to last pooled pixel out (H*W*K2 = %0d)",
             last_out_cyc - first_in_cyc, H * W * K2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
