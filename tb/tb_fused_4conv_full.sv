// tb_fused_4conv_full: four fused 3x3 convolution layers of 64 filters each (stride 1, padding 1,
// ReLU) on a 224 x 224 x 3 image, no pooling: the four-layer network the design is evaluated
// on, at its real size. The top is instantiated with NCONV = 4 and KS = 64 for all four layers;
// everything else is at its default.
// Weights and pixels come from a hash of their index. Eight output pixels (the four corners and
// four hashed positions, all 64 channels each) are computed here from their 9 x 9 receptive
// fields, layer by layer; every other output is counted and its frame position checked through
// out_last. Each layer issues 64 filters per window, so all four run at H*W*64 cycles per frame
// side by side; the chain adds only each layer's line fill, two rows and three pixels at 64 cycles
// a pixel. The frame must take no longer than H*W*64 + N*(2*(W+2)+3)*64 cycles.
// The layer structure and sizes follow the paper; the data and the sampled positions are this
// testbench's own. About 3.3 million cycles.
module tb_fused_4conv_full;
  import decoil_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 224, W = 224, D0 = 3, K = 64, N = 4, NS = 8;
  localparam int unsigned KS [8] = '{64, 64, 64, 64, 0, 0, 0, 0};
  localparam bit          PL [8] = '{1'b0, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0};

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [D0*DW-1:0] in_data;
  logic w_en [N];
  logic [3:0] w_tap [N];
  logic [5:0] w_addr [N];
  logic [K*DW-1:0] w_data [N];
  logic [K*DW-1:0] out_data;
  logic [N-1:0] ev_pad, ev_discard, ev_credit_stall;

  int checks = 0, failures = 0, in_idx = 0, nout = 0, cyc = 0, first_in_cyc = -1, last_out_cyc = 0;
  int sample_pos [NS];
  int sample_ref [NS][K];

  decoilfnet_top #(.NCONV(N), .KS(KS), .POOL_AFTER(PL)) dut (.*);

  always #5 clk = ~clk;

  function automatic int pixel(input int y, input int x, input int d);
    return hval(41, (y * W + x) * D0 + d, 1 << 18);
  endfunction
  // weight of layer l, filter k, slice d, tap t
  function automatic int wt(input int l, input int k, input int d, input int t);
    return hval(50 + l, (k * ((l == 0) ? D0 : K) + d) * 9 + t, 1 << 16);
  endfunction

  // Output of layer l (l = -1: the input image) on the n x n patch with top-left corner (y0, x0),
  // flat index (i*n + j)*C + c; zero outside the image (the next layer's padding).
  function automatic void patch_at(input int l, input int y0, input int x0, input int n, output int v[]);
    int c_out, c_in;
    int prev[];
    c_out = (l < 0) ? D0 : K;
    v = new[n * n * c_out];
    if (l < 0) begin
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++)
          for (int d = 0; d < D0; d++)
            v[(i * n + j) * D0 + d] = (y0 + i >= 0 && y0 + i < H && x0 + j >= 0 && x0 + j < W) ?
                                      pixel(y0 + i, x0 + j, d) : 0;
      return;
    end
    c_in = (l == 0) ? D0 : K;
    patch_at(l - 1, y0 - 1, x0 - 1, n + 2, prev);
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++)
        for (int k = 0; k < K; k++) begin
          int acc;
          acc = 0;
          if (y0 + i >= 0 && y0 + i < H && x0 + j >= 0 && x0 + j < W)
            for (int r = 0; r < 3; r++)
              for (int c = 0; c < 3; c++)
                for (int d = 0; d < c_in; d++)
                  acc += fxm(prev[((i + r) * (n + 2) + j + c) * c_in + d], wt(l, k, d, r * 3 + c));
          v[(i * n + j) * K + k] = (acc < 0) ? 0 : acc;
        end
  endfunction

  initial begin
    #80000000;
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
            for (int k = 0; k < K; k++) begin
              checks++;
              if (out_data[k*DW +: DW] !== sample_ref[s][k]) begin
                failures++;
                if (failures < 6) $display("out %0d ch %0d got %h exp %h", nout, k, out_data[k*DW +: DW], sample_ref[s][k]);
              end
            end
        checks++;
        if (out_last !== (nout == H * W - 1)) begin failures++; $display("out_last wrong at %0d", nout); end
        last_out_cyc <= cyc;
        nout <= nout + 1;
      end
    end
  end

  initial begin
    for (int s = 0; s < NS; s++) begin
      int py, px;
      int v[];
      case (s)
        0: begin py = 0; px = 0; end
        1: begin py = 0; px = W - 1; end
        2: begin py = H - 1; px = 0; end
        3: begin py = H - 1; px = W - 1; end
        default: begin
          py = hval(33, s, H) + H / 2;
          px = hval(34, s, W) + W / 2;
        end
      endcase
      sample_pos[s] = py * W + px;
      patch_at(N - 1, py, px, 1, v);
      for (int k = 0; k < K; k++) sample_ref[s][k] = v[k];
    end
    in_valid = 0; out_ready = 1; in_data = '0;
    for (int l = 0; l < N; l++) begin
      w_en[l] = 0; w_tap[l] = 0; w_addr[l] = 0; w_data[l] = '0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < K; k++)
      for (int t = 0; t < 9; t++) begin
        for (int l = 0; l < N; l++) begin
          w_en[l] = 1; w_tap[l] = 4'(t); w_addr[l] = 6'(k); w_data[l] = '0;
          for (int d = 0; d < ((l == 0) ? D0 : K); d++) w_data[l][d*DW +: DW] = wt(l, k, d, t);
        end
        @(posedge clk); #1;
      end
    for (int l = 0; l < N; l++) w_en[l] = 0;
    while (nout < H * W) begin
      int p;
      p = in_idx % (H * W);
      in_valid = (in_idx < H * W);
      for (int d = 0; d < D0; d++) in_data[d*DW +: DW] = pixel(p / W, p % W, d);
      @(posedge clk); #1;
    end
    checks++;
    if (last_out_cyc - first_in_cyc > H * W * K + N * (2 * (W + 2) + 3) * K) begin
      failures++;
      $display("frame took %0d cycles", last_out_cyc - first_in_cyc);
    end
    $display("frame: %0d cycles from first pixel in to last output of layer 4 (H*W*K = %0d), %0d us at 120 MHz",
             last_out_cyc - first_in_cyc, H * W * K, (last_out_cyc - first_in_cyc) / 120);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
