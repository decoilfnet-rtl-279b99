// tb_fused_4conv: four consecutive fused 3x3 convolution layers with no pooling, the structure of the
// four-layer, 64-filter network the design is evaluated on, scaled to an 8 x 8 x 3 input and
// 4 filters per layer so that it simulates in seconds.
// Weights come from a hash of their index; every output of two frames is compared with a
// reference chain of convolutions (ReLU) and poolings computed here. The second frame runs
// against a consumer that stalls at random. Each layer must see padding and discarded windows.
// The layer structure follows the paper's evaluated network; the reduced sizes, the data and the
// stall pattern are this testbench's own. Runs in well under 100k cycles.
module tb_fused_4conv;
  import decoil_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 8, W = 8, D0 = 3, N = 4;
  localparam int unsigned KS [8] = '{4, 4, 4, 4, 0, 0, 0, 0};
  localparam int unsigned GS [8] = '{1, 1, 1, 1, 1, 1, 1, 1};
  localparam bit          PL [8] = '{1'b0, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0};
  localparam int KMAX = 4, AWM = 2, KOUT = KS[N-1];

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [D0*DW-1:0] in_data;
  logic w_en [N];
  logic [3:0] w_tap [N];
  logic [AWM-1:0] w_addr [N];
  logic [KMAX*DW-1:0] w_data [N];
  logic [KOUT*DW-1:0] out_data;
  logic [N-1:0] ev_pad, ev_discard, ev_credit_stall;

  int img[], ref_out[];
  int checks = 0, failures = 0, in_idx = 0, nout = 0, n_last = 0, n_pool_stage = 0;
  int OH, OW;
  int n_pad [N], n_disc [N];

  decoilfnet_top #(.IH(H), .IW(W), .D0(D0), .NCONV(N), .KS(KS), .GS(GS), .POOL_AFTER(PL)) dut (.*);

  always #5 clk = ~clk;

  function automatic int wv(input int l, input int idx);
    return hval(100 + l, idx, 1 << 16);
  endfunction

  initial begin
    #4000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int l = 0; l < N; l++) begin
        n_pad[l]  <= n_pad[l] + int'(ev_pad[l]);
        n_disc[l] <= n_disc[l] + int'(ev_discard[l]);
      end
      if (in_valid && in_ready) in_idx <= in_idx + 1;
      if (out_valid && out_ready) begin
        int p;
        p = nout % (OH * OW);
        for (int k = 0; k < KOUT; k++) begin
          checks++;
          if (out_data[k*DW +: DW] !== ref_out[p * KOUT + k]) begin
            failures++;
            if (failures < 6) $display("out %0d lane %0d got %h exp %h", nout, k, out_data[k*DW +: DW], ref_out[p*KOUT+k]);
          end
        end
        checks++;
        if (out_last !== (p == OH * OW - 1)) begin failures++; $display("out_last wrong at %0d", nout); end
        if (out_last) n_last <= n_last + 1;
        nout <= nout + 1;
      end
    end
  end

  initial begin
    int map[], nxt[], wl[];
    int h, w, d;
    img = new[H * W * D0];
    foreach (img[i]) img[i] = hval(7, i, 1 << 18);
    map = img; h = H; w = W; d = D0;
    for (int l = 0; l < N; l++) begin
      wl = new[KS[l] * d * 9];
      foreach (wl[i]) wl[i] = wv(l, i);
      conv3x3(map, wl, h, w, d, KS[l], nxt);
      map = nxt; d = KS[l];
      if (PL[l]) begin
        pool2x2(map, h, w, d, nxt);
        map = nxt; h = h / 2; w = w / 2;
        n_pool_stage++;
      end
    end
    ref_out = map; OH = h; OW = w;
    foreach (n_pad[l]) begin n_pad[l] = 0; n_disc[l] = 0; end
    in_valid = 0; out_ready = 0; in_data = '0;
    for (int l = 0; l < N; l++) begin
      w_en[l] = 0; w_tap[l] = 0; w_addr[l] = 0; w_data[l] = '0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    d = D0;
    for (int l = 0; l < N; l++) begin
      for (int k = 0; k < int'(KS[l]); k++)
        for (int t = 0; t < 9; t++) begin
          w_en[l] = 1; w_tap[l] = 4'(t); w_addr[l] = AWM'(k);
          w_data[l] = '0;
          for (int s = 0; s < d; s++) w_data[l][s*DW +: DW] = wv(l, (k * d + s) * 9 + t);
          @(posedge clk); #1;
        end
      w_en[l] = 0;
      d = KS[l];
    end
    while (nout < 2 * OH * OW) begin
      int p;
      p = in_idx % (H * W);
      in_valid = (in_idx < 2 * H * W);
      for (int s = 0; s < D0; s++) in_data[s*DW +: DW] = img[p * D0 + s];
      out_ready = (nout < OH * OW) || ($urandom_range(0, 3) == 0);
      @(posedge clk); #1;
    end
    checks += 1 + 2 * N;
    if (n_last != 2) begin failures++; $display("frames ended: %0d", n_last); end
    for (int l = 0; l < N; l++) begin
      if (n_pad[l] == 0)  begin failures++; $display("layer %0d: no padding", l); end
      if (n_disc[l] == 0) begin failures++; $display("layer %0d: no discarded window", l); end
    end
    $display("%0d conv layers, %0d pooling stages, output %0dx%0dx%0d", N, n_pool_stage, OH, OW, KOUT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
