// tb_decoilfnet_top: end-to-end test of the fused conv -> conv -> pool pipeline on the paper's
// worked example: a 5 x 5 x 3 input, two 3x3 convolution layers of 3 filters each (stride 1,
// padding 1, ReLU) and 2 x 2 stride-2 max pooling, giving 2 x 2 x 3 outputs per frame.
// X
// Frame 0 runs freely; during frames 1 to 7 the consumer first stops for 1500 cycles and then
// stalls at random, so back-pressure travels up through the pool and both layers. Every pooled
// output is compared with a reference (convolution, ReLU, convolution, ReLU, pooling) computed
// here. Each mechanism of the design must occur at least once: padding zeros and discarded
// row-wrap windows in both layers, credit-based issue stalls, pooled outputs, and output
// back-pressure.
module tb_decoilfnet_top;
  import decoil_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 5, W = 5, D0 = 3, K1 = 3, K2 = 3;
  localparam int OH = H / 2, OW = W / 2, NF = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  logic [D0*DW-1:0] in_data;
  logic w_en [2];
  logic [3:0] w_tap [2];
  logic [1:0] w_addr [2];
  logic [3*DW-1:0] w_data [2];
  logic [K2*DW-1:0] out_data;
  logic [1:0] ev_pad, ev_discard, ev_credit_stall;

  int img[], w1[], w2[], l1[], l2[], ref_out[];
  int checks = 0, failures = 0, in_idx = 0, nout = 0, cyc = 0, stop_cycles = 0;
  int n_pad[2] = '{0, 0}, n_disc[2] = '{0, 0}, n_stall[2] = '{0, 0}, n_bp = 0, n_last = 0;
  int first_in_cyc = -1, first_out_cyc = -1;

  decoilfnet_top #(.IH(H), .IW(W), .D0(D0), .KS('{K1, K2, 0, 0, 0, 0, 0, 0})) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      for (int l = 0; l < 2; l++) begin
        n_pad[l]   <= n_pad[l] + int'(ev_pad[l]);
        n_disc[l]  <= n_disc[l] + int'(ev_discard[l]);
        n_stall[l] <= n_stall[l] + int'(ev_credit_stall[l]);
      end
      if (out_valid && !out_ready) n_bp <= n_bp + 1;
      if (in_valid && in_ready) begin
        in_idx <= in_idx + 1;
        if (first_in_cyc < 0) first_in_cyc <= cyc;
      end
      if (out_valid && out_ready) begin
        int p;
        p = nout % (OH * OW);
        for (int k = 0; k < K2; k++) begin
          checks++;
          if (out_data[k*DW +: DW] !== ref_out[p * K2 + k]) begin
            failures++;
            if (failures < 6) $display("out %0d lane %0d got %h exp %h", nout, k, out_data[k*DW +: DW], ref_out[p*K2+k]);
          end
        end
        checks++;
        if (out_last !== (p == OH * OW - 1)) begin failures++; $display("out_last wrong at %0d", nout); end
        if (out_last) n_last <= n_last + 1;
        if (first_out_cyc < 0) first_out_cyc <= cyc;
        nout <= nout + 1;
      end
    end
  end

  initial begin
    img = new[H * W * D0];
    w1  = new[K1 * D0 * 9];
    w2  = new[K2 * K1 * 9];
    foreach (img[i]) img[i] = hval(11, i, 1 << 18);
    foreach (w1[i])  w1[i]  = hval(12, i, 1 << 16);
    foreach (w2[i])  w2[i]  = hval(13, i, 1 << 16);
    conv3x3(img, w1, H, W, D0, K1, l1);
    conv3x3(l1, w2, H, W, K1, K2, l2);
    pool2x2(l2, H, W, K2, ref_out);
    in_valid = 0; out_ready = 0; in_data = '0;
    for (int l = 0; l < 2; l++) begin
      w_en[l] = 0; w_tap[l] = 0; w_addr[l] = 0; w_data[l] = '0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 3; k++)
      for (int t = 0; t < 9; t++) begin
        for (int l = 0; l < 2; l++) begin
          w_en[l] = 1; w_tap[l] = 4'(t); w_addr[l] = 2'(k);
        end
        for (int d = 0; d < D0; d++) w_data[0][d*DW +: DW] = w1[(k * D0 + d) * 9 + t];
        for (int d = 0; d < K1; d++) w_data[1][d*DW +: DW] = w2[(k * K1 + d) * 9 + t];
        @(posedge clk); #1;
      end
    w_en[0] = 0; w_en[1] = 0;
    while (nout < NF * OH * OW) begin
      int p;
      p = in_idx % (H * W);
      in_valid = (in_idx < NF * H * W);
      for (int d = 0; d < D0; d++) in_data[d*DW +: DW] = img[p * D0 + d];
      if (nout >= OH * OW && stop_cycles < 1500) begin
        out_ready = 0;
        stop_cycles++;
      end else begin
        out_ready = (nout < OH * OW) || ($urandom_range(0, 3) == 0);
      end
      @(posedge clk); #1;
    end
    checks += 8;
    if (n_last != NF) begin failures++; $display("frames ended: %0d", n_last); end
    for (int l = 0; l < 2; l++) begin
      if (n_pad[l] == 0)   begin failures++; $display("layer %0d: no padding", l + 1); end
      if (n_disc[l] == 0)  begin failures++; $display("layer %0d: no discarded window", l + 1); end
    end
    if (n_stall[0] + n_stall[1] == 0) begin failures++; $display("no credit stall"); end
    if (n_bp == 0) begin failures++; $display("no output back-pressure"); end
    if (nout == 0) begin failures++; $display("no pooled output"); end
    $display("first pooled output %0d cycles after first input pixel", first_out_cyc - first_in_cyc);
    $display("events: pad %0d/%0d discard %0d/%0d credit-stall %0d/%0d backpressure %0d pooled %0d",
             n_pad[0], n_pad[1], n_disc[0], n_disc[1], n_stall[0], n_stall[1], n_bp, nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
