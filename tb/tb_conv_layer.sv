// tb_conv_layer: one convolution layer on the paper's worked example, a 5 x 5 x 3 input with
// three 3x3x3 filters, stride 1, padding 1. Weights are loaded through the write port; then three
// frames are streamed. Frame 0 runs with the output always ready: it checks every output against
// a reference convolution (with ReLU), the latency of the first output pixel and that a new pixel
// leaves every K*G cycles inside a row (G = 1 here: no depth decomposition). Frames 1 and 2 run with a consumer that first stops for
// 300 cycles and then stalls at random; results pile up in the result FIFO until the credit check
// must hold back filter issue. They are checked against the reference too. Padding and
// discarded-window counts are checked; the padding unit runs ahead into the top border row of
// the next frame (PW + 1 zeros), which the count includes.
module tb_conv_layer;
  import decoil_pkg::*;
  import tb_ref_pkg::*;
  localparam int H = 5, W = 5, D = 3, K = 3, G = 1;
  localparam int PW = W + 2;
  localparam int LATENCY = (G == 1) ? 1 + 9 * (1 + 4 + 2) : 1 + 9 * (1 + 4) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [D*DW-1:0] in_data;
  logic w_en;
  logic [3:0] w_tap;
  logic [1:0] w_addr;
  logic [D*DW-1:0] w_data;
  logic [K*DW-1:0] out_data;
  logic ev_pad, ev_discard, ev_credit_stall;

  int img[], wts[], ref_out[];
  int checks = 0, failures = 0, in_idx = 0, nout = 0, cyc = 0;
  int first_in_cyc = -1, first_out_cyc = -1, prev_out_cyc = -1, full_rate_gaps = 0;
  int n_pad = 0, n_disc = 0, n_stall = 0;
  bit stall_phase = 0;
  int stop_cycles = 0;

  conv_layer #(.IH(H), .IW(W), .D(D), .K(K), .G(G)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      n_pad   <= n_pad + int'(ev_pad);
      n_disc  <= n_disc + int'(ev_discard);
      n_stall <= n_stall + int'(ev_credit_stall);
      if (in_valid && in_ready) begin
        in_idx <= in_idx + 1;
        if (first_in_cyc < 0) first_in_cyc <= cyc;
      end
      if (out_valid && out_ready) begin
        int p;
        p = nout % (H * W);
        for (int k = 0; k < K; k++) begin
          checks++;
          if (out_data[k*DW +: DW] !== ref_out[p * K + k]) begin
            failures++;
            if (failures < 6) $display("pixel %0d filter %0d got %h exp %h", nout, k, out_data[k*DW +: DW], ref_out[p*K+k]);
          end
        end
        if (first_out_cyc < 0) first_out_cyc <= cyc;
        if (nout < H * W && p % W != 0) begin
          checks++;
          if (cyc - prev_out_cyc != K * G) begin failures++; $display("gap %0d at pixel %0d", cyc - prev_out_cyc, nout); end
          else full_rate_gaps++;
        end
        prev_out_cyc <= cyc;
        nout <= nout + 1;
      end
    end
  end

  initial begin
    img = new[H * W * D];
    wts = new[K * D * 9];
    foreach (img[i]) img[i] = hval(1, i, 1 << 18);
    foreach (wts[i]) wts[i] = hval(2, i, 1 << 16);
    conv3x3(img, wts, H, W, D, K, ref_out);
    in_valid = 0; out_ready = 0; in_data = '0; w_en = 0; w_tap = 0; w_addr = 0; w_data = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < K; k++)
      for (int t = 0; t < 9; t++) begin
        w_en = 1; w_tap = 4'(t); w_addr = 2'(k);
        for (int d = 0; d < D; d++) w_data[d*DW +: DW] = wts[(k * D + d) * 9 + t];
        @(posedge clk); #1;
      end
    w_en = 0;
    while (nout < 3 * H * W) begin
      int p;
      stall_phase = (nout >= H * W);
      p = in_idx % (H * W);
      in_valid  = (in_idx < 3 * H * W);
      for (int d = 0; d < D; d++) in_data[d*DW +: DW] = img[p * D + d];
      if (stall_phase && stop_cycles < 300) begin
        out_ready = 0;
        stop_cycles++;
      end else begin
        out_ready = !stall_phase || ($urandom_range(0, 5) == 0);
      end
      @(posedge clk); #1;
    end
    // first window after 2*PW+3 padded pixels (the first PW+1 of them padding, before the first
    // image pixel), one cycle to present it, K-1 more filter issues, LATENCY to the last
    // filter's result, one cycle in the FIFO, one in the packer (K*G issues with G depth groups).
    checks++;
    if (first_out_cyc - first_in_cyc != (2 * PW + 3) - (PW + 1) + 1 + (K * G - 1) + LATENCY + 1) begin
      failures++;
      $display("first output after %0d cycles", first_out_cyc - first_in_cyc);
    end
    checks += 3;
    if (n_pad != 3 * ((H + 2) * (W + 2) - H * W) + PW + 1) begin failures++; $display("pads %0d", n_pad); end
    if (n_disc != 3 * 2 * H) begin failures++; $display("discards %0d", n_disc); end
    if (n_stall == 0) begin failures++; $display("credit stall never happened"); end
    $display("latency %0d, full-rate gaps %0d, credit stalls %0d", first_out_cyc - first_in_cyc,
             full_rate_gaps, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
