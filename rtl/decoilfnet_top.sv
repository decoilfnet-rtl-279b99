// decoilfnet_top: a chain of fused 3x3 convolution layers with optional 2x2 max pooling after any
// of them. The defaults give the paper's main configuration, the first layers of VGG-16:
// conv1_1 (3 -> 64) -> conv1_2 (64 -> 64) -> pool1 on a 224 x 224 x 3 image.
//
// The input image arrives once, as a serial stream of depth-concatenated pixels (all D0 channels
// of a pixel in one word). Layer 0 convolves it with KS[0] filters; each of its output pixels,
// once all filters are done, is streamed straight into the next layer's line buffer (or into a
// pooling unit first, where POOL_AFTER[i] is set, whose output then feeds the next layer). No
// intermediate feature map leaves the chip: inter-layer fusion. Every layer starts as soon as the
// pixels its next window depends on exist.
// Parameters: NCONV layers (at most 8), KS[i] filters and GS[i] depth groups in layer i
// (GS > 1 selects iterative depth decomposition: fewer multipliers, GS times more cycles per
// filter), POOL_AFTER[i] puts a pooling unit after layer i. Feature map sizes follow: a pooling
// unit halves height and width. With the defaults, layer 0 has 9*3 = 27 multipliers and layer 1
// 9*64 = 576, which matches the 605 DSPs the paper reports for this configuration, and the output
// is 112 x 112 x 64.
// Ports: in_* input pixel stream; w_*[i] weight-loading port of layer i's filter BRAMs (only the
// low D_i*32 bits of w_data[i] are used, D_i being that layer's input depth); out_* output stream
// (KS[NCONV-1] lanes) with out_last on the final pixel of a frame; ev_*[i] single-cycle event
// pulses of layer i for monitoring. Weights must be loaded before the image is streamed; the
// paper does not describe how weights reach the BRAMs.
module decoilfnet_top
  import decoil_pkg::*;
#(
  parameter int unsigned IH                = 224,
  parameter int unsigned IW                = 224,
  parameter int unsigned D0                = 3,
  parameter int unsigned NCONV             = 2,
  parameter int unsigned KS         [8]    = '{64, 64, 0, 0, 0, 0, 0, 0},
  parameter int unsigned GS         [8]    = '{1, 1, 1, 1, 1, 1, 1, 1},
  parameter bit          POOL_AFTER [8]    = '{1'b0, 1'b1, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0, 1'b0},
  parameter int unsigned LAT               = OP_LAT,
  localparam int unsigned TW   = 4,
  localparam int unsigned KMAX = max_k(KS, NCONV),
  localparam int unsigned DMAX = (D0 > KMAX) ? D0 : KMAX,
  localparam int unsigned AWM  = (KMAX > 1) ? $clog2(KMAX) : 1,
  localparam int unsigned KOUT = KS[NCONV-1]
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [D0*DW-1:0]   in_data,
  input  logic               w_en   [NCONV],
  input  logic [TW-1:0]      w_tap  [NCONV],
  input  logic [AWM-1:0]     w_addr [NCONV],
  input  logic [DMAX*DW-1:0] w_data [NCONV],
  output logic               out_valid,
  input  logic               out_ready,
  output logic [KOUT*DW-1:0] out_data,
  output logic               out_last,
  output logic [NCONV-1:0]   ev_pad,
  output logic [NCONV-1:0]   ev_discard,
  output logic [NCONV-1:0]   ev_credit_stall
);
  function automatic int unsigned max_k(input int unsigned ks [8], input int unsigned n);
    int unsigned m;
    m = 1;
    for (int unsigned i = 0; i < n; i++) if (ks[i] > m) m = ks[i];
    return m;
  endfunction

  // Feature map size at the input of layer i: halved by every pooling unit before it.
  function automatic int unsigned size_in(input int unsigned s0, input int unsigned i);
    int unsigned s;
    s = s0;
    for (int unsigned j = 0; j < i; j++) if (POOL_AFTER[j]) s = s / 2;
    return s;
  endfunction

  for (genvar i = 0; i < NCONV; i++) begin : g_layer
    localparam int unsigned D  = (i == 0) ? D0 : KS[(i == 0) ? 0 : i - 1];
    localparam int unsigned K  = KS[i];
    localparam int unsigned H  = size_in(IH, i);
    localparam int unsigned W  = size_in(IW, i);
    localparam int unsigned AW = (K > 1) ? $clog2(K) : 1;

    // stream into this layer, stream out of the layer, stream out of this stage (after pooling)
    logic             l_in_valid, l_in_ready;
    logic [D*DW-1:0]  l_in_data;
    logic             c_valid, c_ready;
    logic [K*DW-1:0]  c_data;
    logic             s_valid, s_ready, s_last;
    logic [K*DW-1:0]  s_data;

    if (i == 0) begin : g_src
      assign l_in_valid = in_valid;
      assign l_in_data  = in_data;
      assign in_ready   = l_in_ready;
    end else begin : g_chain
      assign l_in_valid = g_layer[i-1].s_valid;
      assign l_in_data  = g_layer[i-1].s_data;
      assign g_layer[i-1].s_ready = l_in_ready;
    end

    conv_layer #(.IH(H), .IW(W), .D(D), .K(K), .LAT(LAT), .G(GS[i])) u_conv (
      .clk, .rst_n,
      .in_valid(l_in_valid), .in_ready(l_in_ready), .in_data(l_in_data),
      .w_en(w_en[i]), .w_tap(w_tap[i]), .w_addr(w_addr[i][AW-1:0]), .w_data(w_data[i][D*DW-1:0]),
      .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data),
      .ev_pad(ev_pad[i]), .ev_discard(ev_discard[i]), .ev_credit_stall(ev_credit_stall[i])
    );

    if (POOL_AFTER[i]) begin : g_pool
      max_pool #(.IH(H), .IW(W), .K(K)) u_pool (
        .clk, .rst_n,
        .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
        .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data), .out_last(s_last)
      );
    end else begin : g_nopool
      // Frame position counter, only to mark the last pixel of a frame.
      logic [$clog2(H*W+1)-1:0] pix;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)                    pix <= '0;
        else if (c_valid && c_ready)   pix <= (32'(pix) == H * W - 1) ? '0 : pix + 1'b1;
      end
      assign s_valid = c_valid;
      assign c_ready = s_ready;
      assign s_data  = c_data;
      assign s_last  = (32'(pix) == H * W - 1);
    end
  end

  assign out_valid = g_layer[NCONV-1].s_valid;
  assign out_data  = g_layer[NCONV-1].s_data;
  assign out_last  = g_layer[NCONV-1].s_last;
  assign g_layer[NCONV-1].s_ready = out_ready;

  initial begin
    assert (NCONV >= 1 && NCONV <= 8) else $error("NCONV must be 1..8");
  end
endmodule
