// conv_layer: one fused convolution layer (KW x KW kernel, stride 1, zero padding PAD, K filters,
// ReLU) working on a stream of depth-concatenated pixels.
//
// Data path, in the order of the paper's Sections III-A to III-E:
//   pad_mux            inserts the zero border around the IH x IW x D input stream;
//   line_buffer_window turns the padded stream into KW x KW x D windows, dropping row-wrap ones;
//   filter_bank        KW*KW BRAMs, one whole depth-concatenated 3-D filter read per cycle;
//   conv3d_pipe        D parallel 2-D convolutions plus a depth adder tree, ReLU at the end;
//   sync_fifo          holds finished scalar results;
//   depth_packer       gathers the K filter results of a pixel into one K-lane output word.
// Each window is held for K cycles while filters 0..K-1 are read and issued one per cycle, so the
// arithmetic pipeline produces one filter result per cycle and one output pixel per K cycles
// (paper: "the input window is kept constant till all filters have been processed").
// The arithmetic pipeline never stalls, as in the paper. To let a slower consumer throttle the
// layer anyway, a filter is issued only while the results already in flight plus those in the
// FIFO leave room in the FIFO (credit-based issue); this back-pressure scheme is this design's
// choice, the paper states only that its pipeline has no stall after the initial latency.
// Latency from a window entering the datapath to its first filter result: 1 cycle of filter
// BRAM read plus LAT * (1 + ceil(log2 KW*KW) + ceil(log2 D)).
// Iterative depth decomposition (paper Sec. V): with G > 1 the D input slices are cut into G
// groups of D/G; each filter then takes G cycles, one group per cycle, through a pipeline only
// D/G slices wide, and depth_group_acc adds the G partial sums and applies ReLU. The default
// G = 1 is the fully parallel datapath of the main configuration.
// Interfaces: pixel stream in (in_*), weight write port (w_*, see filter_bank), pixel stream out
// (out_*, K*32 bits, filter f in bits [f*32 +: 32]). Status outputs pulse for events a testbench
// or a performance counter may count.
module conv_layer
  import decoil_pkg::*;
#(
  parameter int unsigned IH   = 224,
  parameter int unsigned IW   = 224,
  parameter int unsigned D    = 3,
  parameter int unsigned K    = 64,
  parameter int unsigned KW   = 3,
  parameter int unsigned PAD  = 1,
  parameter int unsigned LAT  = OP_LAT,
  parameter bit          RELU = 1'b1,
  parameter int unsigned G    = 1,
  localparam int unsigned DG      = D / G,
  localparam int unsigned GW      = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned KK      = KW * KW,
  localparam int unsigned AW      = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned TW      = (KK > 1) ? $clog2(KK) : 1,
  localparam int unsigned LATENCY = 1 + LAT * (1 + tree_levels(KK) + tree_levels(DG)) + ((G > 1) ? 1 : 0),
  // Result FIFO: room for everything that can be in flight, rounded up to a power of two.
  localparam int unsigned FIFO_DEPTH = 1 << $clog2(LATENCY + 2)
) (
  input  logic            clk,
  input  logic            rst_n,
  // input pixel stream (IH x IW, raster order, D lanes)
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [D*DW-1:0] in_data,
  // weight loading
  input  logic            w_en,
  input  logic [TW-1:0]   w_tap,
  input  logic [AW-1:0]   w_addr,
  input  logic [D*DW-1:0] w_data,
  // output pixel stream (IH+2*PAD-KW+1 x IW+2*PAD-KW+1, raster order, K lanes)
  output logic            out_valid,
  input  logic            out_ready,
  output logic [K*DW-1:0] out_data,
  // events
  output logic            ev_pad,       // a padding zero entered the line buffer
  output logic            ev_discard,   // a row-wrap window was discarded
  output logic            ev_credit_stall // a filter issue waited for FIFO room
);
  localparam int unsigned FAW = $clog2(FIFO_DEPTH);

  // ---------------- padding and windowing ----------------
  logic            p_valid, p_ready, p_is_pad;
  logic [D*DW-1:0] p_data;

  pad_mux #(.IH(IH), .IW(IW), .D(D), .PAD(PAD)) u_pad (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data), .out_is_pad(p_is_pad)
  );
  assign ev_pad = p_valid && p_ready && p_is_pad;

  logic  w_valid, w_ready;
  word_t win [D][KK];

  line_buffer_window #(.PH(IH + 2*PAD), .PW(IW + 2*PAD), .D(D), .KW(KW)) u_lbw (
    .clk, .rst_n,
    .in_valid(p_valid), .in_ready(p_ready), .in_data(p_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_win(win), .out_last(),
    .out_discard(ev_discard)
  );

  // ---------------- filter issue with credit check ----------------
  logic [AW-1:0]  fidx;
  logic [GW-1:0]  gidx;
  logic           last_grp;
  logic [FAW:0]   fifo_count;
  logic [FAW:0]   inflight;
  logic           issue, room;
  logic           c_valid;
  logic [AW-1:0]  c_tag;
  word_t          c_data;

  assign room    = (32'(fifo_count) + 32'(inflight)) < FIFO_DEPTH;
  assign issue   = w_valid && room;
  assign last_grp = (gidx == GW'(G - 1));
  assign w_ready  = issue && last_grp && (fidx == AW'(K - 1));
  assign ev_credit_stall = w_valid && !room;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fidx     <= '0;
      gidx     <= '0;
      inflight <= '0;
    end else begin
      if (issue) begin
        gidx <= last_grp ? '0 : gidx + 1'b1;
        if (last_grp) fidx <= (fidx == AW'(K - 1)) ? '0 : fidx + 1'b1;
      end
      inflight <= inflight + (FAW+1)'(issue && last_grp) - (FAW+1)'(c_valid);
    end
  end

  // Filter BRAM read (one cycle); the window is registered alongside it.
  word_t         filt [D][KK];
  word_t         win_q [D][KK];
  logic          iss_q;
  logic [AW-1:0] fidx_q;
  logic [GW-1:0] gidx_q;

  filter_bank #(.KW(KW), .D(D), .K(K)) u_fb (
    .clk,
    .wr_en(w_en), .wr_tap(w_tap), .wr_addr(w_addr), .wr_data(w_data),
    .rd_en(issue), .rd_addr(fidx), .filt(filt)
  );

  always_ff @(posedge clk) begin
    if (issue) begin
      win_q  <= win;
      fidx_q <= fidx;
      gidx_q <= gidx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) iss_q <= 1'b0;
    else        iss_q <= issue;
  end

  // ---------------- 3-D convolution pipeline ----------------
  // With G > 1 depth groups, group g uses depth slices g*DG .. g*DG+DG-1 of window and filter.
  word_t win_g  [DG][KK];
  word_t filt_g [DG][KK];
  for (genvar d = 0; d < DG; d++) begin : g_grp_sel
    for (genvar t = 0; t < KK; t++) begin : g_tap
      if (G == 1) begin : g_all
        assign win_g[d][t]  = win_q[d][t];
        assign filt_g[d][t] = filt[d][t];
      end else begin : g_sel
        assign win_g[d][t]  = win_q[32'(gidx_q) * DG + d][t];
        assign filt_g[d][t] = filt[32'(gidx_q) * DG + d][t];
      end
    end
  end

  if (G == 1) begin : g_single
    conv3d_pipe #(.KW(KW), .D(DG), .TAGW(AW), .LAT(LAT), .RELU(RELU)) u_c3d (
      .clk, .rst_n,
      .in_valid(iss_q), .in_tag(fidx_q), .win(win_g), .filt(filt_g),
      .out_valid(c_valid), .out_tag(c_tag), .out_data(c_data)
    );
  end else begin : g_grouped
    // Iterative depth decomposition: partial sums of the G groups, ReLU after accumulation.
    logic          part_valid;
    logic [AW+1:0] part_tag;
    word_t         part_data;
    conv3d_pipe #(.KW(KW), .D(DG), .TAGW(AW + 2), .LAT(LAT), .RELU(1'b0)) u_c3d (
      .clk, .rst_n,
      .in_valid(iss_q), .in_tag({gidx_q == '0, gidx_q == GW'(G - 1), fidx_q}),
      .win(win_g), .filt(filt_g),
      .out_valid(part_valid), .out_tag(part_tag), .out_data(part_data)
    );
    depth_group_acc #(.TAGW(AW), .RELU(RELU)) u_acc (
      .clk, .rst_n,
      .in_valid(part_valid), .in_first(part_tag[AW+1]), .in_last(part_tag[AW]),
      .in_tag(part_tag[AW-1:0]), .in_data(part_data),
      .out_valid(c_valid), .out_tag(c_tag), .out_data(c_data)
    );
  end

  // ---------------- result FIFO and depth concatenation ----------------
  logic          f_valid, f_pop;
  logic [AW-1:0] f_tag;
  word_t         f_data;

  sync_fifo #(.W(AW + DW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push(c_valid), .push_data({c_tag, c_data}),
    .pop_valid(f_valid), .pop(f_pop), .pop_data({f_tag, f_data}),
    .count(fifo_count)
  );

  logic pk_ready;
  assign f_pop = f_valid && pk_ready;

  depth_packer #(.K(K)) u_pack (
    .clk, .rst_n,
    .in_valid(f_valid), .in_ready(pk_ready), .in_idx(f_tag), .in_data(f_data),
    .out_valid, .out_ready, .out_data
  );

  a_credit: assert property (@(posedge clk) disable iff (!rst_n)
                             32'(fifo_count) + 32'(inflight) <= FIFO_DEPTH);
endmodule
