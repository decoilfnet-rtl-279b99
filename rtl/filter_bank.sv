// filter_bank: the KW*KW filter BRAMs of one convolution layer.
//
// Following the paper's depth concatenation, each filter tap (r, c) of the KW x KW kernel has a
// BRAM of its own, and each BRAM word holds that tap for all D depth slices side by side
// (D*32 bits, slice 0 in the low bits). Filters are kept one after another: address f holds
// filter f. Reading address f from all KW*KW BRAMs at once therefore yields the whole 3-D filter
// in one cycle, which is split here into D independent 2-D filters for the convolution units.
// Read: rd_en/rd_addr in one cycle, filt valid in the next (synchronous BRAM read).
// Write: wr_en writes wr_data into BRAM wr_tap (= r*KW + c) at address wr_addr; this is the
// weight-loading port, whose protocol the paper does not describe.
module filter_bank
  import decoil_pkg::*;
#(
  parameter int unsigned KW = 3,
  parameter int unsigned D  = 3,
  parameter int unsigned K  = 64,
  localparam int unsigned KK = KW * KW,
  localparam int unsigned AW = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned TW = (KK > 1) ? $clog2(KK) : 1
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [TW-1:0]   wr_tap,
  input  logic [AW-1:0]   wr_addr,
  input  logic [D*DW-1:0] wr_data,
  input  logic            rd_en,
  input  logic [AW-1:0]   rd_addr,
  output word_t           filt [D][KK]
);
  logic [D*DW-1:0] rd_word [KK];

  for (genvar t = 0; t < KK; t++) begin : g_bram
    logic [D*DW-1:0] mem [K];
    always_ff @(posedge clk) begin
      if (wr_en && wr_tap == TW'(t)) mem[wr_addr] <= wr_data;
      if (rd_en) rd_word[t] <= mem[rd_addr];
    end
    for (genvar d = 0; d < D; d++) begin : g_split
      assign filt[d][t] = rd_word[t][d*DW +: DW];
    end
  end
endmodule
