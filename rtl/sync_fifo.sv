// sync_fifo: single-clock FIFO of DEPTH words of W bits with valid/ready on both sides and an
// occupancy count. Writing when full or reading when empty is a protocol error (asserted).
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  output logic         pop_valid,
  input  logic         pop,
  output logic [W-1:0] pop_data,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  assign pop_valid = (count != 0);
  assign pop_data  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (count < DEPTH || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0);
endmodule
