// decoil_pkg: constants and helpers shared by the fused convolution accelerator.
//
// Data are 32-bit two's-complement fixed-point numbers with FRAC fraction bits. The word width
// follows the paper's precision (32-bit fixed point); the split into integer and fraction bits is
// not given there and Q16.16 is this design's choice. Every arithmetic operator (multiplier,
// adder) is a pipeline of OP_LAT = 9 register stages, the initial latency the paper states for
// both its multiplier and adder modules. Results wrap modulo 2^32, as plain fixed-point hardware
// does; there is no saturation.
package decoil_pkg;

  localparam int unsigned DW     = 32;  // data word width (paper: 32-bit fixed point)
  localparam int unsigned FRAC   = 16;  // fraction bits (design choice)
  localparam int unsigned OP_LAT = 9;   // latency of one multiplier or adder (paper: 9 cycles)

  typedef logic signed [DW-1:0] word_t;

  // Fixed-point product: full 64-bit product, arithmetic shift right by FRAC, keep the low DW bits.
  function automatic word_t fx_mul(input word_t a, input word_t b);
    logic signed [2*DW-1:0] p;
    p = 64'(a) * 64'(b);
    return word_t'(p >>> FRAC);
  endfunction

  // Number of levels of a binary adder tree over n inputs: ceil(log2(n)), 0 for n <= 1.
  function automatic int unsigned tree_levels(input int unsigned n);
    return (n <= 1) ? 0 : $clog2(n);
  endfunction

  // Number of values left after `lvl` levels of pairwise addition of n values.
  function automatic int unsigned tree_width(input int unsigned n, input int unsigned lvl);
    int unsigned w;
    w = n;
    for (int unsigned i = 0; i < lvl; i++) w = (w + 1) / 2;
    return w;
  endfunction

endpackage
