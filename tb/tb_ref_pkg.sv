// tb_ref_pkg: reference arithmetic for the testbenches, written independently of the RTL.
// Feature maps are flat dynamic arrays indexed (y*W + x)*C + c; filters are indexed
// ((k*D + d)*3 + r)*3 + c. Values are Q16.16; products are truncated (arithmetic shift) to
// 32 bits and sums wrap, like the hardware.
package tb_ref_pkg;

  function automatic int fxm(input int a, input int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 16);
  endfunction

  // 3x3, stride 1, zero padding 1, K filters, ReLU: H x W x D -> H x W x K
  function automatic void conv3x3(input int in_map[], input int w[], input int H, input int W,
                                  input int D, input int K, output int out_map[]);
    out_map = new[H * W * K];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int k = 0; k < K; k++) begin
          int acc;
          acc = 0;
          for (int r = 0; r < 3; r++)
            for (int c = 0; c < 3; c++) begin
              int yy, xx;
              yy = y + r - 1; xx = x + c - 1;
              if (yy >= 0 && yy < H && xx >= 0 && xx < W)
                for (int d = 0; d < D; d++)
                  acc += fxm(in_map[(yy * W + xx) * D + d], w[((k * D + d) * 3 + r) * 3 + c]);
            end
          out_map[(y * W + x) * K + k] = (acc < 0) ? 0 : acc;
        end
  endfunction

  // 2x2 stride-2 max pooling (floor): H x W x K -> H/2 x W/2 x K
  function automatic void pool2x2(input int in_map[], input int H, input int W, input int K,
                                  output int out_map[]);
    out_map = new[(H / 2) * (W / 2) * K];
    for (int y = 0; y < H / 2; y++)
      for (int x = 0; x < W / 2; x++)
        for (int k = 0; k < K; k++) begin
          int m;
          m = in_map[((2 * y) * W + 2 * x) * K + k];
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (in_map[((2 * y + dy) * W + 2 * x + dx) * K + k] > m)
                m = in_map[((2 * y + dy) * W + 2 * x + dx) * K + k];
          out_map[(y * (W / 2) + x) * K + k] = m;
        end
  endfunction

  // Small pseudo-random fixed-point values from a hash of an index (for data a testbench must
  // be able to regenerate): uniform in [-range/2, range/2) LSBs.
  function automatic int hval(input int seed, input int idx, input int range);
    int unsigned h;
    h = 32'(idx) * 32'h9E3779B1 ^ 32'(seed) * 32'h85EBCA77;
    h = h ^ (h >> 15);
    h = h * 32'hC2B2AE3D;
    h = h ^ (h >> 13);
    return int'(h % 32'(range)) - range / 2;
  endfunction

endpackage
