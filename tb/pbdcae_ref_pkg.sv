// pbdcae_ref_pkg: behavioural reference of the binarized encoder, for the
// testbenches.
//
// Parameters are not trained values but pseudo-random ones from a hash, so
// that a testbench can load a layer and compute the expected result without
// any data file: slice s (32 bits) of weight word w of layer L is
// hash32(L, w, s), and bit b of that word is bit b%32 of slice b/32. The
// threshold of word w of layer L is hash32(L+8, w, 0) mod (2R+1) - R, with R
// chosen by the testbench so that both signs occur.
//
// Activation arrays are flat: element (y, x, c) of an H x W x C map sits at
// (y*W + x)*C + c, which is also the order in which FC1 reads its input.
package pbdcae_ref_pkg;

  typedef int          iarr_t[];
  typedef logic [31:0] u32_t;

  function automatic u32_t hash32(int unsigned a, int unsigned b, int unsigned c);
    u32_t h;
    h = a * 32'h9E3779B1 ^ b * 32'h85EBCA77 ^ c * 32'hC2B2AE3D ^ 32'h27D4EB2F;
    h ^= h >> 15;  h *= 32'h2C1B3C6D;
    h ^= h >> 12;  h *= 32'h297A2D39;
    h ^= h >> 15;
    return h;
  endfunction

  function automatic bit wbit(int unsigned layer, int unsigned word, int unsigned b);
    u32_t s;
    s = hash32(layer, word, b / 32);
    return s[b % 32];
  endfunction

  function automatic int thr_of(int unsigned layer, int unsigned word, int r);
    return int'(hash32(layer + 8, word, 0) % u32_t'(2*r + 1)) - r;
  endfunction

  // 3x3 valid convolution + threshold. mb=1: inputs are unsigned pixels,
  // otherwise 0/1 coded binary activations. Returns 0/1 activations.
  function automatic iarr_t conv(iarr_t in, int h, int w, int cin, int cout,
                                 int layer, int r, bit mb);
    iarr_t o;
    int oh = h - 2, ow = w - 2;
    o = new[oh*ow*cout];
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int co = 0; co < cout; co++) begin
          int s = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              for (int ci = 0; ci < cin; ci++) begin
                int a = in[((y+ky)*w + (x+kx))*cin + ci];
                bit wb = wbit(layer, co, (ky*3 + kx)*cin + ci);
                if (mb) s += wb ? a : -a;
                else    s += (a == int'(wb)) ? 1 : -1;
              end
          o[(y*ow + x)*cout + co] = (s >= thr_of(layer, co, r)) ? 1 : 0;
        end
    return o;
  endfunction

  // 2x2 stride-2 max pooling of 0/1 activations (floor of odd sizes).
  function automatic iarr_t pool(iarr_t in, int h, int w, int c);
    iarr_t o;
    int oh = h / 2, ow = w / 2;
    o = new[oh*ow*c];
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int k = 0; k < c; k++)
          o[(y*ow + x)*c + k] = in[((2*y)*w + 2*x)*c + k]   | in[((2*y)*w + 2*x+1)*c + k] |
                                in[((2*y+1)*w + 2*x)*c + k] | in[((2*y+1)*w + 2*x+1)*c + k];
    return o;
  endfunction

  // Fully connected layer; returns the margins (dot product - threshold).
  function automatic iarr_t fc(iarr_t in, int in_w, int nout, int layer, int r);
    iarr_t o;
    int nch = in.size() / in_w;
    o = new[nout];
    for (int n = 0; n < nout; n++) begin
      int s = 0;
      for (int p = 0; p < nch; p++)
        for (int i = 0; i < in_w; i++)
          s += (in[p*in_w + i] == int'(wbit(layer, p*nout + n, i))) ? 1 : -1;
      o[n] = s - thr_of(layer, n, r);
    end
    return o;
  endfunction

endpackage
