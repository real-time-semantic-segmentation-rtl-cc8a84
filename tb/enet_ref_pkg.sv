// enet_ref_pkg: behavioural reference model of the segmentation network,
// used by the testbenches to work out expected outputs.
//
// A tensor is a C x H x W array of integers holding activations in units of
// 1/256 (the hardware's 9-bit signed, 8-fractional-bit format). Every layer
// of the network is a plain loop nest over whole tensors, written without
// the streaming, line buffers, reuse schedule or handshakes of the RTL, so a
// mismatch points at the hardware. Only the weight and bias values are
// taken from enet_pkg (they are data, not behaviour). Rounding here is
// written out on its own: floor division of the accumulator by 2^7, then a
// clamp to [-256, 255], then the optional ReLU.
package enet_ref_pkg;
  import enet_pkg::*;

  class tensor;
    int c, h, w;
    int d[];
    function new(int c_, int h_, int w_);
      c = c_; h = h_; w = w_;
      d = new[c_ * h_ * w_];
      foreach (d[i]) d[i] = 0;
    endfunction
    function int get(int ch, int y, int x);
      return d[(ch * h + y) * w + x];
    endfunction
    function void set(int ch, int y, int x, int v);
      d[(ch * h + y) * w + x] = v;
    endfunction
  endclass

  function automatic int clamp(int v);
    if (v > 255) return 255;
    if (v < -256) return -256;
    return v;
  endfunction

  function automatic int floor_div128(int v);
    if (v >= 0) return v / 128;
    return -((-v + 127) / 128);
  endfunction

  function automatic tensor random_image(int c, int h, int w);
    tensor t = new(c, h, w);
    foreach (t.d[i]) t.d[i] = int'($urandom_range(0, 255));
    return t;
  endfunction

  function automatic tensor pad(tensor t, int p);
    tensor o = new(t.c, t.h + p, t.w + p);
    for (int ch = 0; ch < t.c; ch++)
      for (int y = 0; y < t.h; y++)
        for (int x = 0; x < t.w; x++) o.set(ch, y, x, t.get(ch, y, x));
    return o;
  endfunction

  function automatic tensor conv(tensor t, int k, int cout, int seed, bit relu);
    tensor o = new(cout, t.h - k + 1, t.w - k + 1);
    int kkc = k * k * t.c;
    for (int oc = 0; oc < cout; oc++)
      for (int y = 0; y < o.h; y++)
        for (int x = 0; x < o.w; x++) begin
          int acc;
          int v;
          acc = int'(conv_bias(seed, oc));
          for (int ky = 0; ky < k; ky++)
            for (int kx = 0; kx < k; kx++)
              for (int ci = 0; ci < t.c; ci++)
                acc += t.get(ci, y + ky, x + kx) *
                       int'(conv_weight(seed, oc * kkc + (ky * k + kx) * t.c + ci, kkc));
          v = clamp(floor_div128(acc));
          if (relu && v < 0) v = 0;
          o.set(oc, y, x, v);
        end
    return o;
  endfunction

  function automatic tensor maxpool2(tensor t);
    tensor o = new(t.c, t.h / 2, t.w / 2);
    for (int ch = 0; ch < t.c; ch++)
      for (int y = 0; y < o.h; y++)
        for (int x = 0; x < o.w; x++) begin
          int m = t.get(ch, 2*y, 2*x);
          if (t.get(ch, 2*y, 2*x+1) > m)   m = t.get(ch, 2*y, 2*x+1);
          if (t.get(ch, 2*y+1, 2*x) > m)   m = t.get(ch, 2*y+1, 2*x);
          if (t.get(ch, 2*y+1, 2*x+1) > m) m = t.get(ch, 2*y+1, 2*x+1);
          o.set(ch, y, x, m);
        end
    return o;
  endfunction

  function automatic tensor upsample2(tensor t);
    tensor o = new(t.c, 2 * t.h, 2 * t.w);
    for (int ch = 0; ch < o.c; ch++)
      for (int y = 0; y < o.h; y++)
        for (int x = 0; x < o.w; x++) o.set(ch, y, x, t.get(ch, y / 2, x / 2));
    return o;
  endfunction

  function automatic tensor add_relu(tensor a, tensor b);
    tensor o = new(a.c, a.h, a.w);
    foreach (o.d[i]) begin
      int v = clamp(a.d[i] + b.d[i]);
      o.d[i] = (v < 0) ? 0 : v;
    end
    return o;
  endfunction

  // channels of a first, then those of b; ReLU on all
  function automatic tensor concat_relu(tensor a, tensor b);
    tensor o = new(a.c + b.c, a.h, a.w);
    for (int ch = 0; ch < o.c; ch++)
      for (int y = 0; y < o.h; y++)
        for (int x = 0; x < o.w; x++) begin
          int v = (ch < a.c) ? a.get(ch, y, x) : b.get(ch - a.c, y, x);
          o.set(ch, y, x, (v < 0) ? 0 : v);
        end
    return o;
  endfunction

  function automatic tensor initial_block(tensor t, int f0, int seed);
    tensor p = maxpool2(t);
    tensor m = conv(pad(p, 2), 3, f0 - t.c, seed * 16 + 1, 1'b0);
    return concat_relu(m, p);
  endfunction

  // mode: 0 down, 1 regular, 2 up (as bn_mode_e)
  function automatic tensor bottleneck(tensor t, int mode, int f, int seed);
    tensor s0 = (mode == 0) ? maxpool2(t) : t;
    tensor m  = conv(pad(s0, 1), 2, f, seed * 16 + 1, 1'b1);
    tensor k;
    if (mode == 2) m = upsample2(m);
    m = conv(pad(m, 2), 3, f, seed * 16 + 2, 1'b1);
    m = conv(m, 1, f, seed * 16 + 3, 1'b0);
    k = conv(s0, 1, f, seed * 16 + 4, 1'b0);
    if (mode == 2) k = upsample2(k);
    return add_relu(m, k);
  endfunction

  function automatic tensor final_block(tensor t, int ncls, int seed);
    return conv(pad(upsample2(t), 1), 2, ncls, seed * 16 + 1, 1'b0);
  endfunction

  // whole network; f[0..5] filter counts; mirrors the stage numbering of
  // the top level (stage s >= 1 uses seed s+1, the final block seed 99)
  function automatic tensor network(tensor img, int f[6]);
    tensor t = initial_block(img, f[0], 1);
    for (int s = 1; s <= 15; s++) begin
      int b = (s - 1) / 3 + 1;
      int pos = (s - 1) % 3;
      int mode = 1;
      if (pos == 0 && b <= 2) mode = 0;
      if (pos == 0 && b >= 4) mode = 2;
      t = bottleneck(t, mode, f[b], s + 1);
    end
    return final_block(t, 4, 99);
  endfunction

endpackage
