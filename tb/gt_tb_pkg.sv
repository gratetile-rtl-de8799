// gt_tb_pkg -- reference models shared by the GrateTile testbenches.
//
// Written from the format description, independently of the RTL: the
// bitmask coding of a subtensor (one mask word per pixel pair, then the
// pair's non-zero words, packed little-endian into 128-bit lines, zero
// padded), the raw fallback (stored raw when coding does not save a line),
// the metadata field widths and the division of a layer.
package gt_tb_pkg;

  typedef logic [15:0]  tword_t;
  typedef logic [127:0] tline_t;
  typedef tline_t       tlineq_t[$];

  // Bitmask coding of a list of pixels, before the raw decision.
  function automatic tlineq_t ref_code(input tlineq_t px);
    tword_t w[$];
    tlineq_t out;
    tline_t l;
    for (int p = 0; p < px.size(); p += 2) begin
      tword_t m;
      tword_t v[$];
      m = '0;
      for (int e = 0; e < 16; e++) begin
        tword_t x;
        if (p + e / 8 < px.size()) x = px[p + e / 8][(e % 8) * 16 +: 16];
        else x = '0;
        if (x != 0) begin
          m[e] = 1'b1;
          v.push_back(x);
        end
      end
      w.push_back(m);
      foreach (v[i]) w.push_back(v[i]);
    end
    l = '0;
    foreach (w[i]) begin
      l[(i % 8) * 16 +: 16] = w[i];
      if (i % 8 == 7) begin
        out.push_back(l);
        l = '0;
      end
    end
    if (w.size() % 8 != 0) out.push_back(l);
    return out;
  endfunction

  // Stored form of a subtensor: coded, or raw when coding saves nothing.
  function automatic tlineq_t ref_store(input tlineq_t px, output bit raw);
    tlineq_t c;
    c   = ref_code(px);
    raw = c.size() >= px.size();
    return raw ? px : c;
  endfunction

  // Segment length and subtensor pixel count for first-segment length l0.
  function automatic int seg(input int l0, input int s);
    return (s != 0) ? 8 - l0 : l0;
  endfunction

  function automatic int npix(input int l0, input int q);
    return seg(l0, q / 2) * seg(l0, q % 2);
  endfunction

  function automatic int fw(input int n);
    int w;
    w = 0;
    while ((1 << w) <= n) w++;
    return w;
  endfunction

  // 48-bit metadata record: pointer in [47:20], sizes from bit 0 in q order.
  function automatic logic [47:0] ref_meta(input int ptr, input int l0, input int sz[4]);
    logic [47:0] m;
    int b;
    m = '0;
    m[47:20] = 28'(ptr);
    b = 0;
    for (int q = 0; q < 4; q++) begin
      for (int i = 0; i < fw(npix(l0, q)); i++) m[b + i] = ((sz[q] >> i) & 1) != 0;
      b += fw(npix(l0, q));
    end
    return m;
  endfunction

  // Non-negative modulo.
  function automatic int pmod(input int a, input int n);
    int r;
    r = a % n;
    return r < 0 ? r + n : r;
  endfunction

  // Test feature map: pixel (y, x) of channel group cg, zero outside the
  // W x H map. Mostly sparse (about 70 % zero words, like ReLU outputs),
  // with dense 4x4 patches that force the raw fallback.
  function automatic int mix(input int a);
    int unsigned h;
    h = a;
    h = (h ^ (h >> 16)) * 32'h45d9f3b;
    h = (h ^ (h >> 16)) * 32'h45d9f3b;
    return int'(h ^ (h >> 16));
  endfunction

  function automatic tline_t fm_px(input int y, input int x, input int cg,
                                   input int W, input int H, input int seed);
    tline_t l;
    bit dense;
    l = '0;
    if (x < 0 || y < 0 || x >= W || y >= H) return l;
    dense = ((x / 4 + y / 4 + cg + seed) % 5) == 0;
    for (int c = 0; c < 8; c++) begin
      int h;
      h = mix(seed * 7919 + ((cg * 1024 + y) * 1024 + x) * 8 + c);
      if (dense || (h & 255) < 77) l[c*16 +: 16] = 16'((h >>> 8) | 1);
    end
    return l;
  endfunction

  // Reference stored form of group (gx, gy, cg): its lines, its metadata
  // record with pointer ptr, and how many of its subtensors are raw.
  function automatic tlineq_t ref_group(input int W, input int H, input int l0, input int sh,
                                        input int gx, input int gy, input int cg,
                                        input int seed, input int ptr,
                                        output logic [47:0] meta, output int nraw,
                                        output int ncomp);
    tlineq_t all;
    int sz[4];
    nraw = 0;
    ncomp = 0;
    for (int q = 0; q < 4; q++) begin
      tlineq_t px, st;
      bit raw;
      int ly, lx, oy, ox;
      ly = seg(l0, q / 2);
      lx = seg(l0, q % 2);
      oy = 8 * gy - sh + (((q / 2) != 0) ? l0 : 0);
      ox = 8 * gx - sh + (((q % 2) != 0) ? l0 : 0);
      px.delete();
      for (int y = 0; y < ly; y++)
        for (int x = 0; x < lx; x++) px.push_back(fm_px(oy + y, ox + x, cg, W, H, seed));
      sz[q] = 0;
      if (px.size() == 0) continue;
      st = ref_store(px, raw);
      if (raw) nraw++;
      else ncomp++;
      sz[q] = st.size();
      foreach (st[i]) all.push_back(st[i]);
    end
    meta = ref_meta(ptr, l0, sz);
    return all;
  endfunction

  // Subtensor (segment) sizes of a record.
  function automatic int meta_sz(input logic [47:0] m, input int l0, input int q);
    int b, v;
    b = 0;
    for (int j = 0; j < q; j++) b += fw(npix(l0, j));
    v = 0;
    for (int i = 0; i < fw(npix(l0, q)); i++) v |= int'(m[b + i]) << i;
    return v;
  endfunction

endpackage
