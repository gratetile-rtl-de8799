// gt_pkg -- types, constants and format functions shared by the GrateTile
// blocks.
//
// A feature map is held in memory as 16-bit words. Channels are grouped by
// eight, so one pixel of one channel group is exactly one 128-bit cache line
// (8 words, 16 bytes). Along x and y the map is cut with period MOD_N = 8 at
// two boundaries g0 and g1 = g0 + L0 (mod 8). One period in x times one period
// in y times eight channels is a "group" of 8x8x8 = 512 words; it consists of
// four subtensors q = {yseg, xseg}: q0 = L0 x L0, q1 = L0 x (8-L0),
// q2 = (8-L0) x L0, q3 = (8-L0) x (8-L0) pixels (rows x columns). The four are
// stored back to back from one cache-line pointer.
//
// Metadata record of a group (48 bits):
//   [47:20] 28-bit cache-line pointer (32-bit byte address / 16)
//   [19:0]  the four compressed sizes in cache lines; the field of q is
//           clog2(raw_lines(q)+1) bits wide and the fields are packed from
//           bit 0 upward in the order q0, q1, q2, q3.
// With L0 = 2 (3x3 kernels) the fields are 3+4+4+6 = 17 bits; with L0 = 4
// (5x5 kernels) 5+5+5+5 = 20 bits, the largest case, which sets the 20-bit
// field. Pointer width, 16-byte alignment, word size and the two field sums
// follow the paper; the bit order inside the record is this design's choice.
//
// A subtensor whose size field equals its raw line count (one line per
// pixel) is stored uncompressed; any smaller size means bitmask coding. That
// fallback is what keeps the fields as narrow as the paper counts them.
package gt_pkg;

  parameter int unsigned WORD_W     = 16;
  parameter int unsigned LINE_WORDS = 8;
  parameter int unsigned LINE_W     = WORD_W * LINE_WORDS;  // 128-bit line
  parameter int unsigned LINE_BYTES = LINE_W / 8;           // 16-byte alignment
  parameter int unsigned MOD_N      = 8;                    // GrateTile period
  parameter int unsigned ADDR_W     = 32;                   // byte address space
  parameter int unsigned PTR_W      = ADDR_W - $clog2(LINE_BYTES);  // 28
  parameter int unsigned SIZE_W     = 20;
  parameter int unsigned META_W     = PTR_W + SIZE_W;       // 48
  parameter int unsigned COORD_W    = 12;                   // signed pixel coordinate
  parameter int unsigned GIDX_W     = 20;                   // metadata record index
  parameter int unsigned LEN_W      = 7;                    // 0..64 lines per subtensor
  parameter int unsigned SEG_W      = 4;                    // 0..8 pixels per segment
  parameter int unsigned CG_W       = 8;                    // channel groups of 8

  typedef logic [WORD_W-1:0]         word_t;
  typedef logic [LINE_W-1:0]         line_t;
  typedef logic [PTR_W-1:0]          lptr_t;
  typedef logic [META_W-1:0]         meta_t;
  typedef logic [LEN_W-1:0]          len_t;
  typedef logic [SEG_W-1:0]          seg_t;
  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic [GIDX_W-1:0]         gidx_t;
  typedef logic [CG_W-1:0]           cg_t;

  // Length of segment `s` (0 or 1) of a period when the first is L0 long.
  function automatic seg_t seg_len(input seg_t l0, input logic s);
    return s ? seg_t'(MOD_N) - l0 : l0;
  endfunction

  // Pixels (= raw cache lines) of subtensor q.
  function automatic len_t raw_lines(input seg_t l0, input logic [1:0] q);
    return len_t'(seg_len(l0, q[1])) * len_t'(seg_len(l0, q[0]));
  endfunction

  // Bits needed to hold 0..n.
  function automatic int unsigned field_w(input len_t n);
    int unsigned w;
    w = 0;
    while ((32'd1 << w) <= 32'(n)) w++;
    return w;
  endfunction

  // Bit offset of the size field of q inside the 20-bit size part.
  function automatic int unsigned field_lsb(input seg_t l0, input logic [1:0] q);
    int unsigned b;
    b = 0;
    for (int j = 0; j < 4; j++)
      if (j < int'(q)) b += field_w(raw_lines(l0, 2'(j)));
    return b;
  endfunction

  // Size in cache lines of subtensor q, read out of the size part
  // (bits 19:0) of a metadata record.
  function automatic len_t meta_size(input logic [SIZE_W-1:0] sizes, input seg_t l0,
                                     input logic [1:0] q);
    logic [SIZE_W-1:0] f;
    logic [SIZE_W-1:0] mask;
    f    = sizes >> field_lsb(l0, q);
    mask = (SIZE_W'(1) << field_w(raw_lines(l0, q))) - SIZE_W'(1);
    return len_t'(f & mask);
  endfunction

  function automatic meta_t meta_pack(input lptr_t ptr, input seg_t l0,
                                      input len_t s0, input len_t s1,
                                      input len_t s2, input len_t s3);
    logic [SIZE_W-1:0] f;
    f = SIZE_W'(s0)
      | (SIZE_W'(s1) << field_lsb(l0, 2'd1))
      | (SIZE_W'(s2) << field_lsb(l0, 2'd2))
      | (SIZE_W'(s3) << field_lsb(l0, 2'd3));
    return {ptr, f};
  endfunction

  // Number of non-zero words in one pixel (one line).
  function automatic logic [3:0] nz_count(input line_t px);
    logic [3:0] c;
    c = '0;
    for (int i = 0; i < LINE_WORDS; i++)
      c += {3'b0, px[i*WORD_W +: WORD_W] != '0};
    return c;
  endfunction

  // Lines taken by the bitmask coding of `npix` pixels holding `nnz`
  // non-zero words: one 16-bit mask word per pair of pixels, followed by
  // that pair's non-zero words, padded to a whole line at the end.
  function automatic logic [9:0] comp_lines(input len_t npix, input logic [9:0] nnz);
    logic [9:0] words;
    words = 10'((32'(npix) + 32'd1) >> 1) + nnz;
    return (words + 10'(LINE_WORDS - 1)) >> $clog2(LINE_WORDS);
  endfunction

endpackage
