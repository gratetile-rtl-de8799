// gt_subtensor_addr -- locates one subtensor in memory from its group's
// metadata record.
//
// This is the paper's two-step access: the record's pointer gives the
// cache-line address of the group, and the compressed sizes of the
// subtensors stored before the requested one are added to it. The unit also
// returns the requested subtensor's own size (the number of lines to fetch),
// its pixel count and whether it is stored uncompressed (size equal to the
// pixel count, see gt_pkg).
//
// Interface: purely combinational. meta is the 48-bit record, l0 the length
// of the first segment of the division, q the subtensor index {yseg, xseg}.
// The adder chain is three adders of LEN_W bits and one PTR_W-bit adder.
module gt_subtensor_addr
  import gt_pkg::*;
(
  input  meta_t      meta,
  input  seg_t       l0,
  input  logic [1:0] q,
  output lptr_t      line_addr,   // first cache line of subtensor q
  output len_t       len,         // its size in cache lines
  output len_t       npix,        // its pixel count (raw size)
  output logic       raw          // stored without compression
);
  len_t s [4];
  logic [LEN_W+1:0] offset;

  always_comb begin
    for (int j = 0; j < 4; j++) s[j] = meta_size(meta[SIZE_W-1:0], l0, 2'(j));
    offset = '0;
    for (int j = 0; j < 3; j++)
      if (j < int'(q)) offset += (LEN_W+2)'(s[j]);
    line_addr = meta[META_W-1:SIZE_W] + PTR_W'(offset);
    len       = s[q];
    npix      = raw_lines(l0, q);
    raw       = (len == npix);
  end

endmodule
