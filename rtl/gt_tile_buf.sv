// gt_tile_buf -- on-chip tile buffer that holds one decompressed input tile.
//
// The fetch path writes whole pixels (one 128-bit line = eight channel words
// of one channel group) into it; the processing-element array reads them
// back. Entry (c, y, x) of a tile lives at address (c*MAX_H + y)*MAX_W + x.
// The default size holds the largest tile of the paper's experiments:
// 20x20 pixels (5x5 kernel, large-tile setup) by 16 channels, i.e. two
// channel groups, 800 entries of 128 bits (12.5 KB). Banking, double
// buffering and the read width used by the PE array are not described in
// the paper; this is a plain simple-dual-port memory.
//
// Interface: one synchronous write port and one synchronous read port; read
// data appears the cycle after rd_en (one-cycle latency). A read and a write
// of the same address in one cycle returns the old data.
module gt_tile_buf
  import gt_pkg::*;
#(
  parameter int unsigned MAX_H  = 20,
  parameter int unsigned MAX_W  = 20,
  parameter int unsigned MAX_CG = 2,
  parameter int unsigned DEPTH  = MAX_H * MAX_W * MAX_CG,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  line_t         wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output line_t         rd_data
);
  line_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
