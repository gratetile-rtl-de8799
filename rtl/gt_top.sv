// gt_top -- GrateTile feature-map memory subsystem of a CNN accelerator.
//
// It sits between the accelerator's on-chip buffers and external memory and
// keeps feature maps there in GrateTile form: cut at the layer's window
// edges into subtensors of two sizes per axis, each compressed on its own and
// aligned to a 16-byte line, with one 48-bit metadata record (28-bit line
// pointer plus four sizes) per 8x8x8-word group. Blocks:
//   gt_config  -- division G = {-kd, kd-s+1} mod 8 of the layer (k, s, d);
//   gt_store   -- compresses one group of an output feature map (gt_bitmask_enc
//                 inside) and writes its lines and metadata record;
//   gt_fetch   -- assembles one input tile: reads only the subtensors that
//                 form it, locates them with the two-step pointer + sizes rule
//                 (gt_subtensor_addr) and decompresses them (gt_bitmask_dec)
//                 into the tile buffer;
//   gt_tile_buf -- on-chip buffer holding the decompressed tile for the PE
//                 array.
// A tile is requested in output coordinates, as the accelerator schedules
// it: output tile (otx, oty) of tw x th outputs needs the input window
//   x_lo = otx*s - kd,   x_hi = (otx + tw - 1)*s + kd + 1
// (likewise in y), the paper's window edges; the top forms it from the
// configured k*d and s. The external memory, the PE array that reads the
// tile buffer and the buffer that supplies output pixels are outside this
// module and meet it at plain ports: line read and write channels, metadata
// read and write channels, a pixel-source read port and a tile-buffer read
// port. Sharing one physical memory between these channels is left to the
// memory controller outside.
//
// Interface timing: configuration takes one cycle; store and fetch each run
// one request at a time (req_valid/req_ready, done pulse) and may overlap.
module gt_top
  import gt_pkg::*;
#(
  parameter int unsigned MAX_H  = 20,
  parameter int unsigned MAX_W  = 20,
  parameter int unsigned MAX_CG = 2,
  parameter int unsigned TB_AW  = $clog2(MAX_H * MAX_W * MAX_CG)
) (
  input  logic            clk,
  input  logic            rst_n,
  // layer configuration
  input  logic            cfg_valid,
  input  logic [3:0]      cfg_k,
  input  logic [3:0]      cfg_s,
  input  logic [3:0]      cfg_d,
  input  coord_t          fm_w,        // feature map width and height
  input  coord_t          fm_h,
  input  gidx_t           gx_n,        // stored group grid
  input  gidx_t           gy_n,
  output logic [2:0]      g0,
  output logic [2:0]      g1,
  // store path
  input  logic            alloc_valid,
  input  lptr_t           alloc_ptr,
  output lptr_t           next_ptr,
  input  logic            st_req_valid,
  output logic            st_req_ready,
  input  gidx_t           st_gx,
  input  gidx_t           st_gy,
  input  cg_t             st_cg,
  output logic            st_done,
  output logic            src_rd_en,
  output coord_t          src_y,
  output coord_t          src_x,
  output cg_t             src_cg,
  input  line_t           src_rdata,
  output logic            wr_valid,
  input  logic            wr_ready,
  output lptr_t           wr_addr,
  output line_t           wr_data,
  output logic            meta_wr_valid,
  output gidx_t           meta_wr_idx,
  output meta_t           meta_wr_data,
  // fetch path
  input  logic            ft_req_valid,
  output logic            ft_req_ready,
  input  coord_t          ft_otx,      // output tile origin and size
  input  coord_t          ft_oty,
  input  coord_t          ft_tw,
  input  coord_t          ft_th,
  input  cg_t             ft_cg_lo,
  input  cg_t             ft_cg_n,
  output logic            ft_done,
  output logic            ft_err,
  output logic            meta_rd_valid,
  input  logic            meta_rd_ready,
  output gidx_t           meta_rd_idx,
  input  logic            meta_rsp_valid,
  input  meta_t           meta_rsp_data,
  output logic            rd_req_valid,
  input  logic            rd_req_ready,
  output lptr_t           rd_req_addr,
  input  logic            rd_rsp_valid,
  input  line_t           rd_rsp_data,
  output logic            rd_rsp_ready,
  // tile buffer read port (PE array)
  input  logic            pe_rd_en,
  input  logic [TB_AW-1:0] pe_rd_addr,
  output line_t           pe_rd_data,
  // statistics
  output logic [15:0]     st_n_raw,
  output logic [15:0]     st_n_comp,
  output logic [15:0]     ft_n_sub,
  output logic [15:0]     ft_n_meta_rd,
  output logic [15:0]     ft_n_meta_reuse,
  output logic [15:0]     ft_n_lines,
  output logic [15:0]     ft_n_raw
);
  seg_t       l0;
  logic [2:0] sh;
  logic [7:0] kd;
  logic [3:0] s;

  gt_config u_cfg (
    .clk, .rst_n, .cfg_valid, .k(cfg_k), .s(cfg_s), .d(cfg_d),
    .g0, .g1, .l0, .sh, .kd_q(kd), .s_q(s)
  );

  gt_store u_store (
    .clk, .rst_n, .l0, .sh, .gx_n, .gy_n, .fm_w, .fm_h,
    .alloc_valid, .alloc_ptr, .next_ptr,
    .req_valid(st_req_valid), .req_ready(st_req_ready),
    .req_gx(st_gx), .req_gy(st_gy), .req_cg(st_cg), .done(st_done),
    .src_rd_en, .src_y, .src_x, .src_cg, .src_rdata,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .meta_wr_valid, .meta_wr_idx, .meta_wr_data,
    .n_raw(st_n_raw), .n_comp(st_n_comp)
  );

  // Input window of the requested output tile.
  coord_t x_lo, x_hi, y_lo, y_hi;
  always_comb begin
    x_lo = ft_otx * coord_t'(s) - coord_t'(kd);
    x_hi = (ft_otx + ft_tw - 1'b1) * coord_t'(s) + coord_t'(kd) + 1'b1;
    y_lo = ft_oty * coord_t'(s) - coord_t'(kd);
    y_hi = (ft_oty + ft_th - 1'b1) * coord_t'(s) + coord_t'(kd) + 1'b1;
  end

  logic              tb_wr_en;
  logic [TB_AW-1:0]  tb_wr_addr;
  line_t             tb_wr_data;

  gt_fetch #(.MAX_H(MAX_H), .MAX_W(MAX_W), .MAX_CG(MAX_CG), .AW(TB_AW)) u_fetch (
    .clk, .rst_n, .l0, .sh, .gx_n, .gy_n,
    .req_valid(ft_req_valid), .req_ready(ft_req_ready),
    .x_lo, .x_hi, .y_lo, .y_hi, .cg_lo(ft_cg_lo), .cg_n(ft_cg_n),
    .done(ft_done), .err(ft_err),
    .meta_req_valid(meta_rd_valid), .meta_req_ready(meta_rd_ready), .meta_req_idx(meta_rd_idx),
    .meta_rsp_valid, .meta_rsp_data,
    .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_rsp_valid, .rd_rsp_data, .rd_rsp_ready,
    .tb_wr_en, .tb_wr_addr, .tb_wr_data,
    .n_sub(ft_n_sub), .n_meta_rd(ft_n_meta_rd), .n_meta_reuse(ft_n_meta_reuse),
    .n_lines(ft_n_lines), .n_raw(ft_n_raw)
  );

  gt_tile_buf #(.MAX_H(MAX_H), .MAX_W(MAX_W), .MAX_CG(MAX_CG), .AW(TB_AW)) u_tbuf (
    .clk, .wr_en(tb_wr_en), .wr_addr(tb_wr_addr), .wr_data(tb_wr_data),
    .rd_en(pe_rd_en), .rd_addr(pe_rd_addr), .rd_data(pe_rd_data)
  );

endmodule
