// tb_gt_workloads -- runs the layer shapes of the networks GrateTile is
// evaluated on through the whole subsystem (gt_top at its default size):
// the input feature map of each layer is stored in GrateTile form through
// the store path, the input tiles of the large-tile (Eyeriss-like) setup are
// fetched through the fetch path, and every pixel read back through the PE
// port is compared with the map. Feature-map shapes are the networks'
// published layer sizes; the data are synthetic (about 70 % zero words with
// dense patches), not real activations, so the bandwidth figures printed
// per layer -- bytes fetched including metadata against the uncompressed
// window -- only show the mechanism at work and are not the paper's results.
// Large maps are simulated in part: one row of output tiles and the first
// channel groups, as listed in each layer's line.
module tb_gt_workloads;
  import gt_pkg::*;
  import gt_tb_pkg::*;

  localparam int MAX_H = 20, MAX_W = 20;
  localparam int TB_AW = $clog2(20 * 20 * 2);
  localparam int SEED = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_valid = 1'b0;
  logic [3:0] cfg_k, cfg_s, cfg_d;
  coord_t fm_w, fm_h;
  gidx_t gx_n, gy_n;
  logic [2:0] g0, g1;
  logic alloc_valid = 1'b0;
  lptr_t alloc_ptr, next_ptr;
  logic st_req_valid = 1'b0, st_req_ready, st_done;
  gidx_t st_gx, st_gy;
  cg_t st_cg;
  logic src_rd_en;
  coord_t src_y, src_x;
  cg_t src_cg;
  line_t src_rdata;
  logic wr_valid, wr_ready;
  lptr_t wr_addr;
  line_t wr_data;
  logic meta_wr_valid;
  gidx_t meta_wr_idx;
  meta_t meta_wr_data;
  logic ft_req_valid = 1'b0, ft_req_ready, ft_done, ft_err;
  coord_t ft_otx, ft_oty, ft_tw, ft_th;
  cg_t ft_cg_lo, ft_cg_n;
  logic meta_rd_valid, meta_rd_ready, meta_rsp_valid;
  gidx_t meta_rd_idx;
  meta_t meta_rsp_data;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
  lptr_t rd_req_addr;
  line_t rd_rsp_data;
  logic pe_rd_en = 1'b0;
  logic [TB_AW-1:0] pe_rd_addr;
  line_t pe_rd_data;
  logic [15:0] st_n_raw, st_n_comp, ft_n_sub, ft_n_meta_rd, ft_n_meta_reuse, ft_n_lines, ft_n_raw;
  int checks = 0, failures = 0;
  int W, H;

  gt_top dut (.*);

  gt_mem_model #(.STALL(1'b0)) mem (
    .clk, .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data, .rd_rsp_ready,
    .meta_wr_valid, .meta_wr_idx, .meta_wr_data,
    .meta_rd_valid, .meta_rd_ready, .meta_rd_idx, .meta_rsp_valid, .meta_rsp_data
  );

  always #5 clk = ~clk;

  always @(posedge clk)
    if (src_rd_en) src_rdata <= fm_px(int'(src_y), int'(src_x), int'(src_cg), W, H, SEED);

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // One layer: input map w x h x c, kernel 2k+1, stride s; output tiles of
  // tw x th; only tile rows < rows and channel groups < cgs are simulated.
  task automatic layer(input string name, input int w, input int h, input int c,
                       input int k, input int s, input int tw, input int th,
                       input int rows, input int cgs);
    int kd, eg0, l0v, shv, ow, oh, ntx, nty, gxn, gyn, gy_top, fetched, meta_rd, raw_b;
    int ncg, nrows;
    W = w; H = h;
    kd  = k;
    eg0 = pmod(-kd, 8);
    l0v = pmod(pmod(kd - s + 1, 8) - eg0, 8);
    if (l0v == 0) l0v = 8;
    shv = pmod(-eg0, 8);
    ow  = (w + 2 * k - (2 * k + 1)) / s + 1;   // 'same' padding
    oh  = (h + 2 * k - (2 * k + 1)) / s + 1;
    ntx = (ow + tw - 1) / tw;
    nty = (oh + th - 1) / th;
    nrows = (rows < nty) ? rows : nty;
    ncg   = (cgs < c / 8) ? cgs : c / 8;
    gxn = ((ntx * tw - 1) * s + kd + 1 + shv + 7) / 8;
    gyn = ((nty * th - 1) * s + kd + 1 + shv + 7) / 8;
    gy_top = ((nrows * th - 1) * s + kd + shv) / 8;
    @(negedge clk);
    fm_w = coord_t'(w); fm_h = coord_t'(h);
    cfg_k = 4'(k); cfg_s = 4'(s); cfg_d = 4'd1; cfg_valid = 1'b1;
    gx_n = gidx_t'(gxn); gy_n = gidx_t'(gyn);
    alloc_valid = 1'b1; alloc_ptr = lptr_t'(16);
    @(negedge clk);
    cfg_valid = 1'b0; alloc_valid = 1'b0;
    for (int cg = 0; cg < ncg; cg++)
      for (int gy = 0; gy <= gy_top; gy++)
        for (int gx = 0; gx < gxn; gx++) begin
          st_req_valid = 1'b1; st_gx = gidx_t'(gx); st_gy = gidx_t'(gy); st_cg = cg_t'(cg);
          @(negedge clk);
          st_req_valid = 1'b0;
          while (!st_done) @(negedge clk);
        end
    fetched = 0; meta_rd = 0; raw_b = 0;
    for (int cp = 0; cp < ncg; cp += 2)
      for (int ty = 0; ty < nrows; ty++)
        for (int tx = 0; tx < ntx; tx++) begin
          int xl, xh, yl, yh, n;
          n  = (ncg - cp >= 2) ? 2 : 1;
          xl = tx * tw * s - kd; xh = (tx * tw + tw - 1) * s + kd + 1;
          yl = ty * th * s - kd; yh = (ty * th + th - 1) * s + kd + 1;
          @(negedge clk);
          ft_otx = coord_t'(tx * tw); ft_oty = coord_t'(ty * th);
          ft_tw = coord_t'(tw); ft_th = coord_t'(th);
          ft_cg_lo = cg_t'(cp); ft_cg_n = cg_t'(n);
          ft_req_valid = 1'b1;
          @(negedge clk);
          ft_req_valid = 1'b0;
          while (!ft_done) @(negedge clk);
          check(!ft_err, $sformatf("%s tile (%0d,%0d) flagged", name, tx, ty));
          fetched += int'(ft_n_lines) * 16;
          meta_rd += int'(ft_n_meta_rd) * 6;
          raw_b   += (xh - xl) * (yh - yl) * n * 16;
          for (int cc = 0; cc < n; cc++)
            for (int y = yl; y < yh; y++)
              for (int x = xl; x < xh; x++) begin
                @(negedge clk);
                pe_rd_en = 1'b1;
                pe_rd_addr = TB_AW'((cc * MAX_H + (y - yl)) * MAX_W + (x - xl));
                @(negedge clk);
                pe_rd_en = 1'b0;
                check(pe_rd_data == fm_px(y, x, cp + cc, w, h, SEED),
                      $sformatf("%s cg%0d pixel (%0d,%0d)", name, cp + cc, y, x));
              end
        end
    $display("%-22s %3dx%-3dx%-4d k%0d s%0d G={%0d,%0d} tiles %0dx%0d of %0dx%0d, %0d of %0d ch: fetched %0d B + meta %0d B of %0d B raw (%0d%% saved)",
             name, w, h, c, 2 * k + 1, s, g0, g1, nrows, ntx, th, tw, ncg * 8, c,
             fetched, meta_rd, raw_b, 100 - (100 * (fetched + meta_rd)) / raw_b);
  endtask

  initial begin
    src_rdata = '0; W = 1; H = 1;
    fm_w = '0; fm_h = '0;
    cfg_k = 4'd1; cfg_s = 4'd1; cfg_d = 4'd1; gx_n = '0; gy_n = '0; alloc_ptr = '0;
    st_gx = '0; st_gy = '0; st_cg = '0;
    ft_otx = '0; ft_oty = '0; ft_tw = '0; ft_th = '0; ft_cg_lo = '0; ft_cg_n = '0;
    pe_rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    //     name                  W    H    C  k  s  tw th rows cgs
    layer("AlexNet CONV2",       27,  27,  96, 2, 1, 16, 16, 99, 99);
    layer("AlexNet CONV3",       13,  13, 256, 1, 1, 16, 16, 99, 99);
    layer("AlexNet CONV4/5",     13,  13, 384, 1, 1, 16, 16, 99, 99);
    layer("VGG16 CONV1_2",      224, 224,  64, 1, 1, 16, 16,  1,  2);
    layer("VGG16 CONV5_3",       14,  14, 512, 1, 1, 16, 16, 99, 99);
    layer("ResNet18 CONV2_1",    56,  56,  64, 1, 1, 16, 16,  1, 99);
    layer("ResNet50 CONV3_1 1x1",56,  56, 256, 0, 2,  8,  8,  1,  4);
    layer("ResNet50 CONV4_1 3x3",28,  28, 256, 1, 2,  8,  8,  1,  4);
    layer("VDSR CONV",           41,  41,  64, 1, 1, 16, 16, 99, 99);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
