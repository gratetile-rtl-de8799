// tb_gt_top -- end-to-end test of the GrateTile memory subsystem at its
// default size (no parameter overrides).
//
// For each layer shape of the paper's Table I -- 3x3 stride 1, 3x3 stride 2,
// 5x5 stride 1 -- plus a dilated 3x3 (d = 2) and a 1x1 layer, it
//   1. configures the division from (k, s, d) and checks G;
//   2. stores a 32x32x16 test feature map (sparse, with dense patches)
//      through the store path into the memory model, group by group;
//   3. fetches output tiles of the two tile setups of Table I (large tile:
//      18x18x16 / 17x17x16 / 20x20x16 inputs; small tile: 10x18x8 / 9x17x8 /
//      12x20x8 inputs), halo and padding included, and reads the tile buffer
//      back through the PE port, comparing every pixel with the map;
//   4. checks that the lines fetched equal the summed sizes of the window's
//      subtensors, read from the stored metadata.
// It counts how often each mechanism occurred -- raw fallback, bitmask
// coding, metadata reuse, halo fetch in the zero padding, memory back-
// pressure, misaligned-window error, single-segment (1x1) division -- and
// fails any that never did.
module tb_gt_top;
  import gt_pkg::*;
  import gt_tb_pkg::*;

  localparam int W = 32, H = 32, SEED = 5;
  localparam int MAX_H = 20, MAX_W = 20;
  localparam int TB_AW = $clog2(20 * 20 * 2);

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

  gt_top dut (.*);

  gt_mem_model mem (
    .clk, .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data, .rd_rsp_ready,
    .meta_wr_valid, .meta_wr_idx, .meta_wr_data,
    .meta_rd_valid, .meta_rd_ready, .meta_rd_idx, .meta_rsp_valid, .meta_rsp_data
  );

  always #5 clk = ~clk;

  always @(posedge clk)
    if (src_rd_en) src_rdata <= fm_px(int'(src_y), int'(src_x), int'(src_cg), W, H, SEED);

  // mechanism counters
  int n_raw_st = 0, n_comp_st = 0, n_reuse = 0, n_halo = 0, n_bp = 0, n_err = 0, n_uniform = 0;
  int n_tiles = 0;
  always @(posedge clk) if ((rd_req_valid && !rd_req_ready) || (wr_valid && !wr_ready)) n_bp++;

  initial begin
    #200000000;
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

  int cur_l0, cur_sh, cur_kd, cur_s, gxn, gyn;

  task automatic layer(input int k, input int s, input int d, input int max_x, input int base);
    int eg0, eg1;
    cur_kd = k * d;
    cur_s  = s;
    eg0 = pmod(-cur_kd, 8);
    eg1 = pmod(cur_kd - s + 1, 8);
    cur_l0 = pmod(eg1 - eg0, 8);
    if (cur_l0 == 0) cur_l0 = 8;
    cur_sh = pmod(-eg0, 8);
    if (cur_l0 == 8) n_uniform++;
    gxn = (max_x + cur_sh + 7) / 8;
    gyn = gxn;
    @(negedge clk);
    cfg_k = 4'(k); cfg_s = 4'(s); cfg_d = 4'(d); cfg_valid = 1'b1;
    gx_n = gidx_t'(gxn); gy_n = gidx_t'(gyn);
    alloc_valid = 1'b1; alloc_ptr = lptr_t'(base);
    @(negedge clk);
    cfg_valid = 1'b0; alloc_valid = 1'b0;
    check(g0 == 3'(eg0) && g1 == 3'(eg1), $sformatf("G for k=%0d s=%0d d=%0d", k, s, d));
    // store every group of both channel groups
    for (int cg = 0; cg < 2; cg++)
      for (int gy = 0; gy < gyn; gy++)
        for (int gx = 0; gx < gxn; gx++) begin
          st_req_valid = 1'b1; st_gx = gidx_t'(gx); st_gy = gidx_t'(gy); st_cg = cg_t'(cg);
          @(negedge clk);
          st_req_valid = 1'b0;
          while (!st_done) @(negedge clk);
        end
  endtask

  // Fetch output tile (otx, oty) of tw x th outputs and check it.
  task automatic tile(input int otx, input int oty, input int tw, input int th,
                      input int cgl, input int cgn, input bit expect_err);
    int xl, xh, yl, yh, exp_lines;
    xl = otx * cur_s - cur_kd;
    xh = (otx + tw - 1) * cur_s + cur_kd + 1;
    yl = oty * cur_s - cur_kd;
    yh = (oty + th - 1) * cur_s + cur_kd + 1;
    @(negedge clk);
    ft_otx = coord_t'(otx); ft_oty = coord_t'(oty); ft_tw = coord_t'(tw); ft_th = coord_t'(th);
    ft_cg_lo = cg_t'(cgl); ft_cg_n = cg_t'(cgn);
    ft_req_valid = 1'b1;
    @(negedge clk);
    ft_req_valid = 1'b0;
    while (!ft_done) @(negedge clk);
    check(ft_err == expect_err, $sformatf("err=%0d tile (%0d,%0d)", ft_err, otx, oty));
    if (ft_err) begin
      n_err++;
      return;
    end
    n_tiles++;
    if (xl < 0 || yl < 0) n_halo++;
    n_reuse += int'(ft_n_meta_reuse);
    // lines fetched = summed sizes of the window's subtensors
    exp_lines = 0;
    for (int c = 0; c < cgn; c++)
      for (int y = yl; y < yh; ) begin
        int uy, sy, ly;
        uy = y + cur_sh; sy = int'((uy % 8) != 0); ly = seg(cur_l0, sy);
        for (int x = xl; x < xh; ) begin
          int ux, sx, lx, id;
          ux = x + cur_sh; sx = int'((ux % 8) != 0); lx = seg(cur_l0, sx);
          id = ((cgl + c) * gyn + uy / 8) * gxn + ux / 8;
          exp_lines += meta_sz(mem.metas[id], cur_l0, sy * 2 + sx);
          x += lx;
        end
        y += ly;
      end
    check(int'(ft_n_lines) == exp_lines, $sformatf("lines %0d exp %0d", ft_n_lines, exp_lines));
    // read the tile back through the PE port
    for (int c = 0; c < cgn; c++)
      for (int y = yl; y < yh; y++)
        for (int x = xl; x < xh; x++) begin
          @(negedge clk);
          pe_rd_en = 1'b1;
          pe_rd_addr = TB_AW'((c * MAX_H + (y - yl)) * MAX_W + (x - xl));
          @(negedge clk);
          pe_rd_en = 1'b0;
          check(pe_rd_data == fm_px(y, x, cgl + c, W, H, SEED),
                $sformatf("k%0d s%0d tile (%0d,%0d) cg%0d pixel (%0d,%0d)",
                          cur_kd, cur_s, otx, oty, cgl + c, y, x));
        end
  endtask

  initial begin
    src_rdata = '0;
    fm_w = coord_t'(W); fm_h = coord_t'(H);
    cfg_k = 4'd1; cfg_s = 4'd1; cfg_d = 4'd1; gx_n = '0; gy_n = '0; alloc_ptr = '0;
    st_gx = '0; st_gy = '0; st_cg = '0;
    ft_otx = '0; ft_oty = '0; ft_tw = '0; ft_th = '0; ft_cg_lo = '0; ft_cg_n = '0;
    pe_rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 3x3 stride 1: G = {7,1} (segments 2 and 6)
    layer(1, 1, 1, 34, 16);
    for (int ty = 0; ty < 2; ty++)
      for (int tx = 0; tx < 2; tx++) tile(tx * 16, ty * 16, 16, 16, 0, 2, 1'b0);  // 18x18x16
    tile(16, 8, 16, 8, 1, 1, 1'b0);                                               // 10x18x8
    tile(3, 0, 16, 16, 0, 1, 1'b1);                                               // misaligned
    // 3x3 stride 2: G = {7,0} (segments 1 and 7); outputs 16x16
    layer(1, 2, 1, 33, 20000);
    for (int tx = 0; tx < 2; tx++) tile(tx * 8, 8, 8, 8, 0, 2, 1'b0);             // 17x17x16
    tile(0, 0, 8, 4, 0, 1, 1'b0);                                                 // 9x17x8
    // 5x5 stride 1: G = {6,2} (segments 4 and 4)
    layer(2, 1, 1, 34, 40000);
    tile(0, 0, 16, 16, 0, 2, 1'b0);                                               // 20x20x16
    tile(16, 16, 16, 16, 0, 2, 1'b0);
    tile(0, 24, 16, 8, 1, 1, 1'b0);                                               // 12x20x8
    // dilated 3x3, d = 2: G = {6,2}
    layer(1, 1, 2, 34, 60000);
    tile(16, 0, 16, 16, 0, 2, 1'b0);
    // 1x1: one segment of 8
    layer(0, 1, 1, 32, 80000);
    tile(16, 16, 16, 16, 0, 2, 1'b0);

    n_raw_st  = int'(st_n_raw);
    n_comp_st = int'(st_n_comp);
    $display("tiles=%0d raw_stored=%0d coded_stored=%0d meta_reuse=%0d halo=%0d backpressure=%0d misaligned=%0d uniform=%0d",
             n_tiles, n_raw_st, n_comp_st, n_reuse, n_halo, n_bp, n_err, n_uniform);
    check(n_raw_st > 0, "raw fallback happened");
    check(n_comp_st > 0, "bitmask coding happened");
    check(n_reuse > 0, "metadata reuse happened");
    check(n_halo > 0, "halo fetch in padding happened");
    check(n_bp > 0, "memory back-pressure happened");
    check(n_err == 1, "misaligned window flagged");
    check(n_uniform == 1, "single-segment division used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
