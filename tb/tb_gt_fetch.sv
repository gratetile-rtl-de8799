// tb_gt_fetch -- loads a reference GrateTile image of a test feature map
// into the memory model, requests input windows the way a tiled CNN walks a
// layer (output tiles of Table-I-like sizes, halo included, for 3x3/s1,
// 3x3/s2 and 5x5/s1 divisions and a 1x1 layer) and checks:
//   * every pixel written to the tile buffer equals the feature map (zero in
//     the padding) and every window position is written;
//   * the number of lines read equals the summed sizes of the subtensors
//     inside the window (nothing over-fetched);
//   * metadata reads and reuses match an independent walk of the window;
//   * misaligned and oversized windows raise err.
module tb_gt_fetch;
  import gt_pkg::*;
  import gt_tb_pkg::*;

  localparam int W = 36, H = 20, SEED = 11;
  localparam int MAX_H = 20, MAX_W = 20, MAX_CG = 2;
  localparam int AW = $clog2(MAX_H * MAX_W * MAX_CG);

  logic clk = 1'b0, rst_n = 1'b0;
  seg_t l0;
  logic [2:0] sh;
  gidx_t gx_n, gy_n;
  logic req_valid = 1'b0, req_ready, done, err;
  coord_t x_lo, x_hi, y_lo, y_hi;
  cg_t cg_lo, cg_n;
  logic meta_req_valid, meta_req_ready, meta_rsp_valid;
  gidx_t meta_req_idx;
  meta_t meta_rsp_data;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
  lptr_t rd_req_addr;
  line_t rd_rsp_data;
  logic tb_wr_en;
  logic [AW-1:0] tb_wr_addr;
  line_t tb_wr_data;
  logic [15:0] n_sub, n_meta_rd, n_meta_reuse, n_lines, n_raw;
  int checks = 0, failures = 0;

  gt_fetch dut (.*);

  logic wr_ready;
  gt_mem_model mem (
    .clk, .wr_valid(1'b0), .wr_ready, .wr_addr('0), .wr_data('0),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data, .rd_rsp_ready,
    .meta_wr_valid(1'b0), .meta_wr_idx('0), .meta_wr_data('0),
    .meta_rd_valid(meta_req_valid), .meta_rd_ready(meta_req_ready), .meta_rd_idx(meta_req_idx),
    .meta_rsp_valid, .meta_rsp_data
  );

  always #5 clk = ~clk;

  line_t tbuf [MAX_H * MAX_W * MAX_CG];
  bit    tw   [MAX_H * MAX_W * MAX_CG];
  always @(posedge clk)
    if (tb_wr_en) begin
      tbuf[tb_wr_addr] <= tb_wr_data;
      tw[tb_wr_addr]   <= 1'b1;
    end

  initial begin
    #50000000;
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

  int cur_l0, cur_sh, gxn, gyn;
  int reuse_seen = 0, raw_seen = 0, err_seen = 0;

  // Reference image of all groups, by backdoor.
  task automatic load(input int ll, input int shv);
    int ptr;
    cur_l0 = ll; cur_sh = shv;
    gxn = (W + shv + 16) / 8 + 1;
    gyn = (H + shv + 16) / 8 + 1;
    ptr = 64;
    for (int cg = 0; cg < 2; cg++)
      for (int gy = 0; gy < gyn; gy++)
        for (int gx = 0; gx < gxn; gx++) begin
          tlineq_t st;
          logic [47:0] m;
          int nr, nc;
          st = ref_group(W, H, ll, shv, gx, gy, cg, SEED, ptr, m, nr, nc);
          mem.metas[(cg * gyn + gy) * gxn + gx] = m;
          foreach (st[i]) mem.lines[ptr + i] = st[i];
          ptr += st.size();
        end
    @(negedge clk);
    l0 = seg_t'(ll); sh = 3'(shv); gx_n = gidx_t'(gxn); gy_n = gidx_t'(gyn);
  endtask

  // Segment containing boundary coordinate c: group, segment, length.
  function automatic void segof(input int c, output int g, output int sg, output int len);
    int u;
    u   = c + cur_sh;
    g   = u / 8;
    sg  = int'((u % 8) != 0);
    len = seg(cur_l0, sg);
  endfunction

  task automatic fetch(input int xl, input int xh, input int yl, input int yh,
                       input int cgl, input int cgn, input bit expect_err);
    int exp_lines, exp_meta, exp_reuse, exp_sub, last_id;
    foreach (tw[i]) tw[i] = 1'b0;
    @(negedge clk);
    x_lo = coord_t'(xl); x_hi = coord_t'(xh); y_lo = coord_t'(yl); y_hi = coord_t'(yh);
    cg_lo = cg_t'(cgl); cg_n = cg_t'(cgn);
    req_valid = 1'b1;
    @(negedge clk);
    req_valid = 1'b0;
    while (!done) @(negedge clk);
    check(err == expect_err, $sformatf("err=%0d for window x[%0d,%0d) y[%0d,%0d)",
                                       err, xl, xh, yl, yh));
    if (expect_err) begin
      err_seen++;
      return;
    end
    // independent walk of the window
    exp_lines = 0; exp_meta = 0; exp_reuse = 0; exp_sub = 0; last_id = -1;
    for (int c = 0; c < cgn; c++) begin
      int y, x, gy, sy, ly, gx, sx, lx, id;
      y = yl;
      while (y < yh) begin
        segof(y, gy, sy, ly);
        x = xl;
        while (x < xh) begin
          segof(x, gx, sx, lx);
          id = ((cgl + c) * gyn + gy) * gxn + gx;
          if (id == last_id) exp_reuse++;
          else exp_meta++;
          last_id = id;
          exp_lines += meta_sz(mem.metas[id], cur_l0, sy * 2 + sx);
          exp_sub++;
          x += lx;
        end
        y += ly;
      end
    end
    check(int'(n_lines) == exp_lines, $sformatf("lines %0d exp %0d", n_lines, exp_lines));
    check(int'(n_meta_rd) == exp_meta && int'(n_meta_reuse) == exp_reuse,
          $sformatf("meta reads %0d/%0d exp %0d/%0d", n_meta_rd, n_meta_reuse, exp_meta, exp_reuse));
    check(int'(n_sub) == exp_sub, "subtensor count");
    reuse_seen += int'(n_meta_reuse);
    raw_seen   += int'(n_raw);
    for (int c = 0; c < cgn; c++)
      for (int y = yl; y < yh; y++)
        for (int x = xl; x < xh; x++) begin
          int a;
          a = (c * MAX_H + (y - yl)) * MAX_W + (x - xl);
          check(tw[a] && tbuf[a] == fm_px(y, x, cgl + c, W, H, SEED),
                $sformatf("pixel cg%0d (%0d,%0d)", cgl + c, y, x));
        end
  endtask

  initial begin
    l0 = seg_t'(2); sh = 3'd1; gx_n = '0; gy_n = '0;
    x_lo = '0; x_hi = '0; y_lo = '0; y_hi = '0; cg_lo = '0; cg_n = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 3x3 s1, large tile 16x16 outputs -> 18x18 inputs, two channel groups
    load(2, 1);
    for (int oy = 0; oy < 2; oy++)
      for (int ox = 0; ox < 3; ox++)
        fetch(ox * 16 - 1, ox * 16 + 17, oy * 16 - 1, oy * 16 + 17, 0, 2, 1'b0);
    // small tile 8x16 outputs -> 10x18 inputs, one channel group
    fetch(15, 33, 7, 17, 1, 1, 1'b0);
    fetch(0, 10, -1, 9, 0, 1, 1'b1);    // misaligned x
    fetch(-1, 25, -1, 9, 0, 1, 1'b1);   // wider than the buffer
    // 3x3 s2: 8x4 outputs -> 17x9 inputs
    load(1, 1);
    fetch(-1, 16, -1, 8, 0, 2, 1'b0);
    fetch(15, 32, 7, 16, 0, 1, 1'b0);
    // 5x5 s1: 16x16 outputs -> 20x20 inputs
    load(4, 2);
    fetch(-2, 18, -2, 18, 0, 2, 1'b0);
    fetch(14, 34, 6, 18, 1, 1, 1'b0);
    // 1x1: one segment per period, 16x16 tile
    load(8, 0);
    fetch(16, 32, 0, 16, 0, 2, 1'b0);
    fetch(4, 12, 0, 8, 0, 1, 1'b1);     // misaligned for one segment
    check(reuse_seen > 0, "metadata record reused");
    check(raw_seen > 0, "raw subtensor fetched");
    check(err_seen == 3, "errors flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
