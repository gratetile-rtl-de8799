// tb_gt_store -- stores every group of a test feature map in GrateTile form,
// for the 3x3/s1 (L0 = 2), 5x5/s1 (L0 = 4), 3x3/s2 (L0 = 1) and 1x1 (one
// segment) divisions, and compares the memory image -- every line and every
// 48-bit metadata record -- with the reference built by gt_tb_pkg. It also
// counts raw and coded subtensors against the reference and fails if either
// kind never occurs.
module tb_gt_store;
  import gt_pkg::*;
  import gt_tb_pkg::*;

  localparam int W = 20, H = 12, SEED = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  seg_t l0;
  logic [2:0] sh;
  gidx_t gx_n, gy_n;
  coord_t fm_w, fm_h;
  logic alloc_valid = 1'b0;
  lptr_t alloc_ptr, next_ptr;
  logic req_valid = 1'b0, req_ready, done;
  gidx_t req_gx, req_gy;
  cg_t req_cg;
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
  logic [15:0] n_raw, n_comp;
  int checks = 0, failures = 0;

  gt_store dut (.*);

  logic rd_req_ready, rd_rsp_valid, meta_rd_ready, meta_rsp_valid;
  line_t rd_rsp_data;
  meta_t meta_rsp_data;
  gt_mem_model mem (
    .clk, .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .rd_req_valid(1'b0), .rd_req_ready, .rd_req_addr('0), .rd_rsp_valid, .rd_rsp_data,
    .rd_rsp_ready(1'b0), .meta_wr_valid, .meta_wr_idx, .meta_wr_data,
    .meta_rd_valid(1'b0), .meta_rd_ready, .meta_rd_idx('0), .meta_rsp_valid, .meta_rsp_data
  );

  always #5 clk = ~clk;

  always @(posedge clk)
    if (src_rd_en) src_rdata <= fm_px(int'(src_y), int'(src_x), int'(src_cg), W, H, SEED);

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

  int tot_raw = 0, tot_comp = 0;

  task automatic run_layer(input int ll, input int shv, input int base);
    int gxn, gyn, ptr;
    gxn = (W + shv + 8) / 8 + 1;
    gyn = (H + shv + 8) / 8 + 1;
    @(negedge clk);
    l0 = seg_t'(ll); sh = 3'(shv);
    gx_n = gidx_t'(gxn); gy_n = gidx_t'(gyn);
    alloc_valid = 1'b1; alloc_ptr = lptr_t'(base);
    @(negedge clk);
    alloc_valid = 1'b0;
    ptr = base;
    for (int cg = 0; cg < 2; cg++)
      for (int gy = 0; gy < gyn; gy++)
        for (int gx = 0; gx < gxn; gx++) begin
          tlineq_t exp;
          logic [47:0] em;
          int nr, nc, idx, r0, c0;
          r0 = int'(n_raw); c0 = int'(n_comp);
          req_valid = 1'b1; req_gx = gidx_t'(gx); req_gy = gidx_t'(gy); req_cg = cg_t'(cg);
          @(negedge clk);
          req_valid = 1'b0;
          while (!done) @(negedge clk);
          exp = ref_group(W, H, ll, shv, gx, gy, cg, SEED, ptr, em, nr, nc);
          idx = (cg * gyn + gy) * gxn + gx;
          check(mem.metas[idx] == em,
                $sformatf("l0=%0d group %0d meta %h exp %h", ll, idx, mem.metas[idx], em));
          foreach (exp[i])
            check(mem.lines[ptr + i] == exp[i], $sformatf("l0=%0d group %0d line %0d", ll, idx, i));
          check(int'(n_raw) - r0 == nr && int'(n_comp) - c0 == nc,
                $sformatf("raw/coded counts %0d/%0d exp %0d/%0d",
                          int'(n_raw) - r0, int'(n_comp) - c0, nr, nc));
          tot_raw += nr; tot_comp += nc;
          ptr += exp.size();
          check(int'(next_ptr) == ptr, "allocator advanced by the group's size");
        end
  endtask

  initial begin
    src_rdata = '0;
    fm_w = coord_t'(W); fm_h = coord_t'(H);
    l0 = seg_t'(2); sh = 3'd1; gx_n = '0; gy_n = '0; alloc_ptr = '0;
    req_gx = '0; req_gy = '0; req_cg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_layer(2, 1, 16);      // 3x3 s1: G = {7,1}
    run_layer(4, 2, 8000);    // 5x5 s1: G = {6,2}
    run_layer(1, 1, 16000);   // 3x3 s2: G = {7,0}
    run_layer(8, 0, 24000);   // 1x1:    one segment
    check(tot_raw > 0, "raw fallback occurred");
    check(tot_comp > 0, "bitmask coding occurred");
    $display("stored: %0d raw and %0d coded subtensors", tot_raw, tot_comp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
