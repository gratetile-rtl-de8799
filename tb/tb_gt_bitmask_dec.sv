// tb_gt_bitmask_dec -- feeds the reference coding (gt_tb_pkg) of random
// subtensors, and raw subtensors, to the decompressor with random gaps on
// the line input and random back-pressure on the pixel output, and checks
// that every pixel comes back and that exactly the subtensor's lines are
// consumed (a following marker line must stay unread).
module tb_gt_bitmask_dec;
  import gt_pkg::*;
  import gt_tb_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  start = 1'b0, raw_mode = 1'b0;
  len_t  npix_i;
  logic  line_valid, line_ready;
  line_t line_data;
  logic  px_valid, px_ready = 1'b0;
  line_t px_data;
  logic  busy, done;
  int checks = 0, failures = 0;
  int bp_pct = 0;

  gt_bitmask_dec dut (.clk, .rst_n, .start, .raw_mode, .npix(npix_i), .line_valid, .line_data,
                      .line_ready, .px_valid, .px_data, .px_ready, .busy, .done);

  always #5 clk = ~clk;

  initial begin
    #20000000;
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

  // line source: serves `src` in order, with random gaps
  tlineq_t src;
  int      rd_i;
  logic    gap;
  assign line_valid = (rd_i < src.size()) && !gap;
  assign line_data  = (rd_i < src.size()) ? src[rd_i] : '0;

  tlineq_t got;
  always @(posedge clk) begin
    px_ready <= ($urandom_range(0, 99) >= bp_pct);
    gap      <= (bp_pct != 0) && ($urandom_range(0, 3) == 0);
    if (px_valid && px_ready) got.push_back(px_data);
    if (line_valid && line_ready) rd_i <= rd_i + 1;
  end

  task automatic run(input tlineq_t px, input bit raw);
    tlineq_t coded;
    coded = raw ? px : ref_code(px);
    got.delete();
    @(negedge clk);
    src = coded;
    src.push_back({8{16'hDEAD}});  // next subtensor's data: must stay unread
    rd_i = 0;
    start = 1'b1; raw_mode = raw; npix_i = len_t'(px.size());
    @(negedge clk);
    start = 1'b0;
    while (!done) @(posedge clk);
    @(negedge clk);
    check(rd_i == coded.size(), $sformatf("lines consumed %0d exp %0d", rd_i, coded.size()));
    check(got.size() == px.size(), $sformatf("pixels %0d exp %0d", got.size(), px.size()));
    foreach (px[i])
      if (i < got.size()) check(got[i] == px[i], $sformatf("pixel %0d", i));
  endtask

  initial begin
    rd_i = 0;
    gap  = 1'b0;
    npix_i = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 300; it++) begin
      tlineq_t px;
      int n, zp;
      n  = (it % 5 == 0) ? 1 + it % 4 : int'($urandom_range(1, 64));
      zp = int'($urandom_range(0, 100));
      px.delete();
      for (int p = 0; p < n; p++) begin
        tline_t l;
        for (int c = 0; c < 8; c++)
          l[c*16 +: 16] = ($urandom_range(0, 99) < zp) ? 16'h0 : 16'($urandom_range(1, 65535));
        px.push_back(l);
      end
      bp_pct = (it % 3 == 0) ? 0 : 30;
      run(px, it % 4 == 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
