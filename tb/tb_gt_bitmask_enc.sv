// tb_gt_bitmask_enc -- drives random subtensors (1..64 pixels, 0..100 %
// zero words) through the compressor in coded and raw mode, with random
// gaps on the pixel input and random back-pressure on the line output, and
// compares every line with the reference coding of gt_tb_pkg. In raw mode
// with no back-pressure it also checks the one-line-per-cycle rate.
module tb_gt_bitmask_enc;
  import gt_pkg::*;
  import gt_tb_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  start = 1'b0, raw_mode = 1'b0;
  len_t  npix_i;
  logic  px_valid = 1'b0, px_ready;
  line_t px_data;
  logic  line_valid, line_ready = 1'b0;
  line_t line_data;
  logic  busy, done;
  int checks = 0, failures = 0;
  int bp_pct = 0;

  gt_bitmask_enc dut (.clk, .rst_n, .start, .raw_mode, .npix(npix_i), .px_valid, .px_data,
                      .px_ready, .line_valid, .line_data, .line_ready, .busy, .done);

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

  tlineq_t got;
  always @(posedge clk) begin
    line_ready <= ($urandom_range(0, 99) >= bp_pct);
    if (line_valid && line_ready) got.push_back(line_data);
  end

  task automatic run(input tlineq_t px, input bit raw, output int cycles);
    tlineq_t exp;
    int t0;
    got.delete();
    exp = raw ? px : ref_code(px);
    @(negedge clk);
    start = 1'b1; raw_mode = raw; npix_i = len_t'(px.size());
    t0 = int'($time / 10);
    @(negedge clk);
    start = 1'b0;
    foreach (px[i]) begin
      while ($urandom_range(0, 3) == 0 && bp_pct != 0) @(negedge clk);
      px_valid = 1'b1;
      px_data  = px[i];
      @(posedge clk);
      while (!px_ready) @(posedge clk);
      @(negedge clk);
      px_valid = 1'b0;
    end
    while (!done) @(posedge clk);
    cycles = int'($time / 10) - t0;
    @(negedge clk);
    check(got.size() == exp.size(), $sformatf("line count %0d exp %0d", got.size(), exp.size()));
    foreach (exp[i])
      if (i < got.size()) check(got[i] == exp[i], $sformatf("line %0d", i));
  endtask

  initial begin
    int cyc;
    px_data = '0;
    npix_i  = '0;
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
      run(px, it % 4 == 3, cyc);
      if (it % 4 == 3 && bp_pct == 0)
        check(cyc <= n + 4, $sformatf("raw rate: %0d pixels took %0d cycles", n, cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
