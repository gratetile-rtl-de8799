// tb_gt_config -- checks the GrateTile division against G = {-kd, kd-s+1}
// mod 8 for a sweep of kernel half-sizes, strides and dilations, plus the
// worked examples: 3x3/s1 -> {7,1} (segments 2 and 6), 3x3/s2 -> {7,0}
// (1 and 7), 5x5/s1 -> {6,2} (4 and 4), and a 1x1 kernel -> one segment.
module tb_gt_config;
  import gt_pkg::*;
  import gt_tb_pkg::pmod;

  logic clk = 1'b0, rst_n = 1'b0, cfg_valid = 1'b0;
  logic [3:0] k, s, d;
  logic [2:0] g0, g1, sh;
  seg_t l0;
  logic [7:0] kd_q;
  logic [3:0] s_q;
  int checks = 0, failures = 0;

  gt_config dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic apply(input int kk, input int ss, input int dd);
    @(negedge clk);
    k = 4'(kk); s = 4'(ss); d = 4'(dd); cfg_valid = 1'b1;
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  initial begin
    k = '0; s = 4'd1; d = 4'd1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // worked examples
    apply(1, 1, 1);
    check(g0 == 7 && g1 == 1 && l0 == 2, "3x3 s1 -> {7,1}");
    apply(1, 2, 1);
    check(g0 == 7 && g1 == 0 && l0 == 1, "3x3 s2 -> {7,0}");
    apply(2, 1, 1);
    check(g0 == 6 && g1 == 2 && l0 == 4, "5x5 s1 -> {6,2}");
    apply(0, 1, 1);
    check(l0 == 8, "1x1 -> uniform");
    apply(5, 4, 1);  // 11x11 s4: {27,2} mod 32 = {3,2} mod 8
    check(g0 == 3 && g1 == 2, "11x11 s4 -> {3,2}");
    // sweep
    for (int kk = 0; kk < 6; kk++)
      for (int ss = 1; ss < 5; ss++)
        for (int dd = 1; dd < 4; dd++) begin
          int eg0, eg1, el0;
          apply(kk, ss, dd);
          eg0 = pmod(-kk * dd, 8);
          eg1 = pmod(kk * dd - ss + 1, 8);
          el0 = pmod(eg1 - eg0, 8);
          if (el0 == 0) el0 = 8;
          check(g0 == 3'(eg0) && g1 == 3'(eg1) && l0 == seg_t'(el0) &&
                sh == 3'(pmod(-eg0, 8)) && kd_q == 8'(kk * dd) && s_q == 4'(ss),
                $sformatf("k=%0d s=%0d d=%0d", kk, ss, dd));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
