// tb_gt_subtensor_addr -- checks the two-step subtensor address against a
// reference: pointer plus the sizes of the subtensors before the requested
// one, for random records of every division (L0 = 1..8), and the record
// widths of the paper's examples (3+4+4+6 = 17 bits for L0 = 2, 5+5+5+5 = 20
// bits for L0 = 4).
module tb_gt_subtensor_addr;
  import gt_pkg::*;
  import gt_tb_pkg::*;

  meta_t      meta;
  seg_t       l0;
  logic [1:0] q;
  lptr_t      line_addr;
  len_t       len, npix_o;
  logic       raw;
  int checks = 0, failures = 0;

  gt_subtensor_addr dut (.meta, .l0, .q, .line_addr, .len, .npix(npix_o), .raw);

  initial begin
    #1000000;
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

  initial begin
    int tot;
    tot = 0;
    for (int qq = 0; qq < 4; qq++) tot += fw(npix(2, qq));
    check(tot == 17, "L0=2 record uses 17 size bits");
    tot = 0;
    for (int qq = 0; qq < 4; qq++) tot += fw(npix(4, qq));
    check(tot == 20, "L0=4 record uses 20 size bits");

    for (int it = 0; it < 2000; it++) begin
      int ll, ptr, sz[4], exp_addr;
      ll  = 1 + it % 8;
      ptr = int'($urandom_range(0, 32'h0FFF_FF00));
      for (int j = 0; j < 4; j++) begin
        int n;
        n = npix(ll, j);
        sz[j] = (n == 0) ? 0 : int'($urandom_range(1, n));
      end
      meta = ref_meta(ptr, ll, sz);
      l0   = seg_t'(ll);
      for (int qq = 0; qq < 4; qq++) begin
        if (npix(ll, qq) == 0) continue;
        q = 2'(qq);
        #1;
        exp_addr = ptr;
        for (int j = 0; j < qq; j++) exp_addr += sz[j];
        check(line_addr == lptr_t'(exp_addr) && len == len_t'(sz[qq]) &&
              npix_o == len_t'(npix(ll, qq)) && raw == (sz[qq] == npix(ll, qq)),
              $sformatf("l0=%0d q=%0d addr=%h exp=%h len=%0d exp=%0d", ll, qq,
                        line_addr, exp_addr, len, sz[qq]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
