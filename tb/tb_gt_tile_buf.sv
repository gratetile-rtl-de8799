// tb_gt_tile_buf -- writes random pixels to random entries of the tile
// buffer, keeps a shadow copy, and checks reads against it, including the
// one-cycle read latency and old-data return on a same-address collision.
module tb_gt_tile_buf;
  import gt_pkg::*;

  localparam int unsigned DEPTH = 20 * 20 * 2;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [AW-1:0] wr_addr, rd_addr;
  line_t wr_data, rd_data;
  line_t shadow [DEPTH];
  int checks = 0, failures = 0;

  gt_tile_buf dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_addr = '0; rd_addr = '0; wr_data = '0;
    // fill every entry
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = AW'(a);
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      shadow[a] = wr_data;
    end
    @(negedge clk);
    wr_en = 1'b0;
    // random mix of reads and writes
    for (int it = 0; it < 5000; it++) begin
      line_t exp;
      @(negedge clk);
      rd_en   = 1'b1;
      rd_addr = AW'($urandom_range(0, DEPTH - 1));
      exp     = shadow[rd_addr];
      wr_en   = $urandom_range(0, 1) == 1;
      wr_addr = (it % 7 == 0) ? rd_addr : AW'($urandom_range(0, DEPTH - 1));
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      if (wr_en) shadow[wr_addr] = wr_data;
      @(negedge clk);
      rd_en = 1'b0;
      wr_en = 1'b0;
      checks++;
      if (rd_data !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d", rd_addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
