// gt_mem_model -- behavioural model of the external memory seen by the
// GrateTile store and fetch paths (not synthesizable; testbench only).
//
// Holds 128-bit lines and 48-bit metadata records in arrays. Line reads are
// queued and answered in order after LAT cycles; request and response
// handshakes get random stalls when STALL is set. Metadata reads answer after
// LAT cycles. Writes of lines are accepted with random stalls; metadata writes
// are always taken. Counters report lines and records moved.
module gt_mem_model
  import gt_pkg::*;
#(
  parameter int LINES = 1 << 16,
  parameter int METAS = 1 << 14,
  parameter int LAT   = 4,
  parameter bit STALL = 1'b1
) (
  input  logic  clk,
  // line write
  input  logic  wr_valid,
  output logic  wr_ready,
  input  lptr_t wr_addr,
  input  line_t wr_data,
  // line read
  input  logic  rd_req_valid,
  output logic  rd_req_ready,
  input  lptr_t rd_req_addr,
  output logic  rd_rsp_valid,
  output line_t rd_rsp_data,
  input  logic  rd_rsp_ready,
  // metadata
  input  logic  meta_wr_valid,
  input  gidx_t meta_wr_idx,
  input  meta_t meta_wr_data,
  input  logic  meta_rd_valid,
  output logic  meta_rd_ready,
  input  gidx_t meta_rd_idx,
  output logic  meta_rsp_valid,
  output meta_t meta_rsp_data
);
  line_t lines [LINES];
  meta_t metas [METAS];
  int n_line_rd = 0, n_line_wr = 0, n_meta_rd = 0, n_meta_wr = 0;

  line_t rq_data[$];
  longint rq_time[$];
  longint cyc = 0;
  int meta_wait = -1;
  gidx_t meta_idx_q;

  initial begin
    wr_ready = 1'b0; rd_req_ready = 1'b0; meta_rd_ready = 1'b0;
    meta_rsp_valid = 1'b0; meta_rsp_data = '0;
    foreach (lines[i]) lines[i] = '0;
    foreach (metas[i]) metas[i] = '0;
  end

  assign rd_rsp_valid = rq_data.size() > 0 && rq_time[0] <= cyc;
  assign rd_rsp_data  = rq_data.size() > 0 ? rq_data[0] : '0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wr_valid && wr_ready) begin
      lines[int'(wr_addr) % LINES] <= wr_data;
      n_line_wr++;
    end
    if (meta_wr_valid) begin
      metas[int'(meta_wr_idx) % METAS] <= meta_wr_data;
      n_meta_wr++;
    end
    if (rd_req_valid && rd_req_ready) begin
      rq_data.push_back(lines[int'(rd_req_addr) % LINES]);
      rq_time.push_back(cyc + longint'(LAT));
      n_line_rd++;
    end
    if (rd_rsp_valid && rd_rsp_ready) begin
      void'(rq_data.pop_front());
      void'(rq_time.pop_front());
    end
    meta_rsp_valid <= 1'b0;
    if (meta_wait > 0) meta_wait <= meta_wait - 1;
    if (meta_wait == 0) begin
      meta_rsp_valid <= 1'b1;
      meta_rsp_data  <= metas[int'(meta_idx_q) % METAS];
      meta_wait      <= -1;
    end
    if (meta_rd_valid && meta_rd_ready) begin
      meta_idx_q <= meta_rd_idx;
      meta_wait  <= LAT;
      n_meta_rd++;
    end
    wr_ready      <= !STALL || ($urandom_range(0, 3) != 0);
    rd_req_ready  <= !STALL || ($urandom_range(0, 3) != 0);
    meta_rd_ready <= (meta_wait < 0) && !(meta_rd_valid && meta_rd_ready) &&
                     (!STALL || ($urandom_range(0, 1) != 0));
  end
endmodule
