// gt_fetch -- GrateTile tile fetch controller.
//
// Given an input window [x_lo,x_hi) x [y_lo,y_hi) over channel groups
// cg_lo .. cg_lo+cg_n-1, it fetches exactly the subtensors that make up the
// window and writes them, decompressed, into the tile buffer. Because the
// division was derived from the layer's window edges, every window edge falls
// on a subtensor boundary, so no subtensor is fetched in part and no line
// outside the window is read. For each subtensor the controller
//   1. locates its segment in y and x: u = coord + sh; group = u / 8, and the
//      offset u % 8 must be 0 (first segment, L0 long) or L0 (second segment,
//      8-L0 long), anything else is a misaligned window and raises err;
//   2. reads the 48-bit metadata record of its group (index
//      (cg*GY + gy)*GX + gx), unless the record last read is that group's --
//      a window holds up to four subtensors of one group, so the record is
//      kept in a one-entry register and reused;
//   3. forms the line address with the two-step rule of gt_subtensor_addr
//      (group pointer plus the sizes of the subtensors stored before it);
//   4. requests its lines and streams them through gt_bitmask_dec, writing
//      each pixel to tile-buffer entry ((c*MAX_H + ty)*MAX_W + tx).
// Subtensors are visited channel group by channel group, row of segments by
// row, left to right. Step 2's record reuse and everything about ordering and
// handshakes are this design's choices; the paper states the function (fetch
// only the needed subtensors, assemble the tile on the fly) and step 3.
//
// Interface: req_valid/req_ready starts a fetch; done pulses at its end, with
// err set if the window was misaligned, outside the stored grid or larger
// than the tile buffer. Metadata requests and line requests are valid/ready;
// the metadata response is a valid strobe; line responses are valid/ready and
// must come back in request order. Counters report, per fetch, subtensors,
// metadata reads, metadata reuses, lines read and raw (uncompressed)
// subtensors. Timing: a metadata read costs its memory latency plus three
// cycles, a subtensor costs one setup cycle plus the decoder's time.
module gt_fetch
  import gt_pkg::*;
#(
  parameter int unsigned MAX_H  = 20,
  parameter int unsigned MAX_W  = 20,
  parameter int unsigned MAX_CG = 2,
  parameter int unsigned AW     = $clog2(MAX_H * MAX_W * MAX_CG)
) (
  input  logic          clk,
  input  logic          rst_n,
  // division and stored grid
  input  seg_t          l0,
  input  logic [2:0]    sh,
  input  gidx_t         gx_n,       // groups per row
  input  gidx_t         gy_n,       // group rows
  // request
  input  logic          req_valid,
  output logic          req_ready,
  input  coord_t        x_lo, x_hi, y_lo, y_hi,
  input  cg_t           cg_lo,
  input  cg_t           cg_n,
  output logic          done,
  output logic          err,
  // metadata memory
  output logic          meta_req_valid,
  input  logic          meta_req_ready,
  output gidx_t         meta_req_idx,
  input  logic          meta_rsp_valid,
  input  meta_t         meta_rsp_data,
  // line memory
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output lptr_t         rd_req_addr,
  input  logic          rd_rsp_valid,
  input  line_t         rd_rsp_data,
  output logic          rd_rsp_ready,
  // tile buffer
  output logic          tb_wr_en,
  output logic [AW-1:0] tb_wr_addr,
  output line_t         tb_wr_data,
  // per-fetch counters
  output logic [15:0]   n_sub,
  output logic [15:0]   n_meta_rd,
  output logic [15:0]   n_meta_reuse,
  output logic [15:0]   n_lines,
  output logic [15:0]   n_raw
);
  typedef enum logic [3:0] {IDLE, SEGY, SEGX, META_REQ, META_WAIT, ADDR, STREAM, NEXT, FINISH}
    state_t;

  state_t     state;
  coord_t     rx_lo, rx_hi, ry_lo, ry_hi;
  cg_t        rcg_lo, rcg_n, cgi;
  coord_t     cy, cx;
  seg_t       ylen, xlen;
  logic       ysg, xsg;
  gidx_t      gy;
  meta_t      meta_q;
  gidx_t      meta_id;
  logic       meta_ok;
  lptr_t      addr_q;
  len_t       len_q, issued;
  seg_t       pyi, pxi;

  // Segment lookup for a coordinate.
  function automatic logic seg_of(input coord_t c, input logic [2:0] shift, input seg_t lf,
                                  input gidx_t n, output gidx_t g, output logic sg,
                                  output seg_t ln);
    coord_t u;
    logic [2:0] p;
    u  = c + coord_t'({1'b0, shift});
    p  = u[2:0];
    g  = gidx_t'(u[COORD_W-1:3]);
    sg = (p != 3'd0);
    ln = seg_len(lf, sg);
    // valid when on the grid and on a boundary
    return !u[COORD_W-1] && (gidx_t'(u[COORD_W-1:3]) < n) &&
           (p == 3'd0 || (lf != seg_t'(MOD_N) && seg_t'(p) == lf));
  endfunction

  logic       ok_y, ok_x;
  gidx_t      gy_c, gx_c;
  logic       ysg_c, xsg_c;
  seg_t       ylen_c, xlen_c;
  gidx_t      gid_c;

  always_comb begin
    ok_y  = seg_of(cy, sh, l0, gy_n, gy_c, ysg_c, ylen_c);
    ok_x  = seg_of(cx, sh, l0, gx_n, gx_c, xsg_c, xlen_c);
    gid_c = (((gidx_t'(rcg_lo) + gidx_t'(cgi)) * gy_n) + gy) * gx_n + gx_c;
  end

  // Address unit and decoder.
  lptr_t a_addr;
  len_t  a_len, a_npix;
  logic  a_raw;

  gt_subtensor_addr u_addr (
    .meta(meta_q), .l0(l0), .q({ysg, xsg}),
    .line_addr(a_addr), .len(a_len), .npix(a_npix), .raw(a_raw)
  );

  logic  dec_start, dec_px_valid, dec_done, dec_busy;
  line_t dec_px;

  gt_bitmask_dec u_dec (
    .clk, .rst_n,
    .start(dec_start), .raw_mode(a_raw), .npix(a_npix),
    .line_valid(rd_rsp_valid), .line_data(rd_rsp_data), .line_ready(rd_rsp_ready),
    .px_valid(dec_px_valid), .px_data(dec_px), .px_ready(1'b1),
    .busy(dec_busy), .done(dec_done)
  );

  assign req_ready      = state == IDLE;
  assign meta_req_valid = state == META_REQ;
  assign meta_req_idx   = gid_c;
  assign rd_req_valid   = state == STREAM && issued != len_q;
  assign rd_req_addr    = addr_q + PTR_W'(issued);
  assign dec_start      = state == ADDR;

  // Tile-buffer write of each decoded pixel.
  always_comb begin
    tb_wr_en   = dec_px_valid;
    tb_wr_data = dec_px;
    tb_wr_addr = AW'((32'(cgi) * MAX_H + 32'(cy - ry_lo) + 32'(pyi)) * MAX_W
                     + 32'(cx - rx_lo) + 32'(pxi));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      {rx_lo, rx_hi, ry_lo, ry_hi} <= '0;
      {rcg_lo, rcg_n, cgi} <= '0;
      cy <= '0; cx <= '0;
      ylen <= '0; xlen <= '0; ysg <= 1'b0; xsg <= 1'b0;
      gy <= '0;
      meta_q <= '0; meta_id <= '0; meta_ok <= 1'b0;
      addr_q <= '0; len_q <= '0; issued <= '0;
      pyi <= '0; pxi <= '0;
      done <= 1'b0; err <= 1'b0;
      n_sub <= '0; n_meta_rd <= '0; n_meta_reuse <= '0; n_lines <= '0; n_raw <= '0;
    end else begin
      done <= 1'b0;
      if (rd_req_valid && rd_req_ready) begin
        issued  <= issued + 1'b1;
        n_lines <= n_lines + 1'b1;
      end
      if (dec_px_valid) begin
        if (pxi == xlen - 1'b1) begin
          pxi <= '0;
          pyi <= pyi + 1'b1;
        end else begin
          pxi <= pxi + 1'b1;
        end
      end

      case (state)
        IDLE: if (req_valid) begin
          rx_lo <= x_lo; rx_hi <= x_hi; ry_lo <= y_lo; ry_hi <= y_hi;
          rcg_lo <= cg_lo; rcg_n <= cg_n; cgi <= '0;
          cy <= y_lo; cx <= x_lo;
          err <= 1'b0;
          meta_ok <= 1'b0;
          n_sub <= '0; n_meta_rd <= '0; n_meta_reuse <= '0; n_lines <= '0; n_raw <= '0;
          if (y_hi <= y_lo || x_hi <= x_lo || cg_n == '0 ||
              32'(y_hi - y_lo) > MAX_H || 32'(x_hi - x_lo) > MAX_W || 32'(cg_n) > MAX_CG) begin
            err   <= 1'b1;
            state <= FINISH;
          end else begin
            state <= SEGY;
          end
        end
        SEGY: begin
          gy <= gy_c; ysg <= ysg_c; ylen <= ylen_c;
          cx <= rx_lo;
          if (!ok_y || cy + coord_t'(ylen_c) > ry_hi) begin
            err   <= 1'b1;
            state <= FINISH;
          end else begin
            state <= SEGX;
          end
        end
        SEGX: begin
          xsg <= xsg_c; xlen <= xlen_c;
          if (!ok_x || cx + coord_t'(xlen_c) > rx_hi) begin
            err   <= 1'b1;
            state <= FINISH;
          end else if (meta_ok && meta_id == gid_c) begin
            n_meta_reuse <= n_meta_reuse + 1'b1;
            state        <= ADDR;
          end else begin
            state <= META_REQ;
          end
        end
        META_REQ: if (meta_req_ready) begin
          meta_id   <= gid_c;
          n_meta_rd <= n_meta_rd + 1'b1;
          state     <= META_WAIT;
        end
        META_WAIT: if (meta_rsp_valid) begin
          meta_q  <= meta_rsp_data;
          meta_ok <= 1'b1;
          state   <= ADDR;
        end
        ADDR: begin
          addr_q <= a_addr;
          len_q  <= a_len;
          issued <= '0;
          pyi    <= '0;
          pxi    <= '0;
          n_sub  <= n_sub + 1'b1;
          if (a_raw) n_raw <= n_raw + 1'b1;
          state  <= STREAM;
        end
        STREAM: if (dec_done) begin
          state <= NEXT;
        end
        NEXT: begin
          if (cx + coord_t'(xlen) < rx_hi) begin
            cx    <= cx + coord_t'(xlen);
            state <= SEGX;
          end else if (cy + coord_t'(ylen) < ry_hi) begin
            cy    <= cy + coord_t'(ylen);
            state <= SEGY;
          end else if (cgi + 1'b1 < rcg_n) begin
            cgi   <= cgi + 1'b1;
            cy    <= ry_lo;
            state <= SEGY;
          end else begin
            state <= FINISH;
          end
        end
        FINISH: begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The decoder is idle whenever a subtensor is started, and no line is
  // requested beyond the subtensor's size.
  a_dec_idle: assert property (@(posedge clk) disable iff (!rst_n) dec_start |-> !dec_busy);
  a_len_bound: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req_valid |-> issued < len_q);

endmodule
