// gt_store -- writes one 8x8x8 group of a feature map in GrateTile format.
//
// A group is one period of the division in x and y (8x8 pixels) times one
// channel group (8 channels). Its four subtensors q0..q3 ({yseg, xseg}, see
// gt_pkg) are compressed one after the other and written back to back, each
// starting on a cache-line boundary, from the group pointer; then the 48-bit
// metadata record {pointer, four sizes} is written. Group (gx, gy) covers
// x = 8*gx - sh .. 8*gx - sh + 7 (and likewise y), so pixels left of, above,
// right of or below the feature map (the convolution's zero padding) belong
// to edge groups; they are stored as zeros, which the coding shrinks to their
// mask words, and this lets a halo window be fetched like any other.
//
// Each subtensor takes two passes over its pixels. The first counts non-zero
// words to size the bitmask coding; if that would not save a line over the
// raw size (one line per pixel), the subtensor is stored raw. The second pass
// streams the pixels through gt_bitmask_enc to memory. Group pointers come
// from a bump allocator (next_ptr), loaded with alloc_valid/alloc_ptr.
// The layout of pointer plus neighbouring sizes, the alignment of every
// subtensor to a 16-byte line and the sizes counted in lines follow the
// paper; the two-pass sizing, the raw fallback, the allocator and the storing
// of the padding are this design's choices.
//
// Interface: req_valid/req_ready starts a group; done pulses after the
// metadata record is written. Pixel source: read strobe with (y, x, cg),
// data one cycle later. Line writes are valid/ready; the metadata write is a
// one-cycle strobe that the memory must take. Timing: two cycles per pixel
// in the first pass, three plus the encoder's time per pixel in the second.
module gt_store
  import gt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // division, stored grid and feature map size
  input  seg_t        l0,
  input  logic [2:0]  sh,
  input  gidx_t       gx_n,
  input  gidx_t       gy_n,
  input  coord_t      fm_w,
  input  coord_t      fm_h,
  // allocator
  input  logic        alloc_valid,
  input  lptr_t       alloc_ptr,
  output lptr_t       next_ptr,
  // request
  input  logic        req_valid,
  output logic        req_ready,
  input  gidx_t       req_gx,
  input  gidx_t       req_gy,
  input  cg_t         req_cg,
  output logic        done,
  // pixel source (output feature map)
  output logic        src_rd_en,
  output coord_t      src_y,
  output coord_t      src_x,
  output cg_t         src_cg,
  input  line_t       src_rdata,
  // line memory
  output logic        wr_valid,
  input  logic        wr_ready,
  output lptr_t       wr_addr,
  output line_t       wr_data,
  // metadata memory
  output logic        meta_wr_valid,
  output gidx_t       meta_wr_idx,
  output meta_t       meta_wr_data,
  // counters since reset
  output logic [15:0] n_raw,
  output logic [15:0] n_comp
);
  typedef enum logic [3:0] {IDLE, QSETUP, P1_RD, P1_ACC, DECIDE, P2_RD, P2_CAP, P2_HOLD,
                            P2_WAIT,
                            META, FINISH} state_t;

  state_t      state;
  gidx_t       gx, gy;
  cg_t         cg;
  logic [1:0]  q;
  len_t        sizes [4];
  logic [8:0]  total;
  seg_t        ly, lx, yi, xi;
  coord_t      oy, ox;
  logic [9:0]  nnz;
  len_t        npix, size_q, wcnt;
  lptr_t       base_q;
  logic        inr_q;          // the pixel read last cycle is inside the map
  line_t       px_q;
  logic        last_px;

  coord_t      py, pxc;
  logic        inr;
  line_t       src_px;

  always_comb begin
    py      = oy + coord_t'(yi);
    pxc     = ox + coord_t'(xi);
    inr     = !py[COORD_W-1] && !pxc[COORD_W-1] && py < fm_h && pxc < fm_w;
    src_px  = inr_q ? src_rdata : '0;
    last_px = (yi == ly - 1'b1) && (xi == lx - 1'b1);
  end

  assign req_ready = state == IDLE;
  assign src_rd_en = (state == P1_RD || state == P2_RD) && inr;
  assign src_y     = py;
  assign src_x     = pxc;
  assign src_cg    = cg;

  // Raw decision from the first pass.
  logic [9:0] cl;
  logic       raw_c;
  always_comb begin
    cl    = comp_lines(npix, nnz);
    raw_c = cl >= 10'(npix);
  end

  // Encoder.
  logic enc_start, enc_px_ready, enc_line_valid, enc_done, enc_busy;
  line_t enc_line;

  assign enc_start = state == DECIDE;

  gt_bitmask_enc u_enc (
    .clk, .rst_n,
    .start(enc_start), .raw_mode(raw_c), .npix(npix),
    .px_valid(state == P2_HOLD), .px_data(px_q), .px_ready(enc_px_ready),
    .line_valid(enc_line_valid), .line_data(enc_line), .line_ready(wr_ready),
    .busy(enc_busy), .done(enc_done)
  );

  assign wr_valid = enc_line_valid;
  assign wr_data  = enc_line;
  assign wr_addr  = base_q + PTR_W'(wcnt);

  assign meta_wr_valid = state == META;
  assign meta_wr_idx   = ((gidx_t'(cg) * gy_n) + gy) * gx_n + gx;
  assign meta_wr_data  = meta_pack(next_ptr, l0, sizes[0], sizes[1], sizes[2], sizes[3]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      gx <= '0; gy <= '0; cg <= '0; q <= '0;
      for (int j = 0; j < 4; j++) sizes[j] <= '0;
      total <= '0;
      ly <= '0; lx <= '0; yi <= '0; xi <= '0; oy <= '0; ox <= '0;
      nnz <= '0; npix <= '0; size_q <= '0; wcnt <= '0;
      base_q <= '0; inr_q <= 1'b0; px_q <= '0;
      next_ptr <= '0;
      done <= 1'b0;
      n_raw <= '0; n_comp <= '0;
    end else begin
      done  <= 1'b0;
      inr_q <= inr;
      if (alloc_valid && state == IDLE) next_ptr <= alloc_ptr;
      if (wr_valid && wr_ready) wcnt <= wcnt + 1'b1;

      case (state)
        IDLE: if (req_valid) begin
          gx <= req_gx; gy <= req_gy; cg <= req_cg;
          q <= '0; total <= '0;
          state <= QSETUP;
        end
        QSETUP: begin
          ly   <= seg_len(l0, q[1]);
          lx   <= seg_len(l0, q[0]);
          oy   <= coord_t'({gy, 3'b000}) - coord_t'({1'b0, sh}) + (q[1] ? coord_t'(l0) : '0);
          ox   <= coord_t'({gx, 3'b000}) - coord_t'({1'b0, sh}) + (q[0] ? coord_t'(l0) : '0);
          npix <= raw_lines(l0, q);
          yi <= '0; xi <= '0; nnz <= '0;
          if (raw_lines(l0, q) == '0) begin
            sizes[q] <= '0;
            q        <= q + 1'b1;
            state    <= (q == 2'd3) ? META : QSETUP;
          end else begin
            state <= P1_RD;
          end
        end
        P1_RD: state <= P1_ACC;
        P1_ACC: begin
          nnz <= nnz + 10'(nz_count(src_px));
          if (last_px) begin
            state <= DECIDE;
          end else begin
            state <= P1_RD;
          end
          if (xi == lx - 1'b1) begin xi <= '0; yi <= yi + 1'b1; end
          else xi <= xi + 1'b1;
        end
        DECIDE: begin
          size_q <= raw_c ? npix : len_t'(cl);
          base_q <= next_ptr + PTR_W'(total);
          wcnt   <= '0;
          yi <= '0; xi <= '0;
          if (raw_c) n_raw <= n_raw + 1'b1;
          else       n_comp <= n_comp + 1'b1;
          state  <= P2_RD;
        end
        P2_RD: state <= P2_CAP;
        P2_CAP: begin
          px_q  <= src_px;
          state <= P2_HOLD;
        end
        P2_HOLD: begin
          if (enc_px_ready) begin
            if (last_px) state <= P2_WAIT;
            else         state <= P2_RD;
            if (xi == lx - 1'b1) begin xi <= '0; yi <= yi + 1'b1; end
            else xi <= xi + 1'b1;
          end
        end
        P2_WAIT: if (enc_done) begin
          sizes[q] <= size_q;
          total    <= total + 9'(size_q);
          q        <= q + 1'b1;
          state    <= (q == 2'd3) ? META : QSETUP;
        end
        META: begin
          next_ptr <= next_ptr + PTR_W'(total);
          state    <= FINISH;
        end
        FINISH: begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // The encoder is idle whenever a subtensor is started.
  a_enc_idle: assert property (@(posedge clk) disable iff (!rst_n) enc_start |-> !enc_busy);

  // Every subtensor occupies exactly the lines its size field records.
  a_size_matches: assert property (@(posedge clk) disable iff (!rst_n)
    (state == P2_WAIT && enc_done) |-> (wcnt == size_q));

endmodule
