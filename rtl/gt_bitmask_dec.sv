// gt_bitmask_dec -- bitmask decompressor for one subtensor.
//
// Reverses gt_bitmask_enc. In compressed mode it reads a 16-bit mask word
// per pair of pixels (one per lone last pixel), then rebuilds the chunk
// element by element: a set mask bit takes the next word of the stream, a
// clear bit yields zero. Every eighth element completes a pixel (one 128-bit
// line of eight channel words), which is presented on the output. A new
// input line is taken only when a word is needed and the current line is
// used up, so the decoder never reads past the subtensor's last line; the
// zero padding after the last word is dropped. In raw mode lines pass
// through as pixels.
//
// Interface: pulse start with npix and raw_mode, then lines in on a
// valid/ready stream and pixels out on a valid/ready stream, in raster order
// of the subtensor; done pulses once the last pixel has been accepted.
// Timing: raw mode one pixel per cycle; compressed mode one cycle per mask
// word, one per element, plus one cycle per input line loaded.
// The coding is the one gt_bitmask_enc describes; its details are this
// design's choice, the paper only naming bitmask coding.
module gt_bitmask_dec
  import gt_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  raw_mode,
  input  len_t  npix,
  input  logic  line_valid,
  input  line_t line_data,
  output logic  line_ready,
  output logic  px_valid,
  output line_t px_data,
  input  logic  px_ready,
  output logic  busy,
  output logic  done
);
  typedef enum logic [2:0] {IDLE, RAW, MASK, ELEM, DRAIN} state_t;

  state_t      state;
  len_t        left;          // pixels not yet completed
  line_t       cur;           // current input line
  logic [3:0]  widx;          // next word in cur, 8 = used up
  logic [15:0] mask;
  logic [3:0]  e;             // element within the chunk
  logic        last_e;        // e is the chunk's last element
  line_t       pix;           // pixel being assembled
  line_t       pix_nxt;
  logic        out_valid;
  line_t       out_px;
  logic        avail, need, stall;
  logic        mask_two;      // chunk holds two pixels (else one)
  word_t       w;

  always_comb begin
    avail  = widx != 4'd8;
    w      = cur[widx[2:0]*WORD_W +: WORD_W];
    stall  = out_valid && !px_ready;
    need   = (state == MASK) || (state == ELEM && mask[e] && !stall);
    last_e = mask_two ? (e == 4'd15) : (e == 4'd7);
    pix_nxt = pix;
    pix_nxt[e[2:0]*WORD_W +: WORD_W] = mask[e] ? w : '0;
  end

  assign busy       = state != IDLE;
  assign line_ready = (state == RAW) ? px_ready : (need && !avail);
  assign px_valid   = (state == RAW) ? line_valid : out_valid;
  assign px_data    = (state == RAW) ? line_data  : out_px;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      left      <= '0;
      cur       <= '0;
      widx      <= 4'd8;
      mask      <= '0;
      mask_two  <= 1'b0;
      e         <= '0;
      pix       <= '0;
      out_valid <= 1'b0;
      out_px    <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (out_valid && px_ready) out_valid <= 1'b0;
      if (need && !avail && line_valid && state != RAW) begin
        cur  <= line_data;
        widx <= '0;
      end

      case (state)
        IDLE: if (start) begin
          left  <= npix;
          widx  <= 4'd8;
          state <= (npix == '0) ? DRAIN : (raw_mode ? RAW : MASK);
        end
        RAW: if (line_valid && px_ready) begin
          left <= left - 1'b1;
          if (left == len_t'(1)) state <= DRAIN;
        end
        MASK: if (avail) begin
          mask     <= w;
          mask_two <= left != len_t'(1);
          widx     <= widx + 4'd1;
          e        <= '0;
          state    <= ELEM;
        end
        ELEM: if (!stall && (!mask[e] || avail)) begin
          if (mask[e]) widx <= widx + 4'd1;
          pix <= pix_nxt;
          e   <= e + 4'd1;
          if (e[2:0] == 3'd7) begin
            out_px    <= pix_nxt;
            out_valid <= 1'b1;
            left      <= left - 1'b1;
          end
          if (last_e) state <= (left == len_t'(1)) ? DRAIN : MASK;
        end
        DRAIN: if (!out_valid || px_ready) begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
