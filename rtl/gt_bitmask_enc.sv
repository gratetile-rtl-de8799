// gt_bitmask_enc -- bitmask compressor for one subtensor.
//
// Pixels (one 128-bit line of eight 16-bit channel words each) come in in
// raster order. In compressed mode every pair of pixels is a 16-element
// chunk: the encoder writes one 16-bit mask word (bit e set when element e is
// non-zero, element e = pixel e/8, channel e%8), then the non-zero words of
// the chunk in element order. An odd last pixel forms a chunk of its own
// whose upper mask byte is zero. The word stream is packed little-endian into
// 128-bit lines (word i at bits 16i+15:16i) and the last line is padded with
// zeros. In raw mode the pixels are passed through unchanged, one line each.
// The paper names bitmask coding as the compression it evaluates; the chunk
// size and the word order are this design's choice, as is the raw fallback,
// which the caller selects with raw_mode when coding would not save a line.
//
// Interface: pulse start with npix and raw_mode; then pixels on a
// valid/ready stream, lines out on a valid/ready stream; done pulses one
// cycle after the last line has been accepted. Timing: raw mode moves one
// line per cycle; compressed mode spends one cycle per pixel load, one on the
// mask and one per element of the chunk (zeros included), so 2+1+16 cycles
// per pixel pair when the output is never stalled.
module gt_bitmask_enc
  import gt_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  raw_mode,
  input  len_t  npix,
  input  logic  px_valid,
  input  line_t px_data,
  output logic  px_ready,
  output logic  line_valid,
  output line_t line_data,
  input  logic  line_ready,
  output logic  busy,
  output logic  done
);
  typedef enum logic [2:0] {IDLE, RAW, LOADA, LOADB, MASK, VAL, FLUSH, DRAIN} state_t;

  state_t           state;
  len_t             left;
  logic [2*LINE_W-1:0] chunk;
  logic [15:0]      mask;
  logic [3:0]       e;
  line_t            pack;
  logic [2:0]       pcnt;
  logic             out_valid;
  line_t            out_line;

  // Word pushed into the packer this cycle, if any.
  logic  push;
  word_t push_w;
  logic  stall;

  always_comb begin
    stall  = out_valid && !line_ready;
    push   = 1'b0;
    push_w = '0;
    for (int i = 0; i < 16; i++) mask[i] = chunk[i*WORD_W +: WORD_W] != '0;
    case (state)
      MASK: begin push = !stall; push_w = mask; end
      VAL:  begin push = !stall && mask[e]; push_w = chunk[e*WORD_W +: WORD_W]; end
      default: ;
    endcase
  end

  assign busy       = state != IDLE;
  assign px_ready   = (state == RAW)   ? line_ready :
                      (state == LOADA || state == LOADB);
  assign line_valid = (state == RAW) ? px_valid : out_valid;
  assign line_data  = (state == RAW) ? px_data  : out_line;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      left      <= '0;
      chunk     <= '0;
      e         <= '0;
      pack      <= '0;
      pcnt      <= '0;
      out_valid <= 1'b0;
      out_line  <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (out_valid && line_ready && state != RAW) out_valid <= 1'b0;

      // Line packer.
      if (push) begin
        if (pcnt == 3'(LINE_WORDS - 1)) begin
          out_line  <= pack | (LINE_W'(push_w) << (pcnt * WORD_W));
          out_valid <= 1'b1;
          pack      <= '0;
        end else begin
          pack <= pack | (LINE_W'(push_w) << (pcnt * WORD_W));
        end
        pcnt <= pcnt + 3'd1;
      end

      case (state)
        IDLE: if (start) begin
          left  <= npix;
          pack  <= '0;
          pcnt  <= '0;
          state <= (npix == '0) ? DRAIN : (raw_mode ? RAW : LOADA);
        end
        RAW: if (px_valid && line_ready) begin
          left <= left - 1'b1;
          if (left == len_t'(1)) state <= DRAIN;
        end
        LOADA: if (px_valid) begin
          chunk <= {{LINE_W{1'b0}}, px_data};
          left  <= left - 1'b1;
          state <= (left == len_t'(1)) ? MASK : LOADB;
        end
        LOADB: if (px_valid) begin
          chunk[2*LINE_W-1:LINE_W] <= px_data;
          left  <= left - 1'b1;
          state <= MASK;
        end
        MASK: if (!stall) begin
          e     <= '0;
          state <= VAL;
        end
        VAL: if (!stall) begin
          e <= e + 4'd1;
          if (e == 4'd15) state <= (left == '0) ? FLUSH : LOADA;
        end
        FLUSH: if (!stall) begin
          if (pcnt != '0) begin
            out_line  <= pack;
            out_valid <= 1'b1;
            pack      <= '0;
            pcnt      <= '0;
          end
          state <= DRAIN;
        end
        DRAIN: if (!out_valid || line_ready) begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
