// gt_config -- works out the GrateTile division of a CNN layer.
//
// A layer with kernel 2k+1, stride s and dilation d reads, for each output
// tile, an input window whose left edge is at -kd and whose right edge is at
// kd-s+1, modulo the tile step. The division is the union of both edges,
//     G = { -kd, kd-s+1 } (mod N),     N = 8,
// exactly as the paper derives it. Because N is a power of two, "mod N" is a
// truncation to log2(N) bits. The unit reports
//     g0 = -kd mod N          first boundary, origin of a group,
//     g1 = kd-s+1 mod N       second boundary,
//     l0 = (g1-g0) mod N      length of the first segment; 0 becomes N, the
//                             degenerate case of one uniform segment (1x1
//                             kernels), and then the second segment is empty.
//     sh = (N-g0) mod N       shift that maps x = g0 onto a multiple of N.
// Examples from the paper: (k,s,d)=(1,1,1) gives {7,1}, l0=2; (1,2,1) gives
// {7,0}, l0=1; (2,1,1) gives {6,2}, l0=4.
//
// Interface: k, s, d sampled when cfg_valid is high; outputs are registered
// and valid from the next cycle on (one-cycle latency), held until the next
// cfg_valid; kd_q and s_q keep k*d and s for the window arithmetic of
// the fetch path. Reset clears them to the (1,1,1) division. Register widths
// (4 bits each) are this design's choice.
module gt_config
  import gt_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cfg_valid,
  input  logic [3:0] k,        // kernel half-size: kernel = 2k+1
  input  logic [3:0] s,        // stride
  input  logic [3:0] d,        // dilation
  output logic [2:0] g0,
  output logic [2:0] g1,
  output seg_t       l0,
  output logic [2:0] sh,
  output logic [7:0] kd_q,     // k*d, half-width of the dilated window
  output logic [3:0] s_q       // stride
);
  localparam int unsigned NB = $clog2(MOD_N);

  logic [7:0]    kd;
  logic [NB-1:0] g0_c, g1_c, l0_c;

  always_comb begin
    kd   = k * d;
    g0_c = NB'(-kd);
    g1_c = NB'(kd - {4'b0, s} + 8'd1);
    l0_c = g1_c - g0_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g0 <= 3'd7;
      g1 <= 3'd1;
      l0 <= seg_t'(2);
      sh <= 3'd1;
      kd_q <= 8'd1;
      s_q  <= 4'd1;
    end else if (cfg_valid) begin
      kd_q <= kd;
      s_q  <= s;
      g0 <= g0_c;
      g1 <= g1_c;
      l0 <= (l0_c == '0) ? seg_t'(MOD_N) : seg_t'(l0_c);
      sh <= NB'(-g0_c);
    end
  end

endmodule
