// similarity_check: loop-skipping decision for an incoming 8x8 block.
//
// The incoming block is "similar" to the last block that went through the
// compression core when every pixel lies within the error tolerance eps of
// the stored pixel at the same position:
//   ceiling = min(m_l + eps, 127), floor = max(m_l - eps, -128),
//   similar = AND over all 64 pixels of (floor <= m_in <= ceiling),
// with eps = 5*L for loop-skip level L. This is the paper's loop-skipping
// algorithm evaluated for all 64 pixels at once, its early exit becoming a
// 64-input AND. L is 3 bits (L0..L7; the paper evaluates L0..L6).
// Interface: level (L), cur_blk (incoming), prev_blk (stored), similar.
// Purely combinational.
module similarity_check
  import jpeg_pkg::*;
(
  input  logic [2:0] level,
  input  pix_blk_t   cur_blk,
  input  pix_blk_t   prev_blk,
  output logic       similar
);
  localparam int EW = PIX_W + 2;
  localparam logic signed [EW-1:0] PMAX = EW'(2 ** (PIX_W - 1) - 1);
  localparam logic signed [EW-1:0] PMIN = -EW'(2 ** (PIX_W - 1));

  logic signed [EW-1:0] eps, hi, lo, ceil_v, floor_v, cur;

  always_comb begin
    eps     = EW'(level) * EW'(5);
    similar = 1'b1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        hi      = EW'(prev_blk[i][j]) + eps;
        lo      = EW'(prev_blk[i][j]) - eps;
        ceil_v  = (hi > PMAX) ? PMAX : hi;
        floor_v = (lo < PMIN) ? PMIN : lo;
        cur     = EW'(cur_blk[i][j]);
        if (cur > ceil_v || cur < floor_v) similar = 1'b0;
      end
  end
endmodule
