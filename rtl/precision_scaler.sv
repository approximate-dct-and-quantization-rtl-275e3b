// precision_scaler: precision scaling (LSB truncation) of a pixel block.
//
// Implements M_tr = round(M / 2^B) for every pixel, where B is the truncation
// level chosen before compression (B = 0 leaves the block unchanged). The
// rounding is half up: (m + 2^(B-1)) >>> B, computed on PIX_W+1 bits; the
// result always fits PIX_W bits. The narrowed pixels then run through the
// ordinary-width DCT and quantiser; the core multiplies the DCT output by 2^B
// before quantisation so the output keeps the scale of an untruncated run.
// In the paper the unused bits are also clock-gated throughout the datapath;
// that is a power measure without logic function and is not modelled here.
// Interface: b (3 bits, B0..B7), in_blk/out_blk signed PIX_W-bit pixels.
// Purely combinational.
module precision_scaler
  import jpeg_pkg::*;
(
  input  logic [2:0] b,
  input  pix_blk_t   in_blk,
  output pix_blk_t   out_blk
);
  logic signed [PIX_W:0] half, t;

  always_comb begin
    half = (b == 3'd0) ? '0 : ((PIX_W+1)'(1) <<< (b - 3'd1));
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        t = ((PIX_W+1)'(in_blk[i][j]) + half) >>> b;
        out_blk[i][j] = pix_t'(t);
      end
  end
endmodule
