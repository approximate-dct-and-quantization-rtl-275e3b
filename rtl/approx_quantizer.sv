// approx_quantizer: 8x8 approximate quantiser, C = D ./ Q'.
//
// Sixty-four quant_cell instances, one per coefficient, quantise a whole DCT
// block in one pass. Each cell receives its 8-bit entry of the user-chosen
// quantisation matrix Q and shifts the coefficient right by floor(log2 q);
// this replaces the 64 dividers of a conventional quantiser. The
// one-block-per-pass parallelism is this design's choice.
// Interface: q_mat[u][v] unsigned 8 bits, d_blk/c_blk[u][v] signed COEF_W bits,
// [u][v] = (vertical, horizontal) frequency. Purely combinational.
module approx_quantizer
  import jpeg_pkg::*;
(
  input  q_mat_t    q_mat,
  input  coef_blk_t d_blk,
  output coef_blk_t c_blk
);
  for (genvar u = 0; u < N; u++) begin : g_u
    for (genvar v = 0; v < N; v++) begin : g_v
      quant_cell #(.D_W(COEF_W)) u_cell (
        .q(q_mat[u][v]), .d(d_blk[u][v]), .c(c_blk[u][v])
      );
    end
  end
endmodule
