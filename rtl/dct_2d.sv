// dct_2d: 8x8 two-dimensional DCT, D = T * M * T', built from 1D passes.
//
// As in the paper, the 2D transform is computed as two rounds of the
// multiplier-less 1D DCT with a transpose in between: round 1 transforms the
// eight columns of M (giving T*M), round 2 transforms the eight rows of that
// result (giving (T*(T*M)')' = T*M*T'). Each 1D pass returns twice the
// orthonormal result, so the second round's output is 4*D; an arithmetic
// shift by 2 restores D. The transposes are pure wiring.
// Architecture (this design's choice; the paper gives only the two-round
// scheme): eight fdct_1d units per round, a pipeline register after each
// round. One block may enter every cycle; its result appears at out_blk two
// cycles after in_valid, with out_valid. The registers load only when a valid
// block moves through them, so an idle core holds its state (the paper turns
// the core off on a loop-skip).
// Interface: in_blk[i][j] is pixel (row i, column j), signed PIX_W bits;
// out_blk[u][v] is coefficient (vertical frequency u, horizontal frequency v),
// signed COEF_W bits. Asynchronous active-low reset clears the registers.
module dct_2d
  import jpeg_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  pix_blk_t  in_blk,
  output logic      out_valid,
  output coef_blk_t out_blk
);
  localparam int W1 = PIX_W + 3;  // width after round 1 (2*T*M)
  localparam int W2 = W1 + 3;     // width after round 2 (4*D)

  logic signed [PIX_W-1:0] col_in  [8][8];  // [column][n]
  logic signed [W1-1:0]    col_out [8][8];  // [column][k]
  logic signed [W1-1:0]    tm_q    [8][8];  // registered T*M, [k][column]
  logic signed [W2-1:0]    row_out [8][8];  // [k][v] = 4*D[k][v]
  logic                    v1_q;
  coef_blk_t               d_blk;

  // Round 1: columns of M.
  always_comb
    for (int j = 0; j < 8; j++)
      for (int n = 0; n < 8; n++)
        col_in[j][n] = in_blk[n][j];

  for (genvar j = 0; j < 8; j++) begin : g_col
    fdct_1d #(.IN_W(PIX_W), .OUT_W(W1)) u_1d (.x(col_in[j]), .y(col_out[j]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v1_q <= 1'b0;
      for (int k = 0; k < 8; k++)
        for (int j = 0; j < 8; j++) tm_q[k][j] <= '0;
    end else begin
      v1_q <= in_valid;
      if (in_valid)
        for (int k = 0; k < 8; k++)
          for (int j = 0; j < 8; j++) tm_q[k][j] <= col_out[j][k];
    end

  // Round 2: rows of T*M (the columns of (T*M)').
  for (genvar k = 0; k < 8; k++) begin : g_row
    fdct_1d #(.IN_W(W1), .OUT_W(W2)) u_1d (.x(tm_q[k]), .y(row_out[k]));
  end

  always_comb
    for (int u = 0; u < 8; u++)
      for (int v = 0; v < 8; v++)
        d_blk[u][v] = coef_t'(row_out[u][v] >>> 2);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_blk   <= '{default: '0};
    end else begin
      out_valid <= v1_q;
      if (v1_q) out_blk <= d_blk;
    end
endmodule
