// approx_jpeg_top: approximate JPEG compression core (DCT + quantisation)
// with precision scaling and loop skipping.
//
// The core turns each level-shifted 8x8 pixel block into its quantised DCT
// coefficient block. Three approximations cut its energy:
//  * a multiplier-less 2D DCT (dct_2d) built from shift-add 1D passes;
//  * a quantiser that divides by the power of two just below each Q entry,
//    so a priority encoder and a shifter replace each divider;
//  * two run-time knobs: precision scaling (trunc_level = B, pixels are
//    rounded to M/2^B before the DCT) and loop skipping (skip_level = L:
//    when every pixel of a block is within 5*L of the last block that was
//    computed, the DCT core is left idle and that block's stored result is
//    output again).
// Dataflow, one block per cycle at most, no back-pressure:
//   cycle 0  similarity_check compares in_blk with the previous-block
//            register. Not similar: the block is truncated and enters the
//            DCT pipeline, and the previous-block register takes in_blk.
//            Similar: the DCT input is forced to the all-zero block and the
//            DCT registers are not loaded.
//   cycle 1  round 1 of the DCT is registered.
//   cycle 2  round 2 is registered; at the DCT output the coefficients are
//            multiplied by 2^B (so (M/2^B)'s DCT returns to full scale) and
//            quantised.
//   cycle 3  out_blk is registered: the new quantised block (which is also
//            written into the compressed-result register) or, for a skipped
//            block, the compressed-result register's content.
// So out_valid follows in_valid by exactly 3 cycles; out_skipped marks reused
// results. The skip flag and B travel with each block through the pipeline,
// so the knobs may change from one block to the next, and a reused result is
// always the one of the latest computed block. q_mat must stay stable while
// blocks are in flight.
// What follows the paper: the DCT networks, the quantiser cell, the
// similarity rule and eps = 5*L, the previous-block and result registers,
// the zero-input MUX and the output MUX. This design's choices: the
// pipelining, widths, rounding, reset, the 2^B rescaling and the handshake.
// Inputs are signed pixels in -128..127; out_blk[u][v] is signed COEF_W bits.
// rst_n is the asynchronous reset of every register and also disables the
// result-register assertion below while reset is active; lint tools report
// that second, clocked use, which exists only in simulation.
module approx_jpeg_top
  import jpeg_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic [2:0] trunc_level,
  input  logic [2:0] skip_level,
  input  q_mat_t    q_mat,
  input  logic      in_valid,
  input  pix_blk_t  in_blk,
  output logic      out_valid,
  output logic      out_skipped,
  output coef_blk_t out_blk
);
  // ---- cycle 0: loop-skip decision, previous-block register, truncation
  pix_blk_t prev_blk, trunc_blk, core_in;
  logic     similar, core_go;

  similarity_check u_sim (
    .level(skip_level), .cur_blk(in_blk), .prev_blk(prev_blk), .similar(similar)
  );

  assign core_go = in_valid && !similar;

  block_reg #(.W(PIX_W)) u_prev_reg (
    .clk(clk), .rst_n(rst_n), .we(core_go), .d(in_blk), .q(prev_blk)
  );

  precision_scaler u_trunc (.b(trunc_level), .in_blk(in_blk), .out_blk(trunc_blk));

  // input MUX of the core: TRUE (similar) selects the all-zero block
  always_comb
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        core_in[i][j] = similar ? pix_t'(0) : trunc_blk[i][j];

  // ---- cycles 1-2: DCT core
  logic      dct_valid;
  coef_blk_t dct_blk, scaled_blk, quant_blk;

  dct_2d u_dct (
    .clk(clk), .rst_n(rst_n), .in_valid(core_go), .in_blk(core_in),
    .out_valid(dct_valid), .out_blk(dct_blk)
  );

  // per-block tag: valid, skipped, truncation level
  typedef struct packed {
    logic       valid;
    logic       skip;
    logic [2:0] b;
  } tag_t;

  tag_t tag1, tag2;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      tag1 <= '0;
      tag2 <= '0;
    end else begin
      tag1 <= '{valid: in_valid, skip: similar, b: trunc_level};
      tag2 <= tag1;
    end

  // undo the precision scaling, then quantise
  always_comb
    for (int u = 0; u < N; u++)
      for (int v = 0; v < N; v++)
        scaled_blk[u][v] = dct_blk[u][v] <<< tag2.b;

  approx_quantizer u_quant (.q_mat(q_mat), .d_blk(scaled_blk), .c_blk(quant_blk));

  // ---- cycle 3: compressed-result register and output MUX
  coef_blk_t result_blk;
  logic      result_we;

  assign result_we = tag2.valid && !tag2.skip;

  block_reg #(.W(COEF_W)) u_result_reg (
    .clk(clk), .rst_n(rst_n), .we(result_we), .d(quant_blk), .q(result_blk)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_skipped <= 1'b0;
      out_blk     <= '{default: '0};
    end else begin
      out_valid   <= tag2.valid;
      out_skipped <= tag2.valid && tag2.skip;
      if (tag2.valid) out_blk <= tag2.skip ? result_blk : quant_blk;
    end

  // A computed block must find its DCT result at the pipeline end.
  assert property (@(posedge clk) disable iff (!rst_n) result_we |-> dct_valid)
    else $error("DCT result missing for a computed block");
endmodule
