// block_reg: 8x8 register with write enable.
//
// Holds one block of W-bit signed words. The loop-skipping logic uses two of
// them: the previous-block register (W = PIX_W), written with the incoming
// pixels whenever a block is sent through the compression core, and the
// compressed-result register (W = COEF_W), written with the core's result for
// that block and read back whenever a later block is skipped.
// Timing: q takes d at the rising clock edge when we is high. An asynchronous
// active-low reset clears every word to zero; since the DCT of an all-zero
// block is zero, the two registers agree with each other from reset on.
module block_reg #(
  parameter int W = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic signed [W-1:0] d [8][8],
  output logic signed [W-1:0] q [8][8]
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) q <= '{default: '0};
    else if (we) q <= d;
endmodule
