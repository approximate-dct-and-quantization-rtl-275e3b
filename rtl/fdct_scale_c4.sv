// fdct_scale_c4: multiplier-less scaling by cos(pi/4) ~ 0.707 for the fast DCT.
//
// The constant is approximated as 181/256 and the product is formed with
// shifts, one adder and two subtractors, exactly as the paper's network:
//   a = x + (x << 2)            (5x)
//   b = (x << 8) + a - (a << 4) (256x + 5x - 80x = 181x)
//   y = b >>> 8
// The shift right is arithmetic, so negative results round toward minus
// infinity (the paper does not state the signedness; two's complement is this
// design's choice). Internal nets are W+9 bits so nothing overflows; the
// output fits W bits because |181x/256| < |x|.
// Purely combinational.
module fdct_scale_c4 #(
  parameter int W = 12
) (
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int IW = W + 9;

  logic signed [IW-1:0] xe, a, b, bs;

  always_comb begin
    xe = IW'(x);
    a  = xe + (xe <<< 2);
    b  = (xe <<< 8) + a - (a <<< 4);
    bs = b >>> 8;
    y  = bs[W-1:0];
  end
endmodule
