// fdct_rot_c3c5: multiplier-less 2x2 rotation by 3pi/16 for the fast DCT.
//
//   [xo]   1  [213  142] [x]      [cos(3pi/16)  cos(5pi/16)] [x]
//   [yo] = --- [142 -213] [y]  ~  [cos(5pi/16) -cos(3pi/16)] [y]
//          256
// Both outputs share the factor -71: 213x + 142y = -71(-3x - 2y) and
// 142x - 213y = -71(-2x + 3y). Network (the paper's 213/142 equations and
// figure):
//   ax = x - (x << 2) - (y << 1)     (-3x - 2y)
//   ay = (y << 1) + y - (x << 1)     (-2x + 3y)
//   t  = a - (a << 3) - (a << 6)     (-71a), for a = ax and a = ay
//   xo = tx >>> 8, yo = ty >>> 8
// The paper attaches these integers to the 0.9807/0.1951 equation; 213/256
// and 142/256 are cos(3pi/16) and cos(5pi/16), which is where this design
// uses them (see fdct_rot_c1c7).
// Arithmetic shifts (floor). Internal nets W+10 bits. Purely combinational.
module fdct_rot_c3c5 #(
  parameter int W = 12
) (
  input  logic signed [W-1:0] x,
  input  logic signed [W-1:0] y,
  output logic signed [W-1:0] xo,
  output logic signed [W-1:0] yo
);
  localparam int IW = W + 10;

  logic signed [IW-1:0] xe, ye, ax, ay, tx, ty, sx, sy;

  always_comb begin
    xe = IW'(x);
    ye = IW'(y);
    ax = xe - (xe <<< 2) - (ye <<< 1);
    ay = (ye <<< 1) + ye - (xe <<< 1);
    tx = ax - (ax <<< 3) - (ax <<< 6);
    ty = ay - (ay <<< 3) - (ay <<< 6);
    sx = tx >>> 8;
    sy = ty >>> 8;
    xo = sx[W-1:0];
    yo = sy[W-1:0];
  end
endmodule
