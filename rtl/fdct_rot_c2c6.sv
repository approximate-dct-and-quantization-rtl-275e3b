// fdct_rot_c2c6: multiplier-less 2x2 rotation by pi/8 for the fast DCT.
//
//   [xo]   1  [473  196] [x]      [cos(pi/8)   cos(3pi/8)] [x]
//   [yo] = --- [196 -473] [y]  ~  [cos(3pi/8) -cos(pi/8) ] [y]
//          512
// built from shifts, adders and subtractors with shared subexpressions, as
// in the paper:
//   a  = x - (y << 1)
//   bx = x - (x << 3) + (y << 2)     (-7x + 4y)
//   by = (a << 2) + y                (4x - 7y)
//   c  = bx + (a << 5)               (25x - 60y)
//   dx = c - (bx << 6) + (y << 9)    (473x + 196y)
//   dy = (c << 3) - by               (196x - 473y)
//   xo = dx >>> 9, yo = dy >>> 9
// Arithmetic shifts (floor). Internal nets W+11 bits; outputs W bits.
// Purely combinational.
module fdct_rot_c2c6 #(
  parameter int W = 12
) (
  input  logic signed [W-1:0] x,
  input  logic signed [W-1:0] y,
  output logic signed [W-1:0] xo,
  output logic signed [W-1:0] yo
);
  localparam int IW = W + 11;

  logic signed [IW-1:0] xe, ye, a, bx, by, c, dx, dy, sx, sy;

  always_comb begin
    xe = IW'(x);
    ye = IW'(y);
    a  = xe - (ye <<< 1);
    bx = xe - (xe <<< 3) + (ye <<< 2);
    by = (a <<< 2) + ye;
    c  = bx + (a <<< 5);
    dx = c - (bx <<< 6) + (ye <<< 9);
    dy = (c <<< 3) - by;
    sx = dx >>> 9;
    sy = dy >>> 9;
    xo = sx[W-1:0];
    yo = sy[W-1:0];
  end
endmodule
