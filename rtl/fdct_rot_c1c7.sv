// fdct_rot_c1c7: multiplier-less 2x2 rotation by pi/16 for the fast DCT.
//
//   [xo]   1  [251   50] [x]      [cos(pi/16)   cos(7pi/16)] [x]
//   [yo] = --- [ 50 -251] [y]  ~  [cos(7pi/16) -cos(pi/16) ] [y]
//          256
// Network (the paper's shift-add figure for the 251/50 pair):
//   ax = ((y + (y << 2)) << 1) - x   (10y - x)
//   ay = ((x + (x << 2)) << 1) + y   (10x + y)
//   cx = (x << 8) + ax + (ax << 2)   (251x + 50y)
//   cy = ay + (ay << 2) - (y << 8)   (50x - 251y)
//   xo = cx >>> 8, yo = cy >>> 8
// The paper's equation for this network writes ">> 2" after y + (y << 2),
// while its figure shows "<< 1"; only the latter yields 50y, so the figure is
// followed. The paper's equations also attach this 251/50 network to the
// 0.8315/0.5556 rotation and the 213/142 one to 0.9807/0.1951; since
// 251/256 = 0.980 and 50/256 = 0.195, this design pairs each network with
// the cosines it actually approximates.
// Arithmetic shifts (floor). Internal nets W+10 bits. Purely combinational.
module fdct_rot_c1c7 #(
  parameter int W = 12
) (
  input  logic signed [W-1:0] x,
  input  logic signed [W-1:0] y,
  output logic signed [W-1:0] xo,
  output logic signed [W-1:0] yo
);
  localparam int IW = W + 10;

  logic signed [IW-1:0] xe, ye, ax, ay, cx, cy, sx, sy;

  always_comb begin
    xe = IW'(x);
    ye = IW'(y);
    ax = ((ye + (ye <<< 2)) <<< 1) - xe;
    ay = ((xe + (xe <<< 2)) <<< 1) + ye;
    cx = (xe <<< 8) + ax + (ax <<< 2);
    cy = ay + (ay <<< 2) - (ye <<< 8);
    sx = cx >>> 8;
    sy = cy >>> 8;
    xo = sx[W-1:0];
    yo = sy[W-1:0];
  end
endmodule
