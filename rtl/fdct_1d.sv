// fdct_1d: 8-point multiplier-less fast 1D DCT.
//
// Computes y = 2*T*x, where T is the orthonormal 8-point DCT matrix
// (t_0j = 1/sqrt(8), t_ij = 1/2*cos((2j+1)*i*pi/16)), i.e.
//   y[k] = c_k * sum_n x[n] * cos((2n+1)*k*pi/16),  c_0 = 1/sqrt(2), c_k = 1.
// The structure is the paper's butterfly flow graph (Chen's fast DCT):
//   stage 1  s_n = x_n + x_{7-n},  d_{7-n} = x_n - x_{7-n}     (n = 0..3)
//   even     b0 = s0+s3, b1 = s1+s2, b2 = s1-s2, b3 = s0-s3
//            y0 = 0.707(b0+b1), y4 = 0.707(b0-b1), (y2,y6) = rot_pi/8(b3,b2)
//   odd      e5 = 0.707(d6-d5), e6 = 0.707(d6+d5)
//            p4 = d4+e5, p5 = e5-d4, p6 = d7-e6, p7 = d7+e6
//            (y1,y7) = rot_pi/16(p7,p4), (y3,y5) = rot_3pi/16(p6,p5)
// The four kinds of multiplication are the shift-add units fdct_scale_c4,
// fdct_rot_c2c6, fdct_rot_c1c7 and fdct_rot_c3c5; there is no multiplier.
// The flow graph produces its outputs in the order 0,4,2,6,1,7,3,5 from top
// to bottom; this module presents them in natural frequency order. Which
// operand each subtractor takes was chosen so that every output matches the
// cosine sum above (the paper's drawing does not mark it).
// Widths: internal nets IN_W+4 bits, outputs OUT_W = IN_W+3 bits, enough for
// |y[k]| <= 2*sqrt(8)*max|x|. Arithmetic shifts truncate toward minus
// infinity, so y differs from the exact value by a few LSBs.
// Purely combinational.
module fdct_1d #(
  parameter int IN_W  = 8,
  parameter int OUT_W = IN_W + 3
) (
  input  logic signed [IN_W-1:0]  x [8],
  output logic signed [OUT_W-1:0] y [8]
);
  localparam int IW = IN_W + 4;

  logic signed [IW-1:0] xe [8];
  logic signed [IW-1:0] s0, s1, s2, s3, d4, d5, d6, d7;
  logic signed [IW-1:0] b0, b1, b2, b3, sum01, dif01;
  logic signed [IW-1:0] od_dif, od_sum, e5, e6;
  logic signed [IW-1:0] p4, p5, p6, p7;
  logic signed [IW-1:0] k0, k1, k2, k3, k4, k5, k6, k7;

  always_comb begin
    for (int n = 0; n < 8; n++) xe[n] = IW'(x[n]);
    s0 = xe[0] + xe[7];
    s1 = xe[1] + xe[6];
    s2 = xe[2] + xe[5];
    s3 = xe[3] + xe[4];
    d7 = xe[0] - xe[7];
    d6 = xe[1] - xe[6];
    d5 = xe[2] - xe[5];
    d4 = xe[3] - xe[4];
    b0 = s0 + s3;
    b1 = s1 + s2;
    b2 = s1 - s2;
    b3 = s0 - s3;
    sum01  = b0 + b1;
    dif01  = b0 - b1;
    od_dif = d6 - d5;
    od_sum = d6 + d5;
  end

  // 0.707 scalers of the even part (outputs 0 and 4) and of the odd part.
  fdct_scale_c4 #(.W(IW)) u_sc_y0 (.x(sum01),  .y(k0));
  fdct_scale_c4 #(.W(IW)) u_sc_y4 (.x(dif01),  .y(k4));
  fdct_scale_c4 #(.W(IW)) u_sc_e5 (.x(od_dif), .y(e5));
  fdct_scale_c4 #(.W(IW)) u_sc_e6 (.x(od_sum), .y(e6));

  always_comb begin
    p4 = d4 + e5;
    p5 = e5 - d4;
    p6 = d7 - e6;
    p7 = d7 + e6;
  end

  fdct_rot_c2c6 #(.W(IW)) u_rot_even (.x(b3), .y(b2), .xo(k2), .yo(k6));
  fdct_rot_c1c7 #(.W(IW)) u_rot_c1c7 (.x(p7), .y(p4), .xo(k1), .yo(k7));
  fdct_rot_c3c5 #(.W(IW)) u_rot_c3c5 (.x(p6), .y(p5), .xo(k3), .yo(k5));

  always_comb begin
    y[0] = OUT_W'(k0);
    y[1] = OUT_W'(k1);
    y[2] = OUT_W'(k2);
    y[3] = OUT_W'(k3);
    y[4] = OUT_W'(k4);
    y[5] = OUT_W'(k5);
    y[6] = OUT_W'(k6);
    y[7] = OUT_W'(k7);
  end
endmodule
