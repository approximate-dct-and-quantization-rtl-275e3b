// jpeg_pkg: types and constants shared by the approximate JPEG compression core.
//
// A pixel block is an 8x8 array of level-shifted, signed 8-bit pixels
// (range -128..127). A coefficient block is an 8x8 array of signed COEF_W-bit
// DCT or quantised coefficients. Both are unpacked arrays indexed [row][column].
// The quantisation matrix is an 8x8 array of unsigned 8-bit entries (1..255).
// The 8x8 block, the 8-bit pixel range and the 8-bit Q entries follow the
// paper; COEF_W = 12 is this design's choice: |D(u,v)| <= 8*128 = 1024 for
// 8-bit signed pixels, so 12 signed bits hold every coefficient.
// Q50 and Q90 are the standard JPEG luminance matrices at quality levels 50
// and 90 as printed in the paper; they are handy defaults for testbenches.
package jpeg_pkg;

  localparam int N      = 8;
  localparam int PIX_W  = 8;
  localparam int Q_W    = 8;
  localparam int COEF_W = 12;

  typedef logic signed [PIX_W-1:0]  pix_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic        [Q_W-1:0]    qent_t;

  typedef pix_t  pix_blk_t  [N][N];
  typedef coef_t coef_blk_t [N][N];
  typedef qent_t q_mat_t    [N][N];

  // Standard quantisation matrices, row by row.
  localparam q_mat_t Q50 = '{
    '{8'd16, 8'd11, 8'd10, 8'd16, 8'd24,  8'd40,  8'd51,  8'd61},
    '{8'd12, 8'd12, 8'd14, 8'd19, 8'd26,  8'd58,  8'd60,  8'd55},
    '{8'd14, 8'd13, 8'd16, 8'd24, 8'd40,  8'd57,  8'd69,  8'd56},
    '{8'd14, 8'd17, 8'd22, 8'd29, 8'd51,  8'd87,  8'd80,  8'd62},
    '{8'd18, 8'd22, 8'd37, 8'd56, 8'd68,  8'd109, 8'd103, 8'd77},
    '{8'd24, 8'd35, 8'd55, 8'd64, 8'd81,  8'd104, 8'd113, 8'd92},
    '{8'd49, 8'd64, 8'd78, 8'd87, 8'd103, 8'd121, 8'd120, 8'd101},
    '{8'd72, 8'd92, 8'd95, 8'd98, 8'd112, 8'd100, 8'd103, 8'd99}
  };

  localparam q_mat_t Q90 = '{
    '{8'd3,  8'd2,  8'd2,  8'd3,  8'd5,  8'd8,  8'd10, 8'd12},
    '{8'd2,  8'd2,  8'd3,  8'd4,  8'd5,  8'd12, 8'd12, 8'd11},
    '{8'd3,  8'd3,  8'd3,  8'd5,  8'd8,  8'd11, 8'd14, 8'd11},
    '{8'd3,  8'd3,  8'd4,  8'd6,  8'd10, 8'd17, 8'd16, 8'd12},
    '{8'd4,  8'd4,  8'd7,  8'd11, 8'd14, 8'd22, 8'd21, 8'd15},
    '{8'd5,  8'd7,  8'd11, 8'd13, 8'd16, 8'd12, 8'd23, 8'd18},
    '{8'd10, 8'd13, 8'd16, 8'd17, 8'd21, 8'd24, 8'd24, 8'd21},
    '{8'd14, 8'd18, 8'd19, 8'd20, 8'd22, 8'd20, 8'd20, 8'd20}
  };

endpackage
