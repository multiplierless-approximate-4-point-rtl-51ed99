// approx_dct_pkg: constants and types shared by the approximate 4-point DCT
// cores, the 2-D engine and the top level.
//
// The transform length (4) and the 8-bit input resolution follow the paper.
// The word growth per 1-D stage (2 bits) follows from the matrices: every
// output is a sum of at most four (DCT-II) or three (DCT-IV) inputs with
// coefficients in {-1,0,1}, so two extra bits always hold the exact result.
package approx_dct_pkg;

  // Transform length of every core (4-point transforms, 4x4 blocks).
  localparam int unsigned N = 4;

  // Input sample width: the paper assumes 8-bit inputs.
  localparam int unsigned IN_W = 8;

  // Bits added by one 1-D approximate transform (no rounding, no truncation).
  localparam int unsigned GROWTH_1D = 2;

  // Which of the two approximations a 2-D engine is built around.
  typedef enum logic {
    DCT_II = 1'b0,   // C*_II, 6 additions per 4-point transform
    DCT_IV = 1'b1    // C*_IV, 8 additions per 4-point transform
  } kind_e;

endpackage
