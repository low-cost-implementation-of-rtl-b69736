// interp_pkg: types and constants shared by the interpolation datapaths.
//
// Pixels are 8-bit unsigned grey levels, the width printed on every wire of
// the two sliding-window diagrams. The bicubic weights are the small integers
// printed on the multiplier boxes of the bicubic datapath diagram
// (-1, 6, 5, 5, applied to the oldest..newest tap of a row and, in the second
// stage, to the oldest..newest row); each stage is followed by a right shift
// of 4. The bilinear datapath weights every tap by 1 and shifts by 2.
// Weights are realised as shifts and adds: no multiplier is used.
package interp_pkg;

  localparam int unsigned PIX_W = 8;
  typedef logic [PIX_W-1:0] pixel_t;

  localparam pixel_t PIX_MAX = pixel_t'((1 << PIX_W) - 1);

  // Bicubic weights, index 0 = oldest tap (P1 of a row), 3 = newest (P4).
  localparam int BICUBIC_W [4] = '{-1, 6, 5, 5};
  localparam int BICUBIC_SHIFT = 4;   // after each of the two stages
  localparam int BILINEAR_SHIFT = 2;  // (P1+P2+P3+P4) >> 2

  // Output selection of the top level.
  typedef enum logic {
    MODE_BILINEAR = 1'b0,
    MODE_BICUBIC  = 1'b1
  } interp_mode_e;

endpackage
