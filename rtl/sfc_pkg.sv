// sfc_pkg - constants shared by the SFC-6(7x7,3x3) convolution datapath.
//
// The algorithm computes a 7x7 output tile of a 3x3, stride-1 correlation
// from a 9x9 input tile as  36*Y = A^T [ (G F G^T) .* (B^T X B) ] A,
// where B^T (12x9), G (12x3) and A (12x7) are small integer matrices.
// Rows 0..7 of each matrix are the 6-point symbolic Fourier transform with
// the 3-multiply polynomial product folded in; rows 8..11 are correction
// terms that turn the wrapped (cyclic) outputs into valid linear outputs.
// The matrices are copied from the SFC-6(7x7,3x3) listing of the algorithm;
// A is stored as 6*A so it is integer, so the 2-D result carries a factor 36.
// Widths and the shift-based scale format are this design's own choices.
package sfc_pkg;

  localparam int TILE_IN  = 9;   // input tile edge (M + R - 1)
  localparam int TILE_OUT = 7;   // output tile edge M
  localparam int KSZ      = 3;   // kernel edge R
  localparam int TDOM     = 12;  // transform-domain edge (8 SFT-6 rows + 4 corrections)

  localparam int DATA_W   = 8;   // int8 spatial activations and filters
  localparam int Q_W      = 8;   // int8 transform-domain operands
  localparam int SH_W     = 3;   // per-frequency power-of-two scale exponent
  localparam int XT_W     = DATA_W + 6;  // |row sum of B^T| <= 6, squared in 2-D: 36 < 2^6
  localparam int WT_W     = DATA_W + 4;  // |row sum of G|   <= 3, squared in 2-D: 9  < 2^4
  localparam int ACC_W    = 32;  // transform-domain accumulator width
  localparam int Y_W      = ACC_W + 8;   // |column sum of 6A| <= 16, squared: 256 = 2^8

  // B^T of SFC-6(7x7,3x3), 12 x 9
  localparam int BT [TDOM][TILE_IN] = '{
    '{ 0,  1,  1,  1,  1,  1,  1,  0,  0},
    '{ 0,  1,  1,  0, -1, -1,  0,  0,  0},
    '{ 0,  0, -1, -1,  0,  1,  1,  0,  0},
    '{ 0,  1,  0, -1, -1,  0,  1,  0,  0},
    '{ 0,  1,  0, -1,  1,  0, -1,  0,  0},
    '{ 0,  0, -1,  1,  0, -1,  1,  0,  0},
    '{ 0,  1, -1,  0,  1, -1,  0,  0,  0},
    '{ 0,  1, -1,  1, -1,  1, -1,  0,  0},
    '{ 1,  0,  0,  0,  0,  0, -1,  0,  0},
    '{ 0, -1,  0,  0,  0,  0,  0,  1,  0},
    '{ 0, -1,  0,  0,  0,  0,  0,  1,  0},
    '{ 0,  0, -1,  0,  0,  0,  0,  0,  1}
  };

  // G of SFC-6(7x7,3x3), 12 x 3
  localparam int G [TDOM][KSZ] = '{
    '{ 1,  1,  1}, '{ 0,  1,  1}, '{-1, -1,  0}, '{-1,  0,  1},
    '{-1,  0,  1}, '{ 1, -1,  0}, '{ 0, -1,  1}, '{ 1, -1,  1},
    '{ 1,  0,  0}, '{ 0,  0,  1}, '{ 0,  1,  0}, '{ 0,  0,  1}
  };

  // 6*A of SFC-6(7x7,3x3), 12 x 7 (the listed A is this matrix divided by 6)
  localparam int A6 [TDOM][TILE_OUT] = '{
    '{ 1,  1,  1,  1,  1,  1,  1},
    '{ 2,  1, -1, -2, -1,  1,  2},
    '{-1,  1,  2,  1, -1, -2, -1},
    '{-1, -2, -1,  1,  2,  1, -1},
    '{ 1, -2,  1,  1, -2,  1,  1},
    '{ 1,  1, -2,  1,  1, -2,  1},
    '{-2,  1,  1, -2,  1,  1, -2},
    '{-1,  1, -1,  1, -1,  1, -1},
    '{ 6,  0,  0,  0,  0,  0,  0},
    '{ 0,  0,  0,  0,  0,  6,  0},
    '{ 0,  0,  0,  0,  0,  0,  6},
    '{ 0,  0,  0,  0,  0,  0,  6}
  };

endpackage
