// jscc_code_pkg - base matrix of the joint source-channel QC-LDPC code.
//
// The joint parity-check matrix has the block form of the 50 x 90 base matrix
//   H = [ H_s (20x40)   H_L (20x50) ]
//       [ 0   (30x40)   H_c (30x50) ]
// lifted by Z = 160 (every '1' becomes a Z x Z circulant permutation, every '0' a
// zero block). Rows 0..19 are the source check layers, rows 20..49 the channel
// check layers. H_L = [0 I]: source row r is tied to channel column 30+r with an
// identity circulant, so that channel columns 30..49 carry the compressed
// source b = H_s s and columns 0..29 the parity p (codeword c = [p b]).
//
// The block structure, the sizes and Z are those of the published design. The
// positions of the ones and the circulant shifts are this design's own: the
// published base matrices are not printed. They were chosen as follows:
//   * source columns 0..19 have degree 3, columns 20..39 degree 4 (the second
//     half is the stronger, "invulnerable" half used by the UEP interleaver);
//     every source row has degree 7;
//   * channel parity column c has ones in rows c, c+1 and c+11 (those < 30),
//     with shift 0 on the diagonal, so H_1 is lower triangular with identity
//     diagonal blocks and the encoder can solve p by back-substitution;
//   * channel columns 30..49 have degree 3; channel rows have degree 4 or 5;
//   * shifts are random values in [0, Z) accepted only if they close no
//     4-cycle in the lifted graph.
// A circulant with shift s connects check i of the row block to variable
// (i + s) mod Z of the column block. Column indices below are local to each
// side (source 0..39, channel 0..49); unused entries are 0 and lie beyond H_DEG.
package jscc_code_pkg;
  localparam int H_ROWS    = 50;
  localparam int H_DMAX    = 7;
  localparam int SRC_ROWS  = 20;   // source layers (m_s * z_s1 = 20)
  localparam int SRC_COLS  = 40;
  localparam int CH_ROWS   = 30;   // channel layers
  localparam int CH_COLS   = 50;
  localparam int CH_ROW0   = 20;   // first channel row in the tables
  localparam int LINK_COL0 = 30;   // first channel column tied to the source checks
  localparam int SRC_DMAX  = 7;
  localparam int CH_DMAX   = 5;

  localparam int H_DEG [H_ROWS] = '{7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 7, 5, 5, 4, 4, 5, 5, 5, 5, 5, 5, 5, 4, 5, 4, 4, 4, 4, 5, 4, 5, 4, 5, 5, 4, 5, 4, 5, 4, 5, 5};
  localparam int H_COL [H_ROWS][H_DMAX] = '{
    '{ 2,  3, 13, 18, 19, 21, 34},
    '{ 6,  8,  9, 14, 31, 34, 36},
    '{ 0,  6, 15, 23, 30, 33, 38},
    '{ 9, 14, 30, 32, 35, 38, 39},
    '{ 2,  7, 15, 20, 26, 31, 36},
    '{ 1,  2,  5,  7, 21, 33, 35},
    '{ 4, 10, 11, 22, 25, 30, 32},
    '{ 3,  5,  9, 13, 18, 20, 36},
    '{ 6, 16, 17, 20, 25, 37, 39},
    '{10, 14, 20, 23, 28, 34, 38},
    '{ 0,  3,  5, 22, 24, 32, 38},
    '{ 4, 16, 23, 24, 26, 29, 35},
    '{12, 17, 21, 22, 27, 29, 37},
    '{ 1,  8, 12, 25, 26, 28, 30},
    '{11, 17, 21, 24, 27, 33, 39},
    '{ 0, 10, 18, 23, 26, 29, 34},
    '{ 7, 11, 16, 28, 29, 31, 36},
    '{15, 19, 25, 28, 31, 33, 37},
    '{ 1,  8, 22, 24, 27, 32, 37},
    '{ 4, 12, 13, 19, 27, 35, 39},
    '{ 0, 30, 31, 35, 48,  0,  0},
    '{ 0,  1, 32, 40, 46,  0,  0},
    '{ 1,  2, 33, 37,  0,  0,  0},
    '{ 2,  3, 31, 39,  0,  0,  0},
    '{ 3,  4, 32, 34, 46,  0,  0},
    '{ 4,  5, 33, 43, 44,  0,  0},
    '{ 5,  6, 31, 43, 45,  0,  0},
    '{ 6,  7, 30, 37, 47,  0,  0},
    '{ 7,  8, 32, 42, 47,  0,  0},
    '{ 8,  9, 33, 41, 45,  0,  0},
    '{ 9, 10, 30, 40, 49,  0,  0},
    '{ 0, 10, 11, 41,  0,  0,  0},
    '{ 1, 11, 12, 38, 49,  0,  0},
    '{ 2, 12, 13, 36,  0,  0,  0},
    '{ 3, 13, 14, 42,  0,  0,  0},
    '{ 4, 14, 15, 39,  0,  0,  0},
    '{ 5, 15, 16, 41,  0,  0,  0},
    '{ 6, 16, 17, 36, 46,  0,  0},
    '{ 7, 17, 18, 38,  0,  0,  0},
    '{ 8, 18, 19, 37, 44,  0,  0},
    '{ 9, 19, 20, 35,  0,  0,  0},
    '{10, 20, 21, 35, 49,  0,  0},
    '{11, 21, 22, 43, 45,  0,  0},
    '{12, 22, 23, 34,  0,  0,  0},
    '{13, 23, 24, 34, 48,  0,  0},
    '{14, 24, 25, 38,  0,  0,  0},
    '{15, 25, 26, 39, 48,  0,  0},
    '{16, 26, 27, 36,  0,  0,  0},
    '{17, 27, 28, 40, 47,  0,  0},
    '{18, 28, 29, 42, 44,  0,  0}};
  localparam int H_SHIFT [H_ROWS][H_DMAX] = '{
    '{152,  20, 131,  50, 100,  40,  63},
    '{104,  16,   8, 123, 141, 139,  83},
    '{ 41, 109,  26,  18,  67, 159,  21},
    '{ 53,  24, 107, 127, 114,  44,  59},
    '{ 34, 106, 117, 158,  60, 137,  31},
    '{ 75,  75,  71, 145,  68,  95,  65},
    '{ 66,  50, 112,  63,  47,  62,  60},
    '{ 39,  72, 148,  48,  83,  16, 101},
    '{ 64,  62, 129, 134,  59,  25, 118},
    '{  9,  26,   1, 121,  59, 114,  95},
    '{ 10,  75,  59,  30,  12,  48, 153},
    '{149,  49,  19,  95, 131,  45, 114},
    '{154,  66,   1,  27, 152, 158,  89},
    '{ 55,   9,  94,  87,  36,  11,  52},
    '{ 65,   9, 153,  52,   2,  83, 104},
    '{ 95,  47, 158,  79,  19,  52,   8},
    '{126, 140, 123,  16, 104,  25, 101},
    '{140,  39, 136,  23,  41, 101,  69},
    '{104,  72,  78, 106,  13,  79, 145},
    '{ 91, 106, 106,   4,  93,  50, 100},
    '{  0, 103,  52,   1, 111,   0,   0},
    '{ 40,   0, 108,  29,  23,   0,   0},
    '{103,   0, 147,  93,   0,   0,   0},
    '{117,   0,  41,  33,   0,   0,   0},
    '{  3,   0,  13, 141,  36,   0,   0},
    '{101,   0,  22, 146, 159,   0,   0},
    '{ 94,   0, 129,  43,  37,   0,   0},
    '{ 89,   0,  72,  41, 133,   0,   0},
    '{ 43,   0,  17,  27,  98,   0,   0},
    '{125,   0,  50,  77,  32,   0,   0},
    '{ 11,   0, 123,  80,  13,   0,   0},
    '{155,  99,   0,  22,   0,   0,   0},
    '{158,  41,   0,  56, 158,   0,   0},
    '{103, 157,   0,  50,   0,   0,   0},
    '{121,  46,   0, 144,   0,   0,   0},
    '{ 55,  10,   0, 102,   0,   0,   0},
    '{132,  40,   0,  98,   0,   0,   0},
    '{ 91,  31,   0,  38,  63,   0,   0},
    '{ 49,  10,   0, 143,   0,   0,   0},
    '{  9,  82,   0,  30,  99,   0,   0},
    '{153, 116,   0, 140,   0,   0,   0},
    '{ 78, 107,   0,  78, 149,   0,   0},
    '{ 63, 108,   0,  99,  94,   0,   0},
    '{114, 128,   0, 112,   0,   0,   0},
    '{ 45,   5,   0,   0, 158,   0,   0},
    '{125, 119,   0,  60,   0,   0,   0},
    '{114, 158,   0, 117,  45,   0,   0},
    '{121, 102,   0,  27,   0,   0,   0},
    '{ 17,  32,   0,  91, 110,   0,   0},
    '{ 93,  23,   0, 113, 129,   0,   0}};
endpackage
