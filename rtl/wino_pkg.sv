// wino_pkg: constants and helpers shared by the Winograd F(4x4,3x3) engines.
//
// Holds the three constant transformation matrices of the F4 algorithm with
// the root points {0, 1, -1, 1/2, -1/2}: the input transform B^T (6x6), the
// output transform A^T (4x6) and an integer version of the weight transform G
// (6x3). The paper's G carries the factor 1/3 and fractions down to 1/8; this
// design uses G24 = 24*G, which has only small integer entries
// {0, +-1, +-2, +-4, 6, 24}. The weight engine therefore produces
// 576 * (G f G^T) = 9 * 64 * (G f G^T). The power of two 64 folds into the
// tap-wise shift amounts; the uniform factor 9 is left to the per-layer
// requantisation scale that follows the output transform (a choice of this
// design, the paper does not say how the 1/3 is handled).
//
// shadd() multiplies by a design-time constant using only shifts and adds, one
// adder per set bit of the constant, which is how the engines avoid multipliers.
package wino_pkg;

  // Tile geometry of F(4x4, 3x3).
  localparam int M   = 4;       // output tile edge
  localparam int R   = 3;       // kernel edge
  localparam int N   = M + R - 1; // Winograd-domain tile edge (6)
  localparam int NT  = N * N;   // taps per tile (36)

  // B^T, input transform: s_w = B^T x B
  localparam int BT [N][N] = '{
    '{ 4,  0, -5,  0, 1, 0},
    '{ 0, -4, -4,  1, 1, 0},
    '{ 0,  4, -4, -1, 1, 0},
    '{ 0, -2, -1,  2, 1, 0},
    '{ 0,  2, -1, -2, 1, 0},
    '{ 0,  4,  0, -5, 0, 1}};

  // A^T, output transform: y = A^T Y A
  localparam int AT [M][N] = '{
    '{1, 1,  1, 1,  1, 0},
    '{0, 1, -1, 2, -2, 0},
    '{0, 1,  1, 4,  4, 0},
    '{0, 1, -1, 8, -8, 1}};

  // 24 * G, weight transform: 576 * G f G^T = G24 f G24^T
  localparam int G24 [N][R] = '{
    '{ 6,  0,  0},
    '{-4, -4, -4},
    '{-4,  4, -4},
    '{ 1,  2,  4},
    '{ 1, -2,  4},
    '{ 0,  0, 24}};

  // x * c for a constant c, written as a sum of shifted copies of x.
  function automatic longint shadd(longint x, int c);
    longint acc;
    int     a;
    acc = 0;
    a   = (c < 0) ? -c : c;
    for (int b = 0; b < 16; b++)
      if (a[b]) acc += (x <<< b);
    return (c < 0) ? -acc : acc;
  endfunction

endpackage
