// tb_wino_ref: reference model of the tap-wise quantised Winograd F4
// convolution, written with plain integer matrix products, for testbenches.
// Layer data are kept in flat int arrays:
//   ifm[(y*W + x)*CI + c]   input, W = H = 4*TY+2 (tiles of 4x4 outputs)
//   wt[((o*CI + c)*3 + k)*3 + l]  weights
package tb_wino_ref;
  import wino_pkg::*;

  function automatic longint rq(longint v, int s, int ow);
    longint r, mx;
    mx = (longint'(1) << (ow - 1)) - 1;
    r = (s > 0) ? ((v + (longint'(1) << (s - 1))) >>> s) : (v <<< (-s));
    if (r > mx) r = mx;
    if (r < -mx - 1) r = -mx - 1;
    return r;
  endfunction

  // quantised Winograd-domain input tile V[t] of tile (ty,tx), channel c
  function automatic void in_tile(const ref int ifm[], input int w, ci, ty, tx, c,
                                  const ref int shi[36], ref int v[36]);
    longint t [6][6];
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      t[i][j] = 0;
      for (int k = 0; k < 6; k++)
        t[i][j] += longint'(ifm[((4*ty + i) * w + 4*tx + k) * ci + c]) * BT[j][k];
    end
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      longint a;
      a = 0;
      for (int k = 0; k < 6; k++) a += longint'(BT[i][k]) * t[k][j];
      v[i*6 + j] = int'(rq(a, shi[i*6 + j], 8));
    end
  endfunction

  // quantised Winograd-domain weights U[t] of filter (o, c)
  function automatic void wt_tile(const ref int wt[], input int ci, o, c,
                                  const ref int shw[36], ref int u[36]);
    longint t [6][3];
    for (int i = 0; i < 6; i++) for (int l = 0; l < 3; l++) begin
      t[i][l] = 0;
      for (int k = 0; k < 3; k++) t[i][l] += longint'(G24[i][k]) * wt[((o*ci + c)*3 + k)*3 + l];
    end
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      longint a;
      a = 0;
      for (int l = 0; l < 3; l++) a += t[i][l] * G24[j][l];
      u[i*6 + j] = int'(rq(a, shw[i*6 + j], 8));
    end
  endfunction

  // output tile: A^T (rescale(sum_c U.*V)) A, saturated to int32
  function automatic void out_tile(const ref longint macc[36], const ref int sho[36],
                                   ref longint y[16]);
    longint ys [6][6], t [6][4];
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++)
      ys[i][j] = rq(longint'(int'(macc[i*6 + j])), sho[i*6 + j], 32);
    for (int i = 0; i < 6; i++) for (int j = 0; j < 4; j++) begin
      t[i][j] = 0;
      for (int k = 0; k < 6; k++) t[i][j] += ys[i][k] * AT[j][k];
    end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      longint a;
      a = 0;
      for (int k = 0; k < 6; k++) a += longint'(AT[i][k]) * t[k][j];
      y[i*4 + j] = rq(a, 0, 32);
    end
  endfunction

  // Unquantised identity check: A^T[(G24 f G24^T) .* (B^T x B)]A = 576 * conv.
  // Returns the number of mismatching outputs for one random tile.
  function automatic int identity_errors();
    int x [6][6], f [3][3], err;
    longint u [6][6], v [6][6], t1 [6][6], m [6][6], t2 [6][4], y;
    err = 0;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) x[i][j] = $urandom_range(0, 255) - 128;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) f[i][j] = $urandom_range(0, 255) - 128;
    for (int i = 0; i < 6; i++) for (int j = 0; j < 3; j++) begin
      t1[i][j] = 0;
      for (int k = 0; k < 3; k++) t1[i][j] += longint'(G24[i][k]) * f[k][j];
    end
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      u[i][j] = 0;
      for (int l = 0; l < 3; l++) u[i][j] += t1[i][l] * G24[j][l];
    end
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      t1[i][j] = 0;
      for (int k = 0; k < 6; k++) t1[i][j] += longint'(x[i][k]) * BT[j][k];
    end
    for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
      v[i][j] = 0;
      for (int k = 0; k < 6; k++) v[i][j] += longint'(BT[i][k]) * t1[k][j];
      m[i][j] = u[i][j] * v[i][j];
    end
    for (int i = 0; i < 6; i++) for (int j = 0; j < 4; j++) begin
      t2[i][j] = 0;
      for (int k = 0; k < 6; k++) t2[i][j] += m[i][k] * AT[j][k];
    end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      longint c;
      y = 0;
      for (int k = 0; k < 6; k++) y += longint'(AT[i][k]) * t2[k][j];
      c = 0;
      for (int k = 0; k < 3; k++) for (int l = 0; l < 3; l++) c += longint'(x[i+k][j+l]) * f[k][l];
      if (y != 576 * c) err++;
    end
    return err;
  endfunction
endpackage
