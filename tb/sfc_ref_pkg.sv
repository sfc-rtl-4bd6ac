// sfc_ref_pkg - software reference for the SFC-6(7x7,3x3) testbenches.
//
// Integer models of direct 3x3 correlation (the golden answer) and of the
// three SFC transforms computed as plain matrix products with the matrices
// of sfc_pkg. A test that compares the hardware against direct_conv checks
// the algorithm end to end, independently of how the RTL arranges its
// additions.
package sfc_ref_pkg;
  import sfc_pkg::*;

  typedef longint tin_t  [TILE_IN][TILE_IN];
  typedef longint tk_t   [KSZ][KSZ];
  typedef longint tt_t   [TDOM][TDOM];
  typedef longint tout_t [TILE_OUT][TILE_OUT];

  // y[r][c] = sum_k sum_l x[r+k][c+l] * f[k][l]
  function automatic tout_t direct_conv(tin_t x, tk_t f);
    tout_t y;
    for (int r = 0; r < TILE_OUT; r++)
      for (int c = 0; c < TILE_OUT; c++) begin
        y[r][c] = 0;
        for (int k = 0; k < KSZ; k++)
          for (int l = 0; l < KSZ; l++)
            y[r][c] += x[r+k][c+l] * f[k][l];
      end
    return y;
  endfunction

  function automatic tt_t ref_bt_x_b(tin_t x);
    tt_t t;
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        t[i][j] = 0;
        for (int r = 0; r < TILE_IN; r++)
          for (int c = 0; c < TILE_IN; c++)
            t[i][j] += BT[i][r] * x[r][c] * BT[j][c];
      end
    return t;
  endfunction

  function automatic tt_t ref_g_f_gt(tk_t f);
    tt_t t;
    for (int i = 0; i < TDOM; i++)
      for (int j = 0; j < TDOM; j++) begin
        t[i][j] = 0;
        for (int r = 0; r < KSZ; r++)
          for (int c = 0; c < KSZ; c++)
            t[i][j] += G[i][r] * f[r][c] * G[j][c];
      end
    return t;
  endfunction

  // returns 36 * y
  function automatic tout_t ref_at_m_a(tt_t m);
    tout_t y;
    for (int i = 0; i < TILE_OUT; i++)
      for (int j = 0; j < TILE_OUT; j++) begin
        y[i][j] = 0;
        for (int r = 0; r < TDOM; r++)
          for (int c = 0; c < TDOM; c++)
            y[i][j] += A6[r][i] * m[r][c] * A6[c][j];
      end
    return y;
  endfunction

  // requantization as the hardware does it: round half up, clip to int8
  function automatic longint quant(longint v, int s);
    longint r;
    r = v;
    if (s > 0) begin
      r = v + (64'sd1 <<< (s - 1));
      r = (r >= 0) ? r / (64'sd1 <<< s) : -((-r + (64'sd1 <<< s) - 1) / (64'sd1 <<< s));
    end
    if (r > 127)  r = 127;
    if (r < -128) r = -128;
    return r;
  endfunction

  function automatic longint wrap32(longint v);
    return longint'($signed(v[31:0]));
  endfunction

  function automatic longint rnd8();
    return longint'($signed(8'($urandom)));
  endfunction

endpackage
