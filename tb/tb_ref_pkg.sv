// tb_ref_pkg: reference models used by the testbenches.
//
// Everything here is written independently of the RTL: the network is evaluated
// with plain integers, the mean-timer and the line fit are solved in floating
// point by Gaussian elimination, and the geometry is restated from its
// definition (cell width 984, layer pitch 305 drift units, odd layers shifted
// by half a cell, one drift unit per TDC count).
package tb_ref_pkg;

  localparam int CELL = 984;
  localparam int PITCH = 305;
  localparam int NPAR = 16*8 + 8 + 16*8 + 16;   // 280

  function automatic int wire_x(int layer, int col);   // macro-cell frame
    return col * CELL + CELL / 2 + ((layer % 2 == 1) ? CELL / 2 : 0);
  endfunction

  function automatic int enc(int rt);
    int f;
    f = (rt / 16) + 1;
    return (f > 127) ? 127 : f;
  endfunction

  // Dense net: 16 inputs, 8 hidden ReLU (>>4, clamp 127), 16 outputs.
  function automatic void mlp(input int par[NPAR], input int x[16], output int y[16]);
    int hid[8];
    for (int h = 0; h < 8; h++) begin
      int a;
      a = par[128 + h];
      for (int i = 0; i < 16; i++) a += par[h*16 + i] * x[i];
      a = a >>> 4;
      hid[h] = (a < 0) ? 0 : (a > 127 ? 127 : a);
    end
    for (int o = 0; o < 16; o++) begin
      int a;
      a = par[264 + o];
      for (int h = 0; h < 8; h++) a += par[136 + o*8 + h] * hid[h];
      y[o] = a;
    end
  endfunction

  // Solve the normal equations of n rows r*[k] . p = b by Gaussian elimination.
  function automatic bit solve3(input real a[3][3], input real b[3], output real p[3]);
    real m[3][4];
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) m[i][j] = a[i][j];
      m[i][3] = b[i];
    end
    for (int c = 0; c < 3; c++) begin
      int piv;
      real t;
      piv = c;
      for (int r = c + 1; r < 3; r++) if ((m[r][c] < 0 ? -m[r][c] : m[r][c]) > (m[piv][c] < 0 ? -m[piv][c] : m[piv][c])) piv = r;
      if ((m[piv][c] < 0 ? -m[piv][c] : m[piv][c]) < 1e-9) return 0;
      for (int j = 0; j < 4; j++) begin t = m[c][j]; m[c][j] = m[piv][j]; m[piv][j] = t; end
      for (int r = 0; r < 3; r++) if (r != c) begin
        t = m[r][c] / m[c][c];
        for (int j = 0; j < 4; j++) m[r][j] -= t * m[c][j];
      end
    end
    for (int i = 0; i < 3; i++) p[i] = m[i][3] / m[i][i];
    return 1;
  endfunction

  // Joint least squares of w + s*rt = x0 + m*l + s*tau over the layers in mask.
  // Returns 0 when fewer than 3 layers or the system is singular.
  function automatic bit meantimer(input int mask, input int lat, input int col[4],
                                   input int rt[4], output real tau, output real x0,
                                   output real m_layer);
    real a[3][3], b[3], p[3];
    int n;
    n = 0;
    for (int i = 0; i < 3; i++) begin b[i] = 0; for (int j = 0; j < 3; j++) a[i][j] = 0; end
    for (int l = 0; l < 4; l++) if (mask[l]) begin
      real v[3], y, s;
      s = lat[l] ? 1.0 : -1.0;
      v[0] = 1.0; v[1] = l; v[2] = s;
      y = wire_x(l, col[l]) + s * rt[l];
      for (int i = 0; i < 3; i++) begin
        b[i] += v[i] * y;
        for (int j = 0; j < 3; j++) a[i][j] += v[i] * v[j];
      end
      n++;
    end
    tau = 0; x0 = 0; m_layer = 0;
    if (n < 3) return 0;
    if (!solve3(a, b, p)) return 0;
    x0 = p[0]; m_layer = p[1]; tau = p[2];
    return 1;
  endfunction

  function automatic int rnd(real r);
    return (r >= 0) ? int'($floor(r + 0.5)) : -int'($floor(-r + 0.5));
  endfunction

  function automatic int iabs(int v);
    return v < 0 ? -v : v;
  endfunction

  // A straight muon track through one chamber (chamber frame): for every layer
  // the cell crossed, the drift distance and the true laterality.
  function automatic void track(input real x0, input real slope, output int cellno[4],
                                output int drift[4], output bit right[4]);
    for (int l = 0; l < 4; l++) begin
      real x, off, w;
      int c;
      off = (l % 2 == 1) ? CELL / 2 : 0;
      x = x0 + slope * (l * PITCH);
      c = int'($floor((x - off) / CELL));
      cellno[l] = c;
      w = c * CELL + CELL / 2 + off;
      drift[l] = rnd((x > w) ? (x - w) : (w - x));
      right[l] = (x > w);
    end
  endfunction

  // Hand-made weights for end-to-end tests (trained weights are not available).
  // Address map: W1 h*16+i, B1 128+h, W2 136+o*8+h, B2 264+o.
  // Filter: hidden 0 is a constant 7, hidden 1 = (sum of features - 128) >> 4.
  // Score = 16*7 - 16*hidden1: every hit is kept unless the macro-cell is flooded
  // (feature sum of 240 or more; a single track stays below 130), in which
  // case all its hits are rejected as noise.
  function automatic void filter_weights(output int par[NPAR]);
    for (int p = 0; p < NPAR; p++) par[p] = 0;
    par[128 + 0] = 127;
    for (int i = 0; i < 16; i++) par[1*16 + i] = 1;
    par[128 + 1] = -128;
    for (int o = 0; o < 16; o++) begin
      par[136 + o*8 + 0] = 16;
      par[136 + o*8 + 1] = -16;
    end
  endfunction

  // Disambiguation: constant laterality by layer, left in layers 0 and 2, right
  // in layers 1 and 3 (cell o is in layer o/4).
  function automatic void lat_weights(output int par[NPAR]);
    for (int p = 0; p < NPAR; p++) par[p] = 0;
    par[128 + 0] = 127;
    for (int o = 0; o < 16; o++) par[136 + o*8 + 0] = ((o / 4) % 2 == 1) ? 1 : -1;
  endfunction

endpackage
