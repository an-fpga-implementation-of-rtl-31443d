// tb_readout_pkg: the linear readout used by the workload testbenches.
// The reservoir hardware only produces state vectors; as in the usual
// reservoir computing flow, output weights are fitted offline by ridge
// regression, w = (X'X + lambda*I)^-1 X'y, solved here by Gaussian
// elimination with partial pivoting. X is stored row-major, M rows of F
// features (the last feature is a constant 1 for the bias term).
package tb_readout_pkg;

  typedef real vec_t [];

  function automatic vec_t ridge(input real x [$], input real y [$],
                                 input int m, input int f, input real lambda);
    real a [][];
    vec_t w;
    real t, piv;
    int  p;
    a = new[f];
    foreach (a[i]) begin
      a[i] = new[f + 1];
      foreach (a[i][j]) a[i][j] = 0.0;
    end
    for (int r = 0; r < m; r++)
      for (int i = 0; i < f; i++) begin
        for (int j = 0; j < f; j++) a[i][j] += x[r*f + i] * x[r*f + j];
        a[i][f] += x[r*f + i] * y[r];
      end
    for (int i = 0; i < f; i++) a[i][i] += lambda;
    for (int c = 0; c < f; c++) begin
      p = c;
      for (int r = c + 1; r < f; r++) if ((a[r][c] < 0 ? -a[r][c] : a[r][c]) > (a[p][c] < 0 ? -a[p][c] : a[p][c])) p = r;
      if (p != c) for (int j = 0; j <= f; j++) begin t = a[c][j]; a[c][j] = a[p][j]; a[p][j] = t; end
      piv = a[c][c];
      for (int r = 0; r < f; r++) if (r != c) begin
        t = a[r][c] / piv;
        for (int j = c; j <= f; j++) a[r][j] -= t * a[c][j];
      end
    end
    w = new[f];
    for (int i = 0; i < f; i++) w[i] = a[i][f] / a[i][i];
    return w;
  endfunction

  function automatic real predict(input real x [$], input int row, input int f, input vec_t w);
    real s = 0.0;
    for (int i = 0; i < f; i++) s += x[row*f + i] * w[i];
    return s;
  endfunction

endpackage
