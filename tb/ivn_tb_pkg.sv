// ivn_tb_pkg -- workload generator and double-precision reference for the
// iVisNav least-squares testbenches.
//
// Geometry: the six beacon direction vectors r_i are the calibrated bench-top
// values (unit vectors, listed in 'rhat' below). The projection
// displacements rho_i are not published; here they are the lateral parts of
// r_i rotated by 30 degrees about z, plus a small z offset per beacon, which
// gives a well-conditioned system. Row i of H is [ r_i' , -(r_i x rho_i)' ].
// Motion: vz = 3 m/s and wz = 0.8 rad/s, all other rates zero, as in the
// axial translation-and-rotation experiment. y = H x_true plus a small
// deterministic perturbation per sample (at most +-1e-3 m/s). R is a full
// symmetric positive-definite covariance with diagonal 0.8..1.3 and weak
// off-diagonal terms, scaled so that every Q16.16 intermediate stays in range.
package ivn_tb_pkg;

  localparam int  N = 6;
  localparam real S = 65536.0;
  localparam real RSCALE = 0.05;   // covariance scale

  typedef real rmat_t [N][N];
  typedef real rvec_t [N];

  function automatic real rhat(int i, int c);
    real t [N][3] = '{'{0.87264, 0.4977, 0.1367}, '{0.8927, -0.5082, 0.1304},
                      '{-0.0007, -0.9915, 0.1372}, '{-0.8586, -0.4957, 0.1391},
                      '{-0.8168, 0.4957, 0.1412}, '{0.0001, 0.9999, 0.1249}};
    return t[i][c];
  endfunction

  function automatic logic signed [31:0] to_fx(real v);
    return 32'($rtoi(v * S + ((v < 0.0) ? -0.5 : 0.5)));
  endfunction

  function automatic real from_fx(logic signed [31:0] v);
    return $itor(v) / S;
  endfunction

  function automatic void make_h(output rmat_t h);
    real c30, s30, rho [3], r [3];
    c30 = 0.8660254; s30 = 0.5;
    for (int i = 0; i < N; i++) begin
      for (int c = 0; c < 3; c++) r[c] = rhat(i, c);
      rho[0] = (0.5 + 0.2 * i) * (c30 * r[0] - s30 * r[1]);
      rho[1] = (0.5 + 0.2 * i) * (s30 * r[0] + c30 * r[1]);
      rho[2] = (i % 2 == 0) ? 0.5 : -0.5;
      h[i][0] = r[0]; h[i][1] = r[1]; h[i][2] = r[2];
      // -(r x rho)
      h[i][3] = -(r[1] * rho[2] - r[2] * rho[1]);
      h[i][4] = -(r[2] * rho[0] - r[0] * rho[2]);
      h[i][5] = -(r[0] * rho[1] - r[1] * rho[0]);
    end
  endfunction

  function automatic void make_r(output rmat_t rc);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        rc[i][j] = RSCALE * ((i == j) ? 0.8 + 0.1 * i : 0.05 / (1 + ((i > j) ? i - j : j - i)));
  endfunction

  function automatic void make_y(input rmat_t h, input int sample, output rvec_t y);
    real xt [N] = '{0.0, 0.0, 3.0, 0.0, 0.0, 0.8};
    for (int i = 0; i < N; i++) begin
      y[i] = 0.0;
      for (int k = 0; k < N; k++) y[i] += h[i][k] * xt[k];
      y[i] += 1.0e-4 * $itor(((sample * 5 + i * 13) % 21) - 10) / 10.0;
    end
  endfunction

  // Invert a real matrix (Gauss-Jordan, partial pivoting).
  function automatic void rinv(input rmat_t a, output rmat_t ai);
    real g [N][2*N];
    real p, f, t;
    int piv;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < 2*N; j++) g[i][j] = (j < N) ? a[i][j] : ((j - N == i) ? 1.0 : 0.0);
    for (int c = 0; c < N; c++) begin
      piv = c;
      for (int r = c + 1; r < N; r++) if ((g[r][c] < 0 ? -g[r][c] : g[r][c]) > (g[piv][c] < 0 ? -g[piv][c] : g[piv][c])) piv = r;
      for (int j = 0; j < 2*N; j++) begin t = g[c][j]; g[c][j] = g[piv][j]; g[piv][j] = t; end
      p = g[c][c];
      for (int j = 0; j < 2*N; j++) g[c][j] /= p;
      for (int r = 0; r < N; r++) if (r != c) begin
        f = g[r][c];
        for (int j = 0; j < 2*N; j++) g[r][j] -= f * g[c][j];
      end
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) ai[i][j] = g[i][j + N];
  endfunction

  // Weighted least squares x = (H' R^-1 H)^-1 H' R^-1 y in double precision.
  function automatic void ref_ls(input rmat_t h, input rmat_t rc, input rvec_t y, output rvec_t x);
    rmat_t ri, p, m, mi;
    rvec_t z;
    rinv(rc, ri);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      p[i][j] = 0.0;
      for (int k = 0; k < N; k++) p[i][j] += h[k][i] * ri[k][j];
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      m[i][j] = 0.0;
      for (int k = 0; k < N; k++) m[i][j] += p[i][k] * h[k][j];
    end
    rinv(m, mi);
    for (int i = 0; i < N; i++) begin
      z[i] = 0.0;
      for (int k = 0; k < N; k++) z[i] += p[i][k] * y[k];
    end
    for (int i = 0; i < N; i++) begin
      x[i] = 0.0;
      for (int k = 0; k < N; k++) x[i] += mi[i][k] * z[k];
    end
  endfunction

endpackage
