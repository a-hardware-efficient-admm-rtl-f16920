// svm_ref_pkg: floating-point reference models used by the testbenches.
//
// admm_linear() runs the textbook ADMM iteration for the linear SVM (system
// matrix solved directly by Gaussian elimination, no eigen-decomposition, no
// pre-computed Z, no shared caches), so it checks the hardware's re-arranged
// algorithm against the original one. Samples are given as rows of X
// (N x R); the ones column is appended internally. nystrom_kernel() is the
// kernel-mode reference (RBF kernel, Nystrom features, Cholesky factor).
package svm_ref_pkg;

  typedef real rvec_t[];
  typedef real rmat_t[][];

  function automatic real fx2r(logic signed [31:0] v);
    return real'(v) / 65536.0;
  endfunction

  function automatic logic signed [31:0] r2fx(real v);
    return 32'($rtoi(v * 65536.0));
  endfunction

  function automatic real rabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Solve A x = b, A n x n, by Gaussian elimination with partial pivoting.
  function automatic rvec_t gauss_solve(rmat_t a_in, rvec_t b_in);
    int n = b_in.size();
    real a[][];
    real b[];
    real x[];
    a = new[n];
    for (int i = 0; i < n; i++) begin a[i] = new[n]; foreach (a[i][j]) a[i][j] = a_in[i][j]; end
    b = new[n]; foreach (b[i]) b[i] = b_in[i];
    x = new[n];
    for (int c = 0; c < n; c++) begin
      int piv = c;
      real t;
      for (int r = c + 1; r < n; r++) if (rabs(a[r][c]) > rabs(a[piv][c])) piv = r;
      for (int k = 0; k < n; k++) begin t = a[c][k]; a[c][k] = a[piv][k]; a[piv][k] = t; end
      t = b[c]; b[c] = b[piv]; b[piv] = t;
      for (int r = c + 1; r < n; r++) begin
        real f = a[r][c] / a[c][c];
        for (int k = c; k < n; k++) a[r][k] -= f * a[c][k];
        b[r] -= f * b[c];
      end
    end
    for (int r = n - 1; r >= 0; r--) begin
      real s = b[r];
      for (int k = r + 1; k < n; k++) s -= a[r][k] * x[k];
      x[r] = s / a[r][r];
    end
    return x;
  endfunction

  // K iterations of ADMM for min sum (1 - y (x.beta + beta0))_+ + lam/2 |beta|^2.
  // Returns [beta ; beta0] after the K-th beta update.
  function automatic rvec_t admm_linear(rmat_t x, int y[], int iters, real lam, real mu);
    int n = x.size();
    int r = x[0].size();
    int d = r + 1;
    real xt[][];
    real am[][];
    real a[], u[], rhs[], beta[];
    xt = new[n];
    for (int i = 0; i < n; i++) begin
      xt[i] = new[d];
      for (int k = 0; k < r; k++) xt[i][k] = x[i][k];
      xt[i][r] = 1.0;
    end
    am = new[d];
    for (int j = 0; j < d; j++) begin
      am[j] = new[d];
      for (int k = 0; k < d; k++) begin
        real s = 0.0;
        for (int i = 0; i < n; i++) s += xt[i][j] * xt[i][k];
        am[j][k] = mu * s + (((j == k) && (j < r)) ? lam : 0.0);
      end
    end
    a = new[n]; u = new[n]; rhs = new[d];
    foreach (a[i]) begin a[i] = 0.0; u[i] = 0.0; end
    for (int it = 0; it < iters; it++) begin
      for (int j = 0; j < d; j++) begin
        real s = 0.0;
        for (int i = 0; i < n; i++) s += xt[i][j] * y[i] * (u[i] + mu - mu * a[i]);
        rhs[j] = s;
      end
      beta = gauss_solve(am, rhs);
      for (int i = 0; i < n; i++) begin
        real m = 0.0, th;
        for (int k = 0; k < d; k++) m += xt[i][k] * beta[k];
        m = m * y[i];
        th = 1.0 + u[i] / mu - m;
        if (th > 1.0 / mu) a[i] = th - 1.0 / mu;
        else if (th < 0.0) a[i] = th;
        else a[i] = 0.0;
        u[i] = u[i] + mu * (1.0 - m - a[i]);
      end
    end
    return beta;
  endfunction

  // RBF kernel exp(-gamma ||a - b||^2)
  function automatic real rbf(real a[], real b[], real gamma);
    real d2;
    d2 = 0.0;
    foreach (a[k]) d2 += (a[k] - b[k]) * (a[k] - b[k]);
    return $exp(-gamma * d2);
  endfunction

  // Nystrom kernel SVM: landmarks are samples 0 .. c-1. Psi_MM = L L^T
  // (Cholesky), features v_i = L^-1 psi_iM, x'_i = y_i v_i, then iters ADMM
  // iterations on x'. Returns [alpha (c) ; b]. Any factor W with
  // W W^T = Psi_MM^-1 gives the same alpha, so this checks the hardware's
  // EVD-based factor without using an EVD.
  function automatic rvec_t nystrom_kernel(rmat_t x, int y[], int c, real gamma,
                                           int iters, real lam, real mu);
    int n;
    real l[][];
    real xp[][];
    real psi[];
    real eta[], al[], res[];
    real s;
    n = x.size();
    l = new[c];
    for (int i = 0; i < c; i++) begin
      l[i] = new[c];
      for (int j = 0; j < c; j++) l[i][j] = 0.0;
    end
    for (int i = 0; i < c; i++)
      for (int j = 0; j <= i; j++) begin
        s = y[i] * y[j] * rbf(x[i], x[j], gamma);
        for (int k = 0; k < j; k++) s -= l[i][k] * l[j][k];
        if (i == j) l[i][i] = $sqrt(s);
        else l[i][j] = s / l[j][j];
      end
    xp = new[n];
    psi = new[c];
    for (int i = 0; i < n; i++) begin
      xp[i] = new[c];
      for (int m = 0; m < c; m++) psi[m] = y[i] * y[m] * rbf(x[i], x[m], gamma);
      for (int m = 0; m < c; m++) begin
        s = psi[m];
        for (int k = 0; k < m; k++) s -= l[m][k] * xp[i][k];
        xp[i][m] = s / l[m][m];
      end
      for (int m = 0; m < c; m++) xp[i][m] = y[i] * xp[i][m];
    end
    eta = admm_linear(xp, y, iters, lam, mu);
    al = new[c];
    for (int m = c - 1; m >= 0; m--) begin
      s = eta[m];
      for (int k = m + 1; k < c; k++) s -= l[k][m] * al[k];
      al[m] = s / l[m][m];
    end
    res = new[c + 1];
    for (int m = 0; m < c; m++) res[m] = al[m];
    res[c] = eta[c];
    return res;
  endfunction

endpackage
