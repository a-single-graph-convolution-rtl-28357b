// gecco_ref_pkg: golden model of the GECCO arithmetic for the testbenches,
// written independently of the RTL. Numbers are plain ints holding Q8.8
// values; matrices are arrays of rows. Rounding follows the documented
// number format: products are truncated towards minus infinity after the
// shift by FRAC, every stored result saturates to 16 bits, the sigmoid is the
// PLAN piecewise-linear curve, row division multiplies by a reciprocal with
// 24 fraction bits, the exponential is 2^(x log2 e) with a quadratic for
// the fractional power.
package gecco_ref_pkg;

  localparam int F = 8;
  localparam int DMAX = 32767;
  localparam int DMIN = -32768;

  typedef int row_t[];
  typedef row_t mat_t[];

  function automatic int rsat(longint v);
    if (v > DMAX) return DMAX;
    if (v < DMIN) return DMIN;
    return int'(v);
  endfunction

  // floor(v / 2^s) for signed v
  function automatic longint fshr(longint v, int s);
    return v >>> s;
  endfunction

  function automatic int rsigmoid(int x);
    real ax, y;
    int  r;
    ax = (x < 0 ? -x : x) / 256.0;
    if (ax >= 5.0)        y = 1.0;
    else if (ax >= 2.375) y = $floor(ax * 256.0 / 32.0) / 256.0 + 0.84375;
    else if (ax >= 1.0)   y = $floor(ax * 256.0 / 8.0) / 256.0 + 0.625;
    else                  y = $floor(ax * 256.0 / 4.0) / 256.0 + 0.5;
    r = int'(y * 256.0);
    return (x < 0) ? 256 - r : r;
  endfunction

  // exp(x) as 2^(x log2 e) with a quadratic for the fractional power
  function automatic int rexp(int x);
    longint t, ip, f, poly;
    real    r;
    t    = (longint'(x) * 94548) >>> 8;
    ip   = t >>> 16;
    f    = t - ip * 65536;
    poly = 65536 + ((f * 43024) >>> 16) + ((((f * f) >>> 16) * 22512) >>> 16);
    r    = $floor(real'(poly) * (2.0 ** real'(ip - 8)));
    if (r > 32767.0) return 32767;
    return int'(r);
  endfunction

  function automatic mat_t new_mat(int m, int n);
    mat_t c = new[m];
    foreach (c[i]) begin
      c[i] = new[n];
      foreach (c[i][j]) c[i][j] = 0;
    end
    return c;
  endfunction

  function automatic mat_t mm(mat_t a, mat_t b);
    int m = a.size(), k = b.size(), n = b[0].size();
    mat_t c = new_mat(m, n);
    for (int i = 0; i < m; i++) begin
      longint acc[] = new[n];
      foreach (acc[j]) acc[j] = 0;
      for (int kk = 0; kk < k; kk++) begin
        longint av = a[i][kk];
        if (av != 0) for (int j = 0; j < n; j++) acc[j] += av * b[kk][j];
      end
      for (int j = 0; j < n; j++) c[i][j] = rsat(fshr(acc[j], F));
    end
    return c;
  endfunction

  function automatic mat_t mmt(mat_t a, mat_t b);
    int m = a.size(), n = b.size(), k = a[0].size();
    mat_t c = new_mat(m, n);
    for (int i = 0; i < m; i++)
      for (int j = 0; j < n; j++) begin
        longint acc = 0;
        for (int kk = 0; kk < k; kk++) acc += longint'(a[i][kk]) * b[j][kk];
        c[i][j] = rsat(fshr(acc, F));
      end
    return c;
  endfunction

  function automatic mat_t rowsum(mat_t a);
    mat_t c = new_mat(a.size(), 1);
    foreach (a[i]) begin
      longint acc = 0;
      foreach (a[i][j]) acc += a[i][j];
      c[i][0] = rsat(acc);
    end
    return c;
  endfunction

  function automatic mat_t add(mat_t a, mat_t b, bit bcast_row);
    mat_t c = new_mat(a.size(), a[0].size());
    foreach (a[i, j]) c[i][j] = rsat(longint'(a[i][j]) + (bcast_row ? b[0][j] : b[i][j]));
    return c;
  endfunction

  function automatic mat_t sub(mat_t a, mat_t col);
    mat_t c = new_mat(a.size(), a[0].size());
    foreach (a[i, j]) c[i][j] = rsat(longint'(a[i][j]) - col[i][0]);
    return c;
  endfunction

  function automatic mat_t rowmax(mat_t a);
    mat_t c = new_mat(a.size(), 1);
    foreach (a[i]) begin
      int mx = a[i][0];
      foreach (a[i][j]) if (a[i][j] > mx) mx = a[i][j];
      c[i][0] = mx;
    end
    return c;
  endfunction

  function automatic mat_t expm(mat_t a);
    mat_t c = new_mat(a.size(), a[0].size());
    foreach (a[i, j]) c[i][j] = rexp(a[i][j]);
    return c;
  endfunction

  function automatic mat_t relu(mat_t a);
    mat_t c = new_mat(a.size(), a[0].size());
    foreach (a[i, j]) c[i][j] = a[i][j] > 0 ? a[i][j] : 0;
    return c;
  endfunction

  function automatic mat_t sigm(mat_t a);
    mat_t c = new_mat(a.size(), a[0].size());
    foreach (a[i, j]) c[i][j] = rsigmoid(a[i][j]);
    return c;
  endfunction

  // scale and shift are the two rows of bn
  function automatic mat_t bnorm(mat_t a, mat_t bn);
    mat_t c = new_mat(a.size(), a[0].size());
    foreach (a[i, j]) c[i][j] = rsat(fshr(longint'(a[i][j]) * bn[0][j], F) + bn[1][j]);
    return c;
  endfunction

  function automatic mat_t pool(mat_t a);
    int n = a[0].size() / 2;
    mat_t c = new_mat(a.size(), n);
    foreach (c[i, j]) c[i][j] = a[i][2*j] > a[i][2*j+1] ? a[i][2*j] : a[i][2*j+1];
    return c;
  endfunction

  function automatic mat_t hadamard(mat_t a, mat_t b);
    mat_t c = new_mat(a.size(), a[0].size());
    foreach (a[i, j]) c[i][j] = rsat(fshr(longint'(a[i][j]) * b[i][j], F));
    return c;
  endfunction

  // c[i][j] = a[i][j] / d[i][0], via a reciprocal with 24 fraction bits
  function automatic mat_t rowdiv(mat_t a, mat_t d);
    mat_t c = new_mat(a.size(), a[0].size());
    foreach (a[i]) begin
      longint rc = (d[i][0] == 0) ? 0 : (longint'(1) << 32) / d[i][0];
      foreach (a[i][j]) c[i][j] = rsat(fshr(longint'(a[i][j]) * rc, 24));
    end
    return c;
  endfunction

endpackage
