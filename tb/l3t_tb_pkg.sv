// l3t_tb_pkg: reference models and stimulus shared by the trigger testbenches.
//
// * A hexagonal camera: pixel 0 at the centre, then rings of 6r pixels; NPIX
//   pixels are taken in ring order and their radii normalized so that the
//   outermost pixel centre lies at rho = 0.95 (inside the unit disk).
// * The pseudo-Zernike radial polynomial
//     R_nm(rho) = sum_{s=0}^{n-m} (-1)^s (2n+1-s)! / (s! (n-m-s)! (n+m+1-s)!) rho^(n-s)
//   scaled by (n+1)/pi and rounded to Q5.12, and cos/sin(m theta) in Q1.14:
//   the tables the offline software would load.
// * Synthetic cleaned images: an elliptical Gaussian light spot, pixels under
//   a threshold set to zero. Narrow spots play gamma showers, wide ones hadrons.
// * Integer models of the moment, magnitude and normalization arithmetic, and
//   a floating-point model of the SVM decision function.
package l3t_tb_pkg;
  import l3t_pkg::*;

  localparam int NPIX_MAX = 577;

  int  rad_q [N_FEAT][NPIX_MAX];
  int  cos_q [N_ORDER+1][NPIX_MAX];
  int  sin_q [N_ORDER+1][NPIX_MAX];
  real rho_p [NPIX_MAX];
  real th_p  [NPIX_MAX];
  real xp    [NPIX_MAX];
  real yp    [NPIX_MAX];
  int  feat_n [N_FEAT];
  int  feat_m [N_FEAT];

  function automatic real fact(int v);
    real r = 1.0;
    for (int i = 2; i <= v; i++) r = r * i;
    return r;
  endfunction

  function automatic real radial(int n, int m, real rho);
    real s = 0.0;
    for (int j = 0; j <= n - m; j++) begin
      real c = fact(2*n + 1 - j) / (fact(j) * fact(n - m - j) * fact(n + m + 1 - j));
      if (j % 2 == 1) c = -c;
      s += c * (rho ** real'(n - j));
    end
    return s;
  endfunction

  function automatic int qround(real v, int lim);
    int q = (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    if (q > lim) q = lim;
    if (q < -lim - 1) q = -lim - 1;
    return q;
  endfunction

  function automatic void build_tables(int npix);
    real dx [6], dy [6];
    real rmax;
    int p, k;
    for (int s = 0; s < 6; s++) begin
      dx[s] = $cos(s * 3.14159265358979 / 3.0);
      dy[s] = $sin(s * 3.14159265358979 / 3.0);
    end
    p = 0;
    xp[0] = 0.0; yp[0] = 0.0; p = 1;
    for (int r = 1; p < npix; r++)
      for (int j = 0; j < 6 * r && p < npix; j++) begin
        int s = j / r, t = j % r;
        xp[p] = r * dx[s] + t * dx[(s + 2) % 6];
        yp[p] = r * dy[s] + t * dy[(s + 2) % 6];
        p++;
      end
    rmax = 0.0;
    for (int i = 0; i < npix; i++)
      if ($sqrt(xp[i]*xp[i] + yp[i]*yp[i]) > rmax) rmax = $sqrt(xp[i]*xp[i] + yp[i]*yp[i]);
    for (int i = 0; i < npix; i++) begin
      xp[i] = 0.95 * xp[i] / rmax;
      yp[i] = 0.95 * yp[i] / rmax;
      rho_p[i] = $sqrt(xp[i]*xp[i] + yp[i]*yp[i]);
      th_p[i]  = $atan2(yp[i], xp[i]);
    end
    k = 0;
    for (int n = 0; n <= N_ORDER; n++)
      for (int m = 0; m <= n; m++) begin
        feat_n[k] = n; feat_m[k] = m;
        for (int i = 0; i < npix; i++)
          rad_q[k][i] = qround(radial(n, m, rho_p[i]) * (n + 1) / 3.14159265358979 * 4096.0, 131071);
        k++;
      end
    for (int m = 0; m <= N_ORDER; m++)
      for (int i = 0; i < npix; i++) begin
        cos_q[m][i] = qround($cos(m * th_p[i]) * 16384.0, 32767);
        sin_q[m][i] = qround($sin(m * th_p[i]) * 16384.0, 32767);
      end
  endfunction

  // elliptical light spot centred at (cx,cy), widths (a along angle phi, b
  // across), peak amp; pixels under thr are cleaned to 0
  function automatic void make_image(int npix, real cx, real cy, real a, real b,
                                     real phi, real amp, int thr, ref int img [NPIX_MAX]);
    for (int i = 0; i < npix; i++) begin
      real u = (xp[i] - cx) * $cos(phi) + (yp[i] - cy) * $sin(phi);
      real v = -(xp[i] - cx) * $sin(phi) + (yp[i] - cy) * $cos(phi);
      real f = amp * $exp(-0.5 * (u*u/(a*a) + v*v/(b*b)));
      int  q = int'($floor(f));
      if (q > 65535) q = 65535;
      img[i] = (q < thr) ? 0 : q;
    end
  endfunction

  function automatic real urand01();
    return real'($urandom % 1000000) / 1000000.0;
  endfunction

  // random gamma-like (narrow) or hadron-like (wide) image
  function automatic void random_event(int npix, bit gamma, ref int img [NPIX_MAX]);
    real cx = (urand01() - 0.5) * 0.8, cy = (urand01() - 0.5) * 0.8;
    real phi = urand01() * 3.14159265358979;
    real a, b, amp;
    if (gamma) begin
      a = 0.08 + 0.06 * urand01(); b = 0.025 + 0.015 * urand01();
      phi = $atan2(cy, cx) + (urand01() - 0.5) * 0.4;   // points to the centre
    end else begin
      a = 0.10 + 0.12 * urand01(); b = 0.06 + 0.08 * urand01();
    end
    amp = 100.0 + 900.0 * urand01();
    make_image(npix, cx, cy, a, b, phi, amp, 20, img);
  endfunction

  function automatic longint unsigned isqrt64(longint unsigned v);
    logic [127:0] r, v128;
    v128 = 128'(v);
    r = 128'(longint'($floor($sqrt(real'(v)))));
    while (r * r > v128) r = r - 1;
    while ((r + 1) * (r + 1) <= v128) r = r + 1;
    return longint'(r[63:0]);
  endfunction

  function automatic longint sat(longint v, int bits);
    longint hi = (64'sd1 <<< (bits - 1)) - 1;
    longint lo = -(64'sd1 <<< (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // fixed-point feature magnitudes (Q.4) of an image
  function automatic void ref_features(int npix, const ref int img [NPIX_MAX],
                                       ref longint mag [N_FEAT]);
    for (int k = 0; k < N_FEAT; k++) begin
      longint re = 0, im = 0, rq, iq;
      int m = feat_m[k];
      for (int p = 0; p < npix; p++) begin
        longint rc = (longint'(rad_q[k][p]) * cos_q[m][p]) >>> 14;
        longint rs = (longint'(rad_q[k][p]) * sin_q[m][p]) >>> 14;
        re += img[p] * rc;
        im -= img[p] * rs;
      end
      rq = sat(re >>> 8, 32);
      iq = sat(im >>> 8, 32);
      mag[k] = longint'(isqrt64(longint'(rq * rq) + longint'(iq * iq)));
    end
  endfunction

  // floating-point |A_nm| from the exact tables
  function automatic real float_feature(int npix, const ref int img [NPIX_MAX], int k);
    real re = 0.0, im = 0.0;
    int n = feat_n[k], m = feat_m[k];
    for (int p = 0; p < npix; p++) begin
      real r = radial(n, m, rho_p[p]) * (n + 1) / 3.14159265358979;
      re += img[p] * r * $cos(m * th_p[p]);
      im -= img[p] * r * $sin(m * th_p[p]);
    end
    return $sqrt(re*re + im*im);
  endfunction

  function automatic int ref_norm(longint mag, longint mean, longint invstd);
    return int'(sat(((mag - mean) * invstd) >>> 12, 16));
  endfunction
endpackage
