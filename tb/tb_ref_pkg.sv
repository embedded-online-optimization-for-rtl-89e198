// tb_ref_pkg: bit-exact reference arithmetic for the solver testbenches.
// The models below are written from the algorithms (fast gradient method and
// ADMM as restructured for parallel hardware), not from the RTL: products are
// truncated to FRAC fraction bits, sums wrap at 32 bits, rho is 2^RHO_LOG2.
package tb_ref_pkg;

  typedef logic signed [31:0] word_t;

  function automatic word_t fxmul(input word_t a, input word_t b, input int frac);
    longint p;
    p = longint'(a) * longint'(b);
    return word_t'(p >>> frac);
  endfunction

  function automatic word_t sat(input word_t t, input word_t lo, input word_t hi);
    if (t < lo) return lo;
    if (t > hi) return hi;
    return t;
  endfunction

  // Random word uniformly in [-mag, mag].
  function automatic word_t rnd(input int mag);
    return word_t'($signed($urandom_range(2 * mag, 0)) - mag);
  endfunction

  // Projection of a pair (x, d) onto |x - c| <= r + d, d >= 0, as the
  // closed-form map of the cone projection block (cpr = c + r, cmr = c - r).
  // Returns the projected x and d; region gives which case applied:
  // 0 inside, 1 upper edge, 2 lower edge, 3 vertex c+r, 4 vertex c-r, 5 base.
  function automatic void cone(input word_t x, input word_t d, input word_t cpr,
                               input word_t cmr, output word_t xo, output word_t dox,
                               output int region);
    longint s1, s2, s3, s4, s5, s6;
    s1 = longint'(x) - cpr;
    s2 = longint'(cmr) - x;
    s3 = s1 - d;  s4 = d - s2;  s5 = s2 + d;  s6 = s1 + d;
    if (s3 > 0 && s6 >= 0) begin
      xo = word_t'(longint'(x) - (s3 >>> 1)); dox = word_t'(longint'(d) + (s3 >>> 1)); region = 1;
    end else if (s4 < 0 && s5 >= 0) begin
      xo = word_t'(longint'(x) - (s4 >>> 1)); dox = word_t'(longint'(d) - (s4 >>> 1)); region = 2;
    end else if (s1 >= 0 && s6 < 0) begin
      xo = cpr; dox = 0; region = 3;
    end else if (s2 >= 0 && s5 < 0) begin
      xo = cmr; dox = 0; region = 4;
    end else if (d < 0) begin
      xo = x; dox = 0; region = 5;
    end else begin
      xo = x; dox = d; region = 0;
    end
  endfunction

  // Fast gradient method (Algorithm 1): set-up pass, then imax iterations.
  // H is (I - H_n), n x n row-major; Phi is n x nx. Returns z_imax.
  // sat_lo / sat_hi count how often the projection saturated.
  function automatic void fgm_solve(input int n, input int nx, input int imax, input int frac,
                                    input word_t H [], input word_t Phi [], input word_t x [],
                                    input word_t lo [], input word_t hi [],
                                    input word_t beta, input word_t opb,
                                    output word_t z [], inout int sat_lo, inout int sat_hi);
    word_t phix [], y [], bz [], yn [], t;
    phix = new[n]; y = new[n]; bz = new[n]; yn = new[n]; z = new[n];
    for (int j = 0; j < n; j++) begin
      phix[j] = 0;
      for (int k = 0; k < nx; k++) phix[j] += fxmul(Phi[j*nx+k], x[k], frac);
      z[j]  = sat(0, lo[j], hi[j]);
      y[j]  = z[j];
      bz[j] = fxmul(beta, z[j], frac);
    end
    for (int i = 0; i < imax; i++) begin
      for (int j = 0; j < n; j++) begin
        t = 0;
        for (int k = 0; k < n; k++) t += fxmul(H[j*n+k], y[k], frac);
        t -= phix[j];
        if (t < lo[j]) sat_lo++; else if (t > hi[j]) sat_hi++;
        z[j]  = sat(t, lo[j], hi[j]);
        yn[j] = fxmul(opb, z[j], frac) - bz[j];
        bz[j] = fxmul(beta, z[j], frac);
      end
      y = yn;
    end
  endfunction

  // ADMM (Algorithm 2) with w = rho z - nu fed to M11 and the constant
  // M12 b(x) - M11 h taken from an extra column of the set-up matrix Mi
  // (n x (nx+1), the last column multiplied by 1.0). ty: 0 free, 1 box,
  // 2 soft state, 3 slack; the slack of the soft state in j is in j + p.
  // z0/nu0: initial iterates; returns the final z and nu. cnt[k] counts
  // box saturations (k = 6) and cone regions (k = 0..5).
  function automatic void admm_solve(input int n, input int nx, input int imax, input int frac,
                                     input int rho_log2, input int p,
                                     input word_t M [], input word_t Mi [], input word_t x [],
                                     input int ty [], input word_t lo [], input word_t hi [],
                                     input word_t z0 [], input word_t nu0 [],
                                     output word_t z [], output word_t nu [], inout int cnt [8]);
    word_t c [], w [], y [], t [], a [];
    word_t one;
    one = word_t'(1) <<< frac;
    c = new[n]; w = new[n]; y = new[n]; t = new[n]; a = new[n]; z = new[n]; nu = new[n];
    for (int j = 0; j < n; j++) begin
      c[j] = fxmul(Mi[j*(nx+1)+nx], one, frac);
      for (int k = 0; k < nx; k++) c[j] += fxmul(Mi[j*(nx+1)+k], x[k], frac);
      z[j] = z0[j]; nu[j] = nu0[j];
      w[j] = (z[j] <<< rho_log2) - nu[j];
    end
    for (int i = 0; i < imax; i++) begin
      for (int j = 0; j < n; j++) begin
        y[j] = c[j];
        for (int k = 0; k < n; k++) y[j] += fxmul(M[j*n+k], w[k], frac);
        t[j] = y[j] + (nu[j] >>> rho_log2);
        a[j] = (y[j] <<< rho_log2) + nu[j];
      end
      for (int j = 0; j < n; j++) begin
        int rg;
        case (ty[j])
          1: begin
            if (t[j] < lo[j] || t[j] > hi[j]) cnt[6]++;
            z[j] = sat(t[j], lo[j], hi[j]);
          end
          2: begin
            cone(t[j], t[j+p], hi[j], lo[j], z[j], z[j+p], rg);
            cnt[rg]++;
          end
          3: ;  // done with its state
          default: z[j] = t[j];
        endcase
      end
      for (int j = 0; j < n; j++) begin
        nu[j] = a[j] - (z[j] <<< rho_log2);
        w[j]  = (z[j] <<< rho_log2) - nu[j];
      end
    end
  endfunction

endpackage
