// lr_ref_pkg: reference model of the lattice-reduction arithmetic, used by
// the testbenches to compute expected values independently of the RTL.
//
// Arithmetic parts are written from their definitions (integer products,
// real-valued division for mu, a plain 16-iteration CORDIC loop), not from
// the RTL's structure. mlll_iter() runs one full MLLL iteration on a 4x4
// basis in the same operation order as a core and also returns how many
// size reductions and swaps happened and how many compute cycles a core must
// take for it. Real-valued helpers check H*T = Q*R and the identity of Q^H*Q.
package lr_ref_pkg;
  import lr_pkg::*;

  typedef cplx_t mat_t [N][N];

  function automatic fx_t rsat(input longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return fx_t'(v);
  endfunction

  function automatic cplx_t radd(input cplx_t a, input cplx_t b);
    return '{re: rsat(longint'(a.re) + longint'(b.re)), im: rsat(longint'(a.im) + longint'(b.im))};
  endfunction

  // Product of two Q4.11 numbers rounded to nearest, ties upward.
  function automatic longint rnd(input longint s);
    longint q;
    q = s / 2048;
    if (s - q * 2048 < 0) q = q - 1;             // floor division
    if (s - q * 2048 >= 1024) q = q + 1;
    return q;
  endfunction

  function automatic cplx_t rcmul(input cplx_t a, input cplx_t b);
    longint re, im;
    re = longint'(a.re) * longint'(b.re) - longint'(a.im) * longint'(b.im);
    im = longint'(a.re) * longint'(b.im) + longint'(a.im) * longint'(b.re);
    return '{re: rsat(rnd(re)), im: rsat(rnd(im))};
  endfunction

  function automatic int rround_div(input int x, input int d);
    real r;
    int  m;
    if (d == 0) return 0;
    r = (x < 0 ? -real'(x) : real'(x)) / (d < 0 ? -real'(d) : real'(d));
    m = 0;
    if (r > 0.5) m++;
    if (r > 1.5) m++;
    if (r > 2.5) m++;
    if (r > 3.5) m++;
    return ((x < 0) != (d < 0)) ? -m : m;
  endfunction

  function automatic mu_t rmu(input cplx_t num, input fx_t den);
    return '{re: 4'(rround_div(num.re, den)), im: 4'(rround_div(num.im, den))};
  endfunction

  function automatic cplx_t rsr(input cplx_t a, input cplx_t b, input mu_t mu);
    longint mr, mi;
    mr = mu.re; mi = mu.im;
    return '{re: rsat(longint'(a.re) - (mr * b.re - mi * b.im)),
             im: rsat(longint'(a.im) - (mr * b.im + mi * b.re))};
  endfunction

  function automatic bit rsiegel(input fx_t p, input fx_t q);
    return (int'(p) / 2 + int'(p) / 4) > int'(q);
  endfunction

  // Bit-exact CORDIC: 16 iterations on 20-bit words with 13 fraction bits.
  function automatic void rcordic(input fx_t x, input fx_t y, output cplx_t cs, output fx_t mag);
    int xx, yy, aa, bb, nx, ny, na, nb, ik;
    ik = 4975;                                   // round(0.607252935 * 2^13)
    xx = int'(x) * 4; yy = int'(y) * 4; aa = ik; bb = 0;
    if (x < 0) begin xx = -xx; yy = -yy; aa = -ik; end
    for (int s = 0; s < 16; s++) begin
      if (yy >= 0) begin
        nx = xx + (yy >>> s); ny = yy - (xx >>> s); na = aa + (bb >>> s); nb = bb - (aa >>> s);
      end else begin
        nx = xx - (yy >>> s); ny = yy + (xx >>> s); na = aa - (bb >>> s); nb = bb + (aa >>> s);
      end
      xx = nx; yy = ny; aa = na; bb = nb;
    end
    cs  = '{re: rsat((aa + 2) >>> 2), im: rsat((bb + 2) >>> 2)};
    mag = rsat((xx + 2) >>> 2);
  endfunction

  function automatic cplx_t rconj(input cplx_t a);
    return '{re: a.re, im: rsat(-longint'(a.im))};
  endfunction

  // One MLLL iteration in the core's order. Counts: nz = non-zero mu,
  // sw = swaps; cyc = expected compute cycles.
  function automatic void mlll_iter(ref mat_t Q, ref mat_t R, ref mat_t T,
                                    output int nz, output int sw, output int cyc);
    cplx_t u, v, cth, beta, nbeta, alc, al, t1, t2, tmp;
    fx_t   mag, s0, s1;
    mu_t   mu;
    nz = 0; sw = 0; cyc = 0;
    for (int k = 1; k < N; k++) begin
      for (int l = k - 1; l >= 0; l--) begin
        mu = rmu(R[l][k], R[l][l].re);
        cyc += 1;
        if (mu != '0) begin
          nz++;
          cyc += l + 1 + N;
          for (int i = 0; i <= l; i++) R[i][k] = rsr(R[i][k], R[i][l], mu);
          for (int i = 0; i < N; i++)  T[i][k] = rsr(T[i][k], T[i][l], mu);
        end
      end
      s0 = rcmul('{re: R[k-1][k-1].re >>> 2, im: 0}, '{re: R[k-1][k-1].re >>> 2, im: 0}).re;
      s1 = rcmul('{re: R[k][k].re >>> 2, im: 0}, '{re: R[k][k].re >>> 2, im: 0}).re;
      cyc += 2;
      if (rsiegel(s0, s1)) begin
        sw++;
        cyc += 15 + 4 * (N - k + 1) + 4 * N;
        for (int r = 0; r < N; r++) begin
          tmp = R[r][k-1]; R[r][k-1] = R[r][k]; R[r][k] = tmp;
          tmp = T[r][k-1]; T[r][k-1] = T[r][k]; T[r][k] = tmp;
        end
        rcordic(R[k-1][k-1].re, R[k-1][k-1].im, u, mag);
        rcordic(rcmul(R[k-1][k-1], u).re, R[k][k-1].re, v, mag);
        cth = '{re: v.re, im: 0};
        beta = '{re: rsat(-longint'(v.im)), im: 0};
        nbeta = '{re: v.im, im: 0};
        alc = rcmul(u, cth);
        al = rconj(alc);
        for (int c = k - 1; c < N; c++) begin
          t1 = radd(rcmul(alc, R[k-1][c]), rcmul(beta, R[k][c]));
          t2 = radd(rcmul(nbeta, R[k-1][c]), rcmul(al, R[k][c]));
          if (c == k - 1) begin t1.im = 0; t2 = '0; end
          if (c == k) t2.im = 0;
          R[k-1][c] = t1; R[k][c] = t2;
        end
        for (int r = 0; r < N; r++) begin
          t1 = radd(rcmul(al, Q[r][k-1]), rcmul(beta, Q[r][k]));
          t2 = radd(rcmul(nbeta, Q[r][k-1]), rcmul(alc, Q[r][k]));
          Q[r][k-1] = t1; Q[r][k] = t2;
        end
      end
    end
  endfunction

  function automatic real fr(input fx_t v);
    return real'(v) / 2048.0;
  endfunction

  // Largest |(Q*R - H*T)(r,c)| over the matrix, all in real arithmetic.
  function automatic real qr_ht_err(input mat_t Q, input mat_t R, input mat_t T,
                                    input real hre[N][N], input real him[N][N]);
    real e, are, aim, bre, bim;
    e = 0.0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        are = 0; aim = 0; bre = 0; bim = 0;
        for (int m = 0; m < N; m++) begin
          are += fr(Q[r][m].re) * fr(R[m][c].re) - fr(Q[r][m].im) * fr(R[m][c].im);
          aim += fr(Q[r][m].re) * fr(R[m][c].im) + fr(Q[r][m].im) * fr(R[m][c].re);
          bre += hre[r][m] * fr(T[m][c].re) - him[r][m] * fr(T[m][c].im);
          bim += hre[r][m] * fr(T[m][c].im) + him[r][m] * fr(T[m][c].re);
        end
        if ((are - bre) * (are - bre) + (aim - bim) * (aim - bim) > e * e)
          e = $sqrt((are - bre) * (are - bre) + (aim - bim) * (aim - bim));
      end
    return e;
  endfunction

  // Standard normal sample (Box-Muller).
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000002.0;
    u2 = real'($urandom_range(1000000)) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // Random channel H, its QR factors by Gram-Schmidt with a real positive
  // diagonal, quantised to Q4.11; returns H recomputed from the quantised
  // factors. Entries are uniform in [-1,1]^2, or with rayleigh set, complex
  // Gaussian with unit variance (Rayleigh fading).
  function automatic void make_basis(output mat_t Q, output mat_t R,
                                     output real hre[N][N], output real him[N][N],
                                     input bit rayleigh = 1'b0);
    real are[N][N], aim[N][N], qre[N][N], qim[N][N], rre[N][N], rim[N][N];
    real pre, pim, nrm;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        if (rayleigh) begin
          are[r][c] = gauss() * 0.7071067811865476;
          aim[r][c] = gauss() * 0.7071067811865476;
        end else begin
          are[r][c] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
          aim[r][c] = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
        end
        rre[r][c] = 0; rim[r][c] = 0;
      end
    for (int c = 0; c < N; c++) begin
      for (int r = 0; r < N; r++) begin qre[r][c] = are[r][c]; qim[r][c] = aim[r][c]; end
      for (int m = 0; m < c; m++) begin
        pre = 0; pim = 0;                        // <q_m, a_c> = sum conj(q_m) a_c
        for (int r = 0; r < N; r++) begin
          pre += qre[r][m] * are[r][c] + qim[r][m] * aim[r][c];
          pim += qre[r][m] * aim[r][c] - qim[r][m] * are[r][c];
        end
        rre[m][c] = pre; rim[m][c] = pim;
        for (int r = 0; r < N; r++) begin
          qre[r][c] -= pre * qre[r][m] - pim * qim[r][m];
          qim[r][c] -= pre * qim[r][m] + pim * qre[r][m];
        end
      end
      nrm = 0;
      for (int r = 0; r < N; r++) nrm += qre[r][c] * qre[r][c] + qim[r][c] * qim[r][c];
      nrm = $sqrt(nrm);
      rre[c][c] = nrm;
      for (int r = 0; r < N; r++) begin qre[r][c] /= nrm; qim[r][c] /= nrm; end
    end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        Q[r][c] = '{re: rsat(longint'($rtoi(qre[r][c] * 2048.0 + (qre[r][c] < 0 ? -0.5 : 0.5)))),
                    im: rsat(longint'($rtoi(qim[r][c] * 2048.0 + (qim[r][c] < 0 ? -0.5 : 0.5))))};
        R[r][c] = (r > c) ? '0 :
                  '{re: rsat(longint'($rtoi(rre[r][c] * 2048.0 + (rre[r][c] < 0 ? -0.5 : 0.5)))),
                    im: rsat(longint'($rtoi(rim[r][c] * 2048.0 + (rim[r][c] < 0 ? -0.5 : 0.5))))};
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        hre[r][c] = 0; him[r][c] = 0;
        for (int m = 0; m < N; m++) begin
          hre[r][c] += fr(Q[r][m].re) * fr(R[m][c].re) - fr(Q[r][m].im) * fr(R[m][c].im);
          him[r][c] += fr(Q[r][m].re) * fr(R[m][c].im) + fr(Q[r][m].im) * fr(R[m][c].re);
        end
      end
  endfunction
  // log2 of the orthogonality defect of the basis Q*R: product of the column
  // norms of R over the product of |R(k,k)| (0 for an orthogonal basis).
  function automatic real log_defect(input mat_t R);
    real d, cn;
    d = 0.0;
    for (int c = 0; c < N; c++) begin
      cn = 0.0;
      for (int r = 0; r <= c; r++) cn += fr(R[r][c].re) ** 2 + fr(R[r][c].im) ** 2;
      d += 0.5 * $ln(cn) / $ln(2.0) - $ln(fr(R[c][c].re) < 0 ? -fr(R[c][c].re) : fr(R[c][c].re)) / $ln(2.0);
    end
    return d;
  endfunction
endpackage
