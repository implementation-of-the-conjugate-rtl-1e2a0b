// dirac_ref_pkg: reference model of the Wilson-Dirac stencil for the
// testbenches, written in the simulator's real (double) arithmetic and
// independent of the hardware's shortcuts: it builds the full 4x4 gamma
// matrices from the Pauli matrices, forms gamma_5 as the product
// gamma_1 gamma_2 gamma_3 gamma_4, applies the complete projector
// (1 -/+ gamma_mu) to all four spin components and multiplies all of them by
// the link, with no half-spinor trick and no wiring tables.
//   D psi(n) = mass psi(n) + 1/2 sum_mu [ U_mu(n) (1 - gamma_mu) psi(n+mu)
//                             + U_mu(n-mu)^dagger (1 + gamma_mu) psi(n-mu) ]
// Directions mu = 0..3 are x, y, z, t; the chiral representation is used.
package dirac_ref_pkg;
  import cg_pkg::*;

  function automatic real rnd_real();
    return ($urandom / 4294967296.0) * 2.0 - 1.0;
  endfunction

  function automatic su3_spinor_t rnd_spinor();
    su3_spinor_t p;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        p.s[s].c[c].re = $realtobits(rnd_real());
        p.s[s].c[c].im = $realtobits(rnd_real());
      end
    return p;
  endfunction

  function automatic su3_matrix_t rnd_matrix();
    su3_matrix_t m;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        m.e[i][j].re = $realtobits(rnd_real());
        m.e[i][j].im = $realtobits(rnd_real());
      end
    return m;
  endfunction

  // element (r, c) of the Pauli matrix sigma_j, j = 1..3
  function automatic void sigma_el(int j, int r, int c, output real re, output real im);
    re = 0.0; im = 0.0;
    case (j)
      1: if (r != c) re = 1.0;
      2: if (r == 0 && c == 1) im = -1.0; else if (r == 1 && c == 0) im = 1.0;
      default: if (r == c) re = (r == 0) ? 1.0 : -1.0;
    endcase
  endfunction

  // gamma_mu for mu = 0..3; mu = 4 gives gamma_5 = g0 g1 g2 g3
  function automatic void gamma_mat(int mu, output real gr [4][4], output real gi [4][4]);
    real sr, si;
    if (mu == 4) begin
      real ar [4][4], ai [4][4], br [4][4], bi [4][4], tr [4][4], ti [4][4];
      gamma_mat(0, ar, ai);
      for (int m = 1; m < 4; m++) begin
        gamma_mat(m, br, bi);
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 4; c++) begin
            tr[r][c] = 0.0; ti[r][c] = 0.0;
            for (int q = 0; q < 4; q++) begin
              tr[r][c] += ar[r][q] * br[q][c] - ai[r][q] * bi[q][c];
              ti[r][c] += ar[r][q] * bi[q][c] + ai[r][q] * br[q][c];
            end
          end
        ar = tr; ai = ti;
      end
      gr = ar; gi = ai;
      return;
    end
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++) begin
        gr[r][c] = 0.0; gi[r][c] = 0.0;
        if ((r < 2) != (c < 2)) begin
          if (mu == 3) begin
            if (r % 2 == c % 2) gr[r][c] = 1.0;
          end else begin
            sigma_el(mu + 1, r % 2, c % 2, sr, si);
            if (r < 2) begin gr[r][c] = si;  gi[r][c] = -sr; end   // -i sigma
            else       begin gr[r][c] = -si; gi[r][c] = sr;  end   //  i sigma
          end
        end
      end
  endfunction

  function automatic void unpack_sp(su3_spinor_t p, output real xr [4][3], output real xi [4][3]);
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        xr[s][c] = $bitstoreal(p.s[s].c[c].re);
        xi[s][c] = $bitstoreal(p.s[s].c[c].im);
      end
  endfunction

  function automatic su3_spinor_t pack_sp(real xr [4][3], real xi [4][3]);
    su3_spinor_t p;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        p.s[s].c[c].re = $realtobits(xr[s][c]);
        p.s[s].c[c].im = $realtobits(xi[s][c]);
      end
    return p;
  endfunction

  // y = G x on the spin index (G a 4x4 complex matrix)
  function automatic void spin_apply(real gr [4][4], real gi [4][4],
                                     real xr [4][3], real xi [4][3],
                                     output real yr [4][3], output real yi [4][3]);
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 3; c++) begin
        yr[r][c] = 0.0; yi[r][c] = 0.0;
        for (int q = 0; q < 4; q++) begin
          yr[r][c] += gr[r][q] * xr[q][c] - gi[r][q] * xi[q][c];
          yi[r][c] += gr[r][q] * xi[q][c] + gi[r][q] * xr[q][c];
        end
      end
  endfunction

  function automatic su3_spinor_t g5_sp(su3_spinor_t p);
    real gr [4][4], gi [4][4], xr [4][3], xi [4][3], yr [4][3], yi [4][3];
    gamma_mat(4, gr, gi);
    unpack_sp(p, xr, xi);
    spin_apply(gr, gi, xr, xi, yr, yi);
    return pack_sp(yr, yi);
  endfunction

  // y = M x (or M^dagger x) on the colour index of every spin component
  function automatic void colour_apply(su3_matrix_t m, bit dag,
                                       real xr [4][3], real xi [4][3],
                                       output real yr [4][3], output real yi [4][3]);
    real mr, mi;
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < 3; i++) begin
        yr[s][i] = 0.0; yi[s][i] = 0.0;
        for (int j = 0; j < 3; j++) begin
          if (dag) begin
            mr = $bitstoreal(m.e[j][i].re); mi = -$bitstoreal(m.e[j][i].im);
          end else begin
            mr = $bitstoreal(m.e[i][j].re); mi = $bitstoreal(m.e[i][j].im);
          end
          yr[s][i] += mr * xr[s][j] - mi * xi[s][j];
          yi[s][i] += mr * xi[s][j] + mi * xr[s][j];
        end
      end
  endfunction

  // (1 + sgn gamma_mu) x
  function automatic void project(int mu, real sgn, real xr [4][3], real xi [4][3],
                                  output real yr [4][3], output real yi [4][3]);
    real gr [4][4], gi [4][4], tr [4][3], ti [4][3];
    gamma_mat(mu, gr, gi);
    spin_apply(gr, gi, xr, xi, tr, ti);
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        yr[s][c] = xr[s][c] + sgn * tr[s][c];
        yi[s][c] = xi[s][c] + sgn * ti[s][c];
      end
  endfunction

  // One stencil. nb: n+x, n+y, n+z, n+t, n-x, n-y, n-z, n-t; u: U_mu(n) for
  // k < 4, U_mu(n-mu) for k >= 4. With g5 the result is g5 D g5 applied.
  function automatic su3_spinor_t ref_stencil(su3_spinor_t nb [8], su3_spinor_t c,
                                              su3_matrix_t u [8], real mass, bit g5);
    real ar [4][3], ai [4][3], xr [4][3], xi [4][3], yr [4][3], yi [4][3], zr [4][3], zi [4][3];
    su3_spinor_t o;
    for (int s = 0; s < 4; s++)
      for (int cc = 0; cc < 3; cc++) begin ar[s][cc] = 0.0; ai[s][cc] = 0.0; end
    for (int k = 0; k < 8; k++) begin
      unpack_sp(g5 ? g5_sp(nb[k]) : nb[k], xr, xi);
      project(k % 4, (k < 4) ? -1.0 : 1.0, xr, xi, yr, yi);
      colour_apply(u[k], k >= 4, yr, yi, zr, zi);
      for (int s = 0; s < 4; s++)
        for (int cc = 0; cc < 3; cc++) begin ar[s][cc] += zr[s][cc]; ai[s][cc] += zi[s][cc]; end
    end
    unpack_sp(g5 ? g5_sp(c) : c, xr, xi);
    for (int s = 0; s < 4; s++)
      for (int cc = 0; cc < 3; cc++) begin
        ar[s][cc] = mass * xr[s][cc] + 0.5 * ar[s][cc];
        ai[s][cc] = mass * xi[s][cc] + 0.5 * ai[s][cc];
      end
    o = pack_sp(ar, ai);
    return g5 ? g5_sp(o) : o;
  endfunction

  function automatic bit close(fp64_t g, fp64_t e, real tol);
    real a, b, d;
    a = $bitstoreal(g); b = $bitstoreal(e);
    d = a - b;
    if (d < 0.0) d = -d;
    if (b < 0.0) b = -b;
    return d <= tol * (1.0 + b);
  endfunction

  // number of the 24 real components that differ by more than tol
  function automatic int sp_diff(su3_spinor_t g, su3_spinor_t e, real tol);
    int n = 0;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        if (!close(g.s[s].c[c].re, e.s[s].c[c].re, tol)) n++;
        if (!close(g.s[s].c[c].im, e.s[s].c[c].im, tol)) n++;
      end
    return n;
  endfunction
endpackage
