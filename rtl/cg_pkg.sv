// cg_pkg: types and constants shared by the Wilson-Dirac stencil accelerator.
//
// All arithmetic is IEEE-754 binary64 ("double"), carried as 64-bit vectors.
// The lattice field types mirror the abstract C++ types of the design:
// complex, su3_vector (3 colours), su3_matrix (3x3) and su3_spinor
// (4 spin components of su3_vector). A half spinor holds the two spin
// components left after projection with (1 -/+ gamma_mu).
//
// The gamma matrices are those of the chiral (Weyl) representation,
//   gamma_j = [[0, -i sigma_j], [i sigma_j, 0]],  gamma_4 = [[0, 1], [1, 0]],
//   gamma_5 = diag(1, 1, -1, -1),
// with the lattice directions mu = 0, 1, 2, 3 taken as x, y, z, t. The choice
// of representation is this design's own; every gamma_mu is block
// off-diagonal with one entry of {+-1, +-i} per row, so multiplying by it is
// only a permutation with sign flips and re/im swaps: wiring, no arithmetic.
// The functions below encode that wiring.
package cg_pkg;

  localparam int FP_LAT = 14;            // latency of one double add or multiply
  localparam int NDIR   = 4;             // space-time dimensions
  localparam int NNB    = 2 * NDIR;      // neighbours per stencil

  typedef logic [63:0] fp64_t;

  typedef struct packed {
    fp64_t re;
    fp64_t im;
  } cplx_t;

  typedef struct packed {
    cplx_t [2:0] c;                      // colour index
  } su3_vector_t;

  typedef struct packed {
    cplx_t [2:0][2:0] e;                 // e[row][col]
  } su3_matrix_t;

  typedef struct packed {
    su3_vector_t [3:0] s;                // spin index 0..3
  } su3_spinor_t;

  typedef struct packed {
    su3_vector_t [1:0] s;                // upper two spin components after projection
  } half_spinor_t;


  typedef enum logic [1:0] {
    OP_D      = 2'd0,                    // out = D psi
    OP_DDAG   = 2'd1,                    // out = Ddag psi = g5 D g5 psi
    OP_DDDAG  = 2'd2                     // out = D Ddag psi (two passes)
  } op_e;

  // ---- sign / phase wiring -------------------------------------------------
  function automatic fp64_t fneg(fp64_t a);
    return {~a[63], a[62:0]};
  endfunction

  // multiply by i^p, p in 0..3 (only swaps and sign flips)
  function automatic cplx_t cmul_ipow(cplx_t a, logic [1:0] p);
    cplx_t r;
    unique case (p)
      2'd0: begin r.re = a.re;       r.im = a.im;       end
      2'd1: begin r.re = fneg(a.im); r.im = a.re;       end
      2'd2: begin r.re = fneg(a.re); r.im = fneg(a.im); end
      default: begin r.re = a.im;    r.im = fneg(a.re); end
    endcase
    return r;
  endfunction

  function automatic su3_vector_t vmul_ipow(su3_vector_t v, logic [1:0] p);
    su3_vector_t r;
    for (int c = 0; c < 3; c++) r.c[c] = cmul_ipow(v.c[c], p);
    return r;
  endfunction

  // adjoint (conjugate transpose) of a link matrix
  function automatic su3_matrix_t su3_dagger(su3_matrix_t m);
    su3_matrix_t r;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        r.e[i][j].re = m.e[j][i].re;
        r.e[i][j].im = fneg(m.e[j][i].im);
      end
    return r;
  endfunction

  // gamma_5 in the chiral basis: flip the sign of the lower two spin components
  function automatic su3_spinor_t spinor_g5(su3_spinor_t a);
    su3_spinor_t r;
    r = a;
    for (int s = 2; s < 4; s++) r.s[s] = vmul_ipow(a.s[s], 2'd2);
    return r;
  endfunction

  // Exact multiplication by 1/2: decrement the exponent. Zero stays zero;
  // results that would become subnormal are flushed to signed zero, which
  // matches the flush-to-zero arithmetic of fp_add/fp_mul.
  function automatic fp64_t fhalf(fp64_t a);
    if (a[62:52] == 11'h7FF) return a;
    if (a[62:52] <= 11'd1) return {a[63], 63'd0};
    return {a[63], a[62:52] - 11'd1, a[51:0]};
  endfunction

  function automatic su3_spinor_t spinor_half(su3_spinor_t a);
    su3_spinor_t r;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        r.s[s].c[c].re = fhalf(a.s[s].c[c].re);
        r.s[s].c[c].im = fhalf(a.s[s].c[c].im);
      end
    return r;
  endfunction

  // ---- gamma matrix blocks -------------------------------------------------
  // gamma_mu = [[0, A_mu], [B_mu, 0]]. Row s of A_mu (and of B_mu) has a single
  // non-zero entry i^p in column q. a_col/a_pow describe A_mu, b_col/b_pow B_mu.
  //   A_x = -i s1 = [[0,-i],[-i,0]]   B_x = i s1 = [[0, i],[ i,0]]
  //   A_y = -i s2 = [[0,-1],[ 1,0]]   B_y = i s2 = [[0, 1],[-1,0]]
  //   A_z = -i s3 = [[-i,0],[0, i]]   B_z = i s3 = [[ i,0],[0,-i]]
  //   A_t = 1                         B_t = 1
  function automatic logic a_col(int mu, int s);
    return (mu < 2) ? logic'(s == 0) : logic'(s);
  endfunction

  function automatic logic [1:0] a_pow(int mu, int s);
    case (mu)
      0: return 2'd3;
      1: return (s == 0) ? 2'd2 : 2'd0;
      2: return (s == 0) ? 2'd3 : 2'd1;
      default: return 2'd0;
    endcase
  endfunction

  function automatic logic b_col(int mu, int s);
    return a_col(mu, s);
  endfunction

  function automatic logic [1:0] b_pow(int mu, int s);
    case (mu)
      0: return 2'd1;
      1: return (s == 0) ? 2'd0 : 2'd2;
      2: return (s == 0) ? 2'd1 : 2'd3;
      default: return 2'd0;
    endcase
  endfunction

  // Neighbour k = 0..3 is n + mu (k = mu) with projector P^{-mu} = 1 - gamma_mu;
  // k = 4..7 is n - mu (mu = k - 4) with projector P^{+mu} = 1 + gamma_mu.
  function automatic int nb_mu(int k);
    return k % NDIR;
  endfunction

  function automatic logic nb_fwd(int k);
    return logic'(k < NDIR);
  endfunction

endpackage
