// spin_project: stage 2 of the stencil pipeline. Each of the eight
// neighbour spinors is multiplied by its projector, (1 - gamma_mu) for the
// forward neighbour n + mu and (1 + gamma_mu) for the backward neighbour
// n - mu, and only the two upper spin components are kept:
//   h[s] = psi[s] -/+ A_mu[s][q] psi[2 + q]
// (A_mu is the upper-right block of gamma_mu; see cg_pkg). The lower two
// components of the projected spinor are a fixed multiple of the upper two,
// so they are rebuilt after the link multiplication and never computed here.
// The factor A_mu[s][q] is +-1 or +-i, so each h[s] is one su3_vector
// addition or subtraction: 8 neighbours x 2 = 16 vector operations, 96
// double additions, all in parallel, latency LAT = 14 clocks, a new stencil
// every clock.
module spin_project #(
  parameter int LAT = cg_pkg::FP_LAT
) (
  input  logic                 clk,
  input  cg_pkg::su3_spinor_t  psi [cg_pkg::NNB],
  output cg_pkg::half_spinor_t h   [cg_pkg::NNB]
);
  import cg_pkg::*;

  for (genvar k = 0; k < NNB; k++) begin : g_nb
    for (genvar s = 0; s < 2; s++) begin : g_spin
      localparam int         MU  = nb_mu(k);
      localparam logic [1:0] PH  = a_pow(MU, s) + (nb_fwd(k) ? 2'd2 : 2'd0);
      localparam int         SRC = 2 + int'(a_col(MU, s));
      su3_vector_t other;
      assign other = vmul_ipow(psi[k].s[SRC], PH);
      for (genvar c = 0; c < 3; c++) begin : g_col
        fp_add #(.LAT(LAT)) u_re (.clk(clk), .a(psi[k].s[s].c[c].re), .b(other.c[c].re),
                                  .y(h[k].s[s].c[c].re));
        fp_add #(.LAT(LAT)) u_im (.clk(clk), .a(psi[k].s[s].c[c].im), .b(other.c[c].im),
                                  .y(h[k].s[s].c[c].im));
      end
    end
  end
endmodule
