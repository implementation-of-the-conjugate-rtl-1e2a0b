// gauge_mult: stage 3 of the stencil pipeline, the most arithmetic-heavy
// part. Both spin components of each of the eight projected half spinors are
// multiplied by the link of their direction: U_mu(n) for the forward
// neighbours k = 0..3 and U_mu(n - mu)^dagger for the backward neighbours
// k = 4..7. That is 16 parallel su3_matvec units, 16 x 72 = 1152 double
// operations, latency 5 * LAT = 70 clocks, a new stencil every clock.
// The links must be presented in the same clock as the half spinors.
module gauge_mult #(
  parameter int LAT = cg_pkg::FP_LAT
) (
  input  logic                 clk,
  input  cg_pkg::half_spinor_t h  [cg_pkg::NNB],
  input  cg_pkg::su3_matrix_t  u  [cg_pkg::NNB],
  output cg_pkg::half_spinor_t uh [cg_pkg::NNB]
);
  import cg_pkg::*;

  for (genvar k = 0; k < NNB; k++) begin : g_nb
    for (genvar s = 0; s < 2; s++) begin : g_spin
      su3_matvec #(.DAGGER(!nb_fwd(k)), .LAT(LAT)) u_mv (
        .clk(clk), .m(u[k]), .v(h[k].s[s]), .y(uh[k].s[s]));
    end
  end
endmodule
