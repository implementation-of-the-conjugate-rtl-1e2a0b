// dslash_kernel: one stencil of the Wilson-Dirac operator per clock,
//   out(n) = (m_q + 4) psi(n)
//          + 1/2 sum_mu [ U_mu(n) (1 - gamma_mu) psi(n + mu)
//                       + U_mu(n - mu)^dagger (1 + gamma_mu) psi(n - mu) ]
// fully pipelined with an initiation interval of one clock.
//
// Inputs are the nine spinors (eight neighbours in the order n+x, n+y, n+z,
// n+t, n-x, n-y, n-z, n-t, then the site itself) and the eight links in the
// same order (bank k = 4..7 holds U_mu(n - mu), the link itself, not its
// adjoint). They are expected straight from the field memories, whose
// one-clock read is stage 1 of the pipeline. The kernel holds stages 2 to 4:
//   stage 2  spin_project      14 clocks     96 operations
//   stage 3  gauge_mult        70 clocks   1152 operations
//   stage 4  spin_reconstruct  57 clocks    216 operations
// 141 clocks from in_valid to out_valid, 142 with the memory read, 1464
// double operations per site. The links are delayed 14 clocks to meet the
// projected spinors at stage 3, the centre spinor 84 clocks to meet them at
// stage 4. in_tag travels unchanged with the stencil (the site's write
// address in the accelerator). With g5 set, gamma_5 is applied to all
// input spinors and to the result, giving Ddag = g5 D g5 instead of D.
module dslash_kernel #(
  parameter int TAGW = 16,
  parameter int LAT  = cg_pkg::FP_LAT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [TAGW-1:0]     in_tag,
  input  logic                g5,
  input  cg_pkg::fp64_t       mass,
  input  cg_pkg::su3_spinor_t psi_nb [cg_pkg::NNB],
  input  cg_pkg::su3_spinor_t psi_c,
  input  cg_pkg::su3_matrix_t u      [cg_pkg::NNB],
  output logic                out_valid,
  output logic [TAGW-1:0]     out_tag,
  output cg_pkg::su3_spinor_t out
);
  import cg_pkg::*;

  localparam int KLAT = LAT + 5 * LAT + 4 * LAT + 1;   // 141 for LAT = 14

  su3_spinor_t  psi_in [NNB];
  su3_spinor_t  psi_c_in, psi_c_d;
  half_spinor_t h [NNB], uh [NNB];
  su3_matrix_t  u_d [NNB];
  logic         g5_d;

  for (genvar k = 0; k < NNB; k++) begin : g_in
    assign psi_in[k] = g5 ? spinor_g5(psi_nb[k]) : psi_nb[k];
    pipe_delay #(.W($bits(su3_matrix_t)), .DEPTH(LAT)) u_udly (.clk(clk), .d(u[k]), .q(u_d[k]));
  end
  assign psi_c_in = g5 ? spinor_g5(psi_c) : psi_c;

  spin_project #(.LAT(LAT)) u_st2 (.clk(clk), .psi(psi_in), .h(h));

  gauge_mult #(.LAT(LAT)) u_st3 (.clk(clk), .h(h), .u(u_d), .uh(uh));

  pipe_delay #(.W($bits(su3_spinor_t)), .DEPTH(6 * LAT)) u_cdly (.clk(clk), .d(psi_c_in), .q(psi_c_d));
  pipe_delay #(.W(1), .DEPTH(6 * LAT)) u_gdly (.clk(clk), .d(g5), .q(g5_d));

  spin_reconstruct #(.LAT(LAT)) u_st4 (
    .clk(clk), .uh(uh), .psi_c(psi_c_d), .mass(mass), .g5(g5_d), .out(out));

  // validity and tag travel alongside the data
  logic [KLAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[KLAT-2:0], in_valid};
  end
  assign out_valid = vpipe[KLAT-1];
  pipe_delay #(.W(TAGW), .DEPTH(KLAT)) u_tdly (.clk(clk), .d(in_tag), .q(out_tag));
endmodule
