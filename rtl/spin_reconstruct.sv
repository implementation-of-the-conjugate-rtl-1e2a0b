// spin_reconstruct: stage 4 of the stencil pipeline. It turns the eight
// link-multiplied half spinors back into full spinors, sums them, and adds
// the mass term:
//   out = (m_q + 4) psi(n) + 1/2 * sum_k f_k
// where f_k has the upper components U h_k and the lower ones
// -/+ B_mu (U h_k) (B_mu is the lower-left block of gamma_mu; the sign is
// - for forward and + for backward neighbours). Rebuilding the lower
// components is wiring only.
// Timing (LAT = 14): a three-layer adder tree over the eight contributions
// (7 x 24 additions, 42 clocks), one layer adding the mass term (24
// additions, 14 clocks) and one output register ("data copy", 1 clock):
// 4 * 14 + 1 = 57 clocks. The mass term (m_q + 4) psi(n) is 24
// multiplications made alongside the tree. 168 + 24 + 24 = 216 operations.
// The factor 1/2 is applied exactly by decrementing the exponent of the
// tree's result, which costs no arithmetic operation (own choice).
// Inputs uh, psi_c and g5 belong to one stencil and arrive in one clock;
// with g5 set the result is multiplied by gamma_5 in the output register,
// as needed for Ddag = g5 D g5. mass must be held stable during a run.
module spin_reconstruct #(
  parameter int LAT = cg_pkg::FP_LAT
) (
  input  logic                 clk,
  input  cg_pkg::half_spinor_t uh [cg_pkg::NNB],
  input  cg_pkg::su3_spinor_t  psi_c,
  input  cg_pkg::fp64_t        mass,
  input  logic                 g5,
  output cg_pkg::su3_spinor_t  out
);
  import cg_pkg::*;

  su3_spinor_t f  [NNB];
  su3_spinor_t l1 [4];
  su3_spinor_t l2 [2];
  su3_spinor_t l3, mterm, mterm_d, sum;
  logic        g5_d;

  for (genvar k = 0; k < NNB; k++) begin : g_nb
    localparam int MU = nb_mu(k);
    assign f[k].s[0] = uh[k].s[0];
    assign f[k].s[1] = uh[k].s[1];
    for (genvar r = 0; r < 2; r++) begin : g_low
      localparam logic [1:0] PH = b_pow(MU, r) + (nb_fwd(k) ? 2'd2 : 2'd0);
      assign f[k].s[2 + r] = vmul_ipow(uh[k].s[int'(b_col(MU, r))], PH);
    end
  end

  for (genvar i = 0; i < 4; i++) begin : g_l1
    spinor_add #(.LAT(LAT)) u_add (.clk(clk), .a(f[2*i]), .b(f[2*i+1]), .y(l1[i]));
  end
  for (genvar i = 0; i < 2; i++) begin : g_l2
    spinor_add #(.LAT(LAT)) u_add (.clk(clk), .a(l1[2*i]), .b(l1[2*i+1]), .y(l2[i]));
  end
  spinor_add #(.LAT(LAT)) u_l3 (.clk(clk), .a(l2[0]), .b(l2[1]), .y(l3));

  // mass term, made in parallel with the tree and delayed to meet it
  for (genvar s = 0; s < 4; s++) begin : g_ms
    for (genvar c = 0; c < 3; c++) begin : g_mc
      fp_mul #(.LAT(LAT)) u_re (.clk(clk), .a(psi_c.s[s].c[c].re), .b(mass), .y(mterm.s[s].c[c].re));
      fp_mul #(.LAT(LAT)) u_im (.clk(clk), .a(psi_c.s[s].c[c].im), .b(mass), .y(mterm.s[s].c[c].im));
    end
  end
  pipe_delay #(.W($bits(su3_spinor_t)), .DEPTH(2 * LAT)) u_mdly (.clk(clk), .d(mterm), .q(mterm_d));

  spinor_add #(.LAT(LAT)) u_l4 (.clk(clk), .a(spinor_half(l3)), .b(mterm_d), .y(sum));

  pipe_delay #(.W(1), .DEPTH(4 * LAT)) u_g5dly (.clk(clk), .d(g5), .q(g5_d));

  always_ff @(posedge clk) out <= g5_d ? spinor_g5(sum) : sum;
endmodule
