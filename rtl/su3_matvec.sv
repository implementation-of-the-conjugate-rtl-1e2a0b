// su3_matvec: y = M v (or M^dagger v) for a 3x3 complex link matrix M and a
// colour vector v, in double precision, fully pipelined (a new pair every
// clock).
//
// The products are evaluated as a five-layer cascade of floating-point
// operations, each layer LAT = 14 clocks, 5 * 14 = 70 clocks in total:
//   layer 1  the 36 real products  Re*Re, Im*Im, Re*Im, Im*Re
//   layer 2  the 9 complex products (re = rr - ii, im = ri + ir)
//   layer 3  acc = 0 + p[i][0]
//   layer 4  acc = acc + p[i][1]   (p[i][1] delayed one layer)
//   layer 5  acc = acc + p[i][2]   (p[i][2] delayed two layers)
// which is 36 multiplications and 36 additions, 72 operations. The serial
// accumulation from zero is what a C loop "acc += M[i][j] * v[j]" becomes
// when floating-point additions may not be reordered; it is how the
// five-layer, 70-cycle figure comes about. With DAGGER = 1 the adjoint is
// used; conjugation and transposition are only wiring.
module su3_matvec #(
  parameter bit DAGGER = 1'b0,
  parameter int LAT    = cg_pkg::FP_LAT
) (
  input  logic                clk,
  input  cg_pkg::su3_matrix_t m,
  input  cg_pkg::su3_vector_t v,
  output cg_pkg::su3_vector_t y
);
  import cg_pkg::*;

  su3_matrix_t mm;
  assign mm = DAGGER ? su3_dagger(m) : m;

  fp64_t rr [3][3], ii [3][3], ri [3][3], ir [3][3];
  cplx_t p [3][3];
  cplx_t p1d [3], p2d [3];
  cplx_t acc1 [3], acc2 [3];

  for (genvar i = 0; i < 3; i++) begin : g_row
    for (genvar j = 0; j < 3; j++) begin : g_col
      // layer 1
      fp_mul #(.LAT(LAT)) u_rr (.clk(clk), .a(mm.e[i][j].re), .b(v.c[j].re), .y(rr[i][j]));
      fp_mul #(.LAT(LAT)) u_ii (.clk(clk), .a(mm.e[i][j].im), .b(v.c[j].im), .y(ii[i][j]));
      fp_mul #(.LAT(LAT)) u_ri (.clk(clk), .a(mm.e[i][j].re), .b(v.c[j].im), .y(ri[i][j]));
      fp_mul #(.LAT(LAT)) u_ir (.clk(clk), .a(mm.e[i][j].im), .b(v.c[j].re), .y(ir[i][j]));
      // layer 2
      fp_add #(.LAT(LAT)) u_pre (.clk(clk), .a(rr[i][j]), .b(fneg(ii[i][j])), .y(p[i][j].re));
      fp_add #(.LAT(LAT)) u_pim (.clk(clk), .a(ri[i][j]), .b(ir[i][j]), .y(p[i][j].im));
    end
    // layers 3..5
    fp_add #(.LAT(LAT)) u_a1re (.clk(clk), .a(64'd0), .b(p[i][0].re), .y(acc1[i].re));
    fp_add #(.LAT(LAT)) u_a1im (.clk(clk), .a(64'd0), .b(p[i][0].im), .y(acc1[i].im));
    pipe_delay #(.W(128), .DEPTH(LAT))     u_d1 (.clk(clk), .d(p[i][1]), .q(p1d[i]));
    pipe_delay #(.W(128), .DEPTH(2 * LAT)) u_d2 (.clk(clk), .d(p[i][2]), .q(p2d[i]));
    fp_add #(.LAT(LAT)) u_a2re (.clk(clk), .a(acc1[i].re), .b(p1d[i].re), .y(acc2[i].re));
    fp_add #(.LAT(LAT)) u_a2im (.clk(clk), .a(acc1[i].im), .b(p1d[i].im), .y(acc2[i].im));
    fp_add #(.LAT(LAT)) u_a3re (.clk(clk), .a(acc2[i].re), .b(p2d[i].re), .y(y.c[i].re));
    fp_add #(.LAT(LAT)) u_a3im (.clk(clk), .a(acc2[i].im), .b(p2d[i].im), .y(y.c[i].im));
  end
endmodule
