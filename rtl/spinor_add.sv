// spinor_add: component-wise sum of two spinors, y = a + b, with 24 parallel
// double adders (4 spins x 3 colours x re/im). Latency LAT clocks, one pair
// per clock. Building block of the neighbour sum in spin_reconstruct.
module spinor_add #(
  parameter int LAT = cg_pkg::FP_LAT
) (
  input  logic                clk,
  input  cg_pkg::su3_spinor_t a,
  input  cg_pkg::su3_spinor_t b,
  output cg_pkg::su3_spinor_t y
);
  for (genvar s = 0; s < 4; s++) begin : g_spin
    for (genvar c = 0; c < 3; c++) begin : g_col
      fp_add #(.LAT(LAT)) u_re (.clk(clk), .a(a.s[s].c[c].re), .b(b.s[s].c[c].re), .y(y.s[s].c[c].re));
      fp_add #(.LAT(LAT)) u_im (.clk(clk), .a(a.s[s].c[c].im), .b(b.s[s].c[c].im), .y(y.s[s].c[c].im));
    end
  end
endmodule
