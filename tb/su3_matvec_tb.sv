// su3_matvec_tb: link-times-vector units, plain and adjoint, against the
// reference colour multiplication. A new random matrix and vector enter
// every clock. The reference forms each complex product as (rr - ii,
// ri + ir) and accumulates from zero in column order, the same order as
// the hardware cascade, so results must match bit for bit; each result is
// taken exactly 70 clocks (five operation layers) after its inputs.
module su3_matvec_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int LATMV = 5 * FP_LAT;
  localparam int N     = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  su3_matrix_t m = '0;
  su3_vector_t v = '0;
  su3_vector_t y0, y1;

  su3_matvec #(.DAGGER(1'b0)) dut0 (.clk(clk), .m(m), .v(v), .y(y0));
  su3_matvec #(.DAGGER(1'b1)) dut1 (.clk(clk), .m(m), .v(v), .y(y1));

  su3_spinor_t e0 [N + LATMV + 2], e1 [N + LATMV + 2];
  int cyc = 0, checks = 0, failures = 0;

  function automatic su3_spinor_t expect_mv(su3_matrix_t mm, su3_vector_t vv, bit dag);
    real xr [4][3], xi [4][3], yr [4][3], yi [4][3];
    su3_spinor_t p;
    p = '0;
    p.s[0] = vv;
    unpack_sp(p, xr, xi);
    colour_apply(mm, dag, xr, xi, yr, yi);
    return pack_sp(yr, yi);
  endfunction

  always @(posedge clk) begin
    su3_spinor_t g;
    cyc <= cyc + 1;
    e0[cyc] = expect_mv(m, v, 1'b0);
    e1[cyc] = expect_mv(m, v, 1'b1);
    if (cyc >= LATMV + 1 && cyc <= N) begin
      g = '0; g.s[0] = y0;
      checks++;
      if (sp_diff(g, e0[cyc - LATMV], 0.0) != 0) begin
        failures++;
        if (failures < 5) $display("M v mismatch at %0d", cyc);
      end
      g.s[0] = y1;
      checks++;
      if (sp_diff(g, e1[cyc - LATMV], 0.0) != 0) begin
        failures++;
        if (failures < 5) $display("Mdag v mismatch at %0d", cyc);
      end
    end
    m <= rnd_matrix();
    v <= rnd_spinor().s[1];
    if (cyc == N + 1) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin : watchdog
    repeat (N + 300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
