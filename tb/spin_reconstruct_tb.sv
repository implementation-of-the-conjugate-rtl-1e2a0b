// spin_reconstruct_tb: stage 4 against the reference. For every leg the
// reference rebuilds the full spinor as (1 -/+ gamma_mu) applied to the
// half spinor padded with zero lower components, sums the eight legs,
// halves the sum, adds mass * psi(n) and applies gamma_5 when asked. The
// summation order differs from the hardware tree, so a relative tolerance
// of 1e-12 is used. Each result must come exactly 57 clocks after its
// inputs; g5 and new data change every clock.
module spin_reconstruct_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int LAT4 = 4 * FP_LAT + 1;
  localparam int N    = 300;
  localparam real MASS = 4.25;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  half_spinor_t uh [NNB];
  su3_spinor_t  psi_c = '0, out;
  logic         g5 = 1'b0;
  fp64_t        mass;

  spin_reconstruct dut (.clk(clk), .uh(uh), .psi_c(psi_c), .mass(mass), .g5(g5), .out(out));

  su3_spinor_t ex [N + 80];
  int cyc = 0, checks = 0, failures = 0, n_g5 = 0;

  initial begin
    mass = $realtobits(MASS);
    for (int k = 0; k < NNB; k++) uh[k] = '0;
  end

  always @(posedge clk) begin
    real ar [4][3], ai [4][3], xr [4][3], xi [4][3], yr [4][3], yi [4][3];
    su3_spinor_t p;
    cyc <= cyc + 1;
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin ar[s][c] = 0.0; ai[s][c] = 0.0; end
    for (int k = 0; k < NNB; k++) begin
      p = '0;
      p.s[0] = uh[k].s[0];
      p.s[1] = uh[k].s[1];
      unpack_sp(p, xr, xi);
      project(k % 4, (k < 4) ? -1.0 : 1.0, xr, xi, yr, yi);
      for (int s = 0; s < 4; s++)
        for (int c = 0; c < 3; c++) begin ar[s][c] += yr[s][c]; ai[s][c] += yi[s][c]; end
    end
    unpack_sp(psi_c, xr, xi);
    for (int s = 0; s < 4; s++)
      for (int c = 0; c < 3; c++) begin
        ar[s][c] = MASS * xr[s][c] + 0.5 * ar[s][c];
        ai[s][c] = MASS * xi[s][c] + 0.5 * ai[s][c];
      end
    ex[cyc] = g5 ? g5_sp(pack_sp(ar, ai)) : pack_sp(ar, ai);
    if (g5) n_g5++;
    if (cyc >= LAT4 + 1 && cyc <= N) begin
      checks++;
      if (sp_diff(out, ex[cyc - LAT4], 1e-12) != 0) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d", cyc);
      end
    end
    for (int k = 0; k < NNB; k++) begin
      p = rnd_spinor();
      uh[k].s[0] <= p.s[0];
      uh[k].s[1] <= p.s[1];
    end
    psi_c <= rnd_spinor();
    g5    <= 1'($urandom);
    if (cyc == N + 1) begin
      checks++;
      if (n_g5 == 0) failures++;
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
