// spin_project_tb: stage 2 against the full reference projector. For each
// of the eight legs the reference applies the complete 4x4 matrix
// (1 - gamma_mu) (forward legs) or (1 + gamma_mu) (backward legs) to the
// random input spinor; the two upper spin components must equal the
// hardware's half spinor bit for bit (a single rounded addition on both
// sides), exactly 14 clocks after the inputs. New inputs every clock.
module spin_project_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int N = 300;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  su3_spinor_t  psi [NNB];
  half_spinor_t h   [NNB];

  spin_project dut (.clk(clk), .psi(psi), .h(h));

  su3_spinor_t ex [N + 40][NNB];
  int cyc = 0, checks = 0, failures = 0;

  initial for (int k = 0; k < NNB; k++) psi[k] = '0;

  always @(posedge clk) begin
    real xr [4][3], xi [4][3], yr [4][3], yi [4][3];
    su3_spinor_t g;
    cyc <= cyc + 1;
    for (int k = 0; k < NNB; k++) begin
      unpack_sp(psi[k], xr, xi);
      project(k % 4, (k < 4) ? -1.0 : 1.0, xr, xi, yr, yi);
      ex[cyc][k] = pack_sp(yr, yi);
    end
    if (cyc >= FP_LAT + 1 && cyc <= N) begin
      for (int k = 0; k < NNB; k++) begin
        g = ex[cyc - FP_LAT][k];
        g.s[0] = h[k].s[0];
        g.s[1] = h[k].s[1];
        checks++;
        if (sp_diff(g, ex[cyc - FP_LAT][k], 0.0) != 0) begin
          failures++;
          if (failures < 5) $display("leg %0d mismatch at %0d", k, cyc);
        end
      end
    end
    for (int k = 0; k < NNB; k++) psi[k] <= rnd_spinor();
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
