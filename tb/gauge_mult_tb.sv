// gauge_mult_tb: stage 3 against the reference colour multiplication:
// forward legs by U, backward legs by U^dagger, both half-spinor
// components. Same summation order as the hardware, so bit-exact; each
// result exactly 70 clocks after its inputs; new inputs every clock.
module gauge_mult_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int LAT3 = 5 * FP_LAT;
  localparam int N    = 200;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  half_spinor_t h  [NNB];
  su3_matrix_t  u  [NNB];
  half_spinor_t uh [NNB];

  gauge_mult dut (.clk(clk), .h(h), .u(u), .uh(uh));

  su3_spinor_t ex [N + 80][NNB];
  int cyc = 0, checks = 0, failures = 0;

  initial for (int k = 0; k < NNB; k++) begin h[k] = '0; u[k] = '0; end

  always @(posedge clk) begin
    real xr [4][3], xi [4][3], yr [4][3], yi [4][3];
    su3_spinor_t p, g;
    cyc <= cyc + 1;
    for (int k = 0; k < NNB; k++) begin
      p = '0;
      p.s[0] = h[k].s[0];
      p.s[1] = h[k].s[1];
      unpack_sp(p, xr, xi);
      colour_apply(u[k], k >= 4, xr, xi, yr, yi);
      ex[cyc][k] = pack_sp(yr, yi);
    end
    if (cyc >= LAT3 + 1 && cyc <= N) begin
      for (int k = 0; k < NNB; k++) begin
        g = '0;
        g.s[0] = uh[k].s[0];
        g.s[1] = uh[k].s[1];
        checks++;
        if (sp_diff(g, ex[cyc - LAT3][k], 0.0) != 0) begin
          failures++;
          if (failures < 5) $display("leg %0d mismatch at %0d", k, cyc);
        end
      end
    end
    for (int k = 0; k < NNB; k++) begin
      p = rnd_spinor();
      h[k].s[0] <= p.s[0];
      h[k].s[1] <= p.s[1];
      u[k] <= rnd_matrix();
    end
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
