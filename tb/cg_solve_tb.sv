// cg_solve_tb: the workload the accelerator exists for, a conjugate-gradient
// inversion of the Wilson-Dirac operator, with this testbench playing the
// host processor. It solves D chi = eta on a 2x2x2x4 lattice by running CG
// on the hermitian operator D Ddag:
//   psi = 0, r = eta, p = r
//   while |r|^2 >= r_min:
//     r_old = |r|^2;  alpha = r_old / |Ddag p|^2
//     psi += alpha p;  r -= alpha D Ddag p
//     beta = |r|^2 / r_old;  p = r + beta p
//   chi = Ddag psi
// Every operator application goes through the accelerator: p is written to
// the source field, one OP_DDDAG run returns Ddag p (intermediate field,
// for the norm) and D Ddag p (result field). The vector updates and scalar
// products are done here in real arithmetic, as the host would. At the end
// chi is checked by applying D once more on the accelerator: |D chi - eta|
// must be below 1e-9 |eta|. The links are 1 plus small random noise, a
// well-conditioned field; with m_q = 1 CG converges in a few dozen
// iterations (near m_q = 0 the smallest eigenvalue of D approaches zero and
// the iteration count grows far beyond what is worth simulating).
module cg_solve_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int VOL = 32, AW = 5, V = 32;
  localparam int L [4] = '{2, 2, 2, 4};
  localparam real MASS = 5.0;           // m_q = 1: well away from the critical mass
  localparam int MAXIT = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 1'b0;
  op_e           op = OP_D;
  fp64_t         mass;
  logic          busy, done;
  logic [31:0]   cycles, passes;
  logic          hw_en = 1'b0;
  logic [3:0]    hw_sel = '0;
  logic [AW-1:0] hw_addr = '0;
  su3_spinor_t   hw_spinor = '0;
  su3_matrix_t   hw_link = '0;
  logic          hr_sel = 1'b0;
  logic [AW-1:0] hr_addr = '0;
  su3_spinor_t   hr_data;

  dslash_accel #(.VOL(VOL), .AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .op(op),
    .lx(8'(L[0])), .ly(8'(L[1])), .lz(8'(L[2])), .lt(8'(L[3])),
    .mass(mass), .busy(busy), .done(done), .cycles(cycles), .passes(passes),
    .hw_en(hw_en), .hw_sel(hw_sel), .hw_addr(hw_addr), .hw_spinor(hw_spinor), .hw_link(hw_link),
    .hr_sel(hr_sel), .hr_addr(hr_addr), .hr_data(hr_data));

  int checks = 0, failures = 0;
  real eta [V][24], psi [V][24], r [V][24], p [V][24], dp [V][24], ddp [V][24], t [V][24];
  su3_matrix_t ufw [4][V];

  function automatic su3_spinor_t to_sp(real x [24]);
    su3_spinor_t s;
    for (int i = 0; i < 12; i++) begin
      s.s[i / 3].c[i % 3].re = $realtobits(x[2 * i]);
      s.s[i / 3].c[i % 3].im = $realtobits(x[2 * i + 1]);
    end
    return s;
  endfunction

  function automatic void from_sp(su3_spinor_t s, output real x [24]);
    for (int i = 0; i < 12; i++) begin
      x[2 * i]     = $bitstoreal(s.s[i / 3].c[i % 3].re);
      x[2 * i + 1] = $bitstoreal(s.s[i / 3].c[i % 3].im);
    end
  endfunction

  function automatic real norm2(real x [V][24]);
    real s = 0.0;
    for (int n = 0; n < V; n++) for (int i = 0; i < 24; i++) s += x[n][i] * x[n][i];
    return s;
  endfunction

  function automatic int shift(int n, int mu, int d);
    int c [4];
    c[0] = n % L[0]; c[1] = (n / L[0]) % L[1]; c[2] = (n / (L[0] * L[1])) % L[2];
    c[3] = n / (L[0] * L[1] * L[2]);
    c[mu] = (c[mu] + d + L[mu]) % L[mu];
    return c[0] + L[0] * (c[1] + L[1] * (c[2] + L[2] * c[3]));
  endfunction

  task automatic write_word(int sel, int addr, su3_spinor_t s, su3_matrix_t m);
    @(negedge clk);
    hw_en = 1'b1; hw_sel = 4'(sel); hw_addr = AW'(addr); hw_spinor = s; hw_link = m;
    @(negedge clk);
    hw_en = 1'b0;
  endtask

  task automatic load(real x [V][24]);
    for (int n = 0; n < V; n++) write_word(0, n, to_sp(x[n]), '0);
  endtask

  task automatic fetch(bit sel, output real x [V][24]);
    for (int n = 0; n < V; n++) begin
      @(negedge clk);
      hr_sel = sel; hr_addr = AW'(n);
      @(posedge clk);
      #1;
      from_sp(hr_data, x[n]);
    end
  endtask

  task automatic run(op_e o);
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(posedge clk);
  endtask

  initial begin
    real r_old, rr, alpha, beta, e2, d2;
    int it;
    su3_matrix_t m;
    mass = $realtobits(MASS);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // links: identity plus noise of size 0.2
    for (int mu = 0; mu < 4; mu++)
      for (int n = 0; n < V; n++) begin
        m = '0;
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) begin
            m.e[i][j].re = $realtobits((i == j ? 1.0 : 0.0) + 0.2 * rnd_real());
            m.e[i][j].im = $realtobits(0.2 * rnd_real());
          end
        ufw[mu][n] = m;
        write_word(1 + mu, n, '0, m);
      end
    for (int mu = 0; mu < 4; mu++)
      for (int n = 0; n < V; n++) write_word(5 + mu, n, '0, ufw[mu][shift(n, mu, -1)]);
    for (int n = 0; n < V; n++)
      for (int i = 0; i < 24; i++) begin
        eta[n][i] = rnd_real(); psi[n][i] = 0.0; r[n][i] = eta[n][i]; p[n][i] = eta[n][i];
      end
    e2 = norm2(eta);
    rr = e2;
    it = 0;
    while (rr >= 1e-22 * e2 && it < MAXIT) begin
      r_old = rr;
      load(p);
      run(OP_DDDAG);
      fetch(1'b1, dp);
      fetch(1'b0, ddp);
      alpha = r_old / norm2(dp);
      for (int n = 0; n < V; n++)
        for (int i = 0; i < 24; i++) begin
          psi[n][i] += alpha * p[n][i];
          r[n][i]   -= alpha * ddp[n][i];
        end
      rr = norm2(r);
      beta = rr / r_old;
      for (int n = 0; n < V; n++)
        for (int i = 0; i < 24; i++) p[n][i] = r[n][i] + beta * p[n][i];
      it++;
    end
    $display("CG: %0d iterations, |r|^2/|eta|^2 = %e", it, rr / e2);
    checks++;
    if (it >= MAXIT) begin failures++; $display("FAIL: no convergence"); end
    // chi = Ddag psi, then check D chi = eta
    load(psi);
    run(OP_DDAG);
    fetch(1'b0, t);
    load(t);
    run(OP_D);
    fetch(1'b0, t);
    d2 = 0.0;
    for (int n = 0; n < V; n++)
      for (int i = 0; i < 24; i++) d2 += (t[n][i] - eta[n][i]) * (t[n][i] - eta[n][i]);
    $display("|D chi - eta| / |eta| = %e", $sqrt(d2 / e2));
    checks++;
    if (d2 > 1e-18 * e2) begin failures++; $display("FAIL: solution does not satisfy D chi = eta"); end
    checks++;
    if (it < 2) failures++;                     // the loop must really iterate
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
