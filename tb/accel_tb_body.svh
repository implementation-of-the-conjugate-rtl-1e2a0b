// Shared body of the accelerator testbenches. The including module defines
// VOL (memory depth) and the DUT instance `dut` with the signals below, and
// calls run_case() for each lattice. For every case the host loads random
// links (forward banks U_mu(n), backward banks U_mu(n - mu)) and a random
// source field through the write port, then runs OP_D, OP_DDAG and
// OP_DDDAG, reads the fields back through the read port and compares every
// site with the reference model (dirac_ref_pkg). It also checks the run
// time, cycles = passes * (V + 142) + small fixed overhead, which is the
// V * interval + latency law with interval 1 and latency 142.

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 1'b0;
  op_e           op = OP_D;
  logic [7:0]    lx = 1, ly = 1, lz = 1, lt = 1;
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

  localparam real MASS = 4.1;              // m_q = 0.1

  int checks = 0, failures = 0;
  int n_op [3];                            // runs of each operation (mode switch)
  int n_wrap = 0, n_two_pass = 0, n_mid_read = 0, n_shapes = 0;

  su3_spinor_t src [VOL], mid_ref [VOL], res_ref [VOL], rd [VOL];
  su3_matrix_t ufw [4][VOL];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int idx(int c [4], int L [4]);
    return c[0] + L[0] * (c[1] + L[1] * (c[2] + L[2] * c[3]));
  endfunction

  function automatic void coords(int n, int L [4], output int c [4]);
    c[0] = n % L[0]; c[1] = (n / L[0]) % L[1];
    c[2] = (n / (L[0] * L[1])) % L[2]; c[3] = n / (L[0] * L[1] * L[2]);
  endfunction

  function automatic int shift(int n, int mu, int d, int L [4]);
    int c [4];
    coords(n, L, c);
    c[mu] = (c[mu] + d + L[mu]) % L[mu];
    return idx(c, L);
  endfunction

  // reference operator on a whole field
  task automatic ref_apply(int L [4], int V, bit g5, ref su3_spinor_t in [VOL],
                           ref su3_spinor_t out [VOL]);
    su3_spinor_t nbs [8];
    su3_matrix_t us [8];
    for (int n = 0; n < V; n++) begin
      for (int mu = 0; mu < 4; mu++) begin
        nbs[mu]     = in[shift(n, mu, 1, L)];
        nbs[4 + mu] = in[shift(n, mu, -1, L)];
        us[mu]      = ufw[mu][n];
        us[4 + mu]  = ufw[mu][shift(n, mu, -1, L)];
      end
      out[n] = ref_stencil(nbs, in[n], us, MASS, g5);
    end
  endtask

  task automatic host_write(int sel, int addr, su3_spinor_t s, su3_matrix_t m);
    @(negedge clk);
    hw_en = 1'b1; hw_sel = 4'(sel); hw_addr = AW'(addr); hw_spinor = s; hw_link = m;
    @(negedge clk);
    hw_en = 1'b0;
  endtask

  // read V sites back; hr_data holds the word addressed in the clock before
  task automatic host_read(bit sel, int V);
    for (int n = 0; n < V; n++) begin
      @(negedge clk);
      hr_sel = sel; hr_addr = AW'(n);
      @(posedge clk);
      #1;
      rd[n] = hr_data;
    end
  endtask

  task automatic run_op(op_e o, int V, output int cyc);
    @(negedge clk);
    op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(busy, "busy after start");
    while (!done) @(posedge clk);
    @(negedge clk);
    cyc = int'(cycles);
    n_op[int'(o)]++;
  endtask

  task automatic compare(int V, ref su3_spinor_t exp [VOL], input string what, input real tol);
    int bad = 0;
    for (int n = 0; n < V; n++) begin
      checks++;
      if (sp_diff(rd[n], exp[n], tol) != 0) begin
        failures++;
        bad++;
        if (bad < 4) $display("FAIL: %s at site %0d", what, n);
      end
    end
  endtask

  task automatic run_case(int ax, int ay, int az, int at);
    int L [4];
    int V, cyc, p0;
    L = '{ax, ay, az, at};
    V = ax * ay * az * at;
    n_shapes++;
    for (int n = 0; n < V; n++) begin                         // sites whose stencil wraps
      int c [4];
      coords(n, L, c);
      for (int mu = 0; mu < 4; mu++) if (c[mu] == 0 || c[mu] == L[mu] - 1) begin n_wrap++; break; end
    end
    // load the fields
    for (int n = 0; n < V; n++) begin
      src[n] = rnd_spinor();
      host_write(0, n, src[n], '0);
    end
    for (int mu = 0; mu < 4; mu++)
      for (int n = 0; n < V; n++) begin
        ufw[mu][n] = rnd_matrix();
        host_write(1 + mu, n, '0, ufw[mu][n]);
      end
    for (int mu = 0; mu < 4; mu++)
      for (int n = 0; n < V; n++)
        host_write(5 + mu, n, '0, ufw[mu][shift(n, mu, -1, L)]);
    @(negedge clk);
    lx = 8'(ax); ly = 8'(ay); lz = 8'(az); lt = 8'(at);
    // D
    p0 = int'(passes);
    run_op(OP_D, V, cyc);
    check(int'(passes) - p0 == 1, "one pass for D");
    check(cyc >= V + 142 && cyc <= V + 142 + 3, $sformatf("D run took %0d clocks, V=%0d", cyc, V));
    ref_apply(L, V, 1'b0, src, res_ref);
    host_read(1'b0, V);
    compare(V, res_ref, "D psi", 1e-12);
    // Ddag
    run_op(OP_DDAG, V, cyc);
    check(cyc >= V + 142 && cyc <= V + 142 + 3, "Ddag run time");
    ref_apply(L, V, 1'b1, src, res_ref);
    host_read(1'b0, V);
    compare(V, res_ref, "Ddag psi", 1e-12);
    // D Ddag
    p0 = int'(passes);
    run_op(OP_DDDAG, V, cyc);
    check(int'(passes) - p0 == 2, "two passes for D Ddag");
    if (int'(passes) - p0 == 2) n_two_pass++;
    check(cyc >= 2 * (V + 142) && cyc <= 2 * (V + 142) + 3,
          $sformatf("D Ddag run took %0d clocks, V=%0d", cyc, V));
    ref_apply(L, V, 1'b1, src, mid_ref);
    host_read(1'b1, V);
    compare(V, mid_ref, "intermediate Ddag psi", 1e-12);
    n_mid_read++;
    ref_apply(L, V, 1'b0, mid_ref, res_ref);
    host_read(1'b0, V);
    compare(V, res_ref, "D Ddag psi", 1e-11);
    $display("lattice %0dx%0dx%0dx%0d: D Ddag in %0d clocks", ax, ay, az, at, cyc);
  endtask

  task automatic finish_tb();
    // every mechanism must have been exercised
    for (int i = 0; i < 3; i++) check(n_op[i] > 0, "operation never run");
    check(n_two_pass > 0, "two-pass drain never run");
    check(n_mid_read > 0, "intermediate field never read");
    check(n_wrap > 0, "periodic wrap never used");
    $display("runs: D=%0d Ddag=%0d DDdag=%0d, stencils wrapping the boundary=%0d, lattices=%0d",
             n_op[0], n_op[1], n_op[2], n_wrap, n_shapes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    mass = $realtobits(MASS);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  end
