// dslash_kernel_tb: the stencil kernel against the reference model.
//
// Random neighbour spinors, centre spinor and links are offered in most
// clocks (with random gaps) and random g5, so D and Ddag stencils are mixed
// back to back at an initiation interval of one. Every result is compared
// with dirac_ref_pkg::ref_stencil (relative tolerance 1e-12, since the
// reference adds in a different order), its tag must come back unchanged,
// and it must appear exactly 141 clocks after its inputs (142 with the
// memory read in front of the kernel).
module dslash_kernel_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int TAGW = 12;
  localparam int NST  = 300;
  localparam int KLAT = 141;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            in_valid = 1'b0, g5 = 1'b0;
  logic [TAGW-1:0] in_tag = '0;
  fp64_t           mass;
  su3_spinor_t     psi_nb [NNB];
  su3_spinor_t     psi_c;
  su3_matrix_t     u [NNB];
  logic            out_valid;
  logic [TAGW-1:0] out_tag;
  su3_spinor_t     out;

  dslash_kernel #(.TAGW(TAGW)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_tag(in_tag), .g5(g5), .mass(mass),
    .psi_nb(psi_nb), .psi_c(psi_c), .u(u),
    .out_valid(out_valid), .out_tag(out_tag), .out(out));

  su3_spinor_t     exp_q [$];
  logic [TAGW-1:0] tag_q [$];
  int              stamp_q [$];
  int cyc = 0, sent = 0, got = 0, checks = 0, failures = 0, n_g5 = 0;

  initial begin
    mass = $realtobits(4.1);
    for (int k = 0; k < NNB; k++) begin psi_nb[k] = '0; u[k] = '0; end
    psi_c = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      // outputs of this clock
      if (out_valid) begin
        su3_spinor_t e;
        int nd;
        got++;
        checks += 3;
        if (exp_q.size() == 0) begin
          failures += 3;
          $display("unexpected result at cycle %0d", cyc);
        end else begin
          e = exp_q.pop_front();
          nd = sp_diff(out, e, 1e-12);
          if (nd != 0) begin
            failures++;
            if (failures < 6) $display("stencil %0d: %0d components differ", got, nd);
          end
          if (out_tag != tag_q.pop_front()) begin failures++; $display("tag mismatch"); end
          if (cyc - stamp_q.pop_front() != KLAT) begin failures++; $display("latency wrong"); end
        end
      end
      // inputs presented in this clock
      if (in_valid) begin
        exp_q.push_back(ref_stencil(psi_nb, psi_c, u, 4.1, g5));
        tag_q.push_back(in_tag);
        stamp_q.push_back(cyc);
        sent++;
        if (g5) n_g5++;
      end
      // next inputs
      if (sent + 32'(in_valid) < NST && ($urandom % 8) != 0) begin
        in_valid <= 1'b1;
        in_tag   <= TAGW'($urandom);
        g5       <= 1'($urandom);
        for (int k = 0; k < NNB; k++) begin psi_nb[k] <= rnd_spinor(); u[k] <= rnd_matrix(); end
        psi_c    <= rnd_spinor();
      end else begin
        in_valid <= 1'b0;
        psi_c    <= rnd_spinor();        // junk that must not show up as a result
      end
      if (got == NST) begin
        checks++;
        if (n_g5 == 0 || n_g5 == NST) failures++;   // both modes must have been used
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin : watchdog
    repeat (NST * 2 + 500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
