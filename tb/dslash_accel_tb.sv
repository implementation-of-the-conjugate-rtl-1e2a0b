// dslash_accel_tb: end-to-end test of the accelerator on small lattices
// (memory depth reduced to 64 sites to keep the run short). Two lattice
// shapes, 2x3x2x4 and 4x4x1x2, so that extents of 1 and 2 (neighbours that
// wrap onto themselves or onto each other) and a non-power-of-two volume
// occur; each shape runs D, Ddag and D Ddag (see accel_tb_body.svh).
module dslash_accel_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int VOL = 64;
  localparam int AW  = 6;

  `include "accel_tb_body.svh"

  dslash_accel #(.VOL(VOL), .AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .op(op), .lx(lx), .ly(ly), .lz(lz), .lt(lt),
    .mass(mass), .busy(busy), .done(done), .cycles(cycles), .passes(passes),
    .hw_en(hw_en), .hw_sel(hw_sel), .hw_addr(hw_addr), .hw_spinor(hw_spinor), .hw_link(hw_link),
    .hr_sel(hr_sel), .hr_addr(hr_addr), .hr_data(hr_data));

  initial begin
    wait (rst_n);
    run_case(2, 3, 2, 4);
    run_case(4, 4, 1, 2);
    finish_tb();
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
