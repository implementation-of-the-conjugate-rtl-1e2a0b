// dslash_accel_full_tb: the accelerator at its default size (6144-site
// memories) running the largest lattice it is sized for, 8x8x8x12: loads
// the whole gauge and source fields, applies D, Ddag and D Ddag, and checks
// every site of the result (and of the intermediate Ddag field) against the
// reference model, as well as the V + 142 clocks per pass.
module dslash_accel_full_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int VOL = 6144;
  localparam int AW  = 13;

  `include "accel_tb_body.svh"

  dslash_accel dut (
    .clk(clk), .rst_n(rst_n), .start(start), .op(op), .lx(lx), .ly(ly), .lz(lz), .lt(lt),
    .mass(mass), .busy(busy), .done(done), .cycles(cycles), .passes(passes),
    .hw_en(hw_en), .hw_sel(hw_sel), .hw_addr(hw_addr), .hw_spinor(hw_spinor), .hw_link(hw_link),
    .hr_sel(hr_sel), .hr_addr(hr_addr), .hr_data(hr_data));

  initial begin
    wait (rst_n);
    run_case(8, 8, 8, 12);
    finish_tb();
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
