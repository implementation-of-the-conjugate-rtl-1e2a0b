// spinor_bram: on-chip memory for one spinor field (one su3_spinor, 1536
// bits, per lattice site) with NRD independent read ports.
//
// A block RAM delivers one word per port per clock, but a stencil needs the
// spinors of all eight neighbours (and of the site itself) in one clock. As
// in the partitioned-array approach the design relies on, the field is
// therefore stored NRD times: every write goes to all copies, and copy i
// serves read port i. Reads are synchronous with one clock of latency; that
// clock is stage 1 of the stencil pipeline. One write per clock. A read and
// a write of the same address in one clock return the old word.
module spinor_bram #(
  parameter int DEPTH = 6144,
  parameter int NRD   = 9,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  cg_pkg::su3_spinor_t wdata,
  input  logic [AW-1:0]       raddr [NRD],
  output cg_pkg::su3_spinor_t rdata [NRD]
);
  import cg_pkg::*;

  for (genvar i = 0; i < NRD; i++) begin : g_copy
    su3_spinor_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      rdata[i] <= mem[raddr[i]];
    end
  end
endmodule
