// gauge_bram: on-chip memory for the gauge field, eight separate banks of
// su3_matrix (1152 bits) words, one per stencil leg.
//
// Bank mu (0..3) holds U_mu(n) at address n, bank 4 + mu holds U_mu(n - mu)
// at address n. The backward banks duplicate the forward links, shifted by
// one site, so that all eight links of the stencil at site n are read from
// the same address in the same clock, one per bank. The host fills each bank
// separately (we selects the bank). Reads are synchronous, one clock.
module gauge_bram #(
  parameter int DEPTH = 6144,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic [cg_pkg::NNB-1:0] we,
  input  logic [AW-1:0]        waddr,
  input  cg_pkg::su3_matrix_t  wdata,
  input  logic [AW-1:0]        raddr,
  output cg_pkg::su3_matrix_t  rdata [cg_pkg::NNB]
);
  import cg_pkg::*;

  for (genvar k = 0; k < NNB; k++) begin : g_bank
    su3_matrix_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[k]) mem[waddr] <= wdata;
      rdata[k] <= mem[raddr];
    end
  end
endmodule
