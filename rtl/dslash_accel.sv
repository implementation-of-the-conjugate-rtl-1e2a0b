// dslash_accel: the programmable-logic accelerator that applies the
// Wilson-Dirac operator D, its adjoint Ddag, or D Ddag to a spinor field
// held in on-chip memory, one lattice site per clock.
//
// A host (the processor running the conjugate-gradient loop) loads the
// gauge field and a source spinor field through the write port, sets the
// lattice extents and the mass coefficient mass = m_q + 4, and pulses start
// with an operation:
//   OP_D      result = D src
//   OP_DDAG   result = Ddag src = g5 D g5 src
//   OP_DDDAG  mid = Ddag src, then result = D mid   (two passes)
// and reads the result field (and, for OP_DDDAG, the intermediate Ddag src,
// whose norm the CG step needs) back through the read port when done pulses.
//
// Structure: site_sequencer issues the site and its eight neighbour
// addresses every clock. The source field (spinor_bram, 9 read copies), the
// intermediate field (9 copies) and the gauge field (gauge_bram, 8 banks)
// answer one clock later (stage 1); dslash_kernel (stages 2 to 4, 141
// clocks) returns the result with its site address, and it is written into
// the intermediate or the result field. Address to written result: 142
// clocks. A pass over V sites takes V + 142 clocks; cycles counts the
// clocks of the last run from start to done, passes the lattice passes
// completed since reset.
//
// Host port (stands in for the data movers between external DDR and the
// block RAMs): hw_sel 0 writes hw_spinor to the source field, hw_sel 1..8
// writes hw_link to gauge bank hw_sel-1 (banks as in gauge_bram). Writes
// are allowed only while not busy. hr_sel 0 reads the result field, 1 the
// intermediate field; hr_data follows hr_addr by one clock; reads of the
// intermediate field are valid only while not busy.
// Memory depth VOL = 8*8*8*12 sites, the largest lattice compiled for the
// large device; smaller lattices run unchanged by setting the extents.
module dslash_accel #(
  parameter int VOL = 6144,
  parameter int CW  = 8,
  parameter int AW  = $clog2(VOL)
) (
  input  logic                clk,
  input  logic                rst_n,
  // control
  input  logic                start,
  input  cg_pkg::op_e         op,
  input  logic [CW-1:0]       lx, ly, lz, lt,
  input  cg_pkg::fp64_t       mass,
  output logic                busy,
  output logic                done,
  output logic [31:0]         cycles,
  output logic [31:0]         passes,
  // host write port
  input  logic                hw_en,
  input  logic [3:0]          hw_sel,
  input  logic [AW-1:0]       hw_addr,
  input  cg_pkg::su3_spinor_t hw_spinor,
  input  cg_pkg::su3_matrix_t hw_link,
  // host read port
  input  logic                hr_sel,
  input  logic [AW-1:0]       hr_addr,
  output cg_pkg::su3_spinor_t hr_data
);
  import cg_pkg::*;

  localparam int NRD  = NNB + 1;          // eight neighbours and the site itself
  localparam int TAGW = AW + 1;           // {write to intermediate, site}

  // ---- sequencer -----------------------------------------------------------
  logic          issue, src_mid, dst_mid, g5;
  logic [AW-1:0] site;
  logic [AW-1:0] nb [NNB];

  site_sequencer #(.AW(AW), .CW(CW), .DRAIN(142)) u_seq (
    .clk(clk), .rst_n(rst_n), .start(start), .op(op),
    .lx(lx), .ly(ly), .lz(lz), .lt(lt),
    .busy(busy), .done(done), .issue(issue), .site(site), .nb(nb),
    .src_mid(src_mid), .dst_mid(dst_mid), .g5(g5), .pass_count(passes));

  logic [AW-1:0] raddr [NRD];
  for (genvar k = 0; k < NNB; k++) begin : g_ra
    assign raddr[k] = nb[k];
  end
  assign raddr[NNB] = site;

  // ---- stage 1: field memories ---------------------------------------------
  logic                kout_valid;
  logic [TAGW-1:0]     kout_tag;
  su3_spinor_t         kout;

  su3_spinor_t src_rd [NRD], mid_rd [NRD], res_rd [1];
  logic [AW-1:0] mid_raddr [NRD], res_raddr [1];
  su3_matrix_t   links [NNB];
  logic [NNB-1:0] gwe;

  spinor_bram #(.DEPTH(VOL), .NRD(NRD), .AW(AW)) u_src (
    .clk(clk), .we(hw_en && hw_sel == 4'd0 && !busy), .waddr(hw_addr), .wdata(hw_spinor),
    .raddr(raddr), .rdata(src_rd));

  always_comb begin
    mid_raddr = raddr;
    if (!busy) mid_raddr[0] = hr_addr;      // host reads share copy 0 while idle
  end
  spinor_bram #(.DEPTH(VOL), .NRD(NRD), .AW(AW)) u_mid (
    .clk(clk), .we(kout_valid && kout_tag[AW]), .waddr(kout_tag[AW-1:0]), .wdata(kout),
    .raddr(mid_raddr), .rdata(mid_rd));

  assign res_raddr[0] = hr_addr;
  spinor_bram #(.DEPTH(VOL), .NRD(1), .AW(AW)) u_res (
    .clk(clk), .we(kout_valid && !kout_tag[AW]), .waddr(kout_tag[AW-1:0]), .wdata(kout),
    .raddr(res_raddr), .rdata(res_rd));

  for (genvar k = 0; k < NNB; k++) begin : g_gwe
    assign gwe[k] = hw_en && !busy && hw_sel == 4'(k + 1);
  end
  gauge_bram #(.DEPTH(VOL), .AW(AW)) u_gauge (
    .clk(clk), .we(gwe), .waddr(hw_addr), .wdata(hw_link), .raddr(site), .rdata(links));

  logic hr_sel_q;
  always_ff @(posedge clk) hr_sel_q <= hr_sel;
  assign hr_data = hr_sel_q ? mid_rd[0] : res_rd[0];

  // control that follows the data through the memory read
  logic          k_valid, k_src_mid, k_g5;
  logic [TAGW-1:0] k_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_valid <= 1'b0; k_src_mid <= 1'b0; k_g5 <= 1'b0; k_tag <= '0;
    end else begin
      k_valid   <= issue;
      k_src_mid <= src_mid;
      k_g5      <= g5;
      k_tag     <= {dst_mid, site};
    end
  end

  su3_spinor_t psi_nb [NNB];
  su3_spinor_t psi_c;
  for (genvar k = 0; k < NNB; k++) begin : g_sel
    assign psi_nb[k] = k_src_mid ? mid_rd[k] : src_rd[k];
  end
  assign psi_c = k_src_mid ? mid_rd[NNB] : src_rd[NNB];

  // ---- stages 2-4 ----------------------------------------------------------
  dslash_kernel #(.TAGW(TAGW)) u_kernel (
    .clk(clk), .rst_n(rst_n), .in_valid(k_valid), .in_tag(k_tag), .g5(k_g5),
    .mass(mass), .psi_nb(psi_nb), .psi_c(psi_c), .u(links),
    .out_valid(kout_valid), .out_tag(kout_tag), .out(kout));

  // ---- run-time counter ----------------------------------------------------
  logic counting;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycles   <= '0;
      counting <= 1'b0;
    end else if (start && !busy) begin
      cycles   <= '0;
      counting <= 1'b1;
    end else if (counting) begin
      cycles <= cycles + 32'd1;
      if (done) counting <= 1'b0;
    end
  end

  // the host must not write while a run is in progress
  assert property (@(posedge clk) hw_en |-> !busy)
    else $error("host write while busy");
endmodule
