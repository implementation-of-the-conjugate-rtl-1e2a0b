// spinor_bram_tb: the replicated spinor memory against an array model.
// Random writes and random, independent reads on every port, every clock;
// each read must return, one clock later, the word the model held before
// that clock's write (read-before-write on the same address included).
module spinor_bram_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int DEPTH = 16, NRD = 3, AW = 4, N = 600;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          we = 1'b0;
  logic [AW-1:0] waddr = '0;
  su3_spinor_t   wdata = '0;
  logic [AW-1:0] raddr [NRD];
  su3_spinor_t   rdata [NRD];

  spinor_bram #(.DEPTH(DEPTH), .NRD(NRD), .AW(AW)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  su3_spinor_t model [DEPTH];
  su3_spinor_t expq [NRD];
  int cyc = 0, checks = 0, failures = 0, n_rw = 0;

  initial for (int i = 0; i < NRD; i++) raddr[i] = '0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc > DEPTH + 1) begin            // every word written once by then
      for (int i = 0; i < NRD; i++) begin
        checks++;
        if (rdata[i] !== expq[i]) begin
          failures++;
          if (failures < 5) $display("port %0d wrong at cycle %0d", i, cyc);
        end
      end
    end
    for (int i = 0; i < NRD; i++) begin
      expq[i] = model[raddr[i]];
      if (we && raddr[i] == waddr) n_rw++;
    end
    if (we) model[waddr] = wdata;
    // next stimulus: first fill every address, then random traffic
    if (cyc < DEPTH) begin
      we <= 1'b1; waddr <= AW'(cyc);
    end else begin
      we <= 1'($urandom); waddr <= AW'($urandom);
    end
    wdata <= rnd_spinor();
    for (int i = 0; i < NRD; i++) raddr[i] <= AW'($urandom);
    if (cyc == N) begin
      checks++;
      if (n_rw == 0) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin : watchdog
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
