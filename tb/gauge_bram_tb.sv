// gauge_bram_tb: the eight-bank link memory against an array model. Each
// write goes to one randomly chosen bank; every clock all eight banks are
// read at one random address and must return, one clock later, what the
// model held in each bank, so a write landing in the wrong bank is seen.
module gauge_bram_tb;
  import cg_pkg::*;
  import dirac_ref_pkg::*;

  localparam int DEPTH = 16, AW = 4, N = 600;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NNB-1:0] we = '0;
  logic [AW-1:0]  waddr = '0, raddr = '0;
  su3_matrix_t    wdata = '0;
  su3_matrix_t    rdata [NNB];

  gauge_bram #(.DEPTH(DEPTH), .AW(AW)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  su3_matrix_t model [NNB][DEPTH];
  su3_matrix_t expq [NNB];
  int cyc = 0, checks = 0, failures = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc > NNB * DEPTH + 1) begin
      for (int k = 0; k < NNB; k++) begin
        checks++;
        if (rdata[k] !== expq[k]) begin
          failures++;
          if (failures < 5) $display("bank %0d wrong at cycle %0d", k, cyc);
        end
      end
    end
    for (int k = 0; k < NNB; k++) expq[k] = model[k][raddr];
    for (int k = 0; k < NNB; k++) if (we[k]) model[k][waddr] = wdata;
    if (cyc < NNB * DEPTH) begin
      we <= NNB'(1) << (cyc / DEPTH); waddr <= AW'(cyc % DEPTH);
    end else begin
      we <= ($urandom % 2) ? (NNB'(1) << ($urandom % NNB)) : '0; waddr <= AW'($urandom);
    end
    wdata <= rnd_matrix();
    raddr <= AW'($urandom);
    if (cyc == N) begin
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
