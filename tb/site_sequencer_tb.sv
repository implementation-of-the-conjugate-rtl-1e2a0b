// site_sequencer_tb: lattice walk and pass control. Runs OP_D, OP_DDAG and
// OP_DDDAG on lattices of several shapes (including extents of 1 and 2,
// where neighbours coincide). Every issued site must come in order
// 0..V-1, each neighbour address must equal the one computed here from
// coordinates with modular arithmetic, source/destination/g5 must match
// the pass, consecutive passes must be separated by at least DRAIN idle
// clocks, and done must pulse once, after the last pass has drained.
module site_sequencer_tb;
  import cg_pkg::*;

  localparam int AW = 8, CW = 4, DRAIN = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 1'b0;
  op_e           op = OP_D;
  logic [CW-1:0] lx = 1, ly = 1, lz = 1, lt = 1;
  logic          busy, done, issue, src_mid, dst_mid, g5;
  logic [AW-1:0] site;
  logic [AW-1:0] nb [NNB];
  logic [31:0]   pass_count;

  site_sequencer #(.AW(AW), .CW(CW), .DRAIN(DRAIN)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .op(op), .lx(lx), .ly(ly), .lz(lz), .lt(lt),
    .busy(busy), .done(done), .issue(issue), .site(site), .nb(nb),
    .src_mid(src_mid), .dst_mid(dst_mid), .g5(g5), .pass_count(pass_count));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic int addr_of(int x, int y, int z, int t, int L [4]);
    return x + L[0] * (y + L[1] * (z + L[2] * t));
  endfunction

  task automatic run(int ax, int ay, int az, int at, op_e o);
    int L [4];
    int V, npass, expect_site, pass, idle, ndone;
    int c [4], cn [4];
    L = '{ax, ay, az, at};
    V = ax * ay * az * at;
    npass = (o == OP_DDDAG) ? 2 : 1;
    @(negedge clk);
    lx = CW'(ax); ly = CW'(ay); lz = CW'(az); lt = CW'(at); op = o; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    expect_site = 0; pass = 0; idle = 0; ndone = 0;
    while (ndone == 0) begin
      @(posedge clk);
      if (done) begin
        ndone++;
        check(pass == npass, "done before all passes");
      end
      if (issue) begin
        if (expect_site == 0 && pass > 0) check(idle >= DRAIN, "drain too short");
        idle = 0;
        check(int'(site) == expect_site, "site order");
        c[0] = expect_site % ax; c[1] = (expect_site / ax) % ay;
        c[2] = (expect_site / (ax * ay)) % az; c[3] = expect_site / (ax * ay * az);
        for (int k = 0; k < NNB; k++) begin
          cn = c;
          if (k < 4) cn[k] = (c[k] + 1) % L[k];
          else       cn[k - 4] = (c[k - 4] + L[k - 4] - 1) % L[k - 4];
          check(int'(nb[k]) == addr_of(cn[0], cn[1], cn[2], cn[3], L), "neighbour address");
        end
        check(src_mid == (o == OP_DDDAG && pass == 1), "source select");
        check(dst_mid == (o == OP_DDDAG && pass == 0), "destination select");
        check(g5 == (o == OP_DDAG || (o == OP_DDDAG && pass == 0)), "g5");
        check(busy, "busy while issuing");
        expect_site++;
        if (expect_site == V) begin expect_site = 0; pass++; end
      end else idle++;
    end
    @(posedge clk);
    check(!busy && !done, "idle after done");
    check(pass == npass && expect_site == 0, "all sites issued");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(3, 2, 4, 2, OP_D);
    run(2, 2, 2, 2, OP_DDAG);
    run(4, 1, 3, 2, OP_DDDAG);
    run(1, 5, 1, 3, OP_DDDAG);
    check(pass_count == 32'd6, "pass counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
