// fp_add_tb: self-checking test of the binary64 add unit.
//
// One operand pair enters per clock. Each result is compared bit for bit,
// exactly LAT clocks later, with the simulator's own IEEE double arithmetic
// on the same operands. Operands are random normal numbers whose exponents
// keep the exact result in the normal range, plus hand-picked corner cases
// (zeros, exact cancellation, rounding ties, carries, infinities). The fixed
// latency is checked as part of every comparison, because a result that came
// a clock early or late is compared with the wrong operands.
module fp_add_tb;
  import cg_pkg::*;
  localparam int LAT = FP_LAT;
  localparam int N   = 4000;

  logic  clk = 1'b0;
  fp64_t a, b, y;
  fp64_t exp_q [N];
  int    checks = 0, failures = 0;

  fp_add #(.LAT(LAT)) dut (.clk(clk), .a(a), .b(b), .y(y));

  always #5 clk = ~clk;

  function automatic fp64_t rnd_fp(int emin, int emax);
    logic [10:0] e;
    e = 11'(emin + ($urandom % (emax - emin + 1)));
    return {1'($urandom), e, 20'($urandom), 32'($urandom)};
  endfunction

  function automatic fp64_t ref_op(fp64_t av, fp64_t bv);
    return $realtobits($bitstoreal(av) + $bitstoreal(bv));
  endfunction

  fp64_t ca [16], cb [16];
  initial begin
    ca[0] = 64'h3FF0000000000000; cb[0] = 64'h3FF0000000000000;   // 1, 1
    ca[1] = 64'h3FF0000000000000; cb[1] = 64'hBFF0000000000000;   // 1, -1
    ca[2] = 64'h0000000000000000; cb[2] = 64'h4008000000000000;   // 0, 3
    ca[3] = 64'h400921FB54442D18; cb[3] = 64'h0000000000000000;   // pi, 0
    ca[4] = 64'h3FF0000000000001; cb[4] = 64'h3CA0000000000000;   // tie case
    ca[5] = 64'h3FFFFFFFFFFFFFFF; cb[5] = 64'h3FFFFFFFFFFFFFFF;   // carry out
    ca[6] = 64'h7FF0000000000000; cb[6] = 64'h3FF0000000000000;   // inf, 1
    ca[7] = 64'h4340000000000000; cb[7] = 64'h3FF0000000000000;   // 2^53, 1
    ca[8] = 64'h3FF8000000000000; cb[8] = 64'hBFF4000000000000;   // 1.5, -1.25
    ca[9] = 64'hC00C000000000000; cb[9] = 64'h3FE0000000000000;   // -3.5, 0.5
    ca[10] = 64'h3FF0000000000000; cb[10] = 64'hBCA0000000000000;
    ca[11] = 64'h41DFFFFFFFC00000; cb[11] = 64'hC1DFFFFFFF800000;
    ca[12] = 64'h3FF5555555555555; cb[12] = 64'h3FD5555555555555;
    ca[13] = 64'h8000000000000000; cb[13] = 64'h8000000000000000;   // -0, -0
    ca[14] = 64'h3FF0000000000003; cb[14] = 64'h3FEFFFFFFFFFFFFF;
    ca[15] = 64'hBFF0000000000000; cb[15] = 64'h3FEFFFFFFFFFFFFE;
  end

  int cyc = 0;
  initial begin
    a = '0; b = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      if (i < 16) begin a = ca[i]; b = cb[i]; end
      else if (i < 2000) begin a = rnd_fp(900, 1140); b = rnd_fp(900, 1140); end
      else begin                                   // nearby exponents: heavy cancellation
        a = rnd_fp(1020, 1024); b = rnd_fp(1020, 1024);
        if (i % 3 == 0) b = {~a[63], a[62:52], a[51:8], 8'($urandom)};
      end
      exp_q[i] = ref_op(a, b);
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc >= LAT + 1 && cyc <= N + LAT) begin
      checks++;
      if (y !== exp_q[cyc - LAT - 1]) begin
        failures++;
        if (failures < 10)
          $display("mismatch op %0d: got %h expected %h", cyc - LAT - 1, y, exp_q[cyc - LAT - 1]);
      end
    end
    if (cyc == N + LAT + 2) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin : watchdog
    repeat (N + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
