// fp_mul: pipelined IEEE-754 binary64 multiplier, one result per clock.
//
// y = a * b appears LAT clocks after a and b are presented (LAT = 14, the
// latency the stencil pipeline is built around). The product is formed and
// rounded to nearest-even in the first register stage; the remaining LAT-1
// stages are a plain delay line, standing in for the deeper pipelining an
// FPGA floating-point core would use to reach its clock rate.
// Own choices (the text only gives precision and latency): subnormal inputs
// are read as zero and results below the normal range are flushed to a
// signed zero; infinities and NaN follow IEEE rules, NaN is the quiet
// 0x7FF8000000000000.
module fp_mul #(
  parameter int LAT = cg_pkg::FP_LAT
) (
  input  logic         clk,
  input  cg_pkg::fp64_t a,
  input  cg_pkg::fp64_t b,
  output cg_pkg::fp64_t y
);
  import cg_pkg::*;

  function automatic fp64_t fmul(fp64_t x, fp64_t z);
    logic         s;
    logic [10:0]  ex, ez;
    logic [105:0] prod;
    logic [52:0]  mant;
    logic [53:0]  mr;
    logic         g, st;
    int           e;
    s  = x[63] ^ z[63];
    ex = x[62:52];
    ez = z[62:52];
    if (ex == 11'h7FF || ez == 11'h7FF) begin
      if ((ex == 11'h7FF && x[51:0] != 0) || (ez == 11'h7FF && z[51:0] != 0) ||
          (ex == 11'h7FF && ez == 0) || (ez == 11'h7FF && ex == 0))
        return 64'h7FF8_0000_0000_0000;
      return {s, 11'h7FF, 52'd0};
    end
    if (ex == 0 || ez == 0) return {s, 63'd0};
    prod = {53'd0, 1'b1, x[51:0]} * {53'd0, 1'b1, z[51:0]};
    e = int'(ex) + int'(ez) - 1023;
    if (prod[105]) begin
      mant = prod[105:53];
      g  = prod[52];
      st = |prod[51:0];
      e  = e + 1;
    end else begin
      mant = prod[104:52];
      g  = prod[51];
      st = |prod[50:0];
    end
    mr = {1'b0, mant} + {53'd0, g & (st | mant[0])};
    if (mr[53]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 2047) return {s, 11'h7FF, 52'd0};
    if (e <= 0)    return {s, 63'd0};
    return {s, e[10:0], mr[51:0]};
  endfunction

  fp64_t stage0;
  always_ff @(posedge clk) stage0 <= fmul(a, b);

  pipe_delay #(.W(64), .DEPTH(LAT - 1)) u_dly (.clk(clk), .d(stage0), .q(y));
endmodule
