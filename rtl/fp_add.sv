// fp_add: pipelined IEEE-754 binary64 adder, one result per clock.
//
// y = a + b appears LAT clocks after the operands (LAT = 14). A subtraction
// is an addition with the sign bit of one operand flipped, done in wiring by
// the caller. The operation (swap by magnitude, alignment with guard, round
// and sticky bits, add or subtract, leading-zero normalisation, round to
// nearest-even) happens in the first register stage; the other LAT-1 stages
// only delay the result.
// Own choices: subnormal inputs read as zero, results below the normal range
// flush to zero, exact cancellation gives +0, IEEE rules for inf and NaN.
module fp_add #(
  parameter int LAT = cg_pkg::FP_LAT
) (
  input  logic          clk,
  input  cg_pkg::fp64_t a,
  input  cg_pkg::fp64_t b,
  output cg_pkg::fp64_t y
);
  import cg_pkg::*;

  function automatic fp64_t fadd(fp64_t x, fp64_t z);
    logic        sx, sz;
    logic [10:0] ex, ez;
    logic [51:0] fx, fz;
    logic [55:0] ax, bz, bs;
    logic [56:0] sum;
    logic        sticky, found;
    logic [53:0] mr;
    int          d, lzc, e;
    {sx, ex, fx} = x;
    {sz, ez, fz} = z;
    if (ex == 11'h7FF || ez == 11'h7FF) begin
      if ((ex == 11'h7FF && fx != 0) || (ez == 11'h7FF && fz != 0) ||
          (ex == 11'h7FF && ez == 11'h7FF && sx != sz))
        return 64'h7FF8_0000_0000_0000;
      return (ex == 11'h7FF) ? {sx, 11'h7FF, 52'd0} : {sz, 11'h7FF, 52'd0};
    end
    if (ex == 0 && ez == 0) return {sx & sz, 63'd0};
    if (ex == 0) return z;
    if (ez == 0) return x;
    // order so that |x| >= |z|
    if ({ex, fx} < {ez, fz}) begin
      {sx, ex, fx} = z;
      {sz, ez, fz} = x;
    end
    ax = {1'b1, fx, 3'b000};
    bz = {1'b1, fz, 3'b000};
    d  = int'(ex) - int'(ez);
    if (d > 55) begin
      bs = 56'd1;                                  // only the sticky bit survives
    end else begin
      bs     = bz >> d;
      sticky = (bz & ((56'd1 << d) - 56'd1)) != 0;
      bs[0]  = bs[0] | sticky;
    end
    if (sx == sz) sum = {1'b0, ax} + {1'b0, bs};
    else          sum = {1'b0, ax} - {1'b0, bs};
    if (sum == 0) return 64'd0;
    e = int'(ex);
    if (sum[56]) begin
      sum = {1'b0, sum[56:2], sum[1] | sum[0]};
      e   = e + 1;
    end else begin
      lzc    = 0;
      found = 1'b0;
      for (int i = 55; i >= 0; i--)
        if (!found && sum[i]) begin
          lzc    = 55 - i;
          found = 1'b1;
        end
      sum = sum << lzc;
      e   = e - lzc;
    end
    if (e <= 0) return {sx, 63'd0};
    mr = {1'b0, sum[55:3]} + {53'd0, sum[2] & (sum[1] | sum[0] | sum[3])};
    if (mr[53]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 2047) return {sx, 11'h7FF, 52'd0};
    return {sx, e[10:0], mr[51:0]};
  endfunction

  fp64_t stage0;
  always_ff @(posedge clk) stage0 <= fadd(a, b);

  pipe_delay #(.W(64), .DEPTH(LAT - 1)) u_dly (.clk(clk), .d(stage0), .q(y));
endmodule
