// pipe_delay: fixed-latency delay line of DEPTH register stages.
//
// Used wherever a value has to wait for a parallel branch of the stencil
// pipeline (link matrices waiting for the spin projection, partial sums
// waiting inside the SU(3) cascade, the mass term waiting for the
// neighbour sum). DEPTH = 0 gives a plain wire. No reset: the data path
// carries no control, validity travels in a separate delayed flag.
module pipe_delay #(
  parameter int W     = 64,
  parameter int DEPTH = 14
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] r [DEPTH];
    always_ff @(posedge clk) begin
      r[0] <= d;
      for (int i = 1; i < DEPTH; i++) r[i] <= r[i-1];
    end
    assign q = r[DEPTH-1];
  end
endmodule
