// site_sequencer: walks the lattice and issues one stencil per clock.
//
// The lattice extents lx, ly, lz, lt are run-time inputs (each at least 1,
// with lx*ly*lz*lt no larger than the memories). Sites are numbered
// n = x + lx*(y + ly*(z + lz*t)). For every site the sequencer issues the
// site address and the eight neighbour addresses n+x, n+y, n+z, n+t, n-x,
// n-y, n-z, n-t with periodic wrap-around, computed from coordinate
// counters and precomputed strides (no multiplier on the per-site path).
//
// A run is one or two passes over the lattice:
//   OP_D      one pass,  source field -> result field, g5 = 0
//   OP_DDAG   one pass,  source field -> result field, g5 = 1
//   OP_DDDAG  pass 0: source -> intermediate with g5 = 1 (Ddag),
//             pass 1: intermediate -> result with g5 = 0 (D)
// After the last site of a pass it waits DRAIN clocks so that the pipeline
// has written every result before the next pass reads them, then starts
// the next pass or pulses done. start is taken only when idle; op and the
// extents are sampled with it. Timing: the first address is issued the
// clock after start; a pass takes V clocks of issue plus DRAIN.
// Everything here is this design's own: the text says only that one site
// enters the kernel per clock and that D Ddag is the operator applied.
module site_sequencer #(
  parameter int AW    = 13,
  parameter int CW    = 8,
  parameter int DRAIN = 142
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  cg_pkg::op_e   op,
  input  logic [CW-1:0] lx, ly, lz, lt,
  output logic          busy,
  output logic          done,
  output logic          issue,            // addresses below are valid
  output logic [AW-1:0] site,
  output logic [AW-1:0] nb [cg_pkg::NNB],
  output logic          src_mid,          // 0: read source field, 1: intermediate
  output logic          dst_mid,          // 1: write intermediate, 0: write result
  output logic          g5,
  output logic [31:0]   pass_count        // passes completed since reset
);
  import cg_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [CW-1:0] len   [NDIR];
  logic [CW-1:0] coord [NDIR];
  logic [AW-1:0] stride[NDIR];
  logic [AW-1:0] wrap  [NDIR];           // (L_mu - 1) * stride_mu
  logic [AW-1:0] n;
  logic          two_pass, pass;
  op_e           op_q;
  logic [$clog2(DRAIN+1)-1:0] dcnt;

  logic last_site;
  always_comb begin
    last_site = 1'b1;
    for (int m = 0; m < NDIR; m++) if (coord[m] != len[m] - 1) last_site = 1'b0;
  end

  // neighbour addresses of the current site
  always_comb begin
    for (int m = 0; m < NDIR; m++) begin
      nb[m]        = (coord[m] == len[m] - 1) ? n - wrap[m] : n + stride[m];
      nb[NDIR + m] = (coord[m] == 0)          ? n + wrap[m] : n - stride[m];
    end
  end

  assign site  = n;
  assign issue = (state == S_RUN);
  assign busy  = (state != S_IDLE);
  assign src_mid = two_pass && pass;
  assign dst_mid = two_pass && !pass;
  assign g5      = (op_q == OP_DDAG) || (two_pass && !pass);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      n     <= '0;
      pass  <= 1'b0;
      two_pass <= 1'b0;
      op_q  <= OP_D;
      dcnt  <= '0;
      pass_count <= '0;
      for (int m = 0; m < NDIR; m++) begin
        len[m] <= CW'(1); coord[m] <= '0; stride[m] <= '0; wrap[m] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          len[0] <= lx; len[1] <= ly; len[2] <= lz; len[3] <= lt;
          stride[0] <= AW'(1);
          stride[1] <= AW'(lx);
          stride[2] <= AW'(int'(lx) * int'(ly));
          stride[3] <= AW'(int'(lx) * int'(ly) * int'(lz));
          wrap[0]   <= AW'(int'(lx) - 1);
          wrap[1]   <= AW'((int'(ly) - 1) * int'(lx));
          wrap[2]   <= AW'((int'(lz) - 1) * int'(lx) * int'(ly));
          wrap[3]   <= AW'((int'(lt) - 1) * int'(lx) * int'(ly) * int'(lz));
          for (int m = 0; m < NDIR; m++) coord[m] <= '0;
          n        <= '0;
          op_q     <= op;
          two_pass <= (op == OP_DDDAG);
          pass     <= 1'b0;
          state    <= S_RUN;
        end
        S_RUN: begin
          if (last_site) begin
            state <= S_DRAIN;
            dcnt  <= '0;
          end
          // advance the coordinate counters, x fastest
          n <= n + AW'(1);
          begin
            logic carry;
            carry = 1'b1;
            for (int m = 0; m < NDIR; m++) begin
              if (carry) begin
                if (coord[m] == len[m] - 1) coord[m] <= '0;
                else begin
                  coord[m] <= coord[m] + CW'(1);
                  carry = 1'b0;
                end
              end
            end
          end
        end
        S_DRAIN: begin
          if (dcnt == ($clog2(DRAIN+1))'(DRAIN - 1)) begin
            pass_count <= pass_count + 32'd1;
            if (two_pass && !pass) begin
              pass  <= 1'b1;
              n     <= '0;
              state <= S_RUN;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
          dcnt <= dcnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
