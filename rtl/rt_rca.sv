// N-bit relative-timed asynchronous ripple carry adder.
//
// Each bit position is a dual-rail to 1-of-4 encoder followed by an early
// output full adder; the dual-rail carry output of position i is the carry
// input of position i+1. Operands and carry in are dual-rail and follow the
// 4-phase return-to-zero protocol; sum and carry out are dual-rail.
//
// Forward (data) latency depends on the data: a stage in carry-generate or
// carry-kill mode produces its carry out from its operands alone, so the
// carry only ripples through runs of propagate stages. Reverse (return to
// zero) latency is that of a single stage: every stage resets its outputs as
// soon as its own operands reach the spacer, without waiting for its carry
// input.
//
// Relative-timing assumption (not checked by this RTL, which has no delays):
// because a stage can reset before its carry input does, the internal carry
// cout[i] must return to zero before sum[i+1] does, so that no gate output
// transition is left unacknowledged. The assumption involves only two
// adjacent stages and so does not depend on N. In the paper's 32/28 nm cells
// the direct sum reset path is 0.238 ns and the path through the incoming
// carry 0.301 ns, a 0.063 ns constraint to be met in layout.
//
// Parameter N (default 32, the width evaluated in the paper). Ports: a, b,
// cin, sum, cout as described; bit 0 is the least significant.
module rt_rca
  import async_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  dual_rail_t         a    [N],
  input  dual_rail_t         b    [N],
  input  dual_rail_t         cin,
  output dual_rail_t         sum  [N],
  output dual_rail_t         cout
);

  dual_rail_t carry [N+1];
  one_of_4_t  e     [N];

  assign carry[0] = cin;

  for (genvar i = 0; i < N; i++) begin : g_bit
    dr_to_1of4_encoder u_enc (
      .a (a[i]),
      .b (b[i]),
      .e (e[i])
    );
    eo_full_adder u_fa (
      .e    (e[i]),
      .cin  (carry[i]),
      .sum  (sum[i]),
      .cout (carry[i+1])
    );
  end

  assign cout = carry[N];

endmodule
