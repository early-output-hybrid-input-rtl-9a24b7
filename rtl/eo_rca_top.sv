// Top level: N-bit relative-timed ripple carry adder with its 4-phase
// handshake completion detection.
//
// The adder itself is rt_rca. Around it sit two completion detectors of the
// kind the paper describes (an OR per dual-rail signal and a C-element tree):
//   in_done  watches the 2N+1 dual-rail inputs (a, b, cin). This is the
//            detector of the stage that precedes the adder; it is what
//            acknowledges the carry input when it returns to zero later than
//            the operands, so that no wire transition goes unacknowledged.
//   out_done watches the N+1 dual-rail outputs (sum, cout) and serves as the
//            acknowledge the adder's receiver would return.
// A sender obeys the 4-phase return-to-zero protocol: drive valid a, b, cin;
// wait for out_done = 1; drive the spacer; wait for out_done = 0 (and in_done
// = 0 before the next data). Placing both detectors here, rather than in
// neighbouring pipeline stages, is this design's choice to make the adder
// usable on its own.
//
// Parameter N, default 32. No clock, no reset: the circuit starts in the
// spacer state once all inputs are held at zero.
module eo_rca_top
  import async_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  dual_rail_t a    [N],
  input  dual_rail_t b    [N],
  input  dual_rail_t cin,
  output dual_rail_t sum  [N],
  output dual_rail_t cout,
  output logic       in_done,
  output logic       out_done
);

  dual_rail_t in_bus  [2*N+1];
  dual_rail_t out_bus [N+1];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      in_bus[i]     = a[i];
      in_bus[N+i]   = b[i];
      out_bus[i]    = sum[i];
    end
    in_bus[2*N] = cin;
    out_bus[N]  = cout;
  end

  rt_rca #(.N(N)) u_rca (
    .a    (a),
    .b    (b),
    .cin  (cin),
    .sum  (sum),
    .cout (cout)
  );

  completion_detector #(.W(2*N+1)) u_cd_in  (.d(in_bus),  .done(in_done));
  completion_detector #(.W(N+1))   u_cd_out (.d(out_bus), .done(out_done));

endmodule
