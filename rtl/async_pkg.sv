// Shared delay-insensitive code types for the early output hybrid input
// encoded adder.
//
// dual_rail_t : one bit W carried on two wires. {r1,r0} = 01 is W=0, 10 is W=1,
//               00 is the spacer (the return-to-zero state) and 11 is invalid.
// one_of_4_t  : two bits (X,Y) carried on four wires F3..F0, exactly one high
//               during the data phase: F0 = (0,0), F1 = (0,1), F2 = (1,0),
//               F3 = (1,1). All zero is the spacer, more than one high is invalid.
// The helper functions are for checking and for testbenches; the circuits
// themselves never decode a code.
package async_pkg;

  typedef struct packed {
    logic r1;  // rail asserted for logic 1
    logic r0;  // rail asserted for logic 0
  } dual_rail_t;

  typedef logic [3:0] one_of_4_t;

  // Valid data encoding of a single bit.
  function automatic dual_rail_t dr_encode(input logic b);
    return '{r1: b, r0: ~b};
  endfunction

  function automatic logic dr_is_valid(input dual_rail_t d);
    return d.r1 ^ d.r0;
  endfunction

  function automatic logic dr_is_spacer(input dual_rail_t d);
    return ~(d.r1 | d.r0);
  endfunction

endpackage
