// Dual-rail to 1-of-4 encoder of the hybrid input encoded full adder.
//
// The dual-rail augend A = (a.r1, a.r0) and addend B = (b.r1, b.r0) are merged
// into one 1-of-4 code by four 2-input C-elements, one per rail pair:
//   e[0] = C(A0, B0)   A=0, B=0  (carry kill)
//   e[1] = C(A0, B1)   A=0, B=1  (carry propagate)
//   e[2] = C(A1, B0)   A=1, B=0  (carry propagate)
//   e[3] = C(A1, B1)   A=1, B=1  (carry generate)
// Because a C-element only switches when both inputs agree, an e line rises
// only after both of its rails have risen and falls only after both have
// returned to zero, so the encoder waits for both operands in each phase.
// The rail pairing follows the four C-elements of the encoder in the paper's
// figure; the ordering of e is the 1-of-4 code definition.
//
// Interface: a, b dual-rail inputs; e 1-of-4 output. Purely combinational
// apart from the C-element state; no clock.
module dr_to_1of4_encoder
  import async_pkg::*;
(
  input  dual_rail_t a,
  input  dual_rail_t b,
  output one_of_4_t  e
);

  c_element u_ce1 (.a(a.r0), .b(b.r0), .q(e[0]));
  c_element u_ce2 (.a(a.r0), .b(b.r1), .q(e[1]));
  c_element u_ce3 (.a(a.r1), .b(b.r0), .q(e[2]));
  c_element u_ce4 (.a(a.r1), .b(b.r1), .q(e[3]));

endmodule
