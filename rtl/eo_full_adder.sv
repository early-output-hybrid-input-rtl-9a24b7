// Early output (early reset) hybrid input encoded asynchronous full adder.
//
// The two operand bits arrive as one 1-of-4 code e (e[0]: A=B=0, e[1]: A=0
// B=1, e[2]: A=1 B=0, e[3]: A=B=1); carry in, sum and carry out are dual-rail.
// The logic is the gate-level form of
//   SUM1  = (E1+E2)CIN0 + (E0+E3)CIN1     SUM0 = (E1+E2)CIN1 + (E0+E3)CIN0
//   COUT1 = (E1+E2)CIN1 + E3              COUT0 = (E1+E2)CIN0 + E0
// built from the cell types of the paper:
//   OR1  int1 = E0 | E3          (kill or generate: sum = CIN)
//   OR2  int2 = E1 | E2          (propagate: sum = ~CIN, cout = CIN)
//   OR3  int3 = int1 | int2      (operand data present)
//   CG1  AO22  isum1 = CIN1&int1 | CIN0&int2
//   CG2  AO22  isum0 = CIN0&int1 | CIN1&int2
//   CG3  AO21  COUT1 = CIN1&int2 | E3
//   CG4  AO21  COUT0 = CIN0&int2 | E0
//   C1   SUM1 = C(isum1, int3)   C2  SUM0 = C(isum0, int3)
// The sum C-elements hold the sum high until both int3 and the sum term have
// fallen. In the return-to-zero phase int3 falls as soon as the operands
// return to the spacer, and every product term contains an int or E line, so
// all outputs reach the spacer even if the carry input is still valid: the
// adder is early reset. In generate and kill mode the carry output is set by
// the operands alone, without waiting for the carry input.
//
// Interface: e 1-of-4 operand code, cin dual-rail carry in; sum and cout
// dual-rail. Inputs must follow the 4-phase return-to-zero protocol
// (spacer -> valid data -> spacer). No clock.
module eo_full_adder
  import async_pkg::*;
(
  input  one_of_4_t  e,
  input  dual_rail_t cin,
  output dual_rail_t sum,
  output dual_rail_t cout
);

  logic int1, int2, int3;
  logic isum1, isum0;

  always_comb begin
    int1  = e[0] | e[3];                         // OR1
    int2  = e[1] | e[2];                         // OR2
    int3  = int1 | int2;                         // OR3
    isum1 = (cin.r1 & int1) | (cin.r0 & int2);   // CG1 (AO22)
    isum0 = (cin.r0 & int1) | (cin.r1 & int2);   // CG2 (AO22)
    cout.r1 = (cin.r1 & int2) | e[3];            // CG3 (AO21)
    cout.r0 = (cin.r0 & int2) | e[0];            // CG4 (AO21)
  end

  c_element u_c1 (.a(isum1), .b(int3), .q(sum.r1));
  c_element u_c2 (.a(isum0), .b(int3), .q(sum.r0));

endmodule
