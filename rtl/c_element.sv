// Two-input Muller C-element.
//
// The output goes to 1 once both inputs are 1, goes to 0 once both inputs are
// 0, and keeps its value while the inputs disagree. In the standard-cell
// implementation this is an AO222 complex gate whose output is fed back to
// two of its inputs: q = a&b | a&q | b&q. Here the same state-holding function
// is written as a set/reset latch: set when both inputs are 1, cleared when
// both are 0, holding otherwise. Both forms give the same steady states, and
// the latch form avoids a combinational loop in simulation and synthesis.
// The latch is intended: it is the C-element's memory. (Verilator's lint may
// report NOLATCH for some instances after inlining; the hold path is real,
// as the testbench shows.)
//
// Interface: a, b inputs, q output. No clock and no reset: a C-element comes
// out of power-up in a defined state once both inputs are driven to the same
// level, which the return-to-zero protocol does by starting from the spacer.
module c_element (
  input  logic a,
  input  logic b,
  output logic q
);

  always_latch begin
    if (a && b) q = 1'b1;
    else if (!a && !b) q = 1'b0;
  end

endmodule
