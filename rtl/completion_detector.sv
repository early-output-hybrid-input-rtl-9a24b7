// Completion detector for a bundle of dual-rail signals.
//
// One 2-input OR gate per dual-rail signal combines its two rails, so its
// output is 1 while that signal carries valid data and 0 while it is the
// spacer. The OR outputs are combined by a C-element tree. done therefore
// rises only after every signal is valid and falls only after every signal
// has returned to the spacer; it is the acknowledge of a 4-phase
// return-to-zero channel.
//
// Parameter W (number of dual-rail signals). Ports: d[W] input, done output.
module completion_detector
  import async_pkg::*;
#(
  parameter int unsigned W = 4
) (
  input  dual_rail_t d [W],
  output logic       done
);

  logic [W-1:0] any_rail;

  always_comb begin
    for (int i = 0; i < W; i++) any_rail[i] = d[i].r1 | d[i].r0;
  end

  c_element_tree #(.W(W)) u_tree (.in(any_rail), .done(done));

endmodule
