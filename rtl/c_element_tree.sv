// Balanced tree of 2-input C-elements.
//
// done rises once every input is 1 and falls once every input is 0; while the
// inputs disagree it holds. The tree is laid out as a binary heap: node k has
// children 2k+1 and 2k+2, the W inputs are the leaves W-1 .. 2W-2, and node 0
// is the output. W-1 C-elements are used and the depth is ceil(log2 W).
//
// Parameter W (number of inputs, at least 1). Ports: in[W-1:0], done.
module c_element_tree #(
  parameter int unsigned W = 4
) (
  input  logic [W-1:0] in,
  output logic         done
);

  logic node [2*W-1];

  for (genvar k = 0; k < W; k++) begin : g_leaf
    assign node[W-1+k] = in[k];
  end

  for (genvar k = 0; k < W-1; k++) begin : g_node
    c_element u_c (.a(node[2*k+1]), .b(node[2*k+2]), .q(node[k]));
  end

  assign done = node[0];

endmodule
