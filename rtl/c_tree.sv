// c_tree -- binary tree of 2-input C-elements joining N signals.
//
// The output rises once all N inputs are 1 and falls once all are 0; in
// between it holds. Node k of a heap-ordered array combines nodes 2k and
// 2k+1, and the inputs are leaves N..2N-1, so for N a power of two the tree
// is balanced with log2(N) levels (5 levels for the 32 bits of one operand).
// A single input passes straight through.
//
// Ports: in[N], out, rst_n. Timing: ceil(log2 N) C-element delays.
module c_tree #(
  parameter int unsigned N = 32
) (
  input  logic         rst_n,
  input  logic [N-1:0] in,
  output logic         out
);

  logic node [1:2*N-1];

  for (genvar i = 0; i < N; i++) begin : g_leaf
    assign node[N+i] = in[i];
  end

  for (genvar k = 1; k < N; k++) begin : g_node
    c_element u_c (.rst_n(rst_n), .a(node[2*k]), .b(node[2*k+1]), .z(node[k]));
  end

  assign out = node[1];

endmodule
