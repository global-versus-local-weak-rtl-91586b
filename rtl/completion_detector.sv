// completion_detector -- detects a complete codeword or a complete spacer.
//
// Each dual-rail bit is reduced to "has data" by a 2-input OR (first logic
// level). The bits of each operand are joined by a balanced tree of 2-input
// C-elements, the operand trees are joined by a further C-element tree, and
// a last C-element adds the single extra bit (the carry input when the
// detector watches the adder inputs). ackout therefore rises only when every
// bit is valid and falls only when every bit is spacer.
//
// With the default WIDTH=32, OPERANDS=2 this is the detector drawn for the
// 32-bit adder stage: OR level, five C levels per operand, one C joining
// A and B, one C with the carry input -- eight logic levels, one OR plus
// seven C-element delays. With OPERANDS=1 it watches the 32 sums and the
// carry output of the next stage register, an arrangement chosen by
// analogy since the next stage's detector is not detailed.
//
// Ports: ops[OPERANDS][WIDTH] dual-rail, extra dual-rail, ackout, rst_n.
module completion_detector
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned OPERANDS = 2
) (
  input  logic                           rst_n,
  input  dr_t  [OPERANDS-1:0][WIDTH-1:0] ops,
  input  dr_t                            extra,
  output logic                           ackout
);

  logic [OPERANDS-1:0][WIDTH-1:0] has_data;
  logic [OPERANDS-1:0]            op_done;
  logic                           all_ops_done;
  logic                           extra_has_data;

  always_comb begin
    for (int o = 0; o < int'(OPERANDS); o++)
      for (int i = 0; i < int'(WIDTH); i++)
        has_data[o][i] = ops[o][i].r1 | ops[o][i].r0;
    extra_has_data = extra.r1 | extra.r0;
  end

  for (genvar o = 0; o < OPERANDS; o++) begin : g_op
    c_tree #(.N(WIDTH)) u_tree (.rst_n(rst_n), .in(has_data[o]), .out(op_done[o]));
  end

  c_tree #(.N(OPERANDS)) u_join (.rst_n(rst_n), .in(op_done), .out(all_ops_done));

  c_element u_last (.rst_n(rst_n), .a(all_ops_done), .b(extra_has_data), .z(ackout));

endmodule
