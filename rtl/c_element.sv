// c_element -- 2-input Muller C-element.
//
// The output copies the inputs when both are equal and otherwise keeps its
// last value: Z = XY + (X+Y)Z. Every state-holding point of the self-timed
// stage (register bits, completion-tree nodes, adder product terms, the
// synchronizer) is one of these. The cell is written as a level-sensitive
// latch whose enable is "inputs agree" and whose data is input a, which is
// the same next-state function as an AO222 gate with its output fed back.
//
// Ports: a, b inputs, z output, rst_n asynchronous active-low clear.
// Timing: no clock; z changes in the same time step as the inputs that make
// them agree. The reset is this design's own addition so that a two-state
// simulator and silicon both start in the spacer state; the AO222-feedback
// realisation follows the paper. The latch is intended: it is the storage
// element of the C-element. Some lint tools model an always_latch whose
// output also feeds back through the surrounding handshake as circular
// combinational logic rather than as a latch; that report is expected for
// every C-element of a closed self-timed loop.
module c_element (
  input  logic rst_n,
  input  logic a,
  input  logic b,
  output logic z
);

  always_latch begin
    if (!rst_n)      z <= 1'b0;
    else if (a == b) z <= a;
  end

endmodule
