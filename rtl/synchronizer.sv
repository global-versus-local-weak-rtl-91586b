// synchronizer -- rendezvous of the adder's carry output with ackout.
//
// Two C-elements, one per rail: COUT1 = C(ICOUT1, ackout) and
// COUT0 = C(ICOUT0, ackout). The early output adder may produce its carry
// output before all of its inputs have arrived; this block holds that carry
// back until the completion detector of the stage inputs reports a full
// codeword (ackout=1), and holds it valid during reset until the detector
// has seen the full spacer (ackout=0). It thus makes the stage weakly
// indicating as a whole (global indication).
//
// Ports: icout (dual-rail, from the adder), ackout, cout (dual-rail, to the
// next stage register), rst_n. Timing: one C-element delay after the later
// of icout and ackout. Structure as in the paper; reset is this design's own.
module synchronizer
  import dr_pkg::*;
(
  input  logic rst_n,
  input  logic ackout,
  input  dr_t  icout,
  output dr_t  cout
);

  c_element u_c1 (.rst_n(rst_n), .a(icout.r1), .b(ackout), .z(cout.r1));
  c_element u_c0 (.rst_n(rst_n), .a(icout.r0), .b(ackout), .z(cout.r0));

endmodule
