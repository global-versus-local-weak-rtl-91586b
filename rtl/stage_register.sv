// stage_register -- self-timed pipeline register (current / next stage).
//
// One 2-input C-element per rail, each pairing its data rail with the common
// acknowledge input ackin. With ackin=1 the register passes a rising rail
// (valid data) and holds it; it lets a rail fall (spacer) only once ackin=0.
// ackin is the inverted ackout of the following stage's completion
// detector, so a word is held until the stage after has taken it, and a
// spacer is held until the stage after has reset.
//
// Ports: d[N] incoming dual-rail words, q[N] held words, ackin, rst_n.
// Timing: purely handshake driven, one C-element delay from d/ackin to q.
// The structure (a C-element per rail with ackin) follows the paper; the
// reset is this design's own.
module stage_register
  import dr_pkg::*;
#(
  parameter int unsigned N = 65
) (
  input  logic         rst_n,
  input  logic         ackin,
  input  dr_t  [N-1:0] d,
  output dr_t  [N-1:0] q
);

  for (genvar i = 0; i < N; i++) begin : g_bit
    c_element u_c1 (.rst_n(rst_n), .a(d[i].r1), .b(ackin), .z(q[i].r1));
    c_element u_c0 (.rst_n(rst_n), .a(d[i].r0), .b(ackin), .z(q[i].r0));
  end

endmodule
