// dr_pkg -- shared types for the dual-rail self-timed datapath.
//
// A logical bit X travels on two wires (X1, X0): X=1 is (1,0), X=0 is (0,1),
// and (0,0) is the "spacer" that separates two data words under the 4-phase
// return-to-zero protocol. (1,1) is illegal. dr_t packs the two rails; the
// helper functions encode a binary value, test for valid data / spacer and
// decode a valid word. indication_e selects how a stage meets the
// weak-indication rule: LOCAL (inside the function block) or GLOBAL (via a
// synchronizer on the carry output).
package dr_pkg;

  typedef struct packed {
    logic r1;  // "true" rail  (X1)
    logic r0;  // "false" rail (X0)
  } dr_t;

  typedef enum logic {
    LOCAL  = 1'b0,
    GLOBAL = 1'b1
  } indication_e;

  localparam dr_t SPACER = '{r1: 1'b0, r0: 1'b0};

  // Dual-rail codeword of a binary bit.
  function automatic dr_t dr_encode(input logic v);
    return '{r1: v, r0: ~v};
  endfunction

  // Exactly one rail high.
  function automatic logic dr_is_valid(input dr_t x);
    return x.r1 ^ x.r0;
  endfunction

  function automatic logic dr_is_spacer(input dr_t x);
    return ~(x.r1 | x.r0);
  endfunction

endpackage
