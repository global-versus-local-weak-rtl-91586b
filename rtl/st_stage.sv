// st_stage -- one self-timed system stage around a 32-bit dual-rail adder.
//
// Data path: the current stage register takes the dual-rail operands A, B
// and carry input CIN from the sender, the self-timed ripple carry adder
// adds them, and the next stage register takes the 32 sums and the carry
// overflow. Control: the completion detector on the current register's
// outputs drives ackout back to the sender; the completion detector on the
// next register's outputs drives next_ackout, whose inverse is the current
// register's ackin; following_ackout, from whatever takes the results, is
// inverted into the next register's ackin.
//
// MODE selects how the weak-indication rule is met:
//   LOCAL  -- weak-indication adder (wi_rca); all sums and the carry go
//             straight to the next register. Every adder sum indicates its
//             own inputs.
//   GLOBAL -- early output adder (eo_rca); the sums go straight to the next
//             register, but the carry overflow passes through the
//             synchronizer, which holds it until ackout agrees. The stage,
//             not the adder, then indicates the inputs.
//
// Protocol (4-phase return to zero): the sender applies a codeword when
// ackout=0, waits for ackout=1, applies the spacer and waits for ackout=0.
// The receiver sees next_ackout=1 when a complete result word is held,
// raises following_ackout, and lowers it again after next_ackout=0.
// There is no clock; all timing is by handshake. rst_n clears every
// C-element to the spacer state (this design's own addition).
//
// The arrangement of registers, detectors and synchronizer and the default
// width of 32 follow the paper; the choice of LOCAL as default reflects its
// conclusion that local indication gives the shorter cycle time.
//
// The stage contains a deliberate loop through state-holding C-elements:
// the next stage register's completion signal, inverted, controls the
// current stage register whose outputs feed the adder and hence the next
// register. Lint tools report it as circular combinational logic; it is
// the 4-phase handshake itself and settles after every input change.
module st_stage
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH = 32,
  parameter indication_e MODE  = LOCAL
) (
  input  logic             rst_n,
  // from the sender
  input  dr_t  [WIDTH-1:0] in_a,
  input  dr_t  [WIDTH-1:0] in_b,
  input  dr_t              in_cin,
  output logic             ackout,
  // to the receiver
  output dr_t  [WIDTH-1:0] out_sum,
  output dr_t              out_cout,
  output logic             next_ackout,
  input  logic             following_ackout
);

  localparam int unsigned NIN  = 2*WIDTH + 1;
  localparam int unsigned NOUT = WIDTH + 1;

  dr_t [WIDTH-1:0] reg_a, reg_b, fb_sum;
  dr_t             reg_cin, fb_cout, nxt_cout;
  dr_t [NIN-1:0]   cur_q;
  dr_t [NOUT-1:0]  nxt_q;

  // ---------------- current stage register ----------------
  stage_register #(.N(NIN)) u_cur_reg (
    .rst_n (rst_n),
    .ackin (~next_ackout),
    .d     ({in_cin, in_b, in_a}),
    .q     (cur_q)
  );

  assign {reg_cin, reg_b, reg_a} = cur_q;

  // ---------------- completion detector of the stage inputs ----------------
  completion_detector #(.WIDTH(WIDTH), .OPERANDS(2)) u_cd_in (
    .rst_n  (rst_n),
    .ops    ({reg_b, reg_a}),
    .extra  (reg_cin),
    .ackout (ackout)
  );

  // ---------------- function block ----------------
  if (MODE == LOCAL) begin : g_local
    wi_rca #(.WIDTH(WIDTH)) u_rca (
      .rst_n (rst_n),
      .a     (reg_a),
      .b     (reg_b),
      .cin   (reg_cin),
      .sum   (fb_sum),
      .cout  (fb_cout)
    );
    assign nxt_cout = fb_cout;
  end else begin : g_global
    eo_rca #(.WIDTH(WIDTH)) u_rca (
      .rst_n (rst_n),
      .a     (reg_a),
      .b     (reg_b),
      .cin   (reg_cin),
      .sum   (fb_sum),
      .cout  (fb_cout)
    );
    synchronizer u_sync (
      .rst_n  (rst_n),
      .ackout (ackout),
      .icout  (fb_cout),
      .cout   (nxt_cout)
    );
  end

  // ---------------- next stage register and its detector ----------------
  stage_register #(.N(NOUT)) u_nxt_reg (
    .rst_n (rst_n),
    .ackin (~following_ackout),
    .d     ({nxt_cout, fb_sum}),
    .q     (nxt_q)
  );

  assign {out_cout, out_sum} = nxt_q;

  completion_detector #(.WIDTH(WIDTH), .OPERANDS(1)) u_cd_out (
    .rst_n  (rst_n),
    .ops    (out_sum),
    .extra  (out_cout),
    .ackout (next_ackout)
  );

  // A dual-rail wire never has both rails high.
  always_comb begin
    if (rst_n) begin
      for (int i = 0; i < int'(NOUT); i++)
        assert (!(nxt_q[i].r1 && nxt_q[i].r0))
          else $error("next stage register bit %0d holds the illegal code (1,1)", i);
    end
  end

endmodule
