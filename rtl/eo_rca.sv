// eo_rca -- early output ripple carry adder, WIDTH bits, dual-rail.
//
// WIDTH copies of eo_full_adder in a chain: the carry output of bit i is the carry
// input of bit i+1, cin enters bit 0 and the carry of bit WIDTH-1 is the
// carry overflow output cout. A carry that is generated or killed inside
// the chain is produced without waiting for lower bits, so the time to
// valid data grows with the longest carry propagation run m, not with WIDTH.
// The carry output indicates none of the carry inputs, so a stage using this adder must synchronise it with the input completion detector (global indication).
//
// Ports: a[WIDTH], b[WIDTH], cin, sum[WIDTH], cout (dual-rail), rst_n.
// The cascade and the default width of 32 follow the paper.
module eo_rca
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH = 32
) (
  input  logic             rst_n,
  input  dr_t  [WIDTH-1:0] a,
  input  dr_t  [WIDTH-1:0] b,
  input  dr_t              cin,
  output dr_t  [WIDTH-1:0] sum,
  output dr_t              cout
);

  dr_t [WIDTH:0] carry;

  assign carry[0] = cin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    eo_full_adder u_fa (
      .rst_n (rst_n),
      .a     (a[i]),
      .b     (b[i]),
      .cin   (carry[i]),
      .sum   (sum[i]),
      .cout  (carry[i+1])
    );
  end

  assign cout = carry[WIDTH];

endmodule
