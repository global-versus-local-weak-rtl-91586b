// wi_rca -- local weak-indication ripple carry adder, WIDTH bits, dual-rail.
//
// WIDTH copies of wi_full_adder in a chain: the carry output of bit i is the carry
// input of bit i+1, cin enters bit 0 and the carry of bit WIDTH-1 is the
// carry overflow output cout. A carry that is generated or killed inside
// the chain is produced without waiting for lower bits, so the time to
// valid data grows with the longest carry propagation run m, not with WIDTH.
// Because each adder's sum indicates all of its inputs, the adder as a whole is weakly indicating on its own (local indication).
//
// Ports: a[WIDTH], b[WIDTH], cin, sum[WIDTH], cout (dual-rail), rst_n.
// The cascade and the default width of 32 follow the paper.
module wi_rca
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
    wi_full_adder u_fa (
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
