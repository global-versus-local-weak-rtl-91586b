// wi_full_adder -- weak-indication dual-rail full adder (local indication).
//
// Four C-elements form the product terms of the two operands:
//   kill  k = C(A0,B0)   generate g = C(A1,B1)
//   p01     = C(A0,B1)   p10      = C(A1,B0)
// p = p01 | p10 (operands differ), e = k | g (operands equal). The sum is
//   SUM1 = C(p,CIN0) | C(e,CIN1)      SUM0 = C(p,CIN1) | C(e,CIN0)
// so it waits for every input rail and for the spacer on every rail: the
// sum indicates the whole input word. The carry is
//   COUT1 = p & CIN1 | g              COUT0 = p & CIN0 | k      (AO21 gates)
// so on generate or kill it is produced from A and B alone, without the
// carry input, and it returns to spacer as soon as A and B do. A carry chain
// therefore costs one AO21 delay per bit, and the reset of an n-bit chain of
// these adders takes a constant time.
//
// Ports: a, b, cin, sum, cout (dual-rail), rst_n for the C-elements.
// The sum network and the factored equations are the paper's; the exact
// gate-level carry network (AO21 fed by the p, g and k C-elements) is
// reconstructed from the paper's carry equations and its delay terms, as
// the adder itself is only cited there.
//
// Lint reports circular logic through these C-elements when the adder sits
// in a stage: the loop is the stage handshake (adder -> next register ->
// completion detector -> ackin -> current register -> adder), which is how
// a self-timed stage works, not a combinational cycle inside the adder.
module wi_full_adder
  import dr_pkg::*;
(
  input  logic rst_n,
  input  dr_t  a,
  input  dr_t  b,
  input  dr_t  cin,
  output dr_t  sum,
  output dr_t  cout
);

  logic k, g, p01, p10, p, e;
  logic s1_p, s1_e, s0_p, s0_e;

  c_element u_k   (.rst_n(rst_n), .a(a.r0), .b(b.r0), .z(k));
  c_element u_g   (.rst_n(rst_n), .a(a.r1), .b(b.r1), .z(g));
  c_element u_p01 (.rst_n(rst_n), .a(a.r0), .b(b.r1), .z(p01));
  c_element u_p10 (.rst_n(rst_n), .a(a.r1), .b(b.r0), .z(p10));

  assign p = p01 | p10;
  assign e = k | g;

  c_element u_s1p (.rst_n(rst_n), .a(p), .b(cin.r0), .z(s1_p));
  c_element u_s1e (.rst_n(rst_n), .a(e), .b(cin.r1), .z(s1_e));
  c_element u_s0p (.rst_n(rst_n), .a(p), .b(cin.r1), .z(s0_p));
  c_element u_s0e (.rst_n(rst_n), .a(e), .b(cin.r0), .z(s0_e));

  assign sum.r1  = s1_p | s1_e;
  assign sum.r0  = s0_p | s0_e;

  assign cout.r1 = (p & cin.r1) | g;
  assign cout.r0 = (p & cin.r0) | k;

endmodule
