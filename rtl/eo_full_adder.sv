// eo_full_adder -- early output (early reset) dual-rail full adder.
//
// Two AO22 gates classify the operands: CG1 = A0B0 | A1B1 (equal) and
// CG2 = A0B1 | A1B0 (different). Four C-elements combine them with the
// carry input and two ORs form the sum:
//   C1 = C(CIN1,CG1)  C4 = C(CG2,CIN0)  ->  SUM1 = C1 | C4
//   C2 = C(CG1,CIN0)  C3 = C(CIN1,CG2)  ->  SUM0 = C2 | C3
// Two more AO22 gates form the carry:
//   CG3: COUT1 = CG2 CIN1 | A1 B1       CG4: COUT0 = CG2 CIN0 | A0 B0
// Apart from the C-elements every gate is input-incomplete, so the adder
// can reset all its outputs once A or B and the carry input are spacer
// (early reset), and the carry output never indicates the carry input. A
// stage built on it needs the synchronizer to restore indication.
//
// Ports: a, b, cin, sum, cout (dual-rail), rst_n for C1..C4.
// Gate names, types and connections follow the paper's drawing and text;
// only the reset is this design's own.
module eo_full_adder
  import dr_pkg::*;
(
  input  logic rst_n,
  input  dr_t  a,
  input  dr_t  b,
  input  dr_t  cin,
  output dr_t  sum,
  output dr_t  cout
);

  logic cg1, cg2, c1, c2, c3, c4;

  assign cg1 = (a.r0 & b.r0) | (a.r1 & b.r1);
  assign cg2 = (a.r0 & b.r1) | (a.r1 & b.r0);

  c_element u_c1 (.rst_n(rst_n), .a(cin.r1), .b(cg1),    .z(c1));
  c_element u_c2 (.rst_n(rst_n), .a(cg1),    .b(cin.r0), .z(c2));
  c_element u_c3 (.rst_n(rst_n), .a(cin.r1), .b(cg2),    .z(c3));
  c_element u_c4 (.rst_n(rst_n), .a(cg2),    .b(cin.r0), .z(c4));

  assign sum.r1  = c1 | c4;
  assign sum.r0  = c2 | c3;

  assign cout.r1 = (cg2 & cin.r1) | (a.r1 & b.r1);  // CG3
  assign cout.r0 = (cg2 & cin.r0) | (a.r0 & b.r0);  // CG4

endmodule
