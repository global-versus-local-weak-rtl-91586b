// tb_eo_full_adder -- self-checking test of the early output full adder.
//
// For all eight input values, and with the inputs arriving and leaving in
// several orders, the outputs are compared with values worked out here from
// the arithmetic (sum = a^b^c, carry = majority) and from the indication
// rules: with the carry input still spacer the sum must stay spacer and the
// carry must appear only on generate (a=b=1) or kill (a=b=0). On return to
// zero with A and the carry input spacer but B still valid:
// early reset: every output is already spacer although B is still valid.
module tb_eo_full_adder;
  import dr_pkg::*;

  logic rst_n;
  dr_t  da, db, dc, sum, cout;
  int   checks = 0, failures = 0;

  eo_full_adder dut (.rst_n(rst_n), .a(da), .b(db), .cin(dc), .sum(sum), .cout(cout));

  task automatic check(dr_t exp_sum, dr_t exp_cout, string what);
    checks++;
    if (sum !== exp_sum || cout !== exp_cout) begin
      failures++;
      $display("FAIL %s: a=%b b=%b cin=%b -> sum=%b cout=%b, expected %b %b",
               what, da, db, dc, sum, cout, exp_sum, exp_cout);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; da = SPACER; db = SPACER; dc = SPACER;
    #1 rst_n = 1'b1;
    #1 check(SPACER, SPACER, "spacer after reset");
    for (int rep = 0; rep < 4; rep++) begin
      for (int v = 0; v < 8; v++) begin
        logic a, b, c;
        dr_t  s, co, early_co;
        {a, b, c} = 3'(v);
        s        = dr_encode(a ^ b ^ c);
        co       = dr_encode((a & b) | (a & c) | (b & c));
        early_co = (a == b) ? dr_encode(a) : SPACER;

        // order 1: A and B first, then carry in
        da = dr_encode(a); db = dr_encode(b);
        #1 check(SPACER, early_co, "A,B valid, CIN spacer");
        dc = dr_encode(c);
        #1 check(s, co, "all valid");
        // RTZ 1: A and B leave first
        da = SPACER; db = SPACER;
        #1 check(s, SPACER, "A,B spacer, CIN valid");
        dc = SPACER;
        #1 check(SPACER, SPACER, "all spacer");

        // order 2: carry in and A first, then B
        dc = dr_encode(c); da = dr_encode(a);
        #1 check(SPACER, SPACER, "CIN,A valid, B spacer");
        db = dr_encode(b);
        #1 check(s, co, "all valid");
        // RTZ 2: A and carry in leave first, B stays
        da = SPACER; dc = SPACER;
        #1 check(SPACER, SPACER, "A,CIN spacer, B valid");
        db = SPACER;
        #1 check(SPACER, SPACER, "all spacer");

        // order 3: all together; RTZ 3: carry in leaves first
        da = dr_encode(a); db = dr_encode(b); dc = dr_encode(c);
        #1 check(s, co, "all valid");
        dc = SPACER;
        #1 check(s, early_co, "CIN spacer, A,B valid");
        da = SPACER; db = SPACER;
        #1 check(SPACER, SPACER, "all spacer");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
