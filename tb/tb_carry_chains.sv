// tb_carry_chains -- carry propagation runs of chosen length, both adders.
//
// For every run length m = 4 .. 28 bits, operand pairs are built whose
// longest carry propagation run (a_i != b_i) is exactly m bits. In half of
// them the run starts at bit 0, so it hangs on the carry input; elsewhere it
// starts above a generate/kill bit. Both 32-bit adders (weak-indication and
// early output) get the same pairs with the carry input held back:
//   * run at bit 0: exactly sum bits 0..m must still be spacer, every other
//     sum bit and the carry overflow must already hold their final values;
//   * run elsewhere: only sum bit 0 may still be spacer.
// After the carry input arrives both adders must give a + b + cin.
module tb_carry_chains;
  import dr_pkg::*;

  localparam int W = 32;

  logic          rst_n;
  dr_t [W-1:0]   da, db, sw, se;
  dr_t           dc, cw, ce;
  int            checks = 0, failures = 0;

  wi_rca #(.WIDTH(W)) u_wi (.rst_n(rst_n), .a(da), .b(db), .cin(dc), .sum(sw), .cout(cw));
  eo_rca #(.WIDTH(W)) u_eo (.rst_n(rst_n), .a(da), .b(db), .cin(dc), .sum(se), .cout(ce));

  task automatic expect_true(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic dr_t [W-1:0] enc(logic [W-1:0] x);
    dr_t [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = dr_encode(x[i]);
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; da = '0; db = '0; dc = SPACER;
    #1 rst_n = 1'b1;
    for (int m = 4; m <= 28; m++) begin
      for (int rep = 0; rep < 40; rep++) begin
        logic [W-1:0] a, b, prop;
        logic         c;
        logic [W:0]   full;
        int           start, waiting_w, waiting_e;
        start = (rep % 2 == 0) ? 0 : $urandom_range(1, W - m);
        // propagate exactly on [start, start+m); elsewhere propagate runs
        // are cut short (every fourth bit generates or kills)
        prop = '0;
        for (int i = 0; i < W; i++) begin
          if (i >= start && i < start + m) prop[i] = 1'b1;
          else if (i == start - 1 || i == start + m) prop[i] = 1'b0;
          else prop[i] = (i % 4 != 0) && 1'($urandom);
        end
        a = $urandom;
        b = a ^ prop;
        c = 1'($urandom);
        full = {1'b0, a} + {1'b0, b} + (W+1)'(c);

        da = enc(a); db = enc(b);
        #1;
        waiting_w = 0; waiting_e = 0;
        for (int i = 0; i < W; i++) begin
          if (sw[i] == SPACER) waiting_w++;
          else expect_true(sw[i] === dr_encode(full[i]), "weak-indication early sum value");
          if (se[i] == SPACER) waiting_e++;
          else expect_true(se[i] === dr_encode(full[i]), "early output early sum value");
        end
        if (start == 0) begin
          expect_true(waiting_w == m + 1 && waiting_e == m + 1,
                      $sformatf("m=%0d at bit 0: %0d / %0d sum bits wait for the carry input", m, waiting_w, waiting_e));
        end else begin
          expect_true(waiting_w == 1 && waiting_e == 1,
                      $sformatf("m=%0d at bit %0d: %0d / %0d sum bits wait", m, start, waiting_w, waiting_e));
        end
        expect_true(cw === dr_encode(full[W]) && ce === dr_encode(full[W]), "carry overflow before carry input");
        dc = dr_encode(c);
        #1;
        expect_true(sw === enc(full[W-1:0]) && cw === dr_encode(full[W]), "weak-indication result");
        expect_true(se === enc(full[W-1:0]) && ce === dr_encode(full[W]), "early output result");
        da = '0; db = '0; dc = SPACER;
        #1;
        expect_true(sw == '0 && se == '0 && cw == SPACER && ce == SPACER, "reset");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
