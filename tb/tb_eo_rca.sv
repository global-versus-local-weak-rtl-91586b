// tb_eo_rca -- self-checking test of the 32-bit early output ripple carry adder.
//
// Random operand pairs, with a share of pairs built to give long carry
// propagation runs, are applied as a 4-phase dual-rail sender would:
//  1. A and B valid, carry input still spacer. Sum bit i must already be
//     valid, with its final value, exactly when some lower bit j<i
//     generates or kills the carry (a_j == b_j); otherwise it must still be
//     spacer. The carry overflow must be valid exactly when any bit
//     generates or kills.
//  2. Carry input valid: sum and carry overflow must equal a + b + cin.
//  3. A and B spacer, carry input still valid: every carry and every sum
//     above bit 0 must already be spacer (reset does not ripple); sum bit 0
//     waits for the carry input.
//  4. Carry input spacer: all outputs spacer.
// The longest carry propagation run m of each pair is tallied.
module tb_eo_rca;
  import dr_pkg::*;

  localparam int W = 32;

  logic            rst_n;
  dr_t  [W-1:0]    da, db, sum;
  dr_t             dc, cout;
  int              checks = 0, failures = 0;
  int              n_gen = 0, n_kill = 0, n_all_prop = 0, n_long = 0;
  int              max_m = 0;

  eo_rca dut (.rst_n(rst_n), .a(da), .b(db), .cin(dc), .sum(sum), .cout(cout));

  task automatic expect_eq(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: a=%h b=%h cin=%b sum=%h cout=%b", what, da, db, dc, sum, cout);
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
    for (int t = 0; t < 1200; t++) begin
      logic [W-1:0] a, b;
      logic         c;
      logic [W:0]   full;
      dr_t  [W-1:0] exp_early;
      dr_t          exp_early_cout;
      logic         known;
      int           run, m;

      a = $urandom;
      b = $urandom;
      c = 1'($urandom);
      case (t % 4)
        1: b = ~a ^ (32'h1 << $urandom_range(W-1));  // one generate/kill
        2: b = ~a;                                     // all propagate
        default: ;
      endcase
      full = {1'b0, a} + {1'b0, b} + (W+1)'(c);

      // expected outputs before the carry input arrives
      known = 1'b0;
      m = 0; run = 0;
      for (int i = 0; i < W; i++) begin
        exp_early[i] = known ? dr_encode(full[i]) : SPACER;
        if (a[i] == b[i]) begin
          known = 1'b1;
          run = 0;
          if (a[i]) n_gen++; else n_kill++;
        end else begin
          run++;
          if (run > m) m = run;
        end
      end
      exp_early_cout = known ? dr_encode(full[W]) : SPACER;
      if (!known) n_all_prop++;
      if (m > 8) n_long++;
      if (m > max_m) max_m = m;

      da = enc(a); db = enc(b);
      #1 expect_eq(sum === exp_early && cout === exp_early_cout, "A,B valid, CIN spacer");
      dc = dr_encode(c);
      #1 expect_eq(sum === enc(full[W-1:0]) && cout === dr_encode(full[W]), "sum");
      da = '0; db = '0;
      #1 expect_eq(cout === SPACER && sum[W-1:1] === '0 && sum[0] === dr_encode(full[0]),
                   "A,B spacer, CIN valid");
      dc = SPACER;
      #1 expect_eq(sum === '0 && cout === SPACER, "all spacer");
    end
    checks++;
    if (n_gen == 0 || n_kill == 0 || n_all_prop == 0 || n_long == 0) begin
      failures++;
      $display("FAIL: a carry case never occurred");
    end
    $display("generate bits %0d, kill bits %0d, all-propagate words %0d, words with m>8 %0d, longest m %0d",
             n_gen, n_kill, n_all_prop, n_long, max_m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
