// tb_stage_indication -- indication of a whole stage, LOCAL and GLOBAL.
//
// The 65 input bits of each 32-bit stage arrive one at a time in random
// order, and later leave one at a time in another random order, while the
// consumer acknowledges at once (following_ackout follows next_ackout).
// A weakly indicating stage must then:
//   * raise next_ackout exactly when the last input bit arrives, and
//   * lower next_ackout exactly when the last input bit has left,
// so that the next stage never sees a complete word or a complete spacer
// while an input transition is still outstanding. In GLOBAL mode the early
// output adder does reset all its outputs while some inputs are still valid
// (counted here, and required to happen); only the synchronizer, holding the
// carry until ackout falls, keeps next_ackout up. In LOCAL mode the adder
// sums alone must never allow that. Results are checked as well.
module tb_stage_indication;
  import dr_pkg::*;

  localparam int W  = 32;
  localparam int NB = 2*W + 1;
  localparam int NT = 300;

  logic         rst_n;
  dr_t [W-1:0]  a_l, b_l, s_l, a_g, b_g, s_g;
  dr_t          c_l, co_l, c_g, co_g;
  logic         ack_l, nack_l, fack_l, ack_g, nack_g, fack_g;
  int           checks = 0, failures = 0;
  int           n_adder_reset_early = 0, n_adder_reset_early_local = 0;

  st_stage u_local (
    .rst_n(rst_n), .in_a(a_l), .in_b(b_l), .in_cin(c_l), .ackout(ack_l),
    .out_sum(s_l), .out_cout(co_l), .next_ackout(nack_l), .following_ackout(fack_l)
  );
  st_stage #(.WIDTH(W), .MODE(GLOBAL)) u_global (
    .rst_n(rst_n), .in_a(a_g), .in_b(b_g), .in_cin(c_g), .ackout(ack_g),
    .out_sum(s_g), .out_cout(co_g), .next_ackout(nack_g), .following_ackout(fack_g)
  );

  // eager consumers
  assign fack_l = nack_l;
  assign fack_g = nack_g;

  task automatic expect_true(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic shuffle(ref int order[]);
    order = new[NB];
    for (int i = 0; i < NB; i++) order[i] = i;
    for (int i = NB-1; i > 0; i--) begin
      int j = $urandom_range(i);
      int t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endtask

  // drive bit k (0..W-1 = A, W..2W-1 = B, 2W = carry in) of both stages
  task automatic drive(int k, dr_t v);
    if (k < W)        begin a_l[k]   = v; a_g[k]   = v; end
    else if (k < 2*W) begin b_l[k-W] = v; b_g[k-W] = v; end
    else              begin c_l      = v; c_g      = v; end
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
    int order[];
    rst_n = 1'b0;
    a_l = '0; b_l = '0; c_l = SPACER; a_g = '0; b_g = '0; c_g = SPACER;
    #2 rst_n = 1'b1;
    #1;
    for (int t = 0; t < NT; t++) begin
      logic [W-1:0] a, b;
      logic         c;
      logic [W:0]   full;
      logic [NB-1:0] bits;
      a = $urandom; b = $urandom; c = 1'($urandom);
      if (t % 3 == 1) b = ~a;  // long propagation
      full = {1'b0, a} + {1'b0, b} + (W+1)'(c);
      bits = {c, b, a};

      shuffle(order);
      for (int i = 0; i < NB; i++) begin
        drive(order[i], dr_encode(bits[order[i]]));
        #1;
        expect_true(nack_l == (i == NB-1) && nack_g == (i == NB-1),
                    $sformatf("arrival %0d of %0d: next_ackout local=%0b global=%0b", i+1, NB, nack_l, nack_g));
        expect_true(ack_l == (i == NB-1) && ack_g == (i == NB-1), "ackout on arrival");
      end
      expect_true(s_l === enc(full[W-1:0]) && co_l === dr_encode(full[W]), "LOCAL result");
      expect_true(s_g === enc(full[W-1:0]) && co_g === dr_encode(full[W]), "GLOBAL result");

      shuffle(order);
      for (int i = 0; i < NB; i++) begin
        drive(order[i], SPACER);
        #1;
        if (i < NB-1) begin
          if (u_global.fb_sum == '0 && u_global.fb_cout == SPACER) n_adder_reset_early++;
          if (u_local.fb_sum == '0 && u_local.fb_cout == SPACER) n_adder_reset_early_local++;
        end
        expect_true(nack_l == (i != NB-1) && nack_g == (i != NB-1),
                    $sformatf("departure %0d of %0d: next_ackout local=%0b global=%0b", i+1, NB, nack_l, nack_g));
        expect_true(ack_l == (i != NB-1) && ack_g == (i != NB-1), "ackout on departure");
      end
    end
    checks++;
    if (n_adder_reset_early == 0) begin
      failures++;
      $display("FAIL: early output adder never reset ahead of its inputs");
    end
    checks++;
    if (n_adder_reset_early_local != 0) begin
      failures++;
      $display("FAIL: weak-indication adder reset ahead of its inputs %0d times", n_adder_reset_early_local);
    end
    $display("early output adder fully reset while inputs still valid: %0d steps", n_adder_reset_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
