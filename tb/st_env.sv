// st_env -- sender, receiver and checker for one st_stage.
//
// Plays the stage's environment under the 4-phase return-to-zero protocol
// and checks every result against a + b + cin computed here. Per
// transaction:
//   * A and B are applied before the carry input. Sums above the lowest
//     generate/kill bit and (if any bit generates or kills) the carry
//     overflow must already reach the next stage register in LOCAL mode;
//     in GLOBAL mode the sums do, but the synchronizer must hold the carry
//     back until the input completion detector has seen the carry input.
//   * After the carry input, ackout and next_ackout must be 1 and the next
//     stage register must hold the exact result.
//   * Return to zero: A and B leave first. The adder's carry output must be
//     spacer at once (early reset); in GLOBAL mode the synchronizer output
//     must stay valid until ackout falls.
//   * The receiver is slow: the result must stay in the next stage register
//     until following_ackout rises. On some transactions the sender offers
//     the next word before that; the current stage register must refuse it
//     (ackout stays 0) until the result has been taken.
// Each mechanism is counted and a failure is recorded for one that never
// happened. done rises when all NTXN transactions are finished.
module st_env
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH = 32,
  parameter indication_e MODE  = LOCAL,
  parameter int unsigned NTXN  = 1200
) (
  output logic             rst_n,
  output dr_t  [WIDTH-1:0] in_a,
  output dr_t  [WIDTH-1:0] in_b,
  output dr_t              in_cin,
  input  logic             ackout,
  input  dr_t  [WIDTH-1:0] out_sum,
  input  dr_t              out_cout,
  input  logic             next_ackout,
  output logic             following_ackout,
  input  dr_t              probe_fb_cout,   // carry output of the adder
  input  dr_t              probe_nxt_cout,  // carry entering the next register
  output logic             done,
  output int               checks,
  output int               failures
);

  localparam int W = int'(WIDTH);

  int n_early_carry = 0, n_withheld = 0, n_cin_wait = 0, n_long = 0;
  int n_early_reset = 0, n_sync_hold = 0, n_held = 0, n_backpressure = 0;

  logic [W-1:0] a, b;
  logic         c;
  logic [W:0]   full;
  dr_t  [W-1:0] exp_early;
  dr_t          exp_early_cout;

  function automatic dr_t [W-1:0] enc(logic [W-1:0] x);
    dr_t [W-1:0] r;
    for (int i = 0; i < W; i++) r[i] = dr_encode(x[i]);
    return r;
  endfunction

  task automatic expect_true(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL [%s] %s: a=%h b=%h cin=%0b ackout=%0b next_ackout=%0b",
               MODE.name(), what, a, b, c, ackout, next_ackout);
    end
  endtask

  // new operands and the values expected before and after the carry input
  task automatic pick(int t);
    int run, m;
    logic known;
    a = $urandom;
    b = $urandom;
    c = 1'($urandom);
    case (t % 4)
      1: b = ~a ^ (W'(1) << $urandom_range(W-1));
      2: b = ~a;
      default: ;
    endcase
    full = {1'b0, a} + {1'b0, b} + (W+1)'(c);
    known = 1'b0; m = 0; run = 0;
    for (int i = 0; i < W; i++) begin
      exp_early[i] = known ? dr_encode(full[i]) : SPACER;
      if (a[i] == b[i]) begin known = 1'b1; run = 0; end
      else begin run++; if (run > m) m = run; end
    end
    exp_early_cout = known ? dr_encode(full[W]) : SPACER;
    if (!known) n_cin_wait++;
    if (m > 8) n_long++;
  endtask

  task automatic need(int n, string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL [%s] never happened: %s", MODE.name(), what);
    end
  endtask

  initial begin
    logic preloaded, bp;
    checks = 0; failures = 0; done = 1'b0;
    rst_n = 1'b0; in_a = '0; in_b = '0; in_cin = SPACER; following_ackout = 1'b0;
    preloaded = 1'b0;
    #2 rst_n = 1'b1;
    #1 expect_true(ackout == 1'b0 && next_ackout == 1'b0 && out_sum == '0, "idle after reset");

    for (int t = 0; t < int'(NTXN); t++) begin
      if (!preloaded) begin
        pick(t);
        in_a = enc(a); in_b = enc(b);
        #1;
        expect_true(ackout == 1'b0 && next_ackout == 1'b0, "no acknowledge without carry input");
        expect_true(out_sum === exp_early, "early sums");
        expect_true(probe_fb_cout === exp_early_cout, "adder carry before carry input");
        if (exp_early_cout != SPACER) n_early_carry++;
        if (MODE == LOCAL) begin
          expect_true(out_cout === exp_early_cout, "carry goes straight to the next register");
        end else begin
          expect_true(out_cout === SPACER, "carry held by synchronizer");
          if (exp_early_cout != SPACER) n_withheld++;
        end
        in_cin = dr_encode(c);
        #1;
      end
      preloaded = 1'b0;
      expect_true(ackout == 1'b1 && next_ackout == 1'b1, "handshake complete");
      expect_true(out_sum === enc(full[W-1:0]) && out_cout === dr_encode(full[W]), "result");

      // return to zero, operands first
      in_a = '0; in_b = '0;
      #1;
      expect_true(probe_fb_cout === SPACER, "early reset of the adder carry");
      n_early_reset++;
      expect_true(ackout == 1'b1, "ackout waits for the carry input spacer");
      if (MODE == GLOBAL) begin
        expect_true(probe_nxt_cout === dr_encode(full[W]), "synchronizer holds carry until ackout falls");
        n_sync_hold++;
      end
      in_cin = SPACER;
      #1;
      expect_true(ackout == 1'b0, "ackout falls after full spacer");
      expect_true(probe_nxt_cout === SPACER, "carry path reset");
      expect_true(next_ackout == 1'b1 && out_sum === enc(full[W-1:0]), "result held for slow receiver");
      n_held++;

      // sender runs ahead of the receiver now and then
      bp = ($urandom_range(3) == 0) && (t < int'(NTXN) - 1);
      if (bp) begin
        pick(t + 1);
        in_a = enc(a); in_b = enc(b); in_cin = dr_encode(c);
        #1;
        expect_true(ackout == 1'b0, "current register refuses data while the result is unread");
        n_backpressure++;
        preloaded = 1'b1;
      end

      // receiver takes the result
      following_ackout = 1'b1;
      #1;
      expect_true(next_ackout == 1'b0 && out_sum == '0 && out_cout == SPACER, "next register reset");
      if (bp) expect_true(ackout == 1'b1, "waiting data enters once the result is taken");
      following_ackout = 1'b0;
      #1;
    end

    need(n_early_carry, "carry produced before the carry input");
    need(n_cin_wait,    "carry waiting for the carry input (full propagation)");
    need(n_long,        "carry propagation run longer than 8 bits");
    need(n_early_reset, "early reset of the adder carry");
    need(n_held,        "result held for a slow receiver");
    need(n_backpressure,"sender blocked by a full next stage");
    if (MODE == GLOBAL) begin
      need(n_withheld,  "carry withheld by the synchronizer");
      need(n_sync_hold, "carry held by the synchronizer during reset");
    end
    $display("[%s] transactions %0d: early carry %0d, withheld %0d, full propagation %0d, m>8 %0d, early reset %0d, sync hold %0d, backpressure %0d",
             MODE.name(), NTXN, n_early_carry, n_withheld, n_cin_wait, n_long, n_early_reset, n_sync_hold, n_backpressure);
    done = 1'b1;
  end

endmodule
