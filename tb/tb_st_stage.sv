// tb_st_stage -- end-to-end test of the self-timed adder stage in both
// indication modes.
//
// Two full-width (32-bit) stages, one LOCAL and one GLOBAL, each driven by
// its own st_env with 1200 random operand pairs (a quarter of them with
// every bit propagating, a quarter with a single generate/kill bit). The
// environment checks every result and every handshake step, and counts the
// mechanisms of the stage (early carry, synchronizer hold-back, early reset,
// backpressure); one that never occurs counts as a failure.
module tb_st_stage;
  import dr_pkg::*;

  localparam int W = 32;

  logic         rst_l, rst_g;
  dr_t [W-1:0]  a_l, b_l, s_l, a_g, b_g, s_g;
  dr_t          c_l, co_l, c_g, co_g;
  logic         ack_l, nack_l, fack_l, ack_g, nack_g, fack_g;
  logic         done_l, done_g;
  int           chk_l, fail_l, chk_g, fail_g;

  st_stage u_local (
    .rst_n(rst_l), .in_a(a_l), .in_b(b_l), .in_cin(c_l), .ackout(ack_l),
    .out_sum(s_l), .out_cout(co_l), .next_ackout(nack_l), .following_ackout(fack_l)
  );
  st_env #(.WIDTH(W), .MODE(LOCAL)) env_l (
    .rst_n(rst_l), .in_a(a_l), .in_b(b_l), .in_cin(c_l), .ackout(ack_l),
    .out_sum(s_l), .out_cout(co_l), .next_ackout(nack_l), .following_ackout(fack_l),
    .probe_fb_cout(u_local.fb_cout), .probe_nxt_cout(u_local.nxt_cout),
    .done(done_l), .checks(chk_l), .failures(fail_l)
  );

  st_stage #(.WIDTH(W), .MODE(GLOBAL)) u_global (
    .rst_n(rst_g), .in_a(a_g), .in_b(b_g), .in_cin(c_g), .ackout(ack_g),
    .out_sum(s_g), .out_cout(co_g), .next_ackout(nack_g), .following_ackout(fack_g)
  );
  st_env #(.WIDTH(W), .MODE(GLOBAL)) env_g (
    .rst_n(rst_g), .in_a(a_g), .in_b(b_g), .in_cin(c_g), .ackout(ack_g),
    .out_sum(s_g), .out_cout(co_g), .next_ackout(nack_g), .following_ackout(fack_g),
    .probe_fb_cout(u_global.fb_cout), .probe_nxt_cout(u_global.nxt_cout),
    .done(done_g), .checks(chk_g), .failures(fail_g)
  );

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk_l + chk_g, fail_l + fail_g + 1);
    $finish;
  end

  initial begin
    wait (done_l && done_g);
    $display("TB_RESULT checks=%0d failures=%0d", chk_l + chk_g, fail_l + fail_g);
    $finish;
  end

endmodule
