// tb_st_stage_full -- the stage exactly as configured by default (32-bit,
// LOCAL indication, no parameter overrides) driven through 1200 checked
// 4-phase transactions by st_env.
module tb_st_stage_full;
  import dr_pkg::*;

  localparam int W = 32;

  logic         rst_n;
  dr_t [W-1:0]  a, b, s;
  dr_t          c, co;
  logic         ack, nack, fack, done;
  int           checks, failures;

  st_stage u_dut (
    .rst_n(rst_n), .in_a(a), .in_b(b), .in_cin(c), .ackout(ack),
    .out_sum(s), .out_cout(co), .next_ackout(nack), .following_ackout(fack)
  );
  st_env #(.WIDTH(W), .MODE(LOCAL)) env (
    .rst_n(rst_n), .in_a(a), .in_b(b), .in_cin(c), .ackout(ack),
    .out_sum(s), .out_cout(co), .next_ackout(nack), .following_ackout(fack),
    .probe_fb_cout(u_dut.fb_cout), .probe_nxt_cout(u_dut.nxt_cout),
    .done(done), .checks(checks), .failures(failures)
  );

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
