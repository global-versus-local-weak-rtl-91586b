// tb_synchronizer -- self-checking test of the carry synchronizer.
//
// Walks the synchronizer through the sequences it meets in a stage: the
// adder carry arrives before ackout (must be held back), ackout arrives
// first (carry passes when it comes), and during return to zero the carry
// resets before ackout falls (the output must stay valid until ackout=0).
// Random sequences are compared against a per-rail hold/copy reference.
module tb_synchronizer;
  import dr_pkg::*;

  logic rst_n, ackout;
  dr_t  icout, cout, ref_cout;
  int   checks = 0, failures = 0;
  int   n_withheld = 0;

  synchronizer dut (.rst_n(rst_n), .ackout(ackout), .icout(icout), .cout(cout));

  task automatic check(string what);
    checks++;
    if (cout !== ref_cout) begin
      failures++;
      $display("FAIL %s: icout=%b ackout=%b cout=%b expected %b", what, icout, ackout, cout, ref_cout);
    end
  endtask

  function automatic dr_t model(dr_t prev, dr_t ic, logic ack);
    dr_t r = prev;
    if (ic.r1 == ack) r.r1 = ack;
    if (ic.r0 == ack) r.r0 = ack;
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; ackout = 1'b0; icout = SPACER; ref_cout = SPACER;
    #1 check("reset");
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      logic v = 1'($urandom);
      // early carry, ackout still low: withheld
      icout = dr_encode(v); #1 check("withheld");
      if (cout == SPACER) n_withheld++;
      ackout = 1'b1; ref_cout = dr_encode(v); #1 check("released");
      // early reset of the carry: output must hold until ackout falls
      icout = SPACER; #1 check("held in reset");
      ackout = 1'b0; ref_cout = SPACER; #1 check("reset done");
      // ackout first, carry later
      ackout = 1'b1; #1 check("ack first");
      icout = dr_encode(~v); ref_cout = dr_encode(~v); #1 check("carry after ack");
      ackout = 1'b0; #1 check("ack falls first");
      icout = SPACER; ref_cout = SPACER; #1 check("spacer");
    end
    for (int i = 0; i < 1000; i++) begin
      icout  = dr_encode(1'($urandom));
      if ($urandom_range(3) == 0) icout = SPACER;
      ackout = 1'($urandom);
      ref_cout = model(ref_cout, icout, ackout);
      #1 check("random");
    end
    checks++;
    if (n_withheld == 0) begin failures++; $display("FAIL: carry never withheld"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
