// tb_c_element -- self-checking test of the 2-input C-element.
//
// Drives random input pairs (and a few directed ones) and compares z with a
// reference that follows "copy when equal, hold otherwise", kept in the
// testbench. Checks reset too. No clock: one time unit per input change.
module tb_c_element;

  logic rst_n, a, b, z, ref_z;
  int   checks = 0, failures = 0;

  c_element dut (.rst_n(rst_n), .a(a), .b(b), .z(z));

  task automatic check(string what);
    checks++;
    if (z !== ref_z) begin
      failures++;
      $display("FAIL %s: a=%0b b=%0b z=%0b expected %0b", what, a, b, z, ref_z);
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
    a = 1'b1; b = 1'b0; rst_n = 1'b0; ref_z = 1'b0;
    #1 check("reset");
    rst_n = 1'b1;
    #1 check("hold 0 after reset");
    // directed: rise only when both high, fall only when both low
    a = 1'b1; b = 1'b1; ref_z = 1'b1; #1 check("both high");
    a = 1'b0;                         #1 check("one low holds 1");
    a = 1'b1; b = 1'b0;               #1 check("other low holds 1");
    a = 1'b0;           ref_z = 1'b0; #1 check("both low");
    b = 1'b1;                         #1 check("one high holds 0");
    for (int i = 0; i < 2000; i++) begin
      a = 1'($urandom);
      b = 1'($urandom);
      if (a == b) ref_z = a;
      #1 check("random");
    end
    rst_n = 1'b0; ref_z = 1'b0;
    #1 check("reset again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
