// tb_completion_detector -- self-checking test of the completion detector.
//
// Full size (two 32-bit operands plus the extra bit, 65 dual-rail inputs)
// and the one-operand variant used after the next stage register. Bits
// arrive one at a time in random order: ackout must stay 0 until the last
// bit is valid, then rise; when the bits return to spacer one at a time it
// must stay 1 until the last bit is spacer.
module tb_completion_detector;
  import dr_pkg::*;

  localparam int W = 32;

  logic                 rst_n;
  dr_t  [1:0][W-1:0]    ops2;
  dr_t  [0:0][W-1:0]    ops1;
  dr_t                  extra2, extra1;
  logic                 ack2, ack1;
  int                   checks = 0, failures = 0;

  completion_detector dut2 (.rst_n(rst_n), .ops(ops2), .extra(extra2), .ackout(ack2));
  completion_detector #(.WIDTH(W), .OPERANDS(1)) dut1 (.rst_n(rst_n), .ops(ops1), .extra(extra1), .ackout(ack1));

  task automatic expect_ack(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: ackout=%0b expected %0b", what, got, exp);
    end
  endtask

  // set bit k (0..n-1) of the flattened input of one detector
  task automatic set_bit2(int k, dr_t v);
    if (k < 2*W) ops2[k/W][k%W] = v; else extra2 = v;
  endtask
  task automatic set_bit1(int k, dr_t v);
    if (k < W) ops1[0][k] = v; else extra1 = v;
  endtask

  task automatic shuffle(ref int order[], input int n);
    order = new[n];
    for (int i = 0; i < n; i++) order[i] = i;
    for (int i = n-1; i > 0; i--) begin
      int j = $urandom_range(i);
      int t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order[];
    rst_n = 1'b0; ops2 = '0; ops1 = '0; extra2 = SPACER; extra1 = SPACER;
    #1 rst_n = 1'b1;
    #1 expect_ack(ack2, 1'b0, "spacer after reset");
    for (int t = 0; t < 60; t++) begin
      shuffle(order, 2*W+1);
      for (int i = 0; i < 2*W+1; i++) begin
        set_bit2(order[i], dr_encode(1'($urandom)));
        #1 expect_ack(ack2, i == 2*W, "data arriving (2 operands)");
      end
      shuffle(order, 2*W+1);
      for (int i = 0; i < 2*W+1; i++) begin
        set_bit2(order[i], SPACER);
        #1 expect_ack(ack2, i != 2*W, "spacer arriving (2 operands)");
      end
      shuffle(order, W+1);
      for (int i = 0; i < W+1; i++) begin
        set_bit1(order[i], dr_encode(1'($urandom)));
        #1 expect_ack(ack1, i == W, "data arriving (1 operand)");
      end
      shuffle(order, W+1);
      for (int i = 0; i < W+1; i++) begin
        set_bit1(order[i], SPACER);
        #1 expect_ack(ack1, i != W, "spacer arriving (1 operand)");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
