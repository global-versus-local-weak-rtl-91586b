// tb_stage_register -- self-checking test of the C-element pipeline register.
//
// Full 65-bit register. Checks the 4-phase behaviour: a codeword passes
// while ackin=1 and is then held when the inputs go to spacer; the spacer
// passes only once ackin=0; a new codeword is blocked while ackin=0.
// Then random rail/ackin sequences are compared against a per-rail model.
module tb_stage_register;
  import dr_pkg::*;

  localparam int N = 65;

  logic          rst_n, ackin;
  dr_t  [N-1:0]  d, q, ref_q, w;
  int            checks = 0, failures = 0;

  stage_register dut (.rst_n(rst_n), .ackin(ackin), .d(d), .q(q));

  task automatic check(string what);
    checks++;
    if (q !== ref_q) begin
      failures++;
      $display("FAIL %s: q=%h expected %h", what, q, ref_q);
    end
  endtask

  function automatic dr_t [N-1:0] random_word();
    dr_t [N-1:0] r;
    for (int i = 0; i < N; i++) r[i] = dr_encode(1'($urandom));
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
    rst_n = 1'b0; ackin = 1'b1; d = '0; ref_q = '0;
    #1 check("reset");
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      w = random_word();
      d = w; ref_q = w;            #1 check("data passes with ackin=1");
      ackin = 1'b0;                #1 check("held when ackin falls");
      d = '0;    ref_q = '0;       #1 check("spacer passes with ackin=0");
      d = random_word();           #1 check("new data blocked with ackin=0");
      d = '0;                      #1;
      ackin = 1'b1;                #1 check("ready again");
      d = w; ref_q = w;            #1;
      d = '0;                      #1 check("spacer blocked with ackin=1");
      ackin = 1'b0; ref_q = '0;    #1 check("spacer after ackin falls");
      ackin = 1'b1;                #1;
    end
    for (int i = 0; i < 2000; i++) begin
      for (int k = 0; k < N; k++) d[k] = dr_t'($urandom_range(2));
      ackin = 1'($urandom);
      for (int k = 0; k < N; k++) begin
        if (d[k].r1 == ackin) ref_q[k].r1 = ackin;
        if (d[k].r0 == ackin) ref_q[k].r0 = ackin;
      end
      #1 check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
