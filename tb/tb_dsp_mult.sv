// tb_dsp_mult: beta * I against integer multiplication for corner values and
// random operands.
module tb_dsp_mult;
  import paoa_pkg::*;
  fx_t   beta;
  syn_t  i_in;
  prod_t prod;
  int checks = 0, failures = 0;

  dsp_mult dut (.beta, .i_in, .prod);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_and_check(input int b, input int i);
    longint exp;
    beta = fx_t'(b); i_in = syn_t'(i);
    #1;
    exp = longint'(beta) * longint'(i_in);
    checks++;
    if (longint'(prod) != exp) begin
      failures++;
      $display("FAIL %0d * %0d: got %0d expected %0d", beta, i_in, prod, exp);
    end
  endtask

  initial begin
    apply_and_check(-512, -4096);
    apply_and_check(-512, 4095);
    apply_and_check(511, -4096);
    apply_and_check(511, 4095);
    apply_and_check(64, 32);     // 2.0 * 1.0 = 2.0 (2048 with 10 fraction bits)
    apply_and_check(0, 1234);
    repeat (5000) apply_and_check(int'($urandom_range(0, 1023)) - 512, int'($urandom_range(0, 8191)) - 4096);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
