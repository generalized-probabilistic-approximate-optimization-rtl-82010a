// tb_xoshiro128p: checks the xoshiro128+ generator against known outputs of
// the reference algorithm for the default seed, against a behavioural model
// for 2000 further steps, and that the state holds while en is low.
module tb_xoshiro128p;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  logic [31:0] m0, m1, m2, m3;

  xoshiro128p dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model_next();
    logic [31:0] r, t;
    r = m0 + m3;
    t = m1 << 9;
    m2 ^= m0; m3 ^= m1; m1 ^= m2; m0 ^= m3; m2 ^= t;
    m3 = (m3 << 11) | (m3 >> 21);
    return r;
  endfunction

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [31:0] known [8] = '{32'h77777777, 32'hfedcba97, 32'hd5e6f3c4, 32'h289e7641,
                             32'h33ceb29d, 32'h2fa8988a, 32'hee54b31f, 32'h55c15015};

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    // known answers
    en = 1;
    for (int i = 0; i < 8; i++) begin
      check(rnd, known[i], $sformatf("known output %0d", i));
      @(posedge clk); #1;
    end
    // model from the current state: rebuild by resetting
    rst_n = 0; @(posedge clk); #1; rst_n = 1;
    {m0, m1, m2, m3} = 128'h0123_4567_89ab_cdef_fedc_ba98_7654_3210;
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] e;
      en = ($urandom_range(0, 3) != 0);
      e = m0 + m3;
      check(rnd, e, $sformatf("step %0d", i));
      if (en) void'(model_next());
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
