// tb_bsn: statistical check of the p-bit. For a set of inputs beta*I the
// fraction of updates giving m = 1 must match (1 + tanh(x)) / 2 within 5
// standard deviations, where x is the input rounded down to 1/32 and clipped
// to [-8, 8). Also checks that m holds while en is low and that the p-bit is
// forced to 1 / 0 by strongly positive / negative inputs.
module tb_bsn;
  import paoa_pkg::*;
  logic  clk = 0, rst_n = 0, en = 0;
  prod_t beta_i;
  logic  m;
  int checks = 0, failures = 0;
  localparam int K = 4000;

  bsn dut (.clk, .rst_n, .en, .beta_i, .m);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // input given as x * 1024 (10 fraction bits)
  task automatic measure(input int raw);
    int ones, q;
    real x, p, sd, f;
    beta_i = prod_t'(raw);
    en = 1;
    ones = 0;
    for (int k = 0; k < K; k++) begin
      @(posedge clk); #1;
      ones += int'(m);
    end
    en = 0;
    q = (raw >= 0) ? raw / 32 : -((-raw + 31) / 32);  // floor(raw / 32)
    if (q > 255) q = 255;
    if (q < -256) q = -256;
    x  = real'(q) / 32.0;
    p  = (1.0 + $tanh(x)) / 2.0;
    sd = $sqrt(p * (1.0 - p) / real'(K));
    if (sd < 0.002) sd = 0.002;
    f  = real'(ones) / real'(K);
    chk((f - p) < 5.0 * sd && (p - f) < 5.0 * sd,
        $sformatf("input %0d: P(m=1) = %f, expected %f", raw, f, p));
  endtask

  initial begin
    beta_i = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    chk(m == 1'b0, "m is 0 after reset");
    measure(0);
    measure(512);      //  0.5
    measure(-512);     // -0.5
    measure(1024);     //  1.0
    measure(-1024);
    measure(-1000);    // -0.977, rounds down to -31/32
    measure(2048);     //  2.0
    measure(300);      //  0.29
    measure(-300);
    measure(1 << 20);  // far above the table: saturates
    measure(-(1 << 20));
    // hold while en is low
    beta_i = prod_t'(0);
    en = 1; @(posedge clk); #1; en = 0;
    begin
      logic held;
      bit   same;
      held = m;
      same = 1;
      repeat (200) begin @(posedge clk); #1; if (m != held) same = 0; end
      chk(same, "m holds while en is low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
