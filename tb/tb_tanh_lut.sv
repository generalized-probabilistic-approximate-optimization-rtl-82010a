// tb_tanh_lut: exhaustive check of the tanh table. Every one of the 512
// entries must equal 32767*tanh(x) within one LSB, the table must be odd and
// monotonic, and a few entries must match values computed beforehand.
module tb_tanh_lut;
  import paoa_pkg::*;
  lut_idx_t idx;
  rnd_t     tq;
  int checks = 0, failures = 0;

  tanh_lut dut (.idx(idx), .tanh_q(tq));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int prev, v, vneg;
    real e;
    prev = -40000;
    for (int a = -256; a < 256; a++) begin
      idx = lut_idx_t'(a); #1;
      v = int'(tq);
      e = $tanh(real'(a) / 32.0) * 32767.0;
      chk((real'(v) - e) < 1.0 && (e - real'(v)) < 1.0, $sformatf("entry %0d = %0d, expected %f", a, v, e));
      chk(v >= prev, $sformatf("monotonic at %0d", a));
      prev = v;
      if (a > -256) begin
        idx = lut_idx_t'(-a); #1;
        vneg = int'(tq);
        chk(vneg == -v, $sformatf("odd symmetry at %0d", a));
      end
    end
    // values computed independently: round(32767 * tanh(k/32))
    idx = 0;    #1; chk(tq == 0,      "tanh(0)");
    idx = 1;    #1; chk(tq == 1024,   "tanh(1/32)");
    idx = 16;   #1; chk(tq == 15142,  "tanh(0.5)");
    idx = 32;   #1; chk(tq == 24955,  "tanh(1)");
    idx = 64;   #1; chk(tq == 31588,  "tanh(2)");
    idx = 128;  #1; chk(tq == 32745,  "tanh(4)");
    idx = 255;  #1; chk(tq == 32767,  "tanh(7.97)");
    idx = -32;  #1; chk(tq == -24955, "tanh(-1)");
    idx = -256; #1; chk(tq == -32767, "tanh(-8)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
