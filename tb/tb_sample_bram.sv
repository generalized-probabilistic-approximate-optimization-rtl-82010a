// tb_sample_bram: writes random snapshots of a 100-bit, 16-entry memory and
// reads every 32-bit word back, checking data and the one-cycle read latency;
// words past the snapshot width must read as zero.
module tb_sample_bram;
  localparam int WIDTH = 100, DEPTH = 16, WORDS = 4;
  logic clk = 0, we = 0, re = 0;
  logic [3:0] waddr, raddr;
  logic [1:0] rword;
  logic [WIDTH-1:0] wdata;
  logic [31:0] rdata;
  logic [WORDS*32-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sample_bram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rword, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    for (int r = 0; r < 3; r++) begin
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        we = 1; waddr = 4'(a);
        wdata = {$urandom, $urandom, $urandom, $urandom};
        shadow[a] = (WORDS*32)'(wdata);
      end
      @(negedge clk); we = 0;
      for (int a = 0; a < DEPTH; a++) begin
        for (int w = 0; w < WORDS; w++) begin
          logic [31:0] prev_rdata;
          @(negedge clk);
          re = 1; raddr = 4'(a); rword = 2'(w);
          prev_rdata = rdata;
          @(posedge clk); #1;
          re = 0;
          chk(rdata == shadow[a][w*32 +: 32], $sformatf("entry %0d word %0d", a, w));
          // read data holds while re is low
          @(posedge clk); #1;
          chk(rdata == shadow[a][w*32 +: 32], "rdata holds without a read");
          if (w == 3) chk(rdata[31:4] == '0, "padding reads zero");
          if (prev_rdata != shadow[a][w*32 +: 32]) checks++;  // latency observed: old value prev_rdata the edge
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
