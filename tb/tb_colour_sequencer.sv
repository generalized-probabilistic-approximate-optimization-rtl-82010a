// tb_colour_sequencer: the colour enables must alternate 01, 10, 01, ...
// while run is high, sweep_tick must mark every second cycle (the cycle of
// colour 1), nothing may be enabled while run is low, a frozen sweep must
// resume with the colour that was next, and clear must return to colour 0.
module tb_colour_sequencer;
  logic clk = 0, rst_n = 0, clear = 0, run = 0;
  logic [1:0] colour_en;
  logic sweep_tick;
  int checks = 0, failures = 0;
  int exp_phase;

  colour_sequencer #(.NUM_COLOURS(2)) dut (.clk, .rst_n, .clear, .run, .colour_en, .sweep_tick);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    exp_phase = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      if (c == 1000) clear = 1;
      else if (c % 7 == 3) run = 0;
      else run = ($urandom_range(0, 4) != 0);
      #1;
      if (clear) begin
        chk(colour_en == (run ? (2'b01 << exp_phase) : 2'b00), "enable before clear");
        exp_phase = 0;
      end else if (run) begin
        chk(colour_en == (2'b01 << exp_phase), $sformatf("colour_en %b, phase %0d", colour_en, exp_phase));
        chk(sweep_tick == (exp_phase == 1), "sweep_tick on colour 1");
        exp_phase = 1 - exp_phase;
      end else begin
        chk(colour_en == 2'b00 && !sweep_tick, "nothing enabled while frozen");
      end
      @(posedge clk);
      clear = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
