// tb_annealing_unit: loads a schedule, then feeds sweep ticks at random
// cycles and compares beta, the layer index and exp_done with a model of the
// schedule: layer 0 (beta = 0) for one sweep and layers 1..p of
// mcs_per_layer sweeps each, then wrap-around. Checks that an experiment ends
// after exactly p*mcs_per_layer + 1 sweeps, that restart returns to layer 0 and that
// writes to entry 0 are ignored.
module tb_annealing_unit;
  import paoa_pkg::*;
  localparam int P_MAX = 15;
  logic clk = 0, rst_n = 0, restart = 0, sweep_tick = 0, sched_we = 0;
  logic [3:0] num_layers, sched_addr, layer;
  logic [15:0] mcs_per_layer, mcs_count;
  fx_t sched_wdata, beta;
  logic exp_done;
  int checks = 0, failures = 0;
  fx_t sched_m [P_MAX+1];
  int m_layer, m_mcs, ticks_in_exp, exps;

  annealing_unit #(.P_MAX(P_MAX)) dut (.clk, .rst_n, .restart, .sweep_tick, .num_layers, .mcs_per_layer,
    .sched_we, .sched_addr, .sched_wdata, .beta, .layer, .mcs_count, .exp_done);

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

  task automatic write_beta(input int k, input int v);
    @(negedge clk);
    sched_we = 1; sched_addr = 4'(k); sched_wdata = fx_t'(v);
    @(negedge clk);
    sched_we = 0;
    if (k != 0) sched_m[k] = fx_t'(v);
  endtask

  // run `sweeps` ticks with random gaps, checking every cycle
  task automatic run_ticks(input int sweeps, input int p, input int mcs);
    int done, len;
    done = 0;
    while (done < sweeps) begin
      @(negedge clk);
      sweep_tick = ($urandom_range(0, 2) != 0);
      #1;
      len = (m_layer == 0) ? 1 : mcs;
      chk(int'(layer) == m_layer, $sformatf("layer %0d expected %0d", layer, m_layer));
      chk(beta == ((m_layer == 0) ? fx_t'(0) : sched_m[m_layer]), $sformatf("beta in layer %0d", m_layer));
      chk(exp_done == (sweep_tick && m_mcs == len - 1 && m_layer == p), "exp_done");
      if (sweep_tick) begin
        done++;
        ticks_in_exp++;
        if (exp_done) begin
          chk(ticks_in_exp == p * mcs + 1, $sformatf("experiment took %0d sweeps, expected %0d",
                                                     ticks_in_exp, p * mcs + 1));
          ticks_in_exp = 0;
          exps++;
        end
        if (m_mcs == len - 1) begin
          m_mcs = 0;
          m_layer = (m_layer == p) ? 0 : m_layer + 1;
        end else m_mcs++;
      end
      @(posedge clk);
    end
    @(negedge clk);
    sweep_tick = 0;
  endtask

  task automatic do_restart();
    @(negedge clk); restart = 1; @(negedge clk); restart = 0;
    m_layer = 0; m_mcs = 0; ticks_in_exp = 0;
  endtask

  initial begin
    for (int k = 0; k <= P_MAX; k++) sched_m[k] = '0;
    num_layers = 4; mcs_per_layer = 3;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int k = 1; k <= P_MAX; k++) write_beta(k, 16 * k - 100);
    write_beta(0, 77);   // must be ignored: layer 0 is always beta = 0
    do_restart();
    exps = 0;
    run_ticks(3 * (4 * 3 + 1), 4, 3);
    chk(exps == 3, "three experiments with p = 4");
    // restart in the middle of an experiment
    run_ticks(7, 4, 3);
    do_restart();
    num_layers = 15; mcs_per_layer = 2;
    exps = 0;
    run_ticks(2 * (15 * 2 + 1), 15, 2);
    chk(exps == 2, "two experiments with p = 15");
    // the paper's 720 sweeps per layer with p = 5
    do_restart();
    num_layers = 5; mcs_per_layer = 720;
    exps = 0;
    run_ticks(5 * 720 + 1, 5, 720);
    chk(exps == 1, "one experiment with p = 5, 720 sweeps per layer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
