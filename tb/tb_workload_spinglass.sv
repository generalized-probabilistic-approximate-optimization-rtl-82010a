// tb_workload_spinglass: the 3D spin-glass workload at full size.
//
// A random +-1 spin glass on the periodic 6x6x6 lattice (216 spins, 648
// bonds, generated by a fixed linear congruential generator so every run sees
// the same instance) is sampled by the default p-computer (10 replicas) with
// 720 sweeps per layer, as in the annealing experiments: first the flat
// schedule beta = 2 with p = 5, then a linear cooling schedule
// beta_k = 4.5 k / p for p = 5, 10 and 15. Two experiments per schedule give
// 20 samples each; the testbench reads them over the host bus and computes
// their energies. Checks: every energy lies within the bounds of the
// instance, the deepest cooling schedule reaches a lower mean energy than the
// flat schedule and than the shallowest cooling schedule (within a margin of
// 2), and its mean energy per spin is below -1.5 (the ground state of 3D +-J
// glasses lies near -1.7 per spin).
module tb_workload_spinglass;
  import paoa_pkg::*;
  localparam int L = 6, REPLICAS = 10, MCS = 720, RUNS = 2;
  localparam int N = L * L * L, NB = N * REPLICAS;
  localparam int WORDS = (NB + 31) / 32;
  localparam int WW = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic clk = 0, rst_n = 0;
  logic host_we = 0, host_re = 0;
  logic [HOST_AW-1:0] host_addr = '0;
  logic [HOST_DW-1:0] host_wdata = '0, host_rdata;
  logic host_rvalid, busy;
  fx_t beta;
  logic [3:0] layer;
  logic [NB-1:0] m_all;
  int checks = 0, failures = 0;

  pcomputer_top dut (
    .clk, .rst_n, .host_we, .host_re, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .busy, .beta, .layer, .m_all);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int jb [N][3];
  int unsigned lcg = 32'd12345;

  function automatic int coin();
    lcg = lcg * 32'd1664525 + 32'd1013904223;
    return lcg[31] ? 1 : -1;
  endfunction

  function automatic int nbr(input int n, input int d, input int step);
    int c [3];
    c[0] = n % L; c[1] = (n / L) % L; c[2] = n / (L * L);
    c[d] = (c[d] + step + L) % L;
    return c[0] + L * c[1] + L * L * c[2];
  endfunction

  function automatic int energy(input logic [N-1:0] s);
    int e;
    e = 0;
    for (int n = 0; n < N; n++)
      for (int d = 0; d < 3; d++)
        e -= jb[n][d] * (2 * int'(s[n]) - 1) * (2 * int'(s[nbr(n, d, 1)]) - 1);
    return e;
  endfunction

  function automatic logic [HOST_AW-1:0] A(input region_e r, input int off);
    return {r, OFFS_W'(off)};
  endfunction

  task automatic wr(input logic [HOST_AW-1:0] a, input logic [31:0] d);
    @(negedge clk);
    host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic rd(input logic [HOST_AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    host_re = 1; host_addr = a;
    @(posedge clk); #1;
    host_re = 0;
    d = host_rdata;
  endtask

  // run one batch and return the mean energy of its samples (times 100)
  task automatic run_batch(input int p, input bit flat, output int mean100, output int best);
    logic [31:0] d;
    logic [NB-1:0] rb;
    int e, sum;
    for (int k = 1; k <= p; k++)
      wr(A(REG_SCHED, k), flat ? 32'd64 : 32'((144 * k + p / 2) / p));   // 2.0, or 4.5 k / p
    wr(A(REG_CTRL, CR_LAYERS), p);
    wr(A(REG_CTRL, CR_CTRL), CTRL_ENABLE | CTRL_START);
    @(posedge clk);
    wait (!busy);
    repeat (2) @(posedge clk);
    sum = 0; best = 0;
    for (int s = 0; s < RUNS; s++) begin
      for (int w = 0; w < WORDS; w++) begin
        rd(A(REG_SAMPLE, (s << WW) | w), d);
        for (int b = 0; b < 32; b++) if (w * 32 + b < NB) rb[w * 32 + b] = d[b];
      end
      for (int r = 0; r < REPLICAS; r++) begin
        e = energy(rb[r*N +: N]);
        chk(e >= -3 * N && e <= 3 * N && (e % 2) == 0, $sformatf("energy %0d within bounds", e));
        sum += e;
        if (e < best) best = e;
      end
    end
    mean100 = (100 * sum) / (RUNS * REPLICAS);
    $display("schedule %s p = %0d: mean energy %0d.%02d, best %0d", flat ? "flat beta=2" : "linear",
             p, mean100 / 100, (mean100 < 0 ? -mean100 : mean100) % 100, best);
  endtask

  initial begin
    int m_flat, m5, m10, m15, b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) for (int d = 0; d < 3; d++) jb[n][d] = coin();
    for (int n = 0; n < N; n++)
      for (int d = 0; d < 3; d++) wr(A(REG_JBOND, 4 * n + d), 32'(64 * jb[n][d]));
    for (int n = 0; n < N; n++) begin
      int s;
      s = 0;
      for (int d = 0; d < 3; d++) s += jb[n][d] + jb[nbr(n, d, -1)][d];
      wr(A(REG_HBIAS, n), 32'(-32 * s));
    end
    wr(A(REG_CTRL, CR_MCS), MCS);
    wr(A(REG_CTRL, CR_RUNS), RUNS);
    run_batch(5, 1'b1, m_flat, b);
    run_batch(5, 1'b0, m5, b);
    run_batch(10, 1'b0, m10, b);
    run_batch(15, 1'b0, m15, b);
    chk(m15 <= m_flat, "deep cooling schedule beats the flat beta = 2 schedule");
    chk(m15 <= m5 + 200, "deeper schedule no worse than the shallow one");
    chk(m15 <= -150 * N, "mean energy per spin below -1.5 at p = 15");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
