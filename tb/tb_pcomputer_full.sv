// tb_pcomputer_full: the same end-to-end flow as tb_pcomputer_top, with the
// p-computer at its default size: 10 replicas of the 6x6x6 lattice (2160
// p-bits), a 15-entry schedule and 10^4 sample entries. It runs two
// experiments of the deepest schedule, p = 15 layers after the beta = 0
// layer, with 720 Monte Carlo sweeps per layer, on a planted 6x6x6 spin glass
// whose ground-state energy is -648, freezes the machine once, takes a
// snapshot and reads all samples back over the host bus.
module tb_pcomputer_full;
  import paoa_pkg::*;
  localparam int L = 6, REPLICAS = 10, P_MAX = 15, RUNS_MAX = 10000;   // the top's defaults
  localparam int P = 15, MCS = 720, RUNS = 2;
  localparam int WATCHDOG = 400000;
  localparam int N = L * L * L, NB = N * REPLICAS;
  localparam int WORDS = (NB + 31) / 32;
  localparam int WW = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic clk = 0, rst_n = 0;
  logic host_we = 0, host_re = 0;
  logic [HOST_AW-1:0] host_addr = '0;
  logic [HOST_DW-1:0] host_wdata = '0, host_rdata;
  logic host_rvalid, busy;
  fx_t beta;
  logic [$clog2(P_MAX+1)-1:0] layer;
  logic [NB-1:0] m_all;
  int checks = 0, failures = 0;

  pcomputer_top dut (
    .clk, .rst_n, .host_we, .host_re, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .busy, .beta, .layer, .m_all);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- problem -------------------------------------------------
  int g [N];
  int jb [N][3];        // Ising couplings of the +x, +y, +z bonds

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

  // ---------------- bus -----------------------------------------------------
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

  // ---------------- monitors ------------------------------------------------
  int n_beta0_layers, n_layer_changes, n_experiments, n_freezes, n_snapshots, n_batch_end;
  int run_cycles, frozen_bad;
  logic [NB-1:0] written [RUNS_MAX];
  int n_written;
  logic [$clog2(P_MAX+1)-1:0] layer_q;
  logic busy_q;
  int e_after_random [$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_host.run) run_cycles++;
      if (dut.sample_we) begin
        if (n_written < RUNS_MAX) written[n_written] = m_all;
        n_written++;
      end
      if (layer != layer_q) begin
        n_layer_changes++;
        if (layer == 0) n_experiments++;
        if (layer_q == 0) begin
          n_beta0_layers++;
          for (int r = 0; r < REPLICAS; r++) e_after_random.push_back(energy(m_all[r*N +: N]));
        end
      end
      if (busy_q && !busy) n_batch_end++;
      if (layer == 0 && dut.u_host.run) chk(beta == 0, "beta is 0 in layer 0");
    end
    layer_q = layer;
    busy_q  = busy;
  end

  initial begin
    logic [31:0] d;
    logic [NB-1:0] rb;
    int e, sum_final, best;
    n_beta0_layers = 0; n_layer_changes = 0; n_experiments = 0; n_freezes = 0;
    n_snapshots = 0; n_batch_end = 0; run_cycles = 0; frozen_bad = 0; n_written = 0;
    layer_q = 0; busy_q = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(A(REG_CTRL, CR_INFO), d);
    chk(d == {8'(REPLICAS), 8'(L), 8'(P_MAX), 8'(WORDS)}, "info register");

    // planted problem, loaded in 0/1 form
    for (int n = 0; n < N; n++) g[n] = ($urandom_range(0, 1) == 1) ? 1 : -1;
    for (int n = 0; n < N; n++)
      for (int d2 = 0; d2 < 3; d2++) begin
        jb[n][d2] = g[n] * g[nbr(n, d2, 1)];
        wr(A(REG_JBOND, 4 * n + d2), 32'(64 * jb[n][d2]));        // J' = 2J
      end
    for (int n = 0; n < N; n++) begin
      int s;
      s = 0;
      for (int d2 = 0; d2 < 3; d2++) s += jb[n][d2] + jb[nbr(n, d2, -1)][d2];
      wr(A(REG_HBIAS, n), 32'(-32 * s));                           // h' = -sum J
    end
    // ground state check of the model itself
    begin
      logic [N-1:0] gs;
      for (int n = 0; n < N; n++) gs[n] = (g[n] > 0);
      chk(energy(gs) == -3 * N, "planted ground state energy is -3N");
    end
    // schedule: beta_k = (6k + 1)/32, about 0.2 k, for k = 1..P
    for (int k = 1; k <= P; k++) wr(A(REG_SCHED, k), 32'(6 * k + 1));
    wr(A(REG_CTRL, CR_LAYERS), P);
    wr(A(REG_CTRL, CR_MCS), MCS);
    wr(A(REG_CTRL, CR_RUNS), RUNS);
    wr(A(REG_CTRL, CR_CTRL), CTRL_ENABLE | CTRL_START);

    // freeze once, in the middle of the second experiment
    wait (n_experiments == 1 && layer == 2);
    wr(A(REG_CTRL, CR_CTRL), 0);
    n_freezes++;
    begin
      logic [NB-1:0] held;
      logic [$clog2(P_MAX+1)-1:0] lheld;
      held = m_all; lheld = layer;
      repeat (100) begin
        @(posedge clk); #1;
        if (m_all != held || layer != lheld) frozen_bad++;
      end
    end
    chk(frozen_bad == 0, "p-bits and annealing unit hold while disabled");
    wr(A(REG_CTRL, CR_CTRL), CTRL_ENABLE);

    wait (!busy);
    repeat (3) @(posedge clk);
    chk(run_cycles == RUNS * (P * MCS + 1) * 2,
        $sformatf("running cycles %0d, expected %0d", run_cycles, RUNS * (P * MCS + 1) * 2));
    rd(A(REG_CTRL, CR_WPTR), d);
    chk(d == RUNS, "one sample per experiment");
    // snapshot after the batch: the machine is idle, so it equals the last sample
    wr(A(REG_CTRL, CR_CTRL), CTRL_ENABLE | CTRL_SNAPSHOT);
    n_snapshots++;
    repeat (2) @(posedge clk);
    rd(A(REG_CTRL, CR_WPTR), d);
    chk(d == RUNS + 1, "snapshot took one entry");

    sum_final = 0; best = 0;
    for (int s = 0; s <= RUNS; s++) begin
      for (int w = 0; w < WORDS; w++) begin
        rd(A(REG_SAMPLE, (s << WW) | w), d);
        for (int b = 0; b < 32; b++) if (w * 32 + b < NB) rb[w * 32 + b] = d[b];
      end
      chk(rb == written[s], $sformatf("sample %0d read back as written", s));
      if (s == RUNS) chk(rb == written[RUNS - 1], "snapshot equals last sample");
      if (s < RUNS)
        for (int r = 0; r < REPLICAS; r++) begin
          e = energy(rb[r*N +: N]);
          sum_final += e;
          if (e < best) best = e;
        end
    end
    $display("mean final energy %0d / %0d, best %0d, ground state %0d",
             sum_final, RUNS * REPLICAS, best, -3 * N);
    chk(sum_final <= -(RUNS * REPLICAS * 3 * N * 8) / 10, "annealed states near the ground state");
    chk(best == -3 * N, "ground state reached in at least one run");
    foreach (e_after_random[i])
      chk(e_after_random[i] > -(3 * N) / 3, $sformatf("state after beta = 0 layer is random (E = %0d)", e_after_random[i]));

    $display("mechanisms: beta0 layers %0d, layer changes %0d, new experiments %0d, freezes %0d, snapshots %0d, batch ends %0d",
             n_beta0_layers, n_layer_changes, n_experiments, n_freezes, n_snapshots, n_batch_end);
    chk(n_beta0_layers >= RUNS, "beta = 0 layer in every experiment");
    chk(n_layer_changes >= RUNS * (P + 1) - 1, "layer changes");
    chk(n_experiments >= RUNS - 1, "experiments restart");
    chk(n_freezes > 0, "freeze exercised");
    chk(n_snapshots > 0, "snapshot exercised");
    chk(n_batch_end == 1, "batch ended once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
