// tb_host_regs: bus writes and reads of every control register, decoding of
// schedule / coupling / bias writes into their strobes, and batch control:
// start, one sample write the cycle after each exp_done, busy falling after
// num_runs experiments, the global enable gating run, and the snapshot
// command. Sample reads must be split into entry and word and return the
// memory's data with the register path's latency.
module tb_host_regs;
  import paoa_pkg::*;
  localparam int L = 2, REPLICAS = 3, P_MAX = 5, RUNS_MAX = 8;   // 24 bits per sample, 1 word
  logic clk = 0, rst_n = 0;
  logic host_we = 0, host_re = 0;
  logic [HOST_AW-1:0] host_addr = '0;
  logic [HOST_DW-1:0] host_wdata = '0, host_rdata;
  logic host_rvalid;
  logic run, busy, restart, exp_done = 0;
  logic [2:0] num_layers, sched_addr;
  logic [15:0] mcs_per_layer;
  logic sched_we, j_we, h_we, sample_we, sample_re;
  logic [2:0] j_node, h_node;
  logic [1:0] j_dir;
  fx_t wdata_fx;
  logic [2:0] sample_waddr, sample_raddr;
  logic [0:0] sample_rword;
  logic [31:0] sample_rdata;
  int checks = 0, failures = 0;

  host_regs #(.L(L), .REPLICAS(REPLICAS), .P_MAX(P_MAX), .RUNS_MAX(RUNS_MAX)) dut (.*);

  always #5 clk = ~clk;

  // memory model behind the read port: data = raddr-dependent pattern, 1 cycle
  always_ff @(posedge clk) if (sample_re) sample_rdata <= 32'hA000_0000 | {sample_raddr, 4'h0, sample_rword};

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
    chk(host_rvalid, "rvalid one cycle after re");
    d = host_rdata;
  endtask

  task automatic pulse_exp_done();
    @(negedge clk); exp_done = 1; @(negedge clk); exp_done = 0;
  endtask

  int n_sched, n_j, n_h, n_samp;
  logic [2:0] last_waddr;
  always @(posedge clk) begin
    if (sched_we) n_sched++;
    if (j_we) n_j++;
    if (h_we) n_h++;
    if (sample_we && rst_n) begin n_samp++; last_waddr = sample_waddr; end
  end

  initial begin
    logic [31:0] d;
    n_sched = 0; n_j = 0; n_h = 0; n_samp = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    rd(A(REG_CTRL, CR_MCS), d);    chk(d == 720, "reset sweeps per layer");
    rd(A(REG_CTRL, CR_LAYERS), d); chk(d == P_MAX, "reset layers");
    rd(A(REG_CTRL, CR_INFO), d);   chk(d == {8'd3, 8'd2, 8'd5, 8'd1}, "info register");
    wr(A(REG_CTRL, CR_LAYERS), 3);
    wr(A(REG_CTRL, CR_MCS), 17);
    wr(A(REG_CTRL, CR_RUNS), 3);
    rd(A(REG_CTRL, CR_LAYERS), d); chk(d == 3 && num_layers == 3, "layers written");
    rd(A(REG_CTRL, CR_MCS), d);    chk(d == 17 && mcs_per_layer == 17, "sweeps written");
    rd(A(REG_CTRL, CR_RUNS), d);   chk(d == 3, "runs written");
    // decoded strobes: check them in the write cycle
    @(negedge clk); host_we = 1; host_addr = A(REG_SCHED, 4); host_wdata = 32'h3C5; #1;
    chk(sched_we && sched_addr == 4 && wdata_fx == fx_t'(10'h3C5) && !j_we && !h_we, "schedule strobe");
    @(negedge clk); host_addr = A(REG_JBOND, 4 * 6 + 2); #1;
    chk(j_we && j_node == 6 && j_dir == 2 && !sched_we && !h_we, "coupling strobe");
    @(negedge clk); host_addr = A(REG_HBIAS, 5); #1;
    chk(h_we && h_node == 5 && !sched_we && !j_we, "bias strobe");
    @(negedge clk); host_we = 0;
    chk(n_sched == 1 && n_j == 1 && n_h == 1, "one strobe each");
    // batch of 3 runs, enable off: busy but not running
    wr(A(REG_CTRL, CR_CTRL), CTRL_START);
    chk(busy && !run, "busy, frozen while disabled");
    wr(A(REG_CTRL, CR_CTRL), CTRL_ENABLE);
    chk(busy && run, "running");
    for (int r = 0; r < 3; r++) begin
      @(negedge clk); exp_done = 1;
      @(posedge clk); #1; exp_done = 0;
      chk(sample_we && sample_waddr == 3'(r), $sformatf("sample %0d written the cycle after exp_done", r));
      if (r < 2) chk(busy, "still busy");
    end
    @(posedge clk); #1;
    chk(!busy && !run, "batch finished after 3 runs");
    rd(A(REG_CTRL, CR_WPTR), d); chk(d == 3, "write pointer 3");
    rd(A(REG_CTRL, CR_CTRL), d); chk(d == 32'h1, "status: enabled, idle");
    // exp_done while idle writes nothing
    pulse_exp_done();
    @(posedge clk); #1;
    chk(n_samp == 3, $sformatf("no sample while idle (%0d samples)", n_samp));
    // snapshot
    wr(A(REG_CTRL, CR_CTRL), CTRL_ENABLE | CTRL_SNAPSHOT);
    @(posedge clk); #1;
    chk(n_samp == 4 && last_waddr == 3, "snapshot written at pointer 3");
    // sample read: entry 5 word 0
    rd(A(REG_SAMPLE, (5 << 1)), d);
    chk(d == (32'hA000_0000 | {3'd5, 4'h0, 1'b0}), "sample read");
    // disable freezes
    wr(A(REG_CTRL, CR_CTRL), CTRL_START);
    chk(busy && !run, "disable freezes a started batch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
