// host_regs: host register interface and batch control of the p-computer.
//
// The host (a PC behind PCIe in the original system) loads the problem and the
// annealing schedule, starts a batch of experiments and reads the sampled
// states back. A global enable freezes and resumes all p-bits, as in the
// original design. A start command restarts the annealing unit at its beta = 0
// layer and runs num_runs experiments back to back; at the end of each one the
// states of all replicas are written to the sample memory at the next write
// pointer, and after the last one the p-bits stop (busy falls). A snapshot
// command writes the current states at the next pointer as well. The bus and
// register map (see paoa_pkg) are this implementation's own.
// Bus: a write takes one cycle with host_we high. A read is requested with
// host_re high; host_rdata is valid one cycle later, flagged by host_rvalid.
// Registers reset to: enable 0, layers P_MAX, 720 sweeps per layer, 1 run.
// Timing: exp_done comes in the cycle of the last sweep of an experiment; the
// sample is written in the following cycle, when the p-bits hold the final
// states of that experiment.
module host_regs
  import paoa_pkg::*;
#(
  parameter int unsigned L        = 6,
  parameter int unsigned REPLICAS = 10,
  parameter int unsigned P_MAX    = 15,
  parameter int unsigned RUNS_MAX = 10000,
  parameter int unsigned MCS_W    = 16,
  localparam int unsigned N       = L * L * L,
  localparam int unsigned NW      = $clog2(N),
  localparam int unsigned LW      = $clog2(P_MAX + 1),
  localparam int unsigned WORDS   = (N * REPLICAS + 31) / 32,
  localparam int unsigned WW      = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned RW      = (RUNS_MAX > 1) ? $clog2(RUNS_MAX) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host bus
  input  logic                host_we,
  input  logic                host_re,
  input  logic [HOST_AW-1:0]  host_addr,
  input  logic [HOST_DW-1:0]  host_wdata,
  output logic [HOST_DW-1:0]  host_rdata,
  output logic                host_rvalid,
  // control
  output logic                run,
  output logic                busy,
  output logic                restart,
  output logic [LW-1:0]       num_layers,
  output logic [MCS_W-1:0]    mcs_per_layer,
  input  logic                exp_done,
  // schedule, couplings, biases
  output logic                sched_we,
  output logic [LW-1:0]       sched_addr,
  output logic                j_we,
  output logic [NW-1:0]       j_node,
  output logic [1:0]          j_dir,
  output logic                h_we,
  output logic [NW-1:0]       h_node,
  output fx_t                 wdata_fx,
  // sample memory
  output logic                sample_we,
  output logic [RW-1:0]       sample_waddr,
  output logic                sample_re,
  output logic [RW-1:0]       sample_raddr,
  output logic [WW-1:0]       sample_rword,
  input  logic [31:0]         sample_rdata
);
  region_e           region, rd_region_q;
  logic [OFFS_W-1:0] offs;
  logic              enable, capture;
  logic [RW:0]       num_runs, run_cnt, wptr;
  logic              ctrl_we, start, snap;
  logic [HOST_DW-1:0] reg_rdata_q;

  assign region   = region_e'(host_addr[HOST_AW-1 -: REGION_W]);
  assign offs     = host_addr[OFFS_W-1:0];
  assign wdata_fx = fx_t'(host_wdata[FX_W-1:0]);

  assign ctrl_we  = host_we && region == REG_CTRL && offs == OFFS_W'(CR_CTRL);
  assign start    = ctrl_we && host_wdata[1];
  assign snap     = ctrl_we && host_wdata[2];
  assign restart  = start;
  assign run      = enable && busy;

  assign sched_we   = host_we && region == REG_SCHED;
  assign sched_addr = LW'(offs);
  assign j_we       = host_we && region == REG_JBOND;
  assign j_node     = NW'(offs >> 2);
  assign j_dir      = offs[1:0];
  assign h_we       = host_we && region == REG_HBIAS;
  assign h_node     = NW'(offs);

  assign sample_we    = capture;
  assign sample_waddr = RW'(wptr);
  assign sample_re    = host_re && region == REG_SAMPLE;
  assign sample_rword = offs[WW-1:0];
  assign sample_raddr = RW'(offs >> WW);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      enable        <= 1'b0;
      busy          <= 1'b0;
      capture       <= 1'b0;
      num_layers    <= LW'(P_MAX);
      mcs_per_layer <= MCS_W'(720);
      num_runs      <= (RW+1)'(1);
      run_cnt       <= '0;
      wptr          <= '0;
    end else begin
      capture <= 1'b0;
      if (host_we && region == REG_CTRL) begin
        unique case (offs)
          OFFS_W'(CR_CTRL):   enable        <= host_wdata[0];
          OFFS_W'(CR_LAYERS): num_layers    <= LW'(host_wdata);
          OFFS_W'(CR_MCS):    mcs_per_layer <= MCS_W'(host_wdata);
          OFFS_W'(CR_RUNS):   num_runs      <= (host_wdata > RUNS_MAX) ? (RW+1)'(RUNS_MAX)
                                                                       : (RW+1)'(host_wdata);
          default: ;
        endcase
      end
      if (start) begin
        busy    <= 1'b1;
        run_cnt <= '0;
        wptr    <= '0;
      end else begin
        if (exp_done && busy) begin
          capture <= 1'b1;
          run_cnt <= run_cnt + 1'b1;
          if (run_cnt + 1'b1 >= num_runs) busy <= 1'b0;
        end
        if (snap) capture <= 1'b1;
        if (capture && wptr < (RW+1)'(RUNS_MAX)) wptr <= wptr + 1'b1;
      end
    end
  end

  // read path: control registers are registered here, samples come from the
  // memory with the same one-cycle latency
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      host_rvalid <= 1'b0;
      rd_region_q <= REG_CTRL;
      reg_rdata_q <= '0;
    end else begin
      host_rvalid <= host_re;
      if (host_re) begin
        rd_region_q <= region;
        reg_rdata_q <= '0;
        if (region == REG_CTRL) begin
          unique case (offs)
            OFFS_W'(CR_CTRL):   reg_rdata_q <= {30'b0, busy, enable};
            OFFS_W'(CR_LAYERS): reg_rdata_q <= HOST_DW'(num_layers);
            OFFS_W'(CR_MCS):    reg_rdata_q <= HOST_DW'(mcs_per_layer);
            OFFS_W'(CR_RUNS):   reg_rdata_q <= HOST_DW'(num_runs);
            OFFS_W'(CR_WPTR):   reg_rdata_q <= HOST_DW'(wptr);
            OFFS_W'(CR_INFO):   reg_rdata_q <= {8'(REPLICAS), 8'(L), 8'(P_MAX), 8'(WORDS)};
            default: ;
          endcase
        end
      end
    end
  end

  assign host_rdata = (rd_region_q == REG_SAMPLE) ? sample_rdata : reg_rdata_q;

  initial assert (RW + WW <= OFFS_W)
    else $error("host_regs: sample memory does not fit the address space");
endmodule
