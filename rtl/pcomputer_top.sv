// pcomputer_top: probabilistic computer with on-chip annealing.
//
// REPLICAS independent copies of an L x L x L periodic lattice of p-bits
// sample the same Ising problem, each p-bit updating as
// m_i = [tanh(beta * (sum_j J_ij m_j + h_i)) > r]. The annealing unit supplies
// one beta to all p-bits: a one-sweep beta = 0 layer that randomises the
// states, then the preloaded schedule beta_1..beta_p, each held for a fixed
// number of Monte Carlo sweeps. The two colours of the bipartite lattice
// update on alternate cycles, so one sweep of all REPLICAS*L^3 p-bits takes
// two cycles. At the end of every experiment the states of all replicas go to
// the sample memory, from which the host reads them to evaluate energies and
// update the schedule. Blocks and data flow (annealing unit -> beta ->
// multiplier <- synapse, multiplier -> tanh LUT / xoshiro / comparator) follow
// the original FPGA design; the single clock with colour enables, the host
// bus, the storage of couplings and the memory organisation are this
// implementation's choices.
// Interface: a simple memory-mapped host bus (see host_regs and paoa_pkg for
// the register map); m_all shows the live states, replica r at bits
// [r*L^3 +: L^3]; busy is high while a batch of experiments runs; beta and
// layer show the annealing unit's output. Clock: 2 cycles per sweep, so 30 MHz
// reproduces the original 15 MHz sweep rate.
module pcomputer_top
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
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  host_we,
  input  logic                  host_re,
  input  logic [HOST_AW-1:0]    host_addr,
  input  logic [HOST_DW-1:0]    host_wdata,
  output logic [HOST_DW-1:0]    host_rdata,
  output logic                  host_rvalid,
  output logic                  busy,
  output fx_t                   beta,
  output logic [LW-1:0]         layer,
  output logic [N*REPLICAS-1:0] m_all
);
  logic                    run, restart, exp_done, sweep_tick;
  logic [1:0]              colour_en;
  logic [LW-1:0]           num_layers, sched_addr;
  logic [MCS_W-1:0]        mcs_per_layer, mcs_count;
  logic                    sched_we, j_we, h_we;
  logic [NW-1:0]           j_node, h_node;
  logic [1:0]              j_dir;
  fx_t                     wdata_fx;
  logic                    sample_we, sample_re;
  logic [RW-1:0]           sample_waddr, sample_raddr;
  logic [WW-1:0]           sample_rword;
  logic [31:0]             sample_rdata;
  fx_t  [N-1:0][BONDS-1:0] j_bond;
  fx_t  [N-1:0]            h;

  host_regs #(.L(L), .REPLICAS(REPLICAS), .P_MAX(P_MAX), .RUNS_MAX(RUNS_MAX), .MCS_W(MCS_W)) u_host (
    .clk, .rst_n, .host_we, .host_re, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .run, .busy, .restart, .num_layers, .mcs_per_layer, .exp_done,
    .sched_we, .sched_addr, .j_we, .j_node, .j_dir, .h_we, .h_node, .wdata_fx,
    .sample_we, .sample_waddr, .sample_re, .sample_raddr, .sample_rword, .sample_rdata);

  colour_sequencer #(.NUM_COLOURS(2)) u_colour (
    .clk, .rst_n, .clear(restart), .run, .colour_en, .sweep_tick);

  annealing_unit #(.P_MAX(P_MAX), .MCS_W(MCS_W)) u_anneal (
    .clk, .rst_n, .restart, .sweep_tick, .num_layers, .mcs_per_layer,
    .sched_we, .sched_addr, .sched_wdata(wdata_fx),
    .beta, .layer, .mcs_count, .exp_done);

  weight_memory #(.L(L)) u_weights (
    .clk, .rst_n, .j_we, .j_node, .j_dir, .j_wdata(wdata_fx),
    .h_we, .h_node, .h_wdata(wdata_fx), .j_bond, .h);

  for (genvar r = 0; r < int'(REPLICAS); r++) begin : g_rep
    spin_lattice #(.L(L), .REPLICA_ID(r)) u_lattice (
      .clk, .rst_n, .colour_en, .beta, .j_bond, .h, .m(m_all[r*N +: N]));
  end

  sample_bram #(.WIDTH(N * REPLICAS), .DEPTH(RUNS_MAX)) u_samples (
    .clk, .we(sample_we), .waddr(sample_waddr), .wdata(m_all),
    .re(sample_re), .raddr(sample_raddr), .rword(sample_rword), .rdata(sample_rdata));
endmodule
