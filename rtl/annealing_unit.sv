// annealing_unit: on-chip annealing schedule.
//
// Holds the schedule beta_1..beta_p written by the host and produces the beta
// used by every p-bit. A layer index (the beta-select index) drives a
// (P_MAX+1):1 multiplexer whose input 0 is the constant beta_0 = 0: every
// experiment starts with a beta = 0 layer that randomises the p-bits, then
// steps through layers 1..num_layers. An MCS counter counts completed sweeps;
// when mcs_per_layer sweeps have elapsed the layer index advances, and after
// the last layer it returns to 0 for the next experiment, with exp_done high
// in the cycle of that final sweep. Layer 0 lasts a single sweep: at beta = 0
// every p-bit is a fair coin whatever its input, so one sweep already gives a
// uniformly random state, and an experiment takes p*mcs_per_layer + 1 sweeps.
// Mux, counter and the beta = 0 layer follow the original design; the
// one-sweep layer 0, the counter widths and the reset values are this
// implementation's choices.
// Interface: restart forces layer 0 and clears the MCS count. The schedule
// port writes beta_k (k = 1..P_MAX) at the rising edge when sched_we is high;
// writes to k = 0 or k > P_MAX are ignored. beta and layer change at the edge
// that ends a layer. num_layers above P_MAX is treated as P_MAX, an
// mcs_per_layer of 0 as 1.
module annealing_unit
  import paoa_pkg::*;
#(
  parameter int unsigned P_MAX = 15,
  parameter int unsigned MCS_W = 16,
  localparam int unsigned LW   = $clog2(P_MAX + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             restart,
  input  logic             sweep_tick,
  input  logic [LW-1:0]    num_layers,
  input  logic [MCS_W-1:0] mcs_per_layer,
  input  logic             sched_we,
  input  logic [LW-1:0]    sched_addr,
  input  fx_t              sched_wdata,
  output fx_t              beta,
  output logic [LW-1:0]    layer,
  output logic [MCS_W-1:0] mcs_count,
  output logic             exp_done
);
  fx_t              sched [P_MAX+1];   // entry 0 is the beta = 0 layer
  logic [LW-1:0]    last_layer;
  logic             last_mcs;

  assign last_layer = (num_layers > LW'(P_MAX)) ? LW'(P_MAX) : num_layers;
  assign last_mcs   = (layer == '0) || (mcs_count + MCS_W'(1) >= mcs_per_layer);
  assign exp_done   = sweep_tick && last_mcs && (layer >= last_layer);

  // beta-select multiplexer
  assign beta = (layer == '0) ? fx_t'(0) : sched[layer];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k <= int'(P_MAX); k++) sched[k] <= '0;
    end else if (sched_we && sched_addr != '0 && sched_addr <= LW'(P_MAX)) begin
      sched[sched_addr] <= sched_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      layer     <= '0;
      mcs_count <= '0;
    end else if (sweep_tick) begin
      if (last_mcs) begin
        mcs_count <= '0;
        layer     <= (layer >= last_layer) ? '0 : layer + LW'(1);
      end else begin
        mcs_count <= mcs_count + MCS_W'(1);
      end
    end
  end
endmodule
