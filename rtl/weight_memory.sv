// weight_memory: couplings J and biases h of the L x L x L lattice problem.
//
// Every site stores the couplings of its bonds to the +x, +y and +z neighbour
// (periodic boundaries); the bond to the -x neighbour is that neighbour's +x
// bond, so J is symmetric by construction. Values are s{4}{5} fixed point and
// already in the 0/1-state form the synapses use (see synapse). All values are
// held in registers because every p-bit of every replica reads its couplings
// in every cycle; one copy is shared by all replicas, which sample the same
// problem. The storage organisation is this implementation's own.
// Interface: j_we writes j_wdata to bond j_dir (0:+x 1:+y 2:+z) of site
// j_node, h_we writes h_wdata to site h_node, both at the rising edge; writes
// to a site >= N or a direction > 2 are ignored. Reset clears everything.
module weight_memory
  import paoa_pkg::*;
#(
  parameter int unsigned L  = 6,
  localparam int unsigned N  = L * L * L,
  localparam int unsigned NW = $clog2(N)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      j_we,
  input  logic [NW-1:0]             j_node,
  input  logic [1:0]                j_dir,
  input  fx_t                       j_wdata,
  input  logic                      h_we,
  input  logic [NW-1:0]             h_node,
  input  fx_t                       h_wdata,
  output fx_t  [N-1:0][BONDS-1:0]   j_bond,
  output fx_t  [N-1:0]              h
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      j_bond <= '0;
      h      <= '0;
    end else begin
      if (j_we && 32'(j_node) < N && 32'(j_dir) < BONDS) j_bond[j_node][j_dir] <= j_wdata;
      if (h_we && 32'(h_node) < N)                 h[h_node]            <= h_wdata;
    end
  end
endmodule
