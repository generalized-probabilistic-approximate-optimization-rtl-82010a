// spin_lattice: one replica of the p-computer, L x L x L p-bits.
//
// Site n = x + L*y + L*L*z of a periodic cubic lattice has six neighbours.
// Each site is a synapse (sum of the couplings of the neighbours that are 1,
// plus the bias), a multiplier by the shared beta and a binary stochastic
// neuron. The lattice is bipartite for even L: sites with x+y+z even form
// colour 0, the others colour 1, and each colour updates all at once when its
// enable is high, which is the chromatic Gibbs sampling of the original
// design. The per-site pipeline synapse -> multiplier -> tanh LUT / PRNG /
// comparator follows the original design; periodic boundaries, site numbering
// and seeding are this implementation's choices. Each p-bit's xoshiro seed is
// a splitmix64 hash of (REPLICA_ID, site), so every generator differs.
// Timing: a p-bit of an enabled colour takes its new value at the rising edge,
// computed from the neighbours' values of the current cycle.
module spin_lattice
  import paoa_pkg::*;
#(
  parameter int unsigned L          = 6,
  parameter int unsigned REPLICA_ID = 0,
  localparam int unsigned N         = L * L * L
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [1:0]              colour_en,
  input  fx_t                     beta,
  input  fx_t  [N-1:0][BONDS-1:0] j_bond,
  input  fx_t  [N-1:0]            h,
  output logic [N-1:0]            m
);
  function automatic logic [63:0] splitmix(input logic [63:0] z0);
    logic [63:0] z;
    z = z0 + 64'h9e37_79b9_7f4a_7c15;
    z = (z ^ (z >> 30)) * 64'hbf58_476d_1ce4_e5b9;
    z = (z ^ (z >> 27)) * 64'h94d0_49bb_1331_11eb;
    return z ^ (z >> 31);
  endfunction

  function automatic logic [127:0] seed_of(input int unsigned rep, input int unsigned site);
    logic [63:0] a, b;
    a = splitmix({32'(rep), 32'(site)});
    b = splitmix(a);
    return {a, b} | 128'h1;   // never all-zero
  endfunction

  for (genvar n = 0; n < int'(N); n++) begin : g_site
    localparam int unsigned X = n % L;
    localparam int unsigned Y = (n / L) % L;
    localparam int unsigned Z = n / (L * L);
    localparam int unsigned XP = ((X + 1) % L) + L * Y + L * L * Z;
    localparam int unsigned XM = ((X + L - 1) % L) + L * Y + L * L * Z;
    localparam int unsigned YP = X + L * ((Y + 1) % L) + L * L * Z;
    localparam int unsigned YM = X + L * ((Y + L - 1) % L) + L * L * Z;
    localparam int unsigned ZP = X + L * Y + L * L * ((Z + 1) % L);
    localparam int unsigned ZM = X + L * Y + L * L * ((Z + L - 1) % L);
    localparam int unsigned COLOUR = (X + Y + Z) % 2;

    logic [NEIGH-1:0] m_nb;
    fx_t  [NEIGH-1:0] j_nb;
    syn_t             i_syn;
    prod_t            prod;

    assign m_nb = {m[ZM], m[ZP], m[YM], m[YP], m[XM], m[XP]};
    assign j_nb = {j_bond[ZM][2], j_bond[n][2],
                   j_bond[YM][1], j_bond[n][1],
                   j_bond[XM][0], j_bond[n][0]};

    synapse  u_syn (.m_nb(m_nb), .j_nb(j_nb), .h(h[n]), .i_out(i_syn));
    dsp_mult u_dsp (.beta(beta), .i_in(i_syn), .prod(prod));
    bsn #(.SEED(seed_of(REPLICA_ID, n))) u_bsn (
      .clk(clk), .rst_n(rst_n), .en(colour_en[COLOUR]), .beta_i(prod), .m(m[n]));
  end

  initial assert (L >= 2 && L % 2 == 0)
    else $error("spin_lattice: L must be even for a two-colour lattice");
endmodule
