// bsn: binary stochastic neuron (p-bit).
//
// Implements m_i = sgn[tanh(beta I_i) - r] with r uniform in [-1, 1): the
// product beta*I_i from the multiplier addresses a tanh lookup table, a
// xoshiro128+ generator supplies r, and a comparator sets m_i = 1 when
// tanh > r, else 0, so that P(m_i = 1) = (1 + tanh(beta I_i)) / 2. This
// structure (LUT, xoshiro, comparator) follows the original design. Own
// choices: the product is rounded down to LUT_FRAC fraction bits and
// saturated to the table's range [-8, 8); r is the top RAND_W bits of the
// generator's output read as a signed fraction.
// Timing: when en is high, m and the generator update at the rising edge,
// from the beta_i present during that cycle. Synchronous active-low reset
// clears m and reloads the generator seed.
module bsn
  import paoa_pkg::*;
#(
  parameter logic [127:0] SEED = 128'h9e37_79b9_7f4a_7c15_f39c_c060_5ced_c834
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  prod_t beta_i,
  output logic  m
);
  localparam int unsigned SHIFT = 2 * FX_FRAC - LUT_FRAC;
  localparam int signed   IDX_MAX = (1 <<< (LUT_IDX_W - 1)) - 1;
  localparam int signed   IDX_MIN = -(1 <<< (LUT_IDX_W - 1));

  prod_t       scaled;
  lut_idx_t    idx;
  rnd_t        tanh_q, r;
  logic [31:0] rnd;

  // round down to the table's resolution, then saturate to its range
  always_comb begin
    scaled = beta_i >>> SHIFT;
    if (scaled > prod_t'(IDX_MAX))      idx = lut_idx_t'(IDX_MAX);
    else if (scaled < prod_t'(IDX_MIN)) idx = lut_idx_t'(IDX_MIN);
    else                                idx = lut_idx_t'(scaled);
  end

  tanh_lut u_lut (.idx(idx), .tanh_q(tanh_q));

  xoshiro128p #(.SEED(SEED)) u_rng (.clk(clk), .rst_n(rst_n), .en(en), .rnd(rnd));

  assign r = rnd_t'(rnd[31 -: RAND_W]);

  always_ff @(posedge clk) begin
    if (!rst_n)  m <= 1'b0;
    else if (en) m <= (tanh_q > r);
  end
endmodule
