// synapse: synaptic input of one p-bit, I_i = sum_j J_ij m_j + h_i.
//
// As in the original design, every neighbour state m_j drives a 2:1
// multiplexer that passes either J_ij (m_j = 1) or zero (m_j = 0), and an adder
// sums the selected couplings together with the bias h_i. States are therefore
// 0/1 bits; a problem posed with spins s = 2m - 1 is loaded as J' = 2J and
// h' = h - sum_j J_ij, which yields the same I_i. Inputs and output are in
// s{4}{5} fixed point; the output is widened so that the sum cannot overflow.
// Purely combinational.
module synapse
  import paoa_pkg::*;
#(
  parameter int unsigned N_IN = NEIGH
) (
  input  logic [N_IN-1:0]       m_nb,
  input  fx_t  [N_IN-1:0]       j_nb,
  input  fx_t                   h,
  output syn_t                  i_out
);
  always_comb begin
    i_out = syn_t'(h);
    for (int k = 0; k < int'(N_IN); k++)
      i_out = i_out + (m_nb[k] ? syn_t'(j_nb[k]) : syn_t'(0));
  end
endmodule
