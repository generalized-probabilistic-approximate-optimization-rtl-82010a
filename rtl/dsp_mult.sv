// dsp_mult: scales the synaptic input by the inverse temperature, beta * I_i.
//
// This is the multiplier that the original design maps onto a DSP slice. beta
// is s{4}{5}; I_i carries the same 5 fraction bits, so the full-precision
// product has 10 fraction bits and PROD_W = 23 bits, wide enough never to
// overflow. Purely combinational; the rounding and saturation needed to
// address the tanh table are done by the neuron that consumes the product.
module dsp_mult
  import paoa_pkg::*;
(
  input  fx_t   beta,
  input  syn_t  i_in,
  output prod_t prod
);
  assign prod = prod_t'(beta) * prod_t'(i_in);
endmodule
