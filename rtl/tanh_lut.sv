// tanh_lut: lookup table for the p-bit activation tanh(beta*I).
//
// The address is beta*I as a signed fixed-point number with LUT_FRAC fraction
// bits (default s{3}{5}, covering [-8, 8) in steps of 1/32); the entry is
// round((2^(OUT_W-1)-1) * tanh(x)), a signed Q1.15 fraction. The table is
// computed at elaboration from $tanh, so no data file is needed; in an FPGA it
// maps onto LUTs or a small ROM. Purely combinational. The lookup-table
// approach follows the original design; depth, range and output width are
// this implementation's choice.
module tanh_lut
  import paoa_pkg::*;
#(
  parameter int unsigned IDX_W = LUT_IDX_W,
  parameter int unsigned FRAC  = LUT_FRAC,
  parameter int unsigned OUT_W = RAND_W
) (
  input  logic signed [IDX_W-1:0] idx,
  output logic signed [OUT_W-1:0] tanh_q
);
  localparam int unsigned DEPTH = 1 << IDX_W;
  typedef logic signed [OUT_W-1:0] entry_t;

  function automatic entry_t entry(input int unsigned a);
    // a is the unsigned view of the signed address
    int   sa;
    real  x, y;
    sa = (a >= DEPTH / 2) ? int'(a) - int'(DEPTH) : int'(a);
    x  = real'(sa) / real'(1 << FRAC);
    y  = $tanh(x) * real'((1 << (OUT_W - 1)) - 1);
    return entry_t'($rtoi(y >= 0.0 ? y + 0.5 : y - 0.5));
  endfunction

  function automatic logic [DEPTH*OUT_W-1:0] build();
    logic [DEPTH*OUT_W-1:0] r;
    for (int unsigned a = 0; a < DEPTH; a++) r[a*OUT_W +: OUT_W] = entry(a);
    return r;
  endfunction

  localparam logic [DEPTH*OUT_W-1:0] TABLE = build();

  assign tanh_q = TABLE[$unsigned(idx)*OUT_W +: OUT_W];
endmodule
