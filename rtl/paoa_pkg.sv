// paoa_pkg: types, widths and the host register map shared by the p-computer.
//
// The p-computer samples an Ising problem with p-bits. Couplings J, biases h
// and the inverse temperature beta all use the s{4}{5} fixed-point format of
// the original FPGA design: a sign bit, 4 integer bits and 5 fraction bits,
// i.e. a 10-bit two's-complement number whose value is raw/32. The random
// number and tanh widths, the lookup-table address range and the host
// register map are choices of this implementation.
package paoa_pkg;

  // ---- fixed point -------------------------------------------------------
  localparam int unsigned FX_W    = 10;  // s{4}{5}
  localparam int unsigned FX_FRAC = 5;
  typedef logic signed [FX_W-1:0] fx_t;

  // neighbours of a site of a 3D cubic lattice
  localparam int unsigned NEIGH = 6;
  // bonds stored per site: +x, +y, +z
  localparam int unsigned BONDS = 3;

  // synaptic input: sum of NEIGH couplings and one bias, cannot overflow
  localparam int unsigned I_W = FX_W + $clog2(NEIGH + 1);        // 13
  typedef logic signed [I_W-1:0] syn_t;

  // beta * I, 2*FX_FRAC fraction bits
  localparam int unsigned PROD_W = FX_W + I_W;                     // 23
  typedef logic signed [PROD_W-1:0] prod_t;

  // tanh lookup table: address is beta*I in s{3}{5}, range [-8, 8)
  localparam int unsigned LUT_IDX_W = 9;
  localparam int unsigned LUT_FRAC  = FX_FRAC;
  // random numbers and tanh values: signed Q1.15 fractions of [-1, 1)
  localparam int unsigned RAND_W = 16;
  typedef logic signed [LUT_IDX_W-1:0] lut_idx_t;
  typedef logic signed [RAND_W-1:0]    rnd_t;

  // ---- host bus ------------------------------------------------------------
  localparam int unsigned HOST_AW = 24;
  localparam int unsigned HOST_DW = 32;
  localparam int unsigned REGION_W = 3;
  localparam int unsigned OFFS_W   = HOST_AW - REGION_W;   // 21

  // address = {region[2:0], offset[20:0]}
  typedef enum logic [REGION_W-1:0] {
    REG_CTRL   = 3'h0,  // control and status registers
    REG_SCHED  = 3'h1,  // beta_k, offset k = 1..P_MAX
    REG_JBOND  = 3'h2,  // J of bond (node, dir), offset {node, dir[1:0]}, dir 0:+x 1:+y 2:+z
    REG_HBIAS  = 3'h3,  // h of node, offset node
    REG_SAMPLE = 3'h4   // sample memory, offset {run, word[WORD_BITS-1:0]}
  } region_e;

  // offsets inside REG_CTRL
  typedef enum logic [3:0] {
    CR_CTRL    = 4'h0,  // W: bit0 enable, bit1 start (pulse), bit2 snapshot (pulse)
                        // R: bit0 enable, bit1 busy
    CR_LAYERS  = 4'h1,  // number of annealed layers p (beta=0 layer not counted)
    CR_MCS     = 4'h2,  // Monte Carlo sweeps per layer
    CR_RUNS    = 4'h3,  // experiments per batch
    CR_WPTR    = 4'h4,  // R: samples written so far
    CR_INFO    = 4'h5   // R: {REPLICAS[7:0], L[7:0], P_MAX[7:0], words per sample[7:0]}
  } ctrl_reg_e;

  localparam logic [HOST_DW-1:0] CTRL_ENABLE   = 32'h1;
  localparam logic [HOST_DW-1:0] CTRL_START    = 32'h2;
  localparam logic [HOST_DW-1:0] CTRL_SNAPSHOT = 32'h4;

endpackage
