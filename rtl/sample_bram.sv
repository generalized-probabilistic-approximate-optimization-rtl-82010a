// sample_bram: block memory for sampled p-bit states.
//
// One entry holds a snapshot of all p-bits of all replicas (WIDTH bits),
// written in one cycle at the end of an experiment or on a host snapshot
// command; the host reads it back 32 bits at a time. Storing the states in
// block memory for later readout follows the original design; the
// word-organised read port is this implementation's choice.
// Interface: when we is high, wdata is written to entry waddr at the rising
// edge. When re is high, 32-bit word rword of entry raddr appears on rdata
// after the next rising edge (one-cycle latency); bits beyond WIDTH read 0.
// The memory is not reset.
module sample_bram #(
  parameter int unsigned WIDTH = 2160,
  parameter int unsigned DEPTH = 10000,
  localparam int unsigned WORDS = (WIDTH + 31) / 32,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned WW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  input  logic [WW-1:0]    rword,
  output logic [31:0]      rdata
);
  logic [WORDS*32-1:0] mem [DEPTH];
  logic [WORDS*32-1:0] row;

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= (WORDS*32)'(wdata);
  end

  assign row = mem[raddr];

  always_ff @(posedge clk) begin
    if (re) rdata <= (32'(raddr) < DEPTH && 32'(rword) < WORDS) ? row[rword*32 +: 32] : '0;
  end
endmodule
