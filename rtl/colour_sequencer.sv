// colour_sequencer: orders the chromatic (graph-coloured) p-bit updates.
//
// On a bipartite lattice no two p-bits of the same colour are coupled, so a
// whole colour can update at once without breaking sequential Gibbs
// sampling. The original design gives each colour its own phase-shifted copy
// of a 15 MHz clock; this implementation keeps a single clock and raises a
// one-hot enable for one colour per cycle instead. One Monte Carlo sweep
// (every p-bit updated once) therefore takes NUM_COLOURS cycles, so the paper's
// sweep rate of 15 MHz needs a 30 MHz system clock for two colours.
// Interface: while run is high, colour_en cycles 1, 2, 4, ...; sweep_tick is
// high in the cycle in which the last colour updates. When run is low nothing
// is enabled and the phase holds, so a frozen sweep resumes where it stopped.
module colour_sequencer #(
  parameter int unsigned NUM_COLOURS = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   run,
  output logic [NUM_COLOURS-1:0] colour_en,
  output logic                   sweep_tick
);
  localparam int unsigned PW = (NUM_COLOURS > 1) ? $clog2(NUM_COLOURS) : 1;
  logic [PW-1:0] phase;
  logic          last;

  assign last       = (phase == PW'(NUM_COLOURS - 1));
  assign colour_en  = run ? (NUM_COLOURS'(1) << phase) : '0;
  assign sweep_tick = run && last;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) phase <= '0;
    else if (run)         phase <= last ? '0 : phase + PW'(1);
  end

  initial assert (NUM_COLOURS >= 1) else $error("colour_sequencer: need at least one colour");
endmodule
