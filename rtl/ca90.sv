// ca90: one-dimensional rule-90 cellular automaton, used as a test pattern
// generator.
//
// Every cell takes, each clock, the XOR of its two neighbours:
//   c[i] <= c[i+1] ^ c[i-1].
// The cells beyond both ends read as constant 0 (null boundary).
//
// Interface: clock, active-high asynchronous reset (loads SEED), and the
// current pattern; a new pattern appears after every rising edge.
//
// The seed 1011001010110110 is the published one. The null boundary is this
// design's choice; with it the transition counts published for rule 90 after
// 8, 16 and 32 clocks (66, 138, 276) are reproduced exactly.
module ca90 #(
  parameter int unsigned      WIDTH = btc_pkg::DATA_W,
  parameter logic [WIDTH-1:0] SEED  = WIDTH'(btc_pkg::SEED)
) (
  input  logic             clock,
  input  logic             reset,
  output logic [WIDTH-1:0] pattern
);

  logic [WIDTH-1:0] next_pattern;

  always_comb begin
    // Shifted copies with a zero entering at the open end give the neighbours.
    next_pattern = {1'b0, pattern[WIDTH-1:1]} ^ {pattern[WIDTH-2:0], 1'b0};
  end

  always_ff @(posedge clock or posedge reset) begin
    if (reset) pattern <= SEED;
    else       pattern <= next_pattern;
  end

endmodule
