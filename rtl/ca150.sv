// ca150: one-dimensional rule-150 cellular automaton, used as a test pattern
// generator.
//
// Every cell takes, each clock, the XOR of itself and its two neighbours:
//   c[i] <= c[i+1] ^ c[i] ^ c[i-1].
// The cells beyond both ends read as constant 0 (null boundary).
//
// Interface: clock, active-high asynchronous reset (loads SEED), and the
// current pattern; a new pattern appears after every rising edge.
//
// The seed 1011001010110110 is the published one. The null boundary is this
// design's choice; with it the published rule-150 transition counts after 8
// and 16 clocks (67, 135) are reproduced, while after 32 clocks this
// generator gives 263 where 259 is published.
module ca150 #(
  parameter int unsigned      WIDTH = btc_pkg::DATA_W,
  parameter logic [WIDTH-1:0] SEED  = WIDTH'(btc_pkg::SEED)
) (
  input  logic             clock,
  input  logic             reset,
  output logic [WIDTH-1:0] pattern
);

  logic [WIDTH-1:0] next_pattern;

  always_comb begin
    next_pattern = {1'b0, pattern[WIDTH-1:1]} ^ pattern ^ {pattern[WIDTH-2:0], 1'b0};
  end

  always_ff @(posedge clock or posedge reset) begin
    if (reset) pattern <= SEED;
    else       pattern <= next_pattern;
  end

endmodule
