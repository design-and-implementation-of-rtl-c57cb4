// lfsr_internal: internal-feedback (Galois) linear feedback shift register,
// used as a test pattern generator.
//
// The register shifts left by one place every clock. The bit that leaves at
// the top (pattern[WIDTH-1]) is fed back into bit 0 and, through XOR gates
// placed inside the shift chain, into every stage whose polynomial
// coefficient is set in POLY. This computes pattern * x mod p(x), with
// p(x) = x^WIDTH + sum(POLY[i] * x^i).
//
// Interface: clock, active-high asynchronous reset (loads SEED), and the
// current pattern; a new pattern appears after every rising edge.
//
// The seed 1011001010110110 is the published one. The feedback polynomial is
// not published: the default x^16 + x^15 + x^13 + x^4 + 1 is a standard
// primitive polynomial, so the sequence has the maximal period 2^16 - 1.
// The shift direction is also this design's choice.
module lfsr_internal #(
  parameter int unsigned      WIDTH = btc_pkg::DATA_W,
  parameter logic [WIDTH-1:0] SEED  = WIDTH'(btc_pkg::SEED),
  parameter logic [WIDTH-1:0] POLY  = WIDTH'(16'hA011)
) (
  input  logic             clock,
  input  logic             reset,
  output logic [WIDTH-1:0] pattern
);

  logic [WIDTH-1:0] next_pattern;

  always_comb begin
    next_pattern = {pattern[WIDTH-2:0], 1'b0} ^ (POLY & {WIDTH{pattern[WIDTH-1]}});
  end

  always_ff @(posedge clock or posedge reset) begin
    if (reset) pattern <= SEED;
    else       pattern <= next_pattern;
  end

endmodule
