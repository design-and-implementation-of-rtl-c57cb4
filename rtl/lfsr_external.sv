// lfsr_external: external-feedback (Fibonacci) linear feedback shift
// register, used as a test pattern generator.
//
// The register shifts left by one place every clock. The new bit 0 is the XOR
// of the stages selected by TAPS, computed outside the shift chain. The
// default taps (bits 15, 14, 12 and 3, i.e. stages 16, 15, 13 and 4) realise
// the primitive polynomial x^16 + x^15 + x^13 + x^4 + 1, the same one as the
// internal LFSR, so the sequence has the maximal period 2^16 - 1.
//
// Interface: clock, active-high asynchronous reset (loads SEED), and the
// current pattern; a new pattern appears after every rising edge.
//
// The seed 1011001010110110 is the published one; the taps and the shift
// direction are not published and are this design's choice.
module lfsr_external #(
  parameter int unsigned      WIDTH = btc_pkg::DATA_W,
  parameter logic [WIDTH-1:0] SEED  = WIDTH'(btc_pkg::SEED),
  parameter logic [WIDTH-1:0] TAPS  = WIDTH'(16'hD008)
) (
  input  logic             clock,
  input  logic             reset,
  output logic [WIDTH-1:0] pattern
);

  logic feedback;

  always_comb begin
    feedback = ^(pattern & TAPS);
  end

  always_ff @(posedge clock or posedge reset) begin
    if (reset) pattern <= SEED;
    else       pattern <= {pattern[WIDTH-2:0], feedback};
  end

endmodule
