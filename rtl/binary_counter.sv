// binary_counter: binary up-counter used as an address generator for memory
// testing.
//
// Starts at 0 after reset and adds one every clock, wrapping from all ones
// back to 0. Stepping from k to k+1 toggles the trailing ones of k plus one
// more bit, so a full pass of 2^WIDTH - 1 steps toggles
// 2^(WIDTH+1) - WIDTH - 2 bits (26 for 4 bits, 502 for 8 bits).
//
// Interface: clock, active-high asynchronous reset, and the current address
// on pattern; a new address appears after every rising edge. The published
// experiments use 4- and 8-bit counters; the default is the 8-bit one. Reset
// value and the absence of an enable are this design's choices.
module binary_counter #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clock,
  input  logic             reset,
  output logic [WIDTH-1:0] pattern
);

  always_ff @(posedge clock or posedge reset) begin
    if (reset) pattern <= '0;
    else       pattern <= pattern + 1'b1;
  end

endmodule
