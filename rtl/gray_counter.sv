// gray_counter: Gray-code counter used as a low-switching address generator
// for memory testing.
//
// A binary count register steps by one every clock; the output register
// holds the Gray code of the next count, g = b ^ (b >> 1), so exactly one
// output bit changes per clock and a full pass of 2^WIDTH - 1 steps toggles
// 2^WIDTH - 1 bits (15 for 4 bits, 255 for 8 bits).
//
// Interface: clock, active-high asynchronous reset (both registers to 0, the
// Gray code of 0), and the current address on pattern; a new address appears
// after every rising edge, in step with binary_counter. The published
// experiments use 4- and 8-bit counters; the default is the 8-bit one. The
// binary-plus-conversion structure is this design's choice: the paper gives
// only the counter's name and its transition counts.
module gray_counter #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clock,
  input  logic             reset,
  output logic [WIDTH-1:0] pattern
);

  logic [WIDTH-1:0] binary_q;
  logic [WIDTH-1:0] binary_next;

  always_comb begin
    binary_next = binary_q + 1'b1;
  end

  always_ff @(posedge clock or posedge reset) begin
    if (reset) begin
      binary_q <= '0;
      pattern  <= '0;
    end else begin
      binary_q <= binary_next;
      pattern  <= binary_next ^ (binary_next >> 1);
    end
  end

endmodule
