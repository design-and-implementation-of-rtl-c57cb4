// btc: bit transition counter.
//
// Sits on any bus or node of a circuit and counts how many of its bits toggle
// from one clock to the next, without altering the data: datain is passed to
// dataout through a single register, so the observed circuit sees its own
// data one clock later.
//
// How it works: the register that produces dataout also holds the previous
// sample. Each clock the bitwise XOR of datain with that previous sample is
// counted (a population count); the count is registered as one_transition and
// added to the running sum total_transition. one_transition therefore shows
// the transitions between the two latest samples and falls back to zero when
// the input holds still; total_transition is the sum of all one_transition
// values since reset. Switching activity over N samples is
// total_transition / (N * WIDTH).
//
// Interface: clock, active-high reset, datain[WIDTH-1:0] in;
// dataout[WIDTH-1:0], one_transition[ONE_W-1:0], total_transition[TOTAL_W-1:0]
// out. Names and the 16/5/16 widths follow the published block diagram; the
// data width is a parameter, as the authors say it may be changed at will.
//
// Timing: all three outputs change on the same rising edge. A value applied
// on datain before edge k appears on dataout after edge k; its transition
// count against the previous sample appears on one_transition after edge k
// and is already included in total_transition after edge k.
//
// Choices of this design (the paper does not fix them): reset is
// asynchronous and clears only the two counts, matching the published
// waveform in which the counts read 0 and dataout is still unknown at time 0
// with reset high. dataout keeps sampling during reset, so holding reset for
// at least one clock gives a clean previous sample and the first count after
// reset is correct. total_transition wraps modulo 2**TOTAL_W.
module btc #(
  parameter int unsigned WIDTH   = btc_pkg::DATA_W,
  parameter int unsigned ONE_W   = $clog2(WIDTH + 1),
  parameter int unsigned TOTAL_W = 16
) (
  input  logic               clock,
  input  logic               reset,
  input  logic [WIDTH-1:0]   datain,
  output logic [WIDTH-1:0]   dataout,
  output logic [ONE_W-1:0]   one_transition,
  output logic [TOTAL_W-1:0] total_transition
);

  initial begin
    assert (WIDTH >= 1 && WIDTH <= 64) else $error("btc: WIDTH must be 1..64");
    assert (2 ** ONE_W > WIDTH) else $error("btc: ONE_W too small for WIDTH");
  end

  logic [ONE_W-1:0] changed;

  // Bits that differ between the new sample and the previous one.
  always_comb begin
    changed = ONE_W'(btc_pkg::count_ones(64'(datain ^ dataout)));
  end

  // Data path register: not reset, it always follows datain.
  always_ff @(posedge clock) begin
    dataout <= datain;
  end

  always_ff @(posedge clock or posedge reset) begin
    if (reset) begin
      one_transition   <= '0;
      total_transition <= '0;
    end else begin
      one_transition   <= changed;
      total_transition <= total_transition + TOTAL_W'(changed);
    end
  end

endmodule
