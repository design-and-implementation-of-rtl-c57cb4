// tb_lfsr_external: self-checking testbench of the external (Fibonacci) LFSR.
//
// After reset the register must hold the seed 1011001010110110. Every
// following pattern is compared with a reference step computed from the
// polynomial x^16 + x^15 + x^13 + x^4 + 1 (tb_ref_pkg::fibonacci_step). The run goes on
// until the seed returns, and the period must be the maximal 2^16 - 1. The
// bit transitions after 8, 16 and 32 steps are printed for comparison with
// published measurements (these depend on the polynomial, which is not
// published, so they are reported, not checked). A second reset in mid-run
// must reload the seed at once.
module tb_lfsr_external;
  import tb_ref_pkg::*;

  logic        clock = 1'b0;
  logic        reset;
  logic [15:0] pattern;

  int checks = 0;
  int failures = 0;

  lfsr_external dut (.*);

  always #5 clock = ~clock;

  initial begin
    repeat (70000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    logic [15:0] expected;
    int period;
    int trans;
    reset = 1'b0;
    #1 reset = 1'b1;
    #1;
    check("seed after reset", 64'(pattern), 64'(SEED16));
    @(negedge clock);
    reset = 1'b0;
    expected = SEED16;
    period = 0;
    trans = 0;
    do begin
      logic [15:0] prior;
      prior = expected;
      expected = fibonacci_step(expected);
      @(posedge clock);
      #1;
      period++;
      trans += transitions(64'(expected), 64'(prior), 16);
      check("pattern", 64'(pattern), 64'(expected));
      if (period == 8 || period == 16 || period == 32)
        $display("after %0d clocks: %0d transitions, switching activity %f",
                  period, trans, real'(trans) / real'(16 * period));
    end while (pattern != SEED16 && period < 65600);
    check("maximal period", 64'(period), 64'(65535));
    // Reset in mid-run.
    repeat (5) @(posedge clock);
    #2 reset = 1'b1;
    #1;
    check("asynchronous reload of the seed", 64'(pattern), 64'(SEED16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
