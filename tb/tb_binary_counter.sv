// tb_binary_counter: self-checking testbench of the binary address counter,
// at the two sizes of the published experiments (4 and 8 bits).
//
// Each counter must start at 0 after reset and step through every address
// in order, wrapping to 0. The bit transitions of one full pass (2^N - 1
// steps) are counted and compared with the published 26 (4 bits) and 502
// (8 bits), i.e. switching activity 0.43 and 0.246.
module tb_binary_counter;
  import tb_ref_pkg::*;

  logic       clock = 1'b0;
  logic       reset;
  logic [3:0] addr4;
  logic [7:0] addr8;

  int checks = 0;
  int failures = 0;

  binary_counter #(.WIDTH(4)) dut4 (.clock, .reset, .pattern(addr4));
  binary_counter              dut8 (.clock, .reset, .pattern(addr8));

  always #5 clock = ~clock;

  initial begin
    repeat (2000) @(posedge clock);
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
    logic [3:0] last4;
    logic [7:0] last8;
    int t4, t8;
    reset = 1'b0;
    #1 reset = 1'b1;
    #1;
    check("reset 4", 64'(addr4), 0);
    check("reset 8", 64'(addr8), 0);
    @(negedge clock);
    reset = 1'b0;
    t4 = 0;
    t8 = 0;
    last4 = addr4;
    last8 = addr8;
    for (int step = 1; step <= 300; step++) begin
      @(posedge clock);
      #1;
      check("addr4", 64'(addr4), 64'(step % 16));
      check("addr8", 64'(addr8), 64'(step % 256));
      if (step <= 15)  t4 += transitions(64'(addr4), 64'(last4), 4);
      if (step <= 255) t8 += transitions(64'(addr8), 64'(last8), 8);
      last4 = addr4;
      last8 = addr8;
    end
    $display("4-bit: %0d transitions, switching activity %f", t4, real'(t4) / 60.0);
    $display("8-bit: %0d transitions, switching activity %f", t8, real'(t8) / 2040.0);
    check("published 4-bit count", 64'(t4), 26);
    check("published 8-bit count", 64'(t8), 502);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
