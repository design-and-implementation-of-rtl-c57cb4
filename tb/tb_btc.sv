// tb_btc: self-checking testbench of the bit transition counter.
//
// 1. Replays the example published with the design: 0000 -> 0303 -> 0F03
//    gives one_transition 4 then 2 and total_transition 4 then 6; the input
//    then holds still and one_transition must fall back to 0.
// 2. Applies random data (random number of flipped bits, sometimes none) and
//    checks dataout (one clock late), one_transition and total_transition
//    against a bit-by-bit reference, every clock.
// 3. Drives 0000/FFFF alternately until total_transition wraps past 2^16.
// 4. Raises reset between clock edges and checks that the counts clear at
//    once (asynchronous reset) and that counting restarts correctly.
module tb_btc;
  import tb_ref_pkg::*;

  logic        clock = 1'b0;
  logic        reset;
  logic [15:0] datain;
  logic [15:0] dataout;
  logic [4:0]  one_transition;
  logic [15:0] total_transition;

  int checks = 0;
  int failures = 0;

  btc dut (.*);

  always #5 clock = ~clock;

  initial begin
    repeat (20000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  // Apply one sample total_before a rising edge and check the outputs after it.
  logic [15:0] prev;
  int          ref_total;
  task automatic step(input logic [15:0] d);
    int n;
    @(negedge clock);
    datain = d;
    @(posedge clock);
    #1;
    n = transitions(64'(d), 64'(prev), 16);
    ref_total = (ref_total + n) % 65536;
    check("dataout", dataout, d);
    check("one_transition", one_transition, n);
    check("total_transition", total_transition, ref_total);
    prev = d;
  endtask

  initial begin
    logic [15:0] d;
    int wraps;
    reset  = 1'b0;
    #1 reset = 1'b1;
    datain = 16'h0000;
    #1;
    check("async reset one", one_transition, 0);
    check("async reset total", total_transition, 0);
    repeat (2) @(posedge clock);
    @(negedge clock);
    reset = 1'b0;
    prev = 16'h0000;
    ref_total = 0;

    // 1. Published example.
    step(16'h0303);
    check("paper one 0303", one_transition, 4);
    check("paper total 0303", total_transition, 4);
    step(16'h0F03);
    check("paper one 0F03", one_transition, 2);
    check("paper total 0F03", total_transition, 6);
    step(16'h0F03);
    check("hold gives zero", one_transition, 0);
    check("hold keeps total", total_transition, 6);
    // The 8-bit example of the text: 00111100 -> 11111101 is 3 transitions.
    step(16'h003C);
    step(16'h00FD);
    check("paper 8-bit example", one_transition, 3);

    // 2. Random data.
    for (int i = 0; i < 2000; i++) begin
      d = prev;
      for (int k = $urandom_range(0, 16); k > 0; k--) d[$urandom_range(0, 15)] ^= 1'b1;
      step(d);
    end

    // 3. Wrap of the accumulated count.
    wraps = 0;
    for (int i = 0; i < 4200; i++) begin
      int total_before;
      total_before = total_transition;
      step(~prev);
      if (total_transition < total_before) wraps++;
    end
    check("total wrapped once", wraps, 1);

    // 4. Asynchronous reset in mid-run.
    @(negedge clock);
    #2 reset = 1'b1;
    #1;
    check("mid-run reset one", one_transition, 0);
    check("mid-run reset total", total_transition, 0);
    @(posedge clock);
    #1;
    check("reset holds total", total_transition, 0);
    check("dataout runs during reset", dataout, datain);
    prev = datain;
    @(negedge clock);
    reset = 1'b0;
    ref_total = 0;
    step(16'hFFFF ^ prev ^ 16'h000F);
    check("first count after reset", total_transition, 12);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
