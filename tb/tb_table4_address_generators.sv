// tb_table4_address_generators: the address-generator experiment, measured
// with the bit transition counter itself.
//
// Four pairs run side by side: a 4-bit and an 8-bit binary counter and a
// 4-bit and an 8-bit Gray counter, each feeding a BTC of its own width. After
// one full pass of the address space (2^N - 1 steps, plus one clock for the
// BTC register) each BTC's total_transition must equal the published count:
//   binary 4-bit 26 (activity 0.43), Gray 4-bit 15 (0.25),
//   binary 8-bit 502 (0.246),        Gray 8-bit 255 (0.125).
module tb_table4_address_generators;

  logic clock = 1'b0;
  logic reset;

  logic [3:0]  bin4, gray4, bin4_out, gray4_out;
  logic [7:0]  bin8, gray8, bin8_out, gray8_out;
  logic [2:0]  bin4_one, gray4_one;
  logic [3:0]  bin8_one, gray8_one;
  logic [15:0] bin4_total, gray4_total, bin8_total, gray8_total;

  int checks = 0;
  int failures = 0;

  binary_counter #(.WIDTH(4)) u_bin4  (.clock, .reset, .pattern(bin4));
  gray_counter   #(.WIDTH(4)) u_gray4 (.clock, .reset, .pattern(gray4));
  binary_counter #(.WIDTH(8)) u_bin8  (.clock, .reset, .pattern(bin8));
  gray_counter   #(.WIDTH(8)) u_gray8 (.clock, .reset, .pattern(gray8));

  btc #(.WIDTH(4)) btc_bin4  (.clock, .reset, .datain(bin4),  .dataout(bin4_out),
                              .one_transition(bin4_one),  .total_transition(bin4_total));
  btc #(.WIDTH(4)) btc_gray4 (.clock, .reset, .datain(gray4), .dataout(gray4_out),
                              .one_transition(gray4_one), .total_transition(gray4_total));
  btc #(.WIDTH(8)) btc_bin8  (.clock, .reset, .datain(bin8),  .dataout(bin8_out),
                              .one_transition(bin8_one),  .total_transition(bin8_total));
  btc #(.WIDTH(8)) btc_gray8 (.clock, .reset, .datain(gray8), .dataout(gray8_out),
                              .one_transition(gray8_one), .total_transition(gray8_total));

  always #5 clock = ~clock;

  initial begin
    repeat (1000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    reset = 1'b0;
    #1 reset = 1'b1;
    repeat (2) @(posedge clock);
    @(negedge clock);
    reset = 1'b0;
    for (int k = 1; k <= 256; k++) begin
      @(posedge clock);
      #1;
      if (k == 16) begin
        $display("binary 4-bit: %0d transitions, activity %f", bin4_total, real'(bin4_total) / 60.0);
        $display("Gray   4-bit: %0d transitions, activity %f", gray4_total, real'(gray4_total) / 60.0);
        check("binary 4-bit", int'(bin4_total), 26);
        check("Gray 4-bit", int'(gray4_total), 15);
      end
      if (k == 256) begin
        $display("binary 8-bit: %0d transitions, activity %f", bin8_total, real'(bin8_total) / 2040.0);
        $display("Gray   8-bit: %0d transitions, activity %f", gray8_total, real'(gray8_total) / 2040.0);
        check("binary 8-bit", int'(bin8_total), 502);
        check("Gray 8-bit", int'(gray8_total), 255);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
