// tb_btc_test_system: end-to-end testbench of the test path
// (generator -> bit transition counter -> circuit-under-test port), with all
// parameters at their defaults (16-bit data, 8-bit address counters).
//
// For each of the six generators it resets the system with that generator
// selected, then checks after every clock that cut_data, one_transition and
// total_transition equal a reference built from independent generator models
// and a bit-by-bit transition count, with the two-register latency of the
// path. It also checks the accumulated counts against the published tables:
//   rule-90 CA after 8/16/32 patterns: 66, 138, 276;
//   rule-150 CA after 8/16 patterns:   67, 135 (and 263 after 32, this
//                                       design's value; 259 is published);
//   8-bit binary / Gray counter over one full pass of 255 steps: 502 / 255.
// LFSR counts are printed only, since the polynomials are not published.
// Finally it runs the internal LFSR long enough for total_transition to wrap
// and resets the system in mid-run. Each of these mechanisms is counted and
// one that never happened counts as a failure.
module tb_btc_test_system;
  import btc_pkg::*;
  import tb_ref_pkg::*;

  logic        clock = 1'b0;
  logic        reset;
  tpg_sel_e    tpg_sel;
  logic [15:0] cut_data;
  logic [4:0]  one_transition;
  logic [15:0] total_transition;

  int checks = 0;
  int failures = 0;

  btc_test_system dut (.*);

  always #5 clock = ~clock;

  initial begin
    repeat (40000) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s (%s): got %0d expected %0d at %0t", what, tpg_sel.name(), got, exp, $time);
    end
  endtask

  // Reference generator: pattern number k after reset (state advanced by one
  // call per clock).
  function automatic logic [15:0] ref_next(input tpg_sel_e sel, input logic [15:0] g, input int k);
    case (sel)
      TPG_LFSR_INT: return galois_step(g);
      TPG_LFSR_EXT: return fibonacci_step(g);
      TPG_CA90:     return ca_step(g, 1'b0);
      TPG_CA150:    return ca_step(g, 1'b1);
      TPG_BINARY:   return 16'(k % 256);
      TPG_GRAY:     return 16'(gray_of(longint'(k % 256), 8));
      default:      return '0;
    endcase
  endfunction

  function automatic logic [15:0] ref_first(input tpg_sel_e sel);
    return (sel inside {TPG_BINARY, TPG_GRAY}) ? 16'h0000 : SEED16;
  endfunction

  int mode_runs[6];
  int wraps;
  int mid_resets;

  // Reset with a generator selected, then run `edges` clocks checking every
  // output. Returns nothing; checkpoints are handled inside.
  task automatic run_mode(input tpg_sel_e sel, input int edges);
    logic [15:0] g_prev2, g_prev1, g_next;
    int ref_total;
    int n;
    int total_seen;
    @(negedge clock);
    reset   = 1'b1;
    tpg_sel = sel;
    repeat (2) @(posedge clock);
    @(negedge clock);
    reset = 1'b0;
    // g_prev1 is the pattern the BTC samples at the next edge; g_prev2 the
    // one it sampled during reset.
    g_prev1 = ref_first(sel);
    g_prev2 = g_prev1;
    ref_total = 0;
    total_seen = 0;
    for (int k = 1; k <= edges; k++) begin
      @(posedge clock);
      #1;
      n = transitions(64'(g_prev1), 64'(g_prev2), 16);
      ref_total += n;
      check("cut_data", 64'(cut_data), 64'(g_prev1));
      check("one_transition", 64'(one_transition), 64'(n));
      check("total_transition", 64'(total_transition), 64'(ref_total % 65536));
      if (total_transition < total_seen) wraps++;
      total_seen = total_transition;
      // k - 1 generator steps are now counted.
      if ((k - 1) inside {8, 16, 32, 255}) begin
        if (!(sel inside {TPG_BINARY, TPG_GRAY}) && (k - 1) != 255)
          $display("%-13s %2d clocks: %3d transitions, switching activity %f",
                   sel.name(), k - 1, total_transition, real'(total_transition) / real'(16 * (k - 1)));
        case (sel)
          TPG_CA90: begin
            if (k - 1 == 8)  check("published CA-90 8", 64'(total_transition), 66);
            if (k - 1 == 16) check("published CA-90 16", 64'(total_transition), 138);
            if (k - 1 == 32) check("published CA-90 32", 64'(total_transition), 276);
          end
          TPG_CA150: begin
            if (k - 1 == 8)  check("published CA-150 8", 64'(total_transition), 67);
            if (k - 1 == 16) check("published CA-150 16", 64'(total_transition), 135);
            if (k - 1 == 32) check("CA-150 32", 64'(total_transition), 263);
          end
          TPG_BINARY: if (k - 1 == 255) begin
            $display("%-13s 255 steps: %3d transitions, switching activity %f",
                     sel.name(), total_transition, real'(total_transition) / 2040.0);
            check("published 8-bit binary", 64'(total_transition), 502);
          end
          TPG_GRAY: if (k - 1 == 255) begin
            $display("%-13s 255 steps: %3d transitions, switching activity %f",
                     sel.name(), total_transition, real'(total_transition) / 2040.0);
            check("published 8-bit Gray", 64'(total_transition), 255);
          end
          default: ;
        endcase
      end
      g_prev2 = g_prev1;
      g_prev1 = ref_next(sel, g_prev1, k);
    end
    mode_runs[int'(sel)]++;
  endtask

  initial begin
    tpg_sel = TPG_LFSR_INT;
    reset   = 1'b1;
    wraps = 0;
    mid_resets = 0;
    foreach (mode_runs[i]) mode_runs[i] = 0;

    run_mode(TPG_LFSR_INT, 300);
    run_mode(TPG_LFSR_EXT, 300);
    run_mode(TPG_CA90, 300);
    run_mode(TPG_CA150, 300);
    run_mode(TPG_BINARY, 600);
    run_mode(TPG_GRAY, 600);

    // Long run: about 8 transitions per clock wrap the 16-bit total.
    run_mode(TPG_LFSR_EXT, 9000);

    // Asynchronous reset in mid-run clears the counts at once.
    @(negedge clock);
    #2 reset = 1'b1;
    #1;
    check("mid-run reset one_transition", 64'(one_transition), 0);
    check("mid-run reset total_transition", 64'(total_transition), 0);
    if (one_transition == 0 && total_transition == 0) mid_resets++;

    foreach (mode_runs[i]) begin
      $display("generator %0d runs: %0d", i, mode_runs[i]);
      check("generator exercised", 64'(mode_runs[i] > 0), 1);
    end
    $display("total_transition wraps: %0d, mid-run resets: %0d", wraps, mid_resets);
    check("wrap exercised", 64'(wraps > 0), 1);
    check("mid-run reset exercised", 64'(mid_resets > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
