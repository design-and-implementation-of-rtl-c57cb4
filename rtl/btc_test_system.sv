// btc_test_system: a bit transition counter placed in a built-in test path,
// between the pattern source and the circuit under test (TPG -> BTC -> CUT ->
// ORA).
//
// Six pattern sources run side by side: the internal and external LFSRs, the
// rule-90 and rule-150 cellular automata (WIDTH bits, common seed), and the
// binary and Gray address counters (ADDR_W bits, zero-extended to WIDTH,
// which adds no transitions). tpg_sel picks the one that drives the BTC.
// The BTC passes the chosen patterns on, one clock later, on cut_data, the
// input of the circuit under test, and reports per-clock and accumulated
// transition counts. The circuit under test and the response analyser are not
// part of this RTL: cut_data is the port they would connect to.
//
// Interface: clock, active-high asynchronous reset, tpg_sel (btc_pkg::tpg_sel_e,
// values 6 and 7 select all zeros); cut_data, one_transition,
// total_transition out.
//
// Timing: after reset all generators hold their first pattern (seed or 0),
// and the BTC samples it while reset is held. The transitions of the first N
// generator steps after reset are complete in total_transition N + 1 clocks
// after reset is released (one clock for the generator register, one for the
// BTC register).
//
// The chain of Fig. 2 and the set of generators follow the paper; running all
// generators at once with a select multiplexer is this design's choice (the
// paper measures each generator on its own). Change tpg_sel only while reset
// is held, or the switch itself is counted as transitions.
module btc_test_system #(
  parameter int unsigned WIDTH  = btc_pkg::DATA_W,
  parameter int unsigned ADDR_W = 8
) (
  input  logic                      clock,
  input  logic                      reset,
  input  btc_pkg::tpg_sel_e         tpg_sel,
  output logic [WIDTH-1:0]          cut_data,
  output logic [$clog2(WIDTH+1)-1:0] one_transition,
  output logic [15:0]               total_transition
);

  import btc_pkg::*;

  initial begin
    assert (ADDR_W <= WIDTH) else $error("btc_test_system: ADDR_W must not exceed WIDTH");
  end

  logic [WIDTH-1:0]  lfsr_int_pattern;
  logic [WIDTH-1:0]  lfsr_ext_pattern;
  logic [WIDTH-1:0]  ca90_pattern;
  logic [WIDTH-1:0]  ca150_pattern;
  logic [ADDR_W-1:0] binary_address;
  logic [ADDR_W-1:0] gray_address;
  logic [WIDTH-1:0]  btc_in;

  lfsr_internal #(.WIDTH(WIDTH)) u_lfsr_internal (
    .clock, .reset, .pattern(lfsr_int_pattern)
  );

  lfsr_external #(.WIDTH(WIDTH)) u_lfsr_external (
    .clock, .reset, .pattern(lfsr_ext_pattern)
  );

  ca90 #(.WIDTH(WIDTH)) u_ca90 (
    .clock, .reset, .pattern(ca90_pattern)
  );

  ca150 #(.WIDTH(WIDTH)) u_ca150 (
    .clock, .reset, .pattern(ca150_pattern)
  );

  binary_counter #(.WIDTH(ADDR_W)) u_binary_counter (
    .clock, .reset, .pattern(binary_address)
  );

  gray_counter #(.WIDTH(ADDR_W)) u_gray_counter (
    .clock, .reset, .pattern(gray_address)
  );

  always_comb begin
    unique case (tpg_sel)
      TPG_LFSR_INT: btc_in = lfsr_int_pattern;
      TPG_LFSR_EXT: btc_in = lfsr_ext_pattern;
      TPG_CA90:     btc_in = ca90_pattern;
      TPG_CA150:    btc_in = ca150_pattern;
      TPG_BINARY:   btc_in = WIDTH'(binary_address);
      TPG_GRAY:     btc_in = WIDTH'(gray_address);
      default:      btc_in = '0;
    endcase
  end

  btc #(.WIDTH(WIDTH), .TOTAL_W(16)) u_btc (
    .clock,
    .reset,
    .datain          (btc_in),
    .dataout         (cut_data),
    .one_transition,
    .total_transition
  );

endmodule
