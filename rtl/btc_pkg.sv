// btc_pkg: types, constants and the bit-counting function shared by the
// bit transition counter (BTC) and the pattern generators around it.
//
// - DATA_W      default width of the observed bus (16 bits).
// - SEED        the seed every LFSR and cellular-automaton generator starts
//               from after reset, 1011001010110110 (written MSB first).
// - tpg_sel_e   encoding of the generator select input of the top level.
//               The encoding itself is this design's choice.
// - count_ones  number of ones in a vector; the BTC applies it to
//               (new sample XOR previous sample).
package btc_pkg;

  localparam int unsigned DATA_W = 16;
  localparam logic [DATA_W-1:0] SEED = 16'b1011_0010_1011_0110;

  typedef enum logic [2:0] {
    TPG_LFSR_INT = 3'd0,  // internal (Galois) LFSR
    TPG_LFSR_EXT = 3'd1,  // external (Fibonacci) LFSR
    TPG_CA90     = 3'd2,  // rule-90 cellular automaton
    TPG_CA150    = 3'd3,  // rule-150 cellular automaton
    TPG_BINARY   = 3'd4,  // binary address counter
    TPG_GRAY     = 3'd5   // Gray-code address counter
  } tpg_sel_e;

  // Number of ones in a vector of up to 64 bits (the caller zero-extends).
  function automatic int unsigned count_ones(input logic [63:0] v);
    int unsigned n;
    n = 0;
    for (int i = 0; i < 64; i++) n += int'(v[i]);
    return n;
  endfunction

endpackage
