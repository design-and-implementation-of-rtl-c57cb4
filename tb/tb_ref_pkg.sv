// tb_ref_pkg: reference models used by the testbenches. They are written from
// the definitions (polynomial exponents, cell neighbourhoods, bit-by-bit
// comparison), not from the RTL expressions, so that a testbench compares two
// independent descriptions of the same behaviour.
package tb_ref_pkg;

  localparam logic [15:0] SEED16 = 16'b1011001010110110;

  // Transitions between two samples, counted one bit at a time.
  function automatic int transitions(input logic [63:0] a, input logic [63:0] b, input int w);
    int n;
    n = 0;
    for (int i = 0; i < w; i++) if (a[i] != b[i]) n++;
    return n;
  endfunction

  // Galois LFSR step: multiply by x modulo x^16 + x^15 + x^13 + x^4 + 1.
  function automatic logic [15:0] galois_step(input logic [15:0] s);
    int exps[4] = '{15, 13, 4, 0};
    logic [16:0] t;
    t = {s, 1'b0};
    if (t[16]) begin
      t[16] = 1'b0;
      foreach (exps[k]) t[exps[k]] = ~t[exps[k]];
    end
    return t[15:0];
  endfunction

  // Fibonacci LFSR step: stages numbered 1..16, taps at stages 16, 15, 13, 4,
  // shift towards stage 16, feedback into stage 1.
  function automatic logic [15:0] fibonacci_step(input logic [15:0] s);
    int stages[4] = '{16, 15, 13, 4};
    logic fb;
    fb = 1'b0;
    foreach (stages[k]) fb ^= s[stages[k] - 1];
    return {s[14:0], fb};
  endfunction

  // One step of a null-boundary cellular automaton; rule 150 also uses the
  // cell itself, rule 90 only the neighbours.
  function automatic logic [15:0] ca_step(input logic [15:0] s, input bit rule150);
    logic [15:0] n;
    logic left, right;
    for (int i = 0; i < 16; i++) begin
      left  = (i == 15) ? 1'b0 : s[i+1];
      right = (i == 0)  ? 1'b0 : s[i-1];
      n[i]  = left ^ right ^ (rule150 ? s[i] : 1'b0);
    end
    return n;
  endfunction

  // Gray code of an integer, built bit by bit from its definition.
  function automatic logic [63:0] gray_of(input longint unsigned v, input int w);
    logic [63:0] g;
    logic [63:0] b;
    b = 64'(v);
    g = '0;
    for (int i = 0; i < w; i++) g[i] = (i == w - 1) ? b[i] : (b[i] ^ b[i+1]);
    return g;
  endfunction

endpackage
