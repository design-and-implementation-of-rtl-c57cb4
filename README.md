# Bit transition counter: measuring switching activity in place

Dynamic power in CMOS logic grows with how often nodes toggle. Designers often fold
this into one number per bus, the switching activity

    alpha = (number of bit transitions) / (number of bit positions observed)

so that average dynamic power is roughly `alpha * C_L * Vdd * f`. An 8-bit word
that changes from `00111100` to `11111101` toggles 3 bits (bits 7, 6 and 0), so
that single step has alpha = 3/8.

The bit transition counter (BTC) measures this number in hardware. You insert it
into a bus like a pipeline register: the data passes through unchanged, one clock
late, and beside it the BTC reports how many bits changed since the previous clock
and the running total. Because the data path is unchanged, the same block can sit
on any bus of a design. This RTL places it where it is used for low-power testing:
between a test pattern generator and the circuit under test. There it compares how
much switching different pattern generators and memory-test address generators
cause.

The RTL has two parts:

* `btc`, the counter itself (16-bit data by default, any width from 1 to 64).
* `btc_test_system`, a small test path around it. Six pattern sources run side by
  side: internal and external LFSRs, rule-90 and rule-150 cellular automata, and a
  binary and a Gray address counter. One of them, chosen by a select input, drives
  the BTC. The BTC output is the input of the circuit under test.

## The counter

```
              +--------------------------------------+
 datain[15:0] |--+--------------[D  Q]---------------+---> dataout[15:0]
              |  |                 |                 |
              |  +----> XOR <------+                 |
              |          |                           |
              |      count ones --[D  Q]-------------+---> one_transition[4:0]
              |          |                           |
              |          +--> + --[D  Q]--+----------+---> total_transition[15:0]
              |               ^           |          |
              |               +-----------+          |
 clock, reset |                                      |
              +--------------------------------------+
```

The register that drives `dataout` also holds the previous sample. Each clock, the
BTC XORs `datain` with that previous sample and counts the ones in the result. That
count is registered as `one_transition` and, on the same edge, added to
`total_transition`.

| port | dir | width | meaning |
|---|---|---|---|
| `clock` | in | 1 | rising-edge clock |
| `reset` | in | 1 | active high, asynchronous; clears both counts |
| `datain` | in | `WIDTH` (16) | the observed bus |
| `dataout` | out | `WIDTH` | `datain` delayed by one clock |
| `one_transition` | out | `ONE_W` = clog2(`WIDTH`+1) (5) | bits that changed between the last two samples |
| `total_transition` | out | `TOTAL_W` (16) | sum of all `one_transition` values since reset, modulo 2^16 |

### Timing

All three outputs change on the same rising edge. Call the value present on
`datain` just before edge *k* `d[k]`. After edge *k*:

* `dataout = d[k]`
* `one_transition = popcount(d[k] ^ d[k-1])`
* `total_transition = sum over j <= k of popcount(d[j] ^ d[j-1])`

If the input does not change, `one_transition` is 0 on the next clock. In the
paper's example, `datain` goes 0000 → 0303 → 0F03 (hex). After the edge that samples
0303, `one_transition` = 4 and `total_transition` = 4. After the edge that samples
0F03, they are 2 and 6. If 0F03 is then held, `one_transition` drops to 0 and the
total stays at 6.

### Reset

Reset clears `one_transition` and `total_transition` at once, without waiting for a
clock edge. It does not touch the data register: `dataout` keeps following `datain`
during reset. This has a consequence you must respect. **Hold reset for at least one
rising edge**, so that the data register holds a real previous sample when counting
starts. The first count after reset then compares against the value present during
reset. With a reset shorter than one clock, that first count compares against
whatever the data register held.

### Overflow

`total_transition` is a plain 16-bit accumulator that wraps. A 16-bit bus can toggle
at most 16 bits per clock, so wrap is only possible after at least 4096 clocks. To
run longer, widen `TOTAL_W`. You can also read the total at a known clock count and
take differences, which stay correct across a single wrap.

### Computing switching activity

Apply N + 1 samples, so there are N steps between them. Then read
`total_transition` and divide by `N * WIDTH`. The BTC does not count clocks itself.
The testbenches do this division when they print their results.

## The pattern sources

All six sources have the same ports: `clock`, `reset` (active high, asynchronous)
and `pattern`. They produce a new value after every rising edge and have no enable.

* **`lfsr_internal`**: Galois LFSR, shifting left. The bit that leaves at the top
  is XORed into every stage whose coefficient is set in `POLY`. The default
  polynomial is x^16 + x^15 + x^13 + x^4 + 1 (`POLY = 16'hA011`).
* **`lfsr_external`**: Fibonacci LFSR, shifting left. One XOR tree over the stages
  in `TAPS` feeds bit 0. The default taps are stages 16, 15, 13 and 4
  (`TAPS = 16'hD008`), the same polynomial as the internal LFSR.
* **`ca90`**: rule-90 cellular automaton. Each cell becomes the XOR of its two
  neighbours. Cells beyond both ends read as 0 (null boundary).
* **`ca150`**: rule-150 cellular automaton. Each cell becomes the XOR of itself
  and its two neighbours. The boundary is null, as for rule 90.
* **`binary_counter`**: address counter that counts up from 0 and wraps.
* **`gray_counter`**: a binary count register followed by a registered
  binary-to-Gray conversion (`g = b ^ (b >> 1)`). It steps in lockstep with the
  binary counter, and exactly one bit changes per step.

The four 16-bit generators load the seed `1011001010110110` (16'hB2B6) on reset. The
counters reset to 0. Both LFSRs have the maximal period 2^16 − 1, and their
testbenches check it.

## The test path (`btc_test_system`)

```
  lfsr_internal --+
  lfsr_external --+
  ca90 -----------+--[ mux: tpg_sel ]--> btc --> cut_data   (to the circuit under test)
  ca150 ----------+                       |
  binary_counter -+ (zero-extended)       +--> one_transition, total_transition
  gray_counter ---+ (zero-extended)
```

The codes of `tpg_sel` are listed in `btc_pkg::tpg_sel_e`: 0 internal LFSR,
1 external LFSR, 2 CA-90, 3 CA-150, 4 binary counter, 5 Gray counter. Codes 6 and 7
feed zeros. Parameters are `WIDTH` (16) and `ADDR_W` (8, the address counter width).

A measurement goes like this:

1. Select the generator while reset is high.
2. Hold reset for at least one clock.
3. Release reset.

The path has two registers: the generator's and the BTC's. So the transitions of the
first N generator steps are complete in `total_transition` N + 1 clocks after reset
is released. Do not change `tpg_sel` outside reset, because the jump from one
generator's pattern to another's would be counted as transitions.

The circuit under test and the output response analyser that follow in a complete
test setup are not part of this RTL. `cut_data` is where they connect.

## What the RTL reproduces

Transition counts from the testbenches, next to the published ones. The seed is
1011001010110110, and activity is transitions / (steps × width).

| source | steps | this RTL | published |
|---|---|---|---|
| binary counter, 4-bit | 15 | 26 (0.43) | 26 (0.43) |
| Gray counter, 4-bit | 15 | 15 (0.25) | 15 (0.25) |
| binary counter, 8-bit | 255 | 502 (0.246) | 502 (0.246) |
| Gray counter, 8-bit | 255 | 255 (0.125) | 255 (0.125) |
| CA-90 | 8 / 16 / 32 | 66 / 138 / 276 | 66 / 138 / 276 |
| CA-150 | 8 / 16 / 32 | 67 / 135 / **263** | 67 / 135 / 259 |
| internal LFSR | 8 / 16 / 32 | 79 / 139 / 296 | 66 / 114 / 236 |
| external LFSR | 8 / 16 / 32 | 79 / 133 / 258 | 88 / 163 / 266 |

The counter results follow from arithmetic:

* An N-bit binary count through all 2^N − 1 steps toggles 2^(N+1) − N − 2 bits.
* A Gray count through the same steps toggles exactly 2^N − 1 bits.

For the cellular automata, the published counts fix the boundary: a null boundary
matches, a cyclic one does not.

The LFSR feedback polynomials are not published. Many 16-bit polynomials reproduce
one of the published rows, and none of them stands out as the obvious intended one.
This RTL therefore uses a standard primitive polynomial and does not claim the
published LFSR numbers. Change `POLY` or `TAPS` to try others.

The 32-step rule-150 count (263 against the published 259) is the one mismatch with
a fully specified generator. The 8- and 16-step values match, and no usual boundary
or counting convention gives 259.

## Where this departs from, or goes beyond, the source description

The source describes the counter's ports, widths and behaviour. It also gives the
example above and the measurement tables. It does not give the circuit inside the
counter or inside the generators. Everything below is a choice made here:

* **Reset.** The reset is asynchronous, and the data register is not reset. The
  source only says the two counts go to zero while reset is high. In its waveform,
  the counts already read 0 at time 0 while `dataout` is still unknown, which fits
  these choices.
* **Same-edge update.** `total_transition` is updated on the same edge as
  `one_transition`, not one clock later.
* **Overflow.** `total_transition` wraps. The source does not say what happens on
  overflow.
* **Generator details.** The LFSR polynomials, the shift directions and the
  cellular-automaton boundaries are chosen here (see above).
* **Size.** A synthesis report in the source lists only 16 sequential cells. That
  cannot hold a 16-bit data register plus a 5-bit and a 16-bit count. This RTL uses
  37 flip-flops in the BTC.
* **One selectable path.** The source measures each generator in a separate run.
  Here all six share one path behind a multiplexer.
* **A conflict in the source.** Its text says the internal LFSR shows the highest
  switching activity. Its own table gives the external LFSR the highest values.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and
ends with `$finish`. With Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/btc_pkg.sv tb/tb_ref_pkg.sv tb/tb_btc_test_system.sv \
    --top-module tb_btc_test_system
./obj_dir/Vtb_btc_test_system
```

Replace the last file and the top module name to run another testbench:

| testbench | what it covers |
|---|---|
| `tb_btc` | paper example, 2000 random steps against a bit-by-bit model, wrap of the total, asynchronous reset |
| `tb_lfsr_internal`, `tb_lfsr_external` | every pattern against a model built from the polynomial, full period 65535 |
| `tb_ca90`, `tb_ca150` | 300 patterns against a cell-by-cell model, published counts |
| `tb_binary_counter`, `tb_gray_counter` | 4- and 8-bit sequences and published counts |
| `tb_table4_address_generators` | the four counter measurements taken through BTCs of 4 and 8 bits |
| `tb_btc_test_system` | whole path at default sizes: all six sources, published counts, wrap, mid-run reset |

`tb/tb_ref_pkg.sv` holds the reference models. They are written from the
definitions, such as polynomial exponents and cell neighbourhoods, and not copied
from the RTL expressions.

## Files

* `rtl/btc_pkg.sv`: default width, seed, the `tpg_sel_e` encoding and the
  `count_ones` function.
* `rtl/btc.sv`: the bit transition counter.
* `rtl/lfsr_internal.sv`, `rtl/lfsr_external.sv`, `rtl/ca90.sv`, `rtl/ca150.sv`,
  `rtl/binary_counter.sv`, `rtl/gray_counter.sv`: the pattern sources.
* `rtl/btc_test_system.sv`: the top-level test path.
* `tb/`: the testbenches listed above.
