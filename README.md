# Parallel thermometer-code bitstream generator for stochastic computing

Stochastic computing (SC) represents a number p in [0, 1] as a bitstream in
which a fraction p of the bits are 1. The arithmetic is then very cheap: a
two-input AND gate multiplies two uncorrelated streams, and a multiplexer
performs scaled addition. Most of the cost goes into the *bitstream
generator*, which turns a binary number into such a stream. The conventional
generator is a pseudo-random or counter-based number source (LFSR,
low-discrepancy counter, or the counter of the thermometer method) compared
against the binary value for one bit per clock. A stream of length N
therefore takes N clocks and one comparator per operand.

This design drops the number source and the comparator. For thermometer
coding the stream is fully deterministic: the value v of precision L is the
L-bit word with its v top bits set. This can be produced by a
**binary-to-thermometer decoder** in a single evaluation. All L bits are
available in parallel, one clock after the operand arrives, whatever the
stream length.

## Blocks

| module | what it is |
|---|---|
| `rtl/sc_bsg_pkg.sv` | default precision (16) and the operand-width function `bin_width(L) = $clog2(L+1)` |
| `rtl/therm_decoder.sv` | combinational decoder, `IN_W`-bit binary to `LEVELS`-bit thermometer code |
| `rtl/parallel_bsg.sv` | top: two decoders, one output register, and the wiring of the two codes into two `LEVELS*LEVELS`-bit streams |

### The decoder

The outputs are numbered `y[1]..y[LEVELS]`. They fill from the top:

    y[k] = 1  iff  a >= LEVELS + 1 - k

For `LEVELS = 7` and a 3-bit input this is the 3-to-7 decoder below. A0 is
the input MSB, which is `a[2]` here.

| v | A0 A1 A2 | Y1 Y2 Y3 Y4 Y5 Y6 Y7 |
|---|---|---|
| 0 | 0 0 0 | 0 0 0 0 0 0 0 |
| 1 | 0 0 1 | 0 0 0 0 0 0 1 |
| 2 | 0 1 0 | 0 0 0 0 0 1 1 |
| 3 | 0 1 1 | 0 0 0 0 1 1 1 |
| 4 | 1 0 0 | 0 0 0 1 1 1 1 |
| 5 | 1 0 1 | 0 0 1 1 1 1 1 |
| 6 | 1 1 0 | 0 1 1 1 1 1 1 |
| 7 | 1 1 1 | 1 1 1 1 1 1 1 |

The input width is `$clog2(LEVELS+1)`, one bit more than log2 of the
precision for the power-of-two sizes. The full-scale value `LEVELS`, meaning
probability 1, can therefore be represented. This gives the three sizes that
are characterised:

| decoder | LEVELS | input bits | operand precision | stream length for a product |
|---|---|---|---|---|
| 3-4  | 4  | 3 | 2-bit | 16  |
| 4-8  | 8  | 4 | 3-bit | 64  |
| 5-16 | 16 | 5 | 4-bit | 256 (default) |

Input codes above `LEVELS` (17..31 for the 5-16 decoder) saturate to all
ones. The decoder is written as one comparison per output and left to
synthesis. It is not a transcription of a particular gate netlist.

### Two operands and the 256-bit streams

A product needs two streams that are uncorrelated. The counter-based
thermometer generator gets this by clocking one operand's counter L times
faster than the other's. Over L*L clocks, the fast counter runs
0,1,..,L-1,0,1,.. and the slow one runs 0,0,..,0,1,1,... In the parallel
generator this becomes wiring, with no logic:

    bs_x[i] = therm_x[(i mod LEVELS) + 1]    // code tiled LEVELS times
    bs_y[i] = therm_y[(i div LEVELS) + 1]    // each code bit repeated LEVELS times

Every bit of `therm_x` then meets every bit of `therm_y` exactly once. Hence
`popcount(bs_x & bs_y) = x*y` exactly, and the AND-gate product of two 4-bit
operands over 256 bits has zero error. This is why the thermometer method
reaches full accuracy at a stream length of 256, but not at shorter lengths.
At the default size one 5-16 decoder accounts for 256 stream bits per
conversion.

### Timing and interface of `parallel_bsg`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous, active-low reset; clears codes and `out_valid` |
| `in_valid` | in | 1 | `x`, `y` valid this cycle |
| `x`, `y` | in | `IN_W` (5) | binary operands, 0..`LEVELS` |
| `out_valid` | out | 1 | streams hold the conversion of the operands from the previous cycle |
| `therm_x`, `therm_y` | out | `[LEVELS:1]` | registered thermometer codes |
| `bs_x`, `bs_y` | out | `LEVELS*LEVELS` (256) | the two streams laid out as above |

Operands presented with `in_valid` before clock edge n appear as codes and
streams after edge n, with `out_valid` high for that one cycle. This is a
one-clock conversion, against L*L clocks for a serial generator. When
`in_valid` is low, the register keeps the last codes and `out_valid` is low.
Concurrent assertions check that both registered codes are always valid
thermometer codes, with no 1 below a 0.

## What is the original method and what is this implementation's choice

Taken from the method:
- the binary-to-thermometer decoder and its truth table;
- the decoder sizes 3-4, 4-8 and 5-16, with 5-16 as the default;
- the one-clock conversion;
- the stream length of 256 for two 4-bit operands.

Chosen here, because the method does not specify them:
- **Register placement.** The register sits after the decoders. Only the
  one-clock latency is given.
- **Handshake and reset.** The `in_valid`/`out_valid` handshake, hold-when-idle
  behaviour and the asynchronous active-low reset.
- **Stream layout.** The fast/slow layout that expands two L-bit codes into
  L*L-bit streams. It is modelled on the two counters of the serial
  thermometer generator.
- **Saturation.** Input codes above full scale saturate.
- **Decoder form.** The decoder is behavioural (one comparison per output).
  It is not a fixed gate structure.

Not included: the serial LFSR, low-discrepancy and counter-thermometer
generators with their comparators. They are the baselines this generator
replaces. The area, power and energy figures come from a commercial 40 nm
library and cannot be reproduced from this RTL. Synthesis here produces 32
5-bit comparisons and 33 flip-flops for the default top.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

- `tb/tb_therm_decoder.sv` covers four decoders. The 3-7 decoder is checked
  against the truth table above. The 3-4, 4-8 and 5-16 decoders are checked
  exhaustively over all input codes, saturating codes included, against a
  shift-based reference and a ones count.
- `tb/tb_parallel_bsg.sv` runs the top at its default parameters and covers:
  - all 17x17 operand pairs and several saturating codes, with random idle
    cycles;
  - the thermometer codes and both stream layouts, bit by bit;
  - the ones counts and the exact AND-gate product;
  - one-clock latency, hold when idle, and reset (synchronous to the test and
    asynchronous mid-run);
  - an MSE of 0 over all 256 4-bit products.

  It also counts every mechanism and fails if one never occurred.
- `tb/tb_sc_multiply.sv` is the multiplication workload at all three sizes.
  Precisions 4, 8 and 16 give streams of 16, 64 and 256 bits. Every operand
  pair of the matching precision is multiplied with an AND gate. The MSE is
  reported against the accuracy bound 1/L^4 and must be exactly 0.

Simulate with Verilator, for example:

    verilator --binary --timing --assert -Irtl rtl/sc_bsg_pkg.sv \
        rtl/therm_decoder.sv rtl/parallel_bsg.sv tb/tb_parallel_bsg.sv \
        --top-module tb_parallel_bsg && ./obj_dir/Vtb_parallel_bsg

To change the precision, set `LEVELS` on `parallel_bsg` or
`therm_decoder`. The operand width and the stream length follow from it.
