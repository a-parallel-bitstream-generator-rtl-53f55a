// Shared constants for the parallel thermometer-code bitstream generator.
//
// A stochastic number of precision L is a bitstream of L bits whose count of
// ones, v, encodes v/L. The decoder takes v as a binary number of
// $clog2(L+1) bits, so that the full-scale value L (probability 1) is
// representable; this gives the 3-4, 4-8 and 5-16 decoders for L = 4, 8, 16.
// The default precision is 16 (5-input, 16-output decoder, 256-bit streams
// for a two-operand product), which is the largest configuration evaluated.
package sc_bsg_pkg;

  // Default precision: number of thermometer outputs per decoder.
  localparam int unsigned DEFAULT_LEVELS = 16;

  // Width of the binary operand for a given precision.
  function automatic int unsigned bin_width(input int unsigned levels);
    return $clog2(levels + 1);
  endfunction

endpackage
