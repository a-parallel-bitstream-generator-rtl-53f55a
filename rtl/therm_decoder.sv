// Binary-to-thermometer decoder: the parallel stochastic bitstream generator.
//
// The binary value a (0..LEVELS) is turned into a LEVELS-bit thermometer code
// y whose number of ones is a, i.e. a stochastic bitstream of value a/LEVELS,
// in one combinational evaluation instead of LEVELS clocks of a counter and a
// comparator. The outputs are numbered y[1]..y[LEVELS] and fill from the top:
// value v sets y[LEVELS], y[LEVELS-1], ..., y[LEVELS-v+1], so
//     y[k] = (a >= LEVELS + 1 - k).
// With LEVELS = 7 this is exactly the 3-input, 7-output truth table of the
// published decoder (inputs A0..A2 with A0 the most significant bit, here
// a[2]; outputs Y1..Y7, here y[1]..y[7]). The default LEVELS = 16 with a
// 5-bit input is the published "5-16 decoder".
//
// Design choices of this implementation: the decoder is written from the
// truth table as one magnitude comparison per output rather than copied gate
// by gate; inputs above LEVELS (possible because IN_W rounds up) saturate to
// all ones.
//
// Interface: a [IN_W-1:0] in, y [LEVELS:1] out. Purely combinational.
module therm_decoder #(
  parameter int unsigned LEVELS = sc_bsg_pkg::DEFAULT_LEVELS,
  parameter int unsigned IN_W   = sc_bsg_pkg::bin_width(LEVELS)
) (
  input  logic [IN_W-1:0] a,
  output logic [LEVELS:1] y
);

  always_comb begin
    for (int unsigned k = 1; k <= LEVELS; k++) begin
      y[k] = (32'(a) >= (LEVELS + 1 - k));
    end
  end

endmodule
