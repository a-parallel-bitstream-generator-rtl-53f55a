// Parallel stochastic bitstream generator for two operands (top level).
//
// Each binary operand (x, y: 0..LEVELS) goes through its own
// binary-to-thermometer decoder; the two thermometer codes are captured in an
// output register when in_valid is high, so a complete conversion takes one
// clock: operands presented before edge n give bitstreams and out_valid after
// edge n. Without in_valid the register holds its last code and out_valid
// falls.
//
// Bitstream layout. A LEVELS-bit thermometer code is one stochastic number of
// precision LEVELS. For a two-operand product the two streams must be
// uncorrelated, which the thermometer method obtains by running operand x
// "fast" and operand y "slow" over LEVELS*LEVELS bits (like a low and a high
// counter digit). Here that is pure wiring:
//     bs_x[i] = therm_x[(i mod LEVELS) + 1]      (code tiled LEVELS times)
//     bs_y[i] = therm_y[(i div LEVELS) + 1]      (each bit repeated LEVELS times)
// so that popcount(bs_x & bs_y) = x*y exactly, i.e. the AND-gate product of
// the two BSL-bit streams has no error at BSL = LEVELS*LEVELS. Defaults:
// LEVELS = 16, 5-bit operands, BSL = 256.
//
// What follows the published design: the decoder, the one-clock conversion,
// precision 16 with 256-bit streams. This implementation's own choices: the
// register placement after the decoders, the in_valid/out_valid handshake,
// the asynchronous active-low reset and the fast/slow stream layout.
module parallel_bsg #(
  parameter  int unsigned LEVELS = sc_bsg_pkg::DEFAULT_LEVELS,
  localparam int unsigned IN_W   = sc_bsg_pkg::bin_width(LEVELS),
  localparam int unsigned BSL    = LEVELS * LEVELS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  x,
  input  logic [IN_W-1:0]  y,
  output logic             out_valid,
  output logic [LEVELS:1]  therm_x,
  output logic [LEVELS:1]  therm_y,
  output logic [BSL-1:0]   bs_x,
  output logic [BSL-1:0]   bs_y
);

  logic [LEVELS:1] dec_x, dec_y;

  therm_decoder #(.LEVELS(LEVELS), .IN_W(IN_W)) u_dec_x (.a(x), .y(dec_x));
  therm_decoder #(.LEVELS(LEVELS), .IN_W(IN_W)) u_dec_y (.a(y), .y(dec_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      therm_x   <= '0;
      therm_y   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        therm_x <= dec_x;
        therm_y <= dec_y;
      end
    end
  end

  for (genvar i = 0; i < BSL; i++) begin : g_stream
    assign bs_x[i] = therm_x[(i % LEVELS) + 1];
    assign bs_y[i] = therm_y[(i / LEVELS) + 1];
  end

  // A thermometer code has no 1 below a 0: y[k] implies y[k+1].
  a_therm_x : assert property (@(posedge clk)
    (therm_x & ~{1'b1, therm_x[LEVELS:2]}) == '0);
  a_therm_y : assert property (@(posedge clk)
    (therm_y & ~{1'b1, therm_y[LEVELS:2]}) == '0);

endmodule
