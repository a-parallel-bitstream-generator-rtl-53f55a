// Workload testbench: two-operand stochastic multiplication at the three
// evaluated precisions.
//
// Three generators are built, with precision 4, 8 and 16 (3-4, 4-8 and 5-16
// decoders, bitstream lengths 16, 64 and 256). For every pair of operands of
// the matching input precision (2-, 3- and 4-bit values) the two streams are
// generated in one clock and multiplied with an AND gate, as stochastic
// computing does; the product's value is its count of ones over the stream
// length. The mean square error against the exact product (x/L)*(y/L) is
// accumulated and must be 0 for every precision, well inside the accuracy
// bound 1/L^4 used to compare generators. Each conversion must also take
// exactly one clock.
module tb_sc_multiply;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;
  int cycles   = 0;
  always @(posedge clk) cycles++;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Precision 4: 3-4 decoder, BSL 16.
  logic         v4;  logic [2:0] x4, y4;  logic ov4;
  logic [4:1]   tx4, ty4;  logic [15:0]  bx4, by4;
  parallel_bsg #(.LEVELS(4)) u_g4 (
    .clk, .rst_n, .in_valid(v4), .x(x4), .y(y4),
    .out_valid(ov4), .therm_x(tx4), .therm_y(ty4), .bs_x(bx4), .bs_y(by4));

  // Precision 8: 4-8 decoder, BSL 64.
  logic         v8;  logic [3:0] x8, y8;  logic ov8;
  logic [8:1]   tx8, ty8;  logic [63:0]  bx8, by8;
  parallel_bsg #(.LEVELS(8)) u_g8 (
    .clk, .rst_n, .in_valid(v8), .x(x8), .y(y8),
    .out_valid(ov8), .therm_x(tx8), .therm_y(ty8), .bs_x(bx8), .bs_y(by8));

  // Precision 16: 5-16 decoder, BSL 256.
  logic         v16; logic [4:0] x16, y16; logic ov16;
  logic [16:1]  tx16, ty16; logic [255:0] bx16, by16;
  parallel_bsg #(.LEVELS(16)) u_g16 (
    .clk, .rst_n, .in_valid(v16), .x(x16), .y(y16),
    .out_valid(ov16), .therm_x(tx16), .therm_y(ty16), .bs_x(bx16), .bs_y(by16));

  // Returns the AND-gate product's count of ones after a one-clock conversion.
  task automatic run_pair(input int l, input int vx, input int vy, output int ones);
    int c0;
    @(negedge clk);
    v4 = 1'b0; v8 = 1'b0; v16 = 1'b0;
    case (l)
      4:  begin v4  = 1'b1; x4  = 3'(vx); y4  = 3'(vy); end
      8:  begin v8  = 1'b1; x8  = 4'(vx); y8  = 4'(vy); end
      default: begin v16 = 1'b1; x16 = 5'(vx); y16 = 5'(vy); end
    endcase
    c0 = cycles;
    @(posedge clk);
    #1;
    case (l)
      4:  begin ones = $countones(bx4 & by4);   check("valid L4",  ov4  === 1'b1); end
      8:  begin ones = $countones(bx8 & by8);   check("valid L8",  ov8  === 1'b1); end
      default: begin ones = $countones(bx16 & by16); check("valid L16", ov16 === 1'b1); end
    endcase
    check($sformatf("L%0d one-clock latency", l), (cycles - c0) == 1);
  endtask

  initial begin
    automatic int levels [3] = '{4, 8, 16};
    int ones;
    real mse, exact, got;
    rst_n = 1'b0;
    v4 = 1'b0; v8 = 1'b0; v16 = 1'b0;
    x4 = '0; y4 = '0; x8 = '0; y8 = '0; x16 = '0; y16 = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    foreach (levels[n]) begin
      int l;
      l   = levels[n];
      mse = 0.0;
      for (int vx = 0; vx < l; vx++) begin
        for (int vy = 0; vy < l; vy++) begin
          run_pair(l, vx, vy, ones);
          got   = real'(ones) / real'(l * l);
          exact = (real'(vx) / l) * (real'(vy) / l);
          mse  += (got - exact) ** 2;
          check($sformatf("L%0d %0d*%0d: %0d ones", l, vx, vy, ones), ones == vx * vy);
        end
      end
      mse = mse / real'(l * l);
      $display("precision %0d, BSL %0d: MSE of 2-input multiplication = %g (bound %g)",
               l, l * l, mse, 1.0 / (real'(l) ** 4));
      check($sformatf("L%0d MSE zero", l), mse == 0.0);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
