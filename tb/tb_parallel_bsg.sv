// End-to-end, full-size testbench for parallel_bsg (default parameters:
// precision 16, 5-bit operands, 256-bit streams).
//
// Drives every operand pair (x, y) in 0..16 x 0..16, plus operand codes
// above 16 that must saturate, with random idle cycles in between, and
// checks each conversion against a reference computed here from the
// operand values only:
//  - latency: out_valid and the new streams appear on the first clock edge
//    after in_valid, never later, and the outputs are unchanged before it;
//  - thermometer codes: top min(v,16) bits set;
//  - stream layout: bs_x[i] = 1 iff (i mod 16) >= 16 - x,
//                   bs_y[i] = 1 iff (i div 16) >= 16 - y;
//  - stream values: popcount(bs_x) = 16x, popcount(bs_y) = 16y and the
//    AND-gate product popcount(bs_x & bs_y) = x*y, so the mean square error
//    of the two-operand product over all 4-bit inputs is exactly 0;
//  - hold: with in_valid low, out_valid falls and the codes do not change.
// Counts how often each mechanism (one-clock conversion, idle hold,
// saturation, reset) occurred and fails if one never did.
module tb_parallel_bsg;

  localparam int unsigned L    = 16;
  localparam int unsigned W    = 5;
  localparam int unsigned BSL  = 256;

  logic           clk = 1'b0;
  logic           rst_n;
  logic           in_valid;
  logic [W-1:0]   x, y;
  logic           out_valid;
  logic [L:1]     therm_x, therm_y;
  logic [BSL-1:0] bs_x, bs_y;

  parallel_bsg dut (
    .clk, .rst_n, .in_valid, .x, .y,
    .out_valid, .therm_x, .therm_y, .bs_x, .bs_y
  );

  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;
  int cycles   = 0;
  int n_conv = 0, n_hold = 0, n_sat = 0, n_reset = 0;
  real sq_err = 0.0;
  int  n_prod = 0;

  always @(posedge clk) cycles++;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned sat(input int unsigned v);
    return (v > L) ? L : v;
  endfunction

  task automatic check_outputs(input int unsigned vx, input int unsigned vy,
                             input bit accumulate);
    int unsigned mx, my;
    logic [L:1] ex, ey;
    logic [BSL-1:0] rx, ry;
    int unsigned prod;
    mx = sat(vx);
    my = sat(vy);
    ex = ~({L{1'b1}} >> mx);
    ey = ~({L{1'b1}} >> my);
    for (int i = 0; i < int'(BSL); i++) begin
      rx[i] = ((i % L) >= (L - mx));
      ry[i] = ((i / L) >= (L - my));
    end
    prod = $countones(bs_x & bs_y);
    check($sformatf("therm_x x=%0d %b", vx, therm_x), therm_x === ex);
    check($sformatf("therm_y y=%0d %b", vy, therm_y), therm_y === ey);
    check($sformatf("bs_x layout x=%0d", vx), bs_x === rx);
    check($sformatf("bs_y layout y=%0d", vy), bs_y === ry);
    check($sformatf("bs_x ones x=%0d", vx), $countones(bs_x) == L * mx);
    check($sformatf("bs_y ones y=%0d", vy), $countones(bs_y) == L * my);
    check($sformatf("product x=%0d y=%0d got %0d", vx, vy, prod), prod == mx * my);
    if (accumulate && vx < L && vy < L) begin
      // 4-bit operands: stream product vs exact product (x/16)*(y/16)
      sq_err += (real'(prod) / BSL - (real'(vx) / L) * (real'(vy) / L)) ** 2;
      n_prod++;
    end
  endtask

  // Present one operand pair and check the one-clock conversion.
  task automatic convert(input int unsigned vx, input int unsigned vy);
    logic [L:1] old_x, old_y;
    int c0;
    @(negedge clk);
    old_x    = therm_x;
    old_y    = therm_y;
    in_valid = 1'b1;
    x        = W'(vx);
    y        = W'(vy);
    #1;
    // Nothing changes before the clock edge.
    check("no change before edge", therm_x === old_x && therm_y === old_y);
    c0 = cycles;
    @(posedge clk);
    #1;
    check($sformatf("out_valid one clock after in_valid (cycles %0d)", cycles - c0),
          out_valid === 1'b1 && (cycles - c0) == 1);
    check_outputs(vx, vy, 1'b1);
    n_conv++;
    if (vx > L || vy > L) n_sat++;
  endtask

  // Idle cycles: outputs must hold.
  task automatic idle(input int unsigned n, input int unsigned vx, input int unsigned vy);
    for (int unsigned i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1'b0;
      x = W'($urandom);
      y = W'($urandom);
      @(posedge clk);
      #1;
      check("out_valid low when idle", out_valid === 1'b0);
      check_outputs(vx, vy, 1'b0);
      n_hold++;
    end
  endtask

  initial begin
    rst_n    = 1'b0;
    in_valid = 1'b0;
    x        = '0;
    y        = '0;
    repeat (2) @(posedge clk);
    #1;
    check("reset clears", out_valid === 1'b0 && therm_x === '0 && therm_y === '0);
    n_reset++;
    @(negedge clk);
    rst_n = 1'b1;

    for (int unsigned vx = 0; vx <= L; vx++) begin
      for (int unsigned vy = 0; vy <= L; vy++) begin
        convert(vx, vy);
        if ($urandom_range(0, 7) == 0) idle($urandom_range(1, 3), vx, vy);
      end
    end
    // Codes above full scale saturate to probability 1.
    convert(17, 3);
    convert(5, 31);
    convert(31, 20);
    idle(2, 31, 20);

    // Reset in operation.
    @(negedge clk);
    rst_n = 1'b0;
    #1;
    check("async reset clears", out_valid === 1'b0 && therm_x === '0 && therm_y === '0);
    n_reset++;
    @(negedge clk);
    rst_n = 1'b1;
    convert(9, 7);

    check($sformatf("MSE over 4-bit products = %g", sq_err / n_prod), n_prod >= 256 && sq_err == 0.0);

    $display("mechanisms: one-clock conversions=%0d idle holds=%0d saturations=%0d resets=%0d",
             n_conv, n_hold, n_sat, n_reset);
    check("conversion happened", n_conv > 0);
    check("hold happened", n_hold > 0);
    check("saturation happened", n_sat > 0);
    check("reset happened", n_reset > 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
