// Self-checking testbench for therm_decoder.
//
// Checks the decoder exhaustively at four precisions:
//  - LEVELS = 7 (3-input, 7-output decoder) against the published truth
//    table, typed in row by row as the Y1..Y7 strings;
//  - LEVELS = 4, 8, 16 (3-4, 4-8 and 5-16 decoders) over every input code,
//    including the codes above LEVELS that must saturate, against a
//    reference built by shifting: the top min(v, LEVELS) outputs are 1.
// It also checks that every output is a thermometer code whose count of ones
// equals min(v, LEVELS). Purely combinational; a watchdog ends the run.
module tb_therm_decoder;

  int checks   = 0;
  int failures = 0;

  // Published truth table, Y1 first, for inputs 0..7.
  string fig_rows [8] = '{"0000000", "0000001", "0000011", "0000111",
                          "0001111", "0011111", "0111111", "1111111"};

  logic [2:0] a7;  logic [7:1]  y7;
  logic [2:0] a4;  logic [4:1]  y4;
  logic [3:0] a8;  logic [8:1]  y8;
  logic [4:0] a16; logic [16:1] y16;

  therm_decoder #(.LEVELS(7))  u_d7  (.a(a7),  .y(y7));
  therm_decoder #(.LEVELS(4))  u_d4  (.a(a4),  .y(y4));
  therm_decoder #(.LEVELS(8))  u_d8  (.a(a8),  .y(y8));
  therm_decoder #(.LEVELS(16)) u_d16 (.a(a16), .y(y16));

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:1]  e7;
    logic [4:1]  e4;
    logic [8:1]  e8;
    logic [16:1] e16;
    int m;

    // 3-7 decoder against the printed table.
    for (int v = 0; v < 8; v++) begin
      a7 = 3'(v);
      #1;
      for (int k = 1; k <= 7; k++) e7[k] = (fig_rows[v][k-1] == "1");
      check($sformatf("L7 v=%0d got %b exp %b (y7..y1)", v, y7, e7), y7 === e7);
    end

    // 3-4 decoder, all 8 codes.
    for (int v = 0; v < 8; v++) begin
      a4 = 3'(v);
      #1;
      m  = (v > 4) ? 4 : v;
      e4 = ~(4'hF >> m);
      check($sformatf("L4 v=%0d got %b exp %b", v, y4, e4), y4 === e4);
      check($sformatf("L4 v=%0d ones %0d", v, $countones(y4)), $countones(y4) == m);
    end

    // 4-8 decoder, all 16 codes.
    for (int v = 0; v < 16; v++) begin
      a8 = 4'(v);
      #1;
      m  = (v > 8) ? 8 : v;
      e8 = ~(8'hFF >> m);
      check($sformatf("L8 v=%0d got %b exp %b", v, y8, e8), y8 === e8);
      check($sformatf("L8 v=%0d ones %0d", v, $countones(y8)), $countones(y8) == m);
    end

    // 5-16 decoder, all 32 codes.
    for (int v = 0; v < 32; v++) begin
      a16 = 5'(v);
      #1;
      m   = (v > 16) ? 16 : v;
      e16 = ~(16'hFFFF >> m);
      check($sformatf("L16 v=%0d got %b exp %b", v, y16, e16), y16 === e16);
      check($sformatf("L16 v=%0d ones %0d", v, $countones(y16)), $countones(y16) == m);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
