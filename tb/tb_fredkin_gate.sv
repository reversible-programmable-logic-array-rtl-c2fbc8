// tb_fredkin_gate: exhaustive self-checking test of the Fredkin gate.
//
// Drives all eight input words and checks: the controlled-swap truth table
// (worked out here as "swap x2 and x3 when x1 is 1"); the AND use (x3 = 0,
// y3 = x1 & x2) and OR use (x3 = 1, y2 = x1 | x2); that the number of ones is
// kept; that the eight output words are all different (reversible); and that
// a second gate fed with the first one's outputs gives the inputs back.
module tb_fredkin_gate;

  int checks   = 0;
  int failures = 0;

  logic x1, x2, x3;
  logic y1, y2, y3;
  logic z1, z2, z3;
  logic [7:0] seen;

  fredkin_gate dut  (.x1(x1), .x2(x2), .x3(x3), .y1(y1), .y2(y2), .y3(y3));
  fredkin_gate back (.x1(y1), .x2(y2), .x3(y3), .y1(z1), .y2(z2), .y3(z3));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (x=%b%b%b y=%b%b%b)", what, x1, x2, x3, y1, y2, y3);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] exp;
    seen = '0;
    for (int v = 0; v < 8; v++) begin
      {x1, x2, x3} = 3'(v);
      #1;
      exp = x1 ? {x1, x3, x2} : {x1, x2, x3};
      check({y1, y2, y3} == exp, "swap table");
      check($countones({y1, y2, y3}) == $countones({x1, x2, x3}), "conservative");
      check({z1, z2, z3} == {x1, x2, x3}, "self-inverse");
      if (x3 == 1'b0) check(y3 == (x1 & x2), "AND use");
      if (x3 == 1'b1) check(y2 == (x1 | x2), "OR use");
      seen[{y1, y2, y3}] = 1'b1;
    end
    checks++;
    if (seen != 8'hff) begin
      failures++;
      $display("FAIL outputs not a permutation: %b", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
