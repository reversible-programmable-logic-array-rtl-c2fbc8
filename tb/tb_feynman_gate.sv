// tb_feynman_gate: exhaustive self-checking test of the Feynman gate.
//
// Drives all four input pairs and checks y1 = x1 and y2 = x1 ^ x2, the
// copier use (x2 = 0 gives x1 twice) and complementer use (x2 = 1 gives x1
// and its inverse), that the four outputs are all different, and that a
// second gate undoes the first.
module tb_feynman_gate;

  int checks   = 0;
  int failures = 0;

  logic x1, x2, y1, y2, z1, z2;
  logic [3:0] seen;

  feynman_gate dut  (.x1(x1), .x2(x2), .y1(y1), .y2(y2));
  feynman_gate back (.x1(y1), .x2(y2), .y1(z1), .y2(z2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (x=%b%b y=%b%b)", what, x1, x2, y1, y2);
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
    seen = '0;
    for (int v = 0; v < 4; v++) begin
      {x1, x2} = 2'(v);
      #1;
      check(y1 == x1, "y1 passes x1");
      check(y2 == (x1 != x2), "y2 is x1 xor x2");
      if (!x2) check(y1 == x1 && y2 == x1, "copier");
      if (x2)  check(y1 == x1 && y2 == !x1, "complementer");
      check({z1, z2} == {x1, x2}, "self-inverse");
      seen[{y1, y2}] = 1'b1;
    end
    check(seen == 4'hf, "outputs are a permutation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
