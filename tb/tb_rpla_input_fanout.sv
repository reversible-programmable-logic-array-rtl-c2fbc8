// tb_rpla_input_fanout: checks the Feynman fan-out tree at three sizes.
//
// For both values of the input, every leaf must carry the input or its
// inverse: leaf j inverted when j has an odd number of one bits. For the
// default three levels the expected leaf pattern is also given literally,
// x, x', x', x, x', x, x, x' from leaf 0, and half of the leaves must be
// inverted.
module tb_rpla_input_fanout;

  int checks   = 0;
  int failures = 0;

  logic        x;
  logic [7:0]  c3;
  logic [1:0]  c1;
  logic [15:0] c4;

  rpla_input_fanout              dut3 (.x(x), .copies(c3));
  rpla_input_fanout #(.LEVELS(1)) dut1 (.x(x), .copies(c1));
  rpla_input_fanout #(.LEVELS(4)) dut4 (.x(x), .copies(c4));

  // Inverted leaves of the default tree: 0,1,1,0,1,0,0,1 from leaf 0.
  localparam logic [7:0] INV3 = 8'b1001_0110;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (x=%b c3=%b c1=%b c4=%b)", what, x, c3, c1, c4);
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
    for (int v = 0; v < 2; v++) begin
      x = 1'(v);
      #1;
      check(c3 == ({8{x}} ^ INV3), "3-level leaf pattern");
      check($countones(c3) == 4, "3-level half true");
      check(c1 == {!x, x}, "1-level leaves");
      for (int j = 0; j < 16; j++)
        check(c4[j] == (x ^ ($countones(j) % 2 == 1)), "4-level leaf");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
