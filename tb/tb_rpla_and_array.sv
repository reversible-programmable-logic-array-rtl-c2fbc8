// tb_rpla_and_array: exhaustive test of the reversible AND array.
//
// For every input word the word lines must be one-hot with line x set
// (minterm i is 1 exactly when x == i, x's top bit being A). Checked for the
// default three inputs and for two and four inputs. For three inputs the
// first Fredkin gate of each minterm passes the A literal on y1, so the
// garbage line of that gate must read A or A' as the minterm needs.
module tb_rpla_and_array;

  int checks   = 0;
  int failures = 0;

  logic [2:0]  x3;
  logic [7:0]  m3;
  logic [31:0] g3;
  logic [1:0]  x2;
  logic [3:0]  m2;
  logic [7:0]  g2;
  logic [3:0]  x4;
  logic [15:0] m4;
  logic [95:0] g4;

  rpla_and_array              dut3 (.x(x3), .minterm(m3), .garbage(g3));
  rpla_and_array #(.N_IN(2)) dut2 (.x(x2), .minterm(m2), .garbage(g2));
  rpla_and_array #(.N_IN(4)) dut4 (.x(x4), .minterm(m4), .garbage(g4));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (x3=%b m3=%b x2=%b m2=%b x4=%b m4=%b)",
               what, x3, m3, x2, m2, x4, m4);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      x3 = 3'(v);
      x2 = 2'(v);
      x4 = 4'(v);
      #1;
      check(m3 == 8'(1 << x3), "3-input minterms");
      check(m2 == 4'(1 << x2), "2-input minterms");
      check(m4 == 16'(1 << x4), "4-input minterms");
      // A literal on y1 of gate 0 of minterm i: A if i[2] else A'.
      for (int i = 0; i < 8; i++)
        check(g3[4*i] == (i[2] ? x3[2] : !x3[2]), "gate 0 y1 garbage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
