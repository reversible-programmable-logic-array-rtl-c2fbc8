// tb_rpla_minterm_fanout: checks the Feynman copy chain at three sizes.
//
// For both values of the minterm every copy must equal it and the spare
// output must be its inverse; sizes 3 (default), 1 and 5.
module tb_rpla_minterm_fanout;

  int checks   = 0;
  int failures = 0;

  logic       m;
  logic [2:0] c3;
  logic       n3;
  logic [0:0] c1;
  logic       n1;
  logic [4:0] c5;
  logic       n5;

  rpla_minterm_fanout              dut3 (.m(m), .copies(c3), .m_n(n3));
  rpla_minterm_fanout #(.COPIES(1)) dut1 (.m(m), .copies(c1), .m_n(n1));
  rpla_minterm_fanout #(.COPIES(5)) dut5 (.m(m), .copies(c5), .m_n(n5));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (m=%b c3=%b n3=%b c1=%b n1=%b c5=%b n5=%b)",
               what, m, c3, n3, c1, n1, c5, n5);
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
      m = 1'(v);
      #1;
      check(c3 == {3{m}} && n3 == !m, "3 copies");
      check(c1 == m && n1 == !m, "1 copy");
      check(c5 == {5{m}} && n5 == !m, "5 copies");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
