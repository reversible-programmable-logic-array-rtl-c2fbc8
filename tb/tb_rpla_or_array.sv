// tb_rpla_or_array: random-program test of the reversible OR array.
//
// Runs the default array (3 outputs, 4 inputs each, 8 minterms) and one with
// 8 inputs per output. Each round draws a program that selects no minterm
// twice within an output, and a random word of minterm copies; each output
// must be the OR of the selected copies, and 0 when no input is connected.
// Also checks the y1 garbage of each output's first gate, which passes I1.
module tb_rpla_or_array;

  int checks   = 0;
  int failures = 0;

  // Default size.
  logic [2:0][7:0]       mc;
  logic [2:0][3:0]       en  = '0;
  logic [2:0][3:0][2:0]  sel = '0;
  logic [2:0]            f;
  logic [17:0]           g;
  // Eight inputs per output.
  logic [2:0][7:0]       en8  = '0;
  logic [2:0][7:0][2:0]  sel8 = '0;
  logic [2:0]            f8;
  logic [41:0]           g8;

  rpla_or_array dut (.mcopy(mc), .prog_en(en), .prog_sel(sel), .f(f), .garbage(g));
  rpla_or_array #(.OR_TERMS(8)) dut8 (.mcopy(mc), .prog_en(en8), .prog_sel(sel8),
                                      .f(f8), .garbage(g8));

  int n_open = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (mc=%h f=%b f8=%b)", what, mc, f, f8);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] used;
    logic       exp;
    for (int r = 0; r < 2000; r++) begin
      for (int j = 0; j < 3; j++) begin
        mc[j] = 8'($urandom);
        used = '0;
        for (int s = 0; s < 4; s++) begin
          sel[j][s] = 3'($urandom);
          en[j][s]  = ($urandom % 3 != 0) && !used[sel[j][s]];
          if (en[j][s]) used[sel[j][s]] = 1'b1;
        end
        if (r % 50 == 0) en[j] = '0;
        used = '0;
        for (int s = 0; s < 8; s++) begin
          sel8[j][s] = 3'($urandom);
          en8[j][s]  = ($urandom % 2 != 0) && !used[sel8[j][s]];
          if (en8[j][s]) used[sel8[j][s]] = 1'b1;
        end
      end
      #1;
      for (int j = 0; j < 3; j++) begin
        exp = 1'b0;
        for (int s = 0; s < 4; s++) if (en[j][s]) exp |= mc[j][sel[j][s]];
        check(f[j] == exp, "4-input OR");
        check(g[6*j] == (en[j][0] && mc[j][sel[j][0]]), "first gate y1");
        if (en[j] == '0) begin
          n_open++;
          check(f[j] == 1'b0, "open output reads 0");
        end
        exp = 1'b0;
        for (int s = 0; s < 8; s++) if (en8[j][s]) exp |= mc[j][sel8[j][s]];
        check(f8[j] == exp, "8-input OR");
      end
    end
    check(n_open > 0, "open outputs exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
