// tb_rpla_any_function: every function of three inputs on one array.
//
// With eight OR inputs per output the array can be programmed to any of the
// 2**8 = 256 Boolean functions of A, B, C. For each truth table t this test
// connects output F1 to exactly the minterms where t is 1, F2 to those
// where it is 0 (so F2 must be the complement) and leaves F3 open, then
// checks all eight input words.
module tb_rpla_any_function;

  int checks   = 0;
  int failures = 0;

  logic [2:0]           x;
  logic [2:0][7:0]      en  = '0;
  logic [2:0][7:0][2:0] sel = '0;
  logic [2:0]           f;
  logic [85:0]          garbage;

  rpla #(.OR_TERMS(8)) dut (.x(x), .prog_en(en), .prog_sel(sel), .f(f),
                            .garbage(garbage));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_funcs;
    n_funcs = 0;
    for (int t = 0; t < 256; t++) begin
      for (int s = 0; s < 8; s++) begin
        sel[0][s] = 3'(s);
        sel[1][s] = 3'(7 - s);
        en[0][s]  = t[s];
        en[1][s]  = !t[7 - s];
      end
      en[2] = '0;
      for (int v = 0; v < 8; v++) begin
        x = 3'(v);
        #1;
        checks++;
        if (f != {1'b0, !t[v], t[v]}) begin
          failures++;
          $display("FAIL t=%h x=%0d f=%b", t, v, f);
        end
      end
      n_funcs++;
    end
    checks++;
    if (n_funcs != 256) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
