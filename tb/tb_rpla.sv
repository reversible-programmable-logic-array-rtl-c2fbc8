// tb_rpla: end-to-end test of the reversible PLA at its default size
// (3 inputs A, B, C; outputs F1..F3; four OR inputs per output).
//
// Programs the array as the two circuits it is demonstrated with and checks
// all eight input words of each against truth tables computed here:
//   full adder      F1 = SUM   = m1+m2+m4+m7, F2 = CARRY  = m3+m5+m6+m7
//   full subtractor F1 = DIFF  = m1+m2+m4+m7, F2 = BORROW = m1+m2+m3+m7
//   (A - B - C), F3 left open in both and so 0.
// Then runs random programs (no minterm twice in one output) against a
// reference sum of minterms, and checks the spare minterm complements on
// the garbage port and the gate and garbage counts of the array. As every
// gate is reversible, the whole array must map the eight input words onto
// eight different output words {f, garbage}; that is checked per program.
// Counts each mechanism and fails if one never happened: an output left
// open, an output true through a chain of several connected inputs, one
// minterm used by two outputs at once, and a change of program.
module tb_rpla
  import rpla_pkg::*;
;

  int checks   = 0;
  int failures = 0;

  logic [2:0]           x;
  logic [2:0][3:0]      en  = '0;
  logic [2:0][3:0][2:0] sel = '0;
  logic [2:0]           f;
  logic [57:0]          garbage;

  rpla dut (.x(x), .prog_en(en), .prog_sel(sel), .f(f), .garbage(garbage));

  int n_open     = 0;
  int n_multi    = 0;
  int n_shared   = 0;
  int n_reprog   = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (x=%b en=%h sel=%h f=%b)", what, x, en, sel, f);
    end
  endtask

  // Connect output j's four inputs to minterms a, b, c, d.
  task automatic program4(input int j, input int a, input int b, input int c,
                          input int d);
    en[j]     = 4'b1111;
    sel[j][0] = 3'(a);
    sel[j][1] = 3'(b);
    sel[j][2] = 3'(c);
    sel[j][3] = 3'(d);
  endtask

  // Mechanism counters for the current program and input.
  task automatic count_mechanisms();
    int on;
    logic [7:0] used0;
    if (en[2] == '0 || en[1] == '0 || en[0] == '0) n_open++;
    for (int j = 0; j < 3; j++) begin
      on = 0;
      for (int s = 0; s < 4; s++) if (en[j][s]) on++;
      if (on > 1 && f[j]) n_multi++;
    end
    used0 = '0;
    for (int s = 0; s < 4; s++) if (en[0][s]) used0[sel[0][s]] = 1'b1;
    for (int s = 0; s < 4; s++)
      if (en[1][s] && used0[sel[1][s]] && sel[1][s] == x) n_shared++;
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic a, b, c;
    logic [2:0] exp;
    logic [7:0] used;
    logic [60:0] outw [8];

    // Gate and garbage counts of the drawn array: 21 Feynman gates in the
    // input trees and 3 per minterm; 2 Fredkin gates per minterm and 3 per
    // output; two garbage lines per Fredkin gate and one per minterm.
    check(feynman_count(3, 3) == 45, "Feynman gate count");
    check(fredkin_count(3, 3, 4) == 25, "Fredkin gate count");
    check($bits(garbage) == 58, "garbage width");

    // Full adder.
    en = '0;
    program4(0, 1, 2, 4, 7);
    program4(1, 3, 5, 6, 7);
    for (int v = 0; v < 8; v++) begin
      x = 3'(v);
      {a, b, c} = x;
      #1;
      exp = {1'b0, (a & b) | (a & c) | (b & c), a ^ b ^ c};
      check(f == exp, "full adder");
      check(garbage[32 +: 8] == ~8'(1 << v), "minterm complements");
      count_mechanisms();
    end

    // Full subtractor, A - B - C.
    n_reprog++;
    en = '0;
    program4(0, 1, 2, 4, 7);
    program4(1, 1, 2, 3, 7);
    for (int v = 0; v < 8; v++) begin
      x = 3'(v);
      {a, b, c} = x;
      #1;
      exp = {1'b0, (!a & b) | (!a & c) | (b & c), a ^ b ^ c};
      check(f == exp, "full subtractor");
      count_mechanisms();
    end

    // Random programs.
    for (int r = 0; r < 500; r++) begin
      n_reprog++;
      for (int j = 0; j < 3; j++) begin
        used = '0;
        for (int s = 0; s < 4; s++) begin
          sel[j][s] = 3'($urandom);
          en[j][s]  = ($urandom % 4 != 0) && !used[sel[j][s]];
          if (en[j][s]) used[sel[j][s]] = 1'b1;
        end
      end
      for (int v = 0; v < 8; v++) begin
        x = 3'(v);
        #1;
        for (int j = 0; j < 3; j++) begin
          exp[j] = 1'b0;
          for (int s = 0; s < 4; s++)
            if (en[j][s] && sel[j][s] == x) exp[j] = 1'b1;
        end
        check(f == exp, "random program");
        count_mechanisms();
        outw[v] = {f, garbage};
      end
      for (int v = 0; v < 8; v++)
        for (int w = v + 1; w < 8; w++)
          check(outw[v] != outw[w], "array output words one-to-one");
    end

    $display("mechanisms: open=%0d multi=%0d shared=%0d reprogram=%0d",
             n_open, n_multi, n_shared, n_reprog);
    check(n_open > 0, "open output exercised");
    check(n_multi > 0, "multi-input OR exercised");
    check(n_shared > 0, "shared minterm exercised");
    check(n_reprog > 0, "reprogramming exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
