// rpla_or_array: reversible OR array, one Fredkin OR chain per output.
//
// Output j has OR_TERMS inputs I1..I(OR_TERMS). Each input is programmed
// either to one minterm of the AND array or left open, an open input being a
// constant 0. The inputs are ORed by a chain of OR_TERMS - 1 Fredkin gates
// whose third input is tied to 1: the first gate ORs I1 and I2, each later
// gate ORs the running sum with the next input, and the sum is taken from
// y2. Output j reads only copy j of each minterm (mcopy[j]), so every copy
// drives at most one gate input.
//
// The chain, its constant inputs and the default of four inputs and three
// outputs follow the source drawing, where the inputs are wired to the
// minterms of the function to be built and the unused output F3 has no
// inputs and reads 0. Here that wiring is the program: prog_en[j][s] says
// whether input s of output j is connected, prog_sel[j][s] to which minterm.
// The program is a plain input, with no storage, and is assumed to change
// only while the outputs are not in use.
//
// Rule (checked by an assertion): within one output no minterm may be
// selected by two connected inputs, since that output has only one copy of
// each minterm and a reversible circuit may not split it.
//
// Interface: mcopy[M_OUT][2**N_IN] in; prog_en[M_OUT][OR_TERMS] and
// prog_sel[M_OUT][OR_TERMS][N_IN] in; f[M_OUT] out; garbage out, the y1 and
// y3 lines of every Fredkin gate, gate g of output j at
// [2*((OR_TERMS-1)*j+g) +: 2] as {y3, y1}. Combinational, OR_TERMS - 1
// Fredkin delays from the inputs to f.
module rpla_or_array #(
  parameter int unsigned N_IN     = rpla_pkg::N_IN_DEFAULT,
  parameter int unsigned M_OUT    = rpla_pkg::M_OUT_DEFAULT,
  parameter int unsigned OR_TERMS = rpla_pkg::OR_TERMS_DEFAULT
) (
  input  logic [M_OUT-1:0][2**N_IN-1:0]             mcopy,
  input  logic [M_OUT-1:0][OR_TERMS-1:0]            prog_en,
  input  logic [M_OUT-1:0][OR_TERMS-1:0][N_IN-1:0]  prog_sel,
  output logic [M_OUT-1:0]                          f,
  output logic [2*(OR_TERMS-1)*M_OUT-1:0]           garbage
);

  if (OR_TERMS < 2) begin : g_bad_terms
    $error("rpla_or_array: OR_TERMS must be at least 2");
  end

  for (genvar j = 0; j < M_OUT; j++) begin : g_out
    // Programmed gate inputs I1.. of this output; open inputs read 0.
    logic [OR_TERMS-1:0] in_term;
    // sum[g] is the running OR after gate g.
    logic [OR_TERMS-2:0] sum;

    always_comb begin
      for (int s = 0; s < OR_TERMS; s++)
        in_term[s] = prog_en[j][s] && mcopy[j][prog_sel[j][s]];
    end

    for (genvar g = 0; g < OR_TERMS - 1; g++) begin : g_or
      logic a;
      if (g == 0) begin : g_first
        assign a = in_term[0];
      end else begin : g_next
        assign a = sum[g-1];
      end
      fredkin_gate u_f (
        .x1(a),
        .x2(in_term[g+1]),
        .x3(1'b1),
        .y1(garbage[2*((OR_TERMS-1)*j+g)]),
        .y2(sum[g]),
        .y3(garbage[2*((OR_TERMS-1)*j+g)+1])
      );
    end
    assign f[j] = sum[OR_TERMS-2];

    // One copy of each minterm per output: no minterm twice in one chain.
    logic dup;
    always_comb begin
      dup = 1'b0;
      for (int s = 0; s < OR_TERMS; s++)
        for (int t = s + 1; t < OR_TERMS; t++)
          if (prog_en[j][s] && prog_en[j][t] && prog_sel[j][s] == prog_sel[j][t])
            dup = 1'b1;
    end
    always_comb begin
      assert final (!dup)
        else $error("rpla_or_array: output %0d selects one minterm twice", j);
    end
  end

endmodule
