// rpla_and_array: reversible AND array producing every minterm of N_IN
// inputs.
//
// Each input x[b] feeds its own Feynman fan-out tree (rpla_input_fanout)
// with 2**N_IN leaves. Minterm i then takes one leaf of every input, true
// where bit b of i is 1 and inverted where it is 0, and ANDs them with a
// chain of N_IN - 1 Fredkin gates whose third input is tied to 0: the first
// gate ANDs the two most significant literals, each later one ANDs the
// running product with the next literal, and the product is taken from y3.
// x[N_IN-1] is the most significant input (A in the 3-input array), so
// minterm[i] is 1 exactly when x == i; for N_IN = 3 minterm[0] = A'B'C' and
// minterm[7] = ABC, as labelled m0..m7 in the source drawing. The gate types,
// the constant inputs and the order A, then B, then C follow that drawing.
// Which leaf goes to which gate is this design's choice (rpla_pkg::
// copy_index); any leaf of the right polarity gives the same function.
//
// Interface: x[N_IN-1:0] in; minterm[2**N_IN-1:0] out (the word lines);
// garbage out, the y1 and y2 lines of every Fredkin gate, two per gate,
// gate g of minterm i at bits [2*((N_IN-1)*i+g) +: 2] as {y2, y1}.
// Combinational: N_IN Feynman then N_IN - 1 Fredkin gate delays.
module rpla_and_array
  import rpla_pkg::*;
#(
  parameter int unsigned N_IN = rpla_pkg::N_IN_DEFAULT
) (
  input  logic [N_IN-1:0]                     x,
  output logic [2**N_IN-1:0]                  minterm,
  output logic [2*(N_IN-1)*(2**N_IN)-1:0]     garbage
);

  localparam int unsigned K = 2**N_IN;

  if (N_IN < 2) begin : g_bad_n
    $error("rpla_and_array: N_IN must be at least 2");
  end

  // leaf[b] holds the 2**N_IN copies of input bit b.
  logic [N_IN-1:0][K-1:0] leaf;

  for (genvar b = 0; b < N_IN; b++) begin : g_in
    rpla_input_fanout #(.LEVELS(N_IN)) u_fanout (
      .x     (x[b]),
      .copies(leaf[b])
    );
  end

  for (genvar i = 0; i < K; i++) begin : g_mt
    // prod[g] is the running product after gate g.
    logic [N_IN-2:0] prod;
    for (genvar g = 0; g < N_IN - 1; g++) begin : g_and
      logic a;
      logic c;
      if (g == 0) begin : g_first
        assign a = leaf[N_IN-1][copy_index(N_IN, i, N_IN-1)];
      end else begin : g_next
        assign a = prod[g-1];
      end
      assign c = leaf[N_IN-2-g][copy_index(N_IN, i, N_IN-2-g)];
      fredkin_gate u_f (
        .x1(a),
        .x2(c),
        .x3(1'b0),
        .y1(garbage[2*((N_IN-1)*i+g)]),
        .y2(garbage[2*((N_IN-1)*i+g)+1]),
        .y3(prod[g])
      );
    end
    assign minterm[i] = prod[N_IN-2];
  end

endmodule
