// rpla_input_fanout: Feynman complementer tree that turns one input into the
// true and inverted copies the AND array consumes.
//
// A reversible circuit may not split a wire, so each input is copied by a
// binary tree of Feynman gates with their second input tied to 1. Every gate
// passes its input on y1 and the complement on y2, so a tree of LEVELS
// levels (2**LEVELS - 1 gates) yields 2**LEVELS copies, half true and half
// inverted, and leaves no garbage. Leaf j is inverted when j has an odd
// number of one bits; for LEVELS = 3 the leaves read, from copies[0] up,
// x, x', x', x, x', x, x, x' -- the order printed for input A in the source
// drawing. The tree shape and the constant 1 on every gate follow that
// drawing; for an N-input array LEVELS = N, as each input appears once in
// each of the 2**N minterms.
//
// Interface: x in, copies[2**LEVELS-1:0] out. Combinational, LEVELS gate
// delays from x to copies.
module rpla_input_fanout #(
  parameter int unsigned LEVELS = rpla_pkg::N_IN_DEFAULT
) (
  input  logic                   x,
  output logic [2**LEVELS-1:0]   copies
);

  if (LEVELS < 1) begin : g_bad_levels
    $error("rpla_input_fanout: LEVELS must be at least 1");
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    // Outputs of the 2**l gates of level l.
    logic [2**(l+1)-1:0] q;
    for (genvar i = 0; i < 2**l; i++) begin : g_fg
      logic d;
      if (l == 0) begin : g_root
        assign d = x;
      end else begin : g_inner
        assign d = g_lvl[l-1].q[i];
      end
      feynman_gate u_fg (
        .x1(d),
        .x2(1'b1),
        .y1(q[2*i]),
        .y2(q[2*i+1])
      );
    end
  end

  assign copies = g_lvl[LEVELS-1].q;

endmodule
