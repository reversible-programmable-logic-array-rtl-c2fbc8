// rpla_minterm_fanout: Feynman chain that copies one minterm once for each
// output of the OR array.
//
// Each word line of the AND array may feed every output function, but a
// reversible circuit may not split a wire, so the minterm runs through a
// chain of COPIES Feynman gates, all with their second input tied to 1.
// The first gate gives the minterm on y1 (copies[0]) and passes the
// complement on y2; every later gate takes that complement, gives the
// minterm back on y2 (copies[k]) and passes the complement on y1. The
// complement left at the end (m_n) is the chain's only garbage. For
// COPIES = 3 this is exactly the three-gate group drawn after every
// minterm in the source design (outputs m, m', m, m); the chain for other
// sizes is this design's extension of it.
//
// Interface: m in; copies[COPIES-1:0] out, copies[k] feeds output k of the
// OR array; m_n out (garbage). Combinational, COPIES gate delays at most.
module rpla_minterm_fanout #(
  parameter int unsigned COPIES = rpla_pkg::M_OUT_DEFAULT
) (
  input  logic              m,
  output logic [COPIES-1:0] copies,
  output logic              m_n
);

  if (COPIES < 1) begin : g_bad_copies
    $error("rpla_minterm_fanout: COPIES must be at least 1");
  end

  // pass[k] is the complement handed from gate k to gate k+1.
  logic [COPIES-1:0] pass;

  for (genvar k = 0; k < COPIES; k++) begin : g_fg
    if (k == 0) begin : g_first
      feynman_gate u_fg (
        .x1(m),
        .x2(1'b1),
        .y1(copies[0]),
        .y2(pass[0])
      );
    end else begin : g_next
      feynman_gate u_fg (
        .x1(pass[k-1]),
        .x2(1'b1),
        .y1(pass[k]),
        .y2(copies[k])
      );
    end
  end

  assign m_n = pass[COPIES-1];

endmodule
