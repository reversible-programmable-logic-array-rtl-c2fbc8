// feynman_gate: the 2x2 Feynman (controlled NOT) reversible gate.
//
// y1 = x1 and y2 = x1 ^ x2. With x2 tied to 0 it copies x1 onto both
// outputs; with x2 tied to 1 it gives x1 on y1 and its complement on y2.
// Either way both outputs are used, so the gate leaves no garbage; this is
// how the array fans out and complements signals, since a reversible
// circuit may not split a wire. Purely combinational. The equations are the
// source design's own.
module feynman_gate (
  input  logic x1,
  input  logic x2,
  output logic y1,
  output logic y2
);

  always_comb begin
    y1 = x1;
    y2 = x1 ^ x2;
  end

endmodule
