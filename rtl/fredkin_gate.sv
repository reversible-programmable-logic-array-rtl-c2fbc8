// fredkin_gate: the 3x3 Fredkin (controlled swap) reversible gate.
//
// y1 passes the control x1 through; when x1 is 0 the other two lines pass
// straight (y2 = x2, y3 = x3), when x1 is 1 they swap (y2 = x3, y3 = x2).
// The gate is reversible (a bijection on 3-bit words, and its own inverse)
// and conservative (it keeps the number of ones).
//
// Used two ways in the array, as in the source design:
//   AND: x3 = 0  ->  y3 = x1 & x2   (y1, y2 garbage)
//   OR : x3 = 1  ->  y2 = x1 | x2   (y1, y3 garbage)
// Purely combinational; no clock, no state. The equations are the source
// design's own.
module fredkin_gate (
  input  logic x1,
  input  logic x2,
  input  logic x3,
  output logic y1,
  output logic y2,
  output logic y3
);

  always_comb begin
    y1 = x1;
    y2 = (!x1 && x2) || (x1 && x3);
    y3 = (x1 && x2) || (!x1 && x3);
  end

endmodule
