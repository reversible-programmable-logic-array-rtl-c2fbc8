// rpla: reversible programmable logic array, N_IN inputs and M_OUT outputs.
//
// A PLA built only from reversible gates, so that no gate destroys
// information: every gate is a Fredkin (controlled swap) or Feynman
// (controlled NOT) gate with constant inputs, and the lines a function does
// not need leave as garbage outputs rather than being dropped inside.
//
//   x --> rpla_and_array --> minterm[2**N_IN] --> rpla_minterm_fanout (one
//         per minterm) --> mcopy[M_OUT][2**N_IN] --> rpla_or_array --> f
//
// The AND array copies and complements each input with Feynman trees and
// forms all 2**N_IN minterms with Fredkin AND gates. Each minterm is copied
// once per output by a Feynman chain. The OR array ORs up to OR_TERMS
// programmed minterms per output with Fredkin OR gates. Output j is thus any
// sum of at most OR_TERMS distinct minterms of x; with OR_TERMS = 2**N_IN
// it is any of the 2**(2**N_IN) functions of x.
//
// Defaults are the array of the source design: inputs A, B, C (x[2] = A, the
// most significant; minterm i is 1 when x == i), outputs F1..F3 (f[0] = F1),
// four OR inputs I1..I4 per output (slot s = I(s+1)). That design also
// claims every one of the 2**8 functions of three inputs, which needs
// OR_TERMS = 8; the default keeps the four inputs the drawing shows.
// The structure and gate choices follow the source design; the program
// ports, bit orders and garbage numbering are this design's own.
//
// Interface: x in; prog_en/prog_sel in (see rpla_or_array); f out;
// garbage out, in order {or_array garbage, minterm complements, and_array
// garbage}, rpla_pkg::garbage_count(N_IN, M_OUT, OR_TERMS) bits. Some
// garbage lines are plain copies of an input (the A literal passed on by the
// first AND gate of each minterm with A = 1); that is inherent to reversible
// gates, which carry their control input through, not a wiring fault.
// Combinational, no clock: N_IN + M_OUT Feynman and N_IN + OR_TERMS - 2
// Fredkin gate delays on the longest path.
module rpla
  import rpla_pkg::*;
#(
  parameter int unsigned N_IN     = rpla_pkg::N_IN_DEFAULT,
  parameter int unsigned M_OUT    = rpla_pkg::M_OUT_DEFAULT,
  parameter int unsigned OR_TERMS = rpla_pkg::OR_TERMS_DEFAULT
) (
  input  logic [N_IN-1:0]                           x,
  input  logic [M_OUT-1:0][OR_TERMS-1:0]            prog_en,
  input  logic [M_OUT-1:0][OR_TERMS-1:0][N_IN-1:0]  prog_sel,
  output logic [M_OUT-1:0]                          f,
  output logic [garbage_count(N_IN, M_OUT, OR_TERMS)-1:0] garbage
);

  localparam int unsigned K      = 2**N_IN;
  localparam int unsigned AND_GB = 2*(N_IN-1)*K;
  localparam int unsigned OR_GB  = 2*(OR_TERMS-1)*M_OUT;

  logic [K-1:0]              minterm;
  logic [K-1:0]              minterm_n;
  logic [M_OUT-1:0][K-1:0]   mcopy;
  logic [AND_GB-1:0]         and_garbage;
  logic [OR_GB-1:0]          or_garbage;

  rpla_and_array #(.N_IN(N_IN)) u_and (
    .x      (x),
    .minterm(minterm),
    .garbage(and_garbage)
  );

  for (genvar i = 0; i < K; i++) begin : g_mt
    logic [M_OUT-1:0] copies;
    rpla_minterm_fanout #(.COPIES(M_OUT)) u_copy (
      .m     (minterm[i]),
      .copies(copies),
      .m_n   (minterm_n[i])
    );
    for (genvar j = 0; j < M_OUT; j++) begin : g_route
      assign mcopy[j][i] = copies[j];
    end
  end

  rpla_or_array #(.N_IN(N_IN), .M_OUT(M_OUT), .OR_TERMS(OR_TERMS)) u_or (
    .mcopy   (mcopy),
    .prog_en (prog_en),
    .prog_sel(prog_sel),
    .f       (f),
    .garbage (or_garbage)
  );

  assign garbage = {or_garbage, minterm_n, and_garbage};

endmodule
