// rpla_pkg: constants and constant functions shared by the reversible PLA.
//
// The reversible PLA turns N_IN inputs into all 2**N_IN minterms with an AND
// array of Fredkin gates (fed by Feynman fan-out trees), copies each minterm
// once per output with Feynman gates, and ORs up to OR_TERMS minterms per
// output with a chain of Fredkin gates. The default sizes are the 3-input,
// 3-output, 4-terms-per-output array drawn in the source design.
//
// Besides the defaults, this package holds the functions that
//   * route literal copies from the fan-out trees to the minterm gates
//     (copy_index), and
//   * count the reversible gates and garbage outputs of an array of a given
//     size (the figures of merit the design is judged by).
// The routing of copies to minterm gates is this design's choice: the source
// drawing shows which polarity each copy has but its wiring to the individual
// gates cannot be followed, and any copy of the right polarity works.
package rpla_pkg;

  // Sizes of the array as drawn: inputs A, B, C; outputs F1..F3; inputs
  // I1..I4 on each OR chain.
  localparam int unsigned N_IN_DEFAULT     = 3;
  localparam int unsigned M_OUT_DEFAULT    = 3;
  localparam int unsigned OR_TERMS_DEFAULT = 4;

  // Polarity of leaf j of a Feynman complementer tree: every complementer
  // passes its input on y1 and the inverse on y2, so a leaf is inverted once
  // for every y2 taken on its path, i.e. for every 1 bit of j.
  function automatic bit leaf_inverted(input int unsigned j);
    return bit'($countones(j) % 2);
  endfunction

  // Which leaf of input bit b's fan-out tree feeds the gate of minterm i.
  // Minterm i needs bit b true when i[b] is 1. Minterms needing the same
  // polarity take the leaves of that polarity in ascending order.
  function automatic int unsigned copy_index(input int unsigned n,
                                             input int unsigned i,
                                             input int unsigned b);
    int unsigned rank;
    int unsigned seen;
    bit          want_inv;
    bit          want;
    want     = bit'((i >> b) & 1);
    want_inv = !want;
    rank     = 0;
    for (int unsigned k = 0; k < i; k++)
      if (bit'((k >> b) & 1) == want) rank++;
    seen = 0;
    for (int unsigned j = 0; j < (1 << n); j++) begin
      if (leaf_inverted(j) == want_inv) begin
        if (seen == rank) return j;
        seen++;
      end
    end
    return 0;
  endfunction

  // Gate and garbage counts of an array of the given size.
  //   Feynman: N_IN trees of 2**N_IN - 1 gates, plus M_OUT per minterm.
  //   Fredkin: N_IN - 1 per minterm, plus OR_TERMS - 1 per output.
  //   Garbage: two per Fredkin gate, plus the spare complement of each
  //            minterm left by its Feynman chain. The fan-out trees leave
  //            none.
  function automatic int unsigned feynman_count(input int unsigned n,
                                                input int unsigned m);
    return n * ((1 << n) - 1) + (1 << n) * m;
  endfunction

  function automatic int unsigned fredkin_count(input int unsigned n,
                                                input int unsigned m,
                                                input int unsigned t);
    return (1 << n) * (n - 1) + m * (t - 1);
  endfunction

  function automatic int unsigned garbage_count(input int unsigned n,
                                                input int unsigned m,
                                                input int unsigned t);
    return 2 * fredkin_count(n, m, t) + (1 << n);
  endfunction

endpackage
