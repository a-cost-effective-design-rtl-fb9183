// rpla_pkg: sizes and cost figures shared by the reversible PLA modules.
//
// The PLA has three primary inputs and therefore eight product terms
// (minterms) out of its AND plane. The gate counts of the AND plane
// (21 Feynman + 16 MUX = 37 gates) follow the published structure; the
// garbage widths derived from them size the modules' garbage ports.
// Nothing here is clocked.
package rpla_pkg;

  // Number of primary inputs (A, B, C) and of product terms out of the AND plane.
  localparam int unsigned N_IN = 3;
  localparam int unsigned N_PT = 1 << N_IN;

  // AND plane composition: a 7-gate Feynman copy/complement tree per input
  // (21 gates), then 8 MUX-gate ANDs of the first two literals and 8 more
  // adding the third literal. 37 gates in all; quantum cost f + 4m = 85.
  localparam int unsigned AND_PLANE_MG = 2 * N_PT;  // 16

  // Unused (garbage) gate outputs brought out of each block: every MUX gate
  // leaves P and Q unused; every Feynman gate of the AND plane has both of
  // its outputs consumed.
  localparam int unsigned MG_GARBAGE        = 2;
  localparam int unsigned AND_PLANE_GARBAGE = AND_PLANE_MG * MG_GARBAGE;  // 32

  // One programmed set of product terms per PLA output: bit i selects the
  // minterm whose {A,B,C} equals i, so the vector is the output's truth table.
  typedef logic [N_PT-1:0] pterm_t;

endpackage
