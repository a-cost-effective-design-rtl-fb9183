// rpla_and_plane: reversible AND plane producing all eight minterms of A, B, C.
//
// Structure (37 reversible gates, quantum cost 21*1 + 16*4 = 85):
//   * three rpla_literal_tree instances (7 Feynman gates each, 21 in all)
//     give four copies of every literal A, A', B, B', C, C';
//   * eight MUX gates wired as AND gates (third input 0) form the two-literal
//     products of A and B, each of the four products built twice;
//   * eight more MUX-gate ANDs combine each of those with C' or C.
// pterm[i] is the minterm whose {A,B,C} equals i (A is the most significant
// bit), so pterm is one-hot with bit {a,b,c} set. That numbering matches the
// output names O0..O7 of the design's simulation (A=1, B=0, C=0 gives O4).
// The gate arrangement follows the published AND-plane diagram; which copy
// of a literal feeds which AND is this design's own regular assignment.
//
// The P and Q outputs of the 16 MUX gates carry no product term; they are
// brought out on `garbage` (2 bits per gate, gate g on bits 2g+1:2g,
// gates 0..7 the A.B stage, 8..15 the C stage) rather than left dangling.
//
// Combinational, no clock.
module rpla_and_plane
  import rpla_pkg::*;
(
  input  logic                         a,
  input  logic                         b,
  input  logic                         c,
  output pterm_t                       pterm,
  output logic [AND_PLANE_GARBAGE-1:0] garbage
);

  logic [3:0] a_pos, a_neg, b_pos, b_neg, c_pos, c_neg;

  rpla_literal_tree u_tree_a (.x(a), .pos(a_pos), .neg(a_neg));
  rpla_literal_tree u_tree_b (.x(b), .pos(b_pos), .neg(b_neg));
  rpla_literal_tree u_tree_c (.x(c), .pos(c_pos), .neg(c_neg));

  // ab[j][k]: product of the A and B literals selected by j = {A,B}; the
  // copy k is later ANDed with C (k=1) or C' (k=0).
  logic [1:0] ab [4];

  for (genvar j = 0; j < 4; j++) begin : g_ab
    for (genvar k = 0; k < 2; k++) begin : g_copy
      // Copy indices: A literal copy {j[0],k}, B literal copy {j[1],k}.
      localparam int unsigned CA = 2 * (j % 2) + k;
      localparam int unsigned CB = 2 * (j / 2) + k;
      localparam int unsigned G1 = 2 * j + k;         // gate number, stage 1
      localparam int unsigned G2 = 8 + 2 * j + k;     // gate number, stage 2

      logic lit_a, lit_b, lit_c;
      assign lit_a = (j / 2 == 1) ? a_pos[CA] : a_neg[CA];
      assign lit_b = (j % 2 == 1) ? b_pos[CB] : b_neg[CB];
      assign lit_c = (k == 1)     ? c_pos[j]  : c_neg[j];

      mux_gate u_and_ab (
        .a(lit_a), .b(lit_b), .c(1'b0),
        .p(garbage[2*G1]), .q(garbage[2*G1+1]), .r(ab[j][k])
      );

      mux_gate u_and_c (
        .a(ab[j][k]), .b(lit_c), .c(1'b0),
        .p(garbage[2*G2]), .q(garbage[2*G2+1]), .r(pterm[2*j+k])
      );
    end
  end

endmodule
