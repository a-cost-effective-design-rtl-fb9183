// rpla_literal_tree: four true and four complemented copies of one input.
//
// A reversible circuit may not fan a signal out, so the AND plane duplicates
// each primary input with a three-level tree of seven Feynman gates, every
// one with its B input tied to 1 (P = X, Q = X'). The root gives X and X';
// each of those feeds a second-level gate, and each of the four second-level
// outputs feeds a third-level gate. The eight third-level outputs are the
// four copies of X (pos) and four of X' (neg) that the AND plane consumes,
// each exactly once, so no Feynman output is left over. This is the tree
// drawn three times (for A, B and C) at the left of the AND plane diagram.
//
// Combinational, no clock.
module rpla_literal_tree (
  input  logic       x,
  output logic [3:0] pos,
  output logic [3:0] neg
);

  // Level 0: root gate.
  logic l0_p, l0_q;                       // X, X'
  feynman_gate u_l0 (.a(x), .b(1'b1), .p(l0_p), .q(l0_q));

  // Level 1.
  logic l1a_p, l1a_q, l1b_p, l1b_q;       // X, X' ; X', X
  feynman_gate u_l1a (.a(l0_p), .b(1'b1), .p(l1a_p), .q(l1a_q));
  feynman_gate u_l1b (.a(l0_q), .b(1'b1), .p(l1b_p), .q(l1b_q));

  // Level 2.
  logic [3:0] l2_p, l2_q;
  feynman_gate u_l2_0 (.a(l1a_p), .b(1'b1), .p(l2_p[0]), .q(l2_q[0]));  // X , X'
  feynman_gate u_l2_1 (.a(l1a_q), .b(1'b1), .p(l2_p[1]), .q(l2_q[1]));  // X', X
  feynman_gate u_l2_2 (.a(l1b_p), .b(1'b1), .p(l2_p[2]), .q(l2_q[2]));  // X', X
  feynman_gate u_l2_3 (.a(l1b_q), .b(1'b1), .p(l2_p[3]), .q(l2_q[3]));  // X , X'

  assign pos = {l2_p[3], l2_q[2], l2_q[1], l2_p[0]};
  assign neg = {l2_q[3], l2_p[2], l2_p[1], l2_q[0]};

endmodule
