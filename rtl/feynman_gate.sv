// feynman_gate: the 2x2 reversible Feynman gate (controlled NOT).
//
//   P = A
//   Q = A ^ B
//
// Quantum cost 1. Since a reversible circuit may not fan a signal out, this
// gate is how the PLA duplicates a signal:
//   B = 0  ->  P = A, Q = A    (data copier)
//   B = 1  ->  P = A, Q = A'   (copy plus complement)
//
// Purely combinational, no clock.
module feynman_gate (
  input  logic a,
  input  logic b,
  output logic p,
  output logic q
);

  assign p = a;
  assign q = a ^ b;

endmodule
