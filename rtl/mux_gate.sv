// mux_gate: the 3x3 reversible MUX gate (MG).
//
//   P = A
//   Q = A ^ B ^ C
//   R = A'C ^ AB        (a 2:1 multiplexer: R = A ? B : C)
//
// The mapping (A,B,C) -> (P,Q,R) is a bijection on 3 bits; its quantum cost
// is 4. (It is sometimes described as conservative, but with Q = A^B^C it is
// not: 011 maps to 001. The equations above are what is built.) In the PLA it
// is used in two configurations, both taken from the source design:
//   C = 0  ->  R = A & B   (AND gate)
//   B = 1  ->  R = A | C   (OR gate)
// The OR configuration delivers the result on R (R = A'C ^ A = A | C); the
// Q output then carries XNOR(A,C).
//
// Purely combinational, no clock; the outputs follow the inputs.
module mux_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);

  assign p = a;
  assign q = a ^ b ^ c;
  assign r = (~a & c) ^ (a & b);

endmodule
