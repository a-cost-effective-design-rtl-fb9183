// rpla_or_plane: reversible OR plane, one output.
//
// A chain of N_TERMS-1 MUX gates, each wired as a two-input OR gate (its B
// input tied to 1, result on R = A | C): the first gate ORs terms 0 and 1,
// every further gate ORs the running sum (on A) with the next term (on C).
// With the default N_TERMS = 3 this is the published OR plane: two MUX gates
// giving A+B and then A+B+C. The PLA top uses N_TERMS = 8, one input per
// product term.
//
// The P and Q outputs of each gate are brought out on `garbage`
// (gate g on bits 2g+1:2g). Combinational, no clock.
module rpla_or_plane #(
  parameter int unsigned N_TERMS = 3
) (
  input  logic [N_TERMS-1:0]       term,
  output logic                     y,
  output logic [2*N_TERMS-3:0]     garbage
);

  // sum[i] = term[0] | ... | term[i]
  logic [N_TERMS-1:0] sum;
  assign sum[0] = term[0];

  for (genvar i = 1; i < N_TERMS; i++) begin : g_or
    mux_gate u_or (
      .a(sum[i-1]), .b(1'b1), .c(term[i]),
      .p(garbage[2*(i-1)]), .q(garbage[2*(i-1)+1]), .r(sum[i])
    );
  end

  assign y = sum[N_TERMS-1];

  initial begin
    assert (N_TERMS >= 2) else $error("rpla_or_plane: N_TERMS must be at least 2");
  end

endmodule
