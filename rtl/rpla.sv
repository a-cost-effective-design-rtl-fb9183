// rpla: reversible programmable logic array, 3 inputs, N_OUT outputs.
//
// Every output can realise any Boolean function of A, B and C, chosen at run
// time by an 8-bit programming word. Data flow, all combinational:
//
//   A,B,C -> AND plane (21 Feynman + 16 MUX gates) -> 8 minterms
//         -> Feynman copiers, one copy of each minterm per output
//         -> programming ANDs (MUX gate, C = 0): minterm i & prog[j][i]
//         -> OR plane per output (7 MUX-gate ORs over the 8 gated terms)
//         -> f[j]
//
// Because minterm i is 1 exactly when {a,b,c} == i, f[j] equals
// prog[j][{a,b,c}]: the programming word is the output's truth table.
//
// The AND plane and the OR-gate chain are the published structures. The
// published material gives the two planes and says the array realises any
// 3-input function, but does not show how product terms are selected per
// output; selecting them with a programming bit through a MUX-gate AND, and
// duplicating a minterm for several outputs with Feynman copiers (B = 0),
// are this design's choices, made with the same two gate types. N_OUT (the
// "m" of the block diagram) has no published value; 1 is the default.
//
// Interface:
//   a, b, c   primary inputs (a is the most significant minterm index bit)
//   prog[j]   programming word of output j, bit i includes minterm i
//   f[j]      output j
//   garbage   unused P/Q outputs of every MUX gate, kept as outputs so that
//             no gate output is dropped: bits [31:0] from the AND plane, then
//             for each output j a 30-bit slice (16 from the programming ANDs,
//             14 from the OR plane).
// Timing: no clock; f settles one AND plane plus one OR chain after a change
// of a, b, c or prog.
module rpla
  import rpla_pkg::*;
#(
  parameter int unsigned N_OUT = 1
) (
  input  logic                                              a,
  input  logic                                              b,
  input  logic                                              c,
  input  pterm_t [N_OUT-1:0]                                prog,
  output logic   [N_OUT-1:0]                                f,
  output logic   [AND_PLANE_GARBAGE+N_OUT*(4*N_PT-2)-1:0]   garbage
);

  localparam int unsigned SEL_GARBAGE = N_PT * MG_GARBAGE;        // 16
  localparam int unsigned OR_GARBAGE  = (N_PT - 1) * MG_GARBAGE;  // 14
  localparam int unsigned OUT_GARBAGE = SEL_GARBAGE + OR_GARBAGE; // 30

  pterm_t pterm;

  rpla_and_plane u_and_plane (
    .a(a), .b(b), .c(c),
    .pterm(pterm),
    .garbage(garbage[AND_PLANE_GARBAGE-1:0])
  );

  // thru[i][j] runs down the copier chain of minterm i; tap[j][i] is the copy
  // given to output j. Output N_OUT-1 takes the end of the chain.
  logic [N_OUT-1:0] thru [N_PT];
  pterm_t           tap  [N_OUT];

  for (genvar i = 0; i < N_PT; i++) begin : g_copy
    assign thru[i][0] = pterm[i];
    for (genvar j = 0; j + 1 < N_OUT; j++) begin : g_fg
      feynman_gate u_copy (.a(thru[i][j]), .b(1'b0), .p(thru[i][j+1]), .q(tap[j][i]));
    end
    assign tap[N_OUT-1][i] = thru[i][N_OUT-1];
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_out
    localparam int unsigned GB = AND_PLANE_GARBAGE + j * OUT_GARBAGE;

    pterm_t sel;

    for (genvar i = 0; i < N_PT; i++) begin : g_sel
      mux_gate u_sel (
        .a(tap[j][i]), .b(prog[j][i]), .c(1'b0),
        .p(garbage[GB+2*i]), .q(garbage[GB+2*i+1]), .r(sel[i])
      );
    end

    rpla_or_plane #(.N_TERMS(N_PT)) u_or_plane (
      .term(sel),
      .y(f[j]),
      .garbage(garbage[GB+SEL_GARBAGE +: OR_GARBAGE])
    );
  end

  initial begin
    assert (N_OUT >= 1) else $error("rpla: N_OUT must be at least 1");
  end

endmodule
