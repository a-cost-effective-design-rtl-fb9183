// tb_mux_gate: exhaustive check of the 3x3 reversible MUX gate.
//
// Applies all eight input vectors and compares P, Q, R with a reference
// written as a multiplexer (R = A ? B : C) rather than as the gate's XOR form.
// Also checks that the gate is reversible (the eight output vectors are all
// different) and that the
// two configurations the PLA relies on work: C = 0 gives R = A & B, B = 1
// gives R = A | C. Prints the TB_RESULT line and finishes.
module tb_mux_gate;

  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;

  mux_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (a=%0b b=%0b c=%0b -> p=%0b q=%0b r=%0b)", what, a, b, c, p, q, r);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [7:0] seen = '0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      check(p == a, "P = A");
      check(q == ((a + b + c) % 2 == 1), "Q = parity of A,B,C");
      check(r == (a ? b : c), "R = A ? B : C");
      check(!seen[{p, q, r}], "output vector unique (reversible)");
      seen[{p, q, r}] = 1'b1;
    end
    check(seen == 8'hFF, "all output vectors reached");

    // AND configuration (C = 0) and OR configuration (B = 1).
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v); c = 1'b0;
      #1 check(r == (v == 3), "AND gate: R = A & B");
      {a, c} = 2'(v); b = 1'b1;
      #1 check(r == (v != 0), "OR gate: R = A | C");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
