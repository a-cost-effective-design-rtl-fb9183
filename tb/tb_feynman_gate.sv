// tb_feynman_gate: exhaustive check of the 2x2 Feynman gate.
//
// Applies all four input vectors and checks P = A and Q = (A != B), that the
// four output vectors are distinct (reversible), and the two uses in the PLA:
// B = 0 copies A onto Q, B = 1 puts A' on Q. Prints the TB_RESULT line.
module tb_feynman_gate;

  logic a, b, p, q;
  int checks = 0, failures = 0;

  feynman_gate dut (.a(a), .b(b), .p(p), .q(q));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (a=%0b b=%0b -> p=%0b q=%0b)", what, a, b, p, q);
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
    bit [3:0] seen = '0;
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      check(p == a, "P = A");
      check(q == (a != b), "Q = A xor B");
      check(!seen[{p, q}], "output vector unique (reversible)");
      seen[{p, q}] = 1'b1;
      if (!b) check(q == a, "copier: Q = A");
      else    check(q == !a, "inverter: Q = A'");
    end
    check(seen == 4'hF, "all output vectors reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
