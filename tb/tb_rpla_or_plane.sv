// tb_rpla_or_plane: exhaustive check of the reversible OR plane.
//
// Checks the default three-term plane on all eight input vectors (including
// the published point A=B=C=1 -> O=1) and an eight-term plane, as used in the
// PLA top, on all 256 vectors. Reference: output is 1 unless every term is 0.
// Prints the TB_RESULT line.
module tb_rpla_or_plane;

  logic [2:0]  t3;
  logic        y3;
  logic [3:0]  g3;
  logic [7:0]  t8;
  logic        y8;
  logic [13:0] g8;
  int checks = 0, failures = 0;

  rpla_or_plane            dut3 (.term(t3), .y(y3), .garbage(g3));
  rpla_or_plane #(.N_TERMS(8)) dut8 (.term(t8), .y(y8), .garbage(g8));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (t3=%b y3=%0b t8=%b y8=%0b)", what, t3, y3, t8, y8);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t8 = '0;
    for (int v = 0; v < 8; v++) begin
      t3 = 3'(v);
      #1;
      check(y3 == (v != 0), "3-term OR");
      // First gate: A+B on its R, which is the second gate's A (its P garbage).
      check(g3[2] == (t3[0] || t3[1]), "partial sum A+B");
    end
    t3 = 3'b111;
    #1 check(y3 == 1'b1, "A=B=C=1 gives O=1");

    for (int v = 0; v < 256; v++) begin
      t8 = 8'(v);
      #1 check(y8 == (v != 0), "8-term OR");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
