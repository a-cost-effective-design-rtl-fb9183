// tb_rpla_and_plane: exhaustive check of the reversible AND plane.
//
// For each of the eight input vectors, product term i must be 1 exactly when
// {A,B,C} == i, computed here from the literals one term at a time. The
// published simulation point (A=1, B=0, C=0 -> O4=1, all others 0) is checked
// on its own. The garbage bits of each MUX gate are checked too: its P output
// repeats its select input, so P of stage-2 gate 8+i equals the stage-1
// product it was fed. Prints the TB_RESULT line.
module tb_rpla_and_plane;
  import rpla_pkg::*;

  logic a, b, c;
  pterm_t pterm;
  logic [AND_PLANE_GARBAGE-1:0] garbage;
  int checks = 0, failures = 0;

  rpla_and_plane dut (.a(a), .b(b), .c(c), .pterm(pterm), .garbage(garbage));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (abc=%0b%0b%0b pterm=%b)", what, a, b, c, pterm);
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
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      for (int i = 0; i < 8; i++) begin
        bit la, lb, lc, ab;
        la = i[2] ? a : !a;
        lb = i[1] ? b : !b;
        lc = i[0] ? c : !c;
        ab = la && lb;
        check(pterm[i] == (ab && lc), $sformatf("minterm O%0d", i));
        // Stage-2 gate for minterm i has gate number 8+i; its P is its A input.
        check(garbage[2*(8+i)] == ab, $sformatf("stage-1 product feeding O%0d", i));
      end
      check($onehot(pterm), "exactly one product term high");
    end

    // Published simulation point of the AND plane.
    {a, b, c} = 3'b100;
    #1 check(pterm == 8'b0001_0000, "A=1 B=0 C=0 gives only O4");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
