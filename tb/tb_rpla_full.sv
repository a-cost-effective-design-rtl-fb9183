// tb_rpla_full: the reversible PLA at its default size (one output).
//
// Programs the output with every one of the 256 possible truth tables and
// applies all eight input vectors to each, checking f == prog[{a,b,c}] against
// a sum-of-products reference, so every 3-input Boolean function is realised
// once. The two published simulation points are repeated through the full
// array: with the single minterm O4 programmed, A=1 B=0 C=0 gives 1; with
// the OR of three inputs (a function that is 0 only at A=B=C=0) A=B=C=1
// gives 1. Prints the TB_RESULT line.
module tb_rpla_full;
  import rpla_pkg::*;

  logic a, b, c;
  pterm_t [0:0] prog;
  logic   [0:0] f;
  logic   [AND_PLANE_GARBAGE+(4*N_PT-2)-1:0] garbage;
  int checks = 0, failures = 0;

  rpla dut (.a(a), .b(b), .c(c), .prog(prog), .f(f), .garbage(garbage));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (abc=%0b%0b%0b prog=%h f=%b)", what, a, b, c, prog, f);
    end
  endtask

  function automatic bit sop(pterm_t tt, bit x, bit y, bit z);
    bit s = 0;
    for (int i = 0; i < N_PT; i++)
      s |= tt[i] & ((i[2] ? x : !x) & (i[1] ? y : !y) & (i[0] ? z : !z));
    return s;
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 256; t++) begin
      prog[0] = pterm_t'(t);
      for (int v = 0; v < N_PT; v++) begin
        {a, b, c} = 3'(v);
        #1 check(f[0] == sop(prog[0], a, b, c), $sformatf("function %02h", t));
      end
    end

    prog[0] = 8'b0001_0000;
    {a, b, c} = 3'b100;
    #1 check(f[0] == 1'b1, "minterm O4 at A=1 B=0 C=0");
    prog[0] = 8'b1111_1110;
    {a, b, c} = 3'b111;
    #1 check(f[0] == 1'b1, "A+B+C at A=B=C=1");
    {a, b, c} = 3'b000;
    #1 check(f[0] == 1'b0, "A+B+C at A=B=C=0");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
