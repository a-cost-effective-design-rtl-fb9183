// tb_rpla: end-to-end test of the reversible PLA with three outputs.
//
// Programs the three outputs with different truth tables, applies every
// input vector, and checks f[j] == prog[j][{a,b,c}] as well as that the
// outputs agree with a reference built from the inputs by sum of products.
// Output 0 is taken through all 256 programming words; outputs 1 and 2 get
// random words and a few fixed ones (AND3, OR3, XOR3, majority).
// Mechanisms counted, each must occur at least once:
//   reprogram   the programming word of an output changes between vectors
//   shared      one minterm drives two or more outputs to 1 at once, so the
//               Feynman copier chain carries a copy to each of them
//   minterm i   minterm i is selected and makes an output 1 (i = 0..7)
//   masked      an input selects a minterm whose programming bit is 0
// Prints the TB_RESULT line.
module tb_rpla;
  import rpla_pkg::*;

  localparam int unsigned M = 3;

  logic a, b, c;
  pterm_t [M-1:0] prog;
  logic   [M-1:0] f;
  logic   [AND_PLANE_GARBAGE+M*(4*N_PT-2)-1:0] garbage;

  int checks = 0, failures = 0;
  int n_reprogram = 0, n_shared = 0, n_masked = 0;
  int n_minterm [N_PT];

  rpla #(.N_OUT(M)) dut (.a(a), .b(b), .c(c), .prog(prog), .f(f), .garbage(garbage));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (abc=%0b%0b%0b prog=%h f=%b)", what, a, b, c, prog, f);
    end
  endtask

  // Sum of products written out from the literals, independent of indexing.
  function automatic bit sop(pterm_t tt, bit x, bit y, bit z);
    bit s = 0;
    for (int i = 0; i < N_PT; i++)
      s |= tt[i] & ((i[2] ? x : !x) & (i[1] ? y : !y) & (i[0] ? z : !z));
    return s;
  endfunction

  task automatic run_program(input pterm_t [M-1:0] word);
    for (int j = 0; j < M; j++)
      if (word[j] != prog[j]) n_reprogram++;
    prog = word;
    for (int v = 0; v < N_PT; v++) begin
      int ones;
      {a, b, c} = 3'(v);
      #1;
      ones = 0;
      for (int j = 0; j < M; j++) begin
        check(f[j] == sop(prog[j], a, b, c), $sformatf("output %0d", j));
        if (prog[j][v]) begin
          ones++;
          n_minterm[v]++;
        end else begin
          n_masked++;
        end
      end
      if (ones >= 2) n_shared++;
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pterm_t [M-1:0] w;
    foreach (n_minterm[i]) n_minterm[i] = 0;
    prog = '0;

    // Fixed functions: AND3, OR3, XOR3 (parity), majority.
    run_program({8'b1000_0000, 8'b1111_1110, 8'b1001_0110});
    run_program({8'b1110_1000, 8'b1001_0110, 8'b1000_0000});

    // Output 0 through every function, outputs 1 and 2 random.
    for (int t = 0; t < 256; t++) begin
      w[0] = pterm_t'(t);
      w[1] = pterm_t'($urandom);
      w[2] = pterm_t'($urandom);
      run_program(w);
    end

    check(n_reprogram > 0, "reprogramming happened");
    check(n_shared > 0, "a minterm was shared by several outputs");
    check(n_masked > 0, "a selected minterm was masked off");
    for (int i = 0; i < N_PT; i++)
      check(n_minterm[i] > 0, $sformatf("minterm %0d used", i));
    $display("mechanisms: reprogram=%0d shared=%0d masked=%0d", n_reprogram, n_shared, n_masked);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
