// pg_logic_tb: exhaustive self-checking test of the propagate-generate
// logic at its default width of 4. Every pair of 4-bit operands is applied;
// the expected P and G are built bit by bit from the definitions
// G_i = A_i*B_i and P_i = A_i xor B_i, and P and G must never both be 1.
module pg_logic_tb;
  localparam int unsigned W = 4;
  logic [W-1:0] a, b, p, g;
  int checks = 0;
  int failures = 0;

  pg_logic dut (.a(a), .b(b), .p(p), .g(g));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << (2 * W)); i++) begin
      logic [W-1:0] exp_p, exp_g;
      {a, b} = (2 * W)'(i);
      for (int k = 0; k < int'(W); k++) begin
        exp_g[k] = (a[k] == 1'b1) && (b[k] == 1'b1);
        exp_p[k] = (a[k] != b[k]);
      end
      #1;
      checks++;
      if (p !== exp_p || g !== exp_g || (p & g) != '0) begin
        failures++;
        $display("FAIL a=%b b=%b p=%b g=%b expected p=%b g=%b", a, b, p, g, exp_p, exp_g);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
