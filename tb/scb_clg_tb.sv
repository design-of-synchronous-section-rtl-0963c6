// scb_clg_tb: exhaustive self-checking test of the section-carry lookahead
// generator at widths 4 (the default), 3, 2 and 1. Every combination of P,
// G and C0 is applied, including P and G both 1 on a bit (which real
// operands never give), and the carry out is compared with the recursion
// C_{i+1} = G_i + P_i*C_i evaluated bit by bit from C0.
module scb_clg_tb;
  logic [3:0] p, g;
  logic       c0;
  logic       cm4, cm3, cm2, cm1;
  int checks = 0;
  int failures = 0;

  scb_clg              dut4 (.p(p),      .g(g),      .c0(c0), .cm(cm4));
  scb_clg #(.WIDTH(3)) dut3 (.p(p[2:0]), .g(g[2:0]), .c0(c0), .cm(cm3));
  scb_clg #(.WIDTH(2)) dut2 (.p(p[1:0]), .g(g[1:0]), .c0(c0), .cm(cm2));
  scb_clg #(.WIDTH(1)) dut1 (.p(p[0]),   .g(g[0]),   .c0(c0), .cm(cm1));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 512; i++) begin
      logic [4:0] c;   // c[k] is the carry into bit k
      {p, g, c0} = 9'(i);
      c[0] = c0;
      for (int k = 0; k < 4; k++) c[k+1] = g[k] | (p[k] & c[k]);
      #1;
      checks += 4;
      if (cm4 !== c[4]) begin failures++; $display("FAIL w4 p=%b g=%b c0=%b cm=%b", p, g, c0, cm4); end
      if (cm3 !== c[3]) begin failures++; $display("FAIL w3 p=%b g=%b c0=%b cm=%b", p, g, c0, cm3); end
      if (cm2 !== c[2]) begin failures++; $display("FAIL w2 p=%b g=%b c0=%b cm=%b", p, g, c0, cm2); end
      if (cm1 !== c[1]) begin failures++; $display("FAIL w1 p=%b g=%b c0=%b cm=%b", p, g, c0, cm1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
