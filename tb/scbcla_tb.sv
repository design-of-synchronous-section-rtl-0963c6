// scbcla_tb: exhaustive self-checking test of the SCBCLA section at widths
// 4 (the default), 3 and 2. The expected {cm, sum} is the integer
// a + b + c0. It also counts how often the carry out came through the
// C0 path of the lookahead generator (all bits propagating, c0 = 1) and
// how often it was generated inside the section; each must occur.
module scbcla_tb;
  logic [3:0] a, b;
  logic       c0;
  logic [3:0] s4;
  logic       cm4;
  logic [2:0] s3;
  logic       cm3;
  logic [1:0] s2;
  logic       cm2;
  int checks = 0;
  int failures = 0;
  int n_carry_via_c0 = 0;
  int n_carry_generated = 0;

  scbcla              dut4 (.a(a),      .b(b),      .c0(c0), .sum(s4), .cm(cm4));
  scbcla #(.WIDTH(3)) dut3 (.a(a[2:0]), .b(b[2:0]), .c0(c0), .sum(s3), .cm(cm3));
  scbcla #(.WIDTH(2)) dut2 (.a(a[1:0]), .b(b[1:0]), .c0(c0), .sum(s2), .cm(cm2));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 512; i++) begin
      int unsigned t4;
      {a, b, c0} = 9'(i);
      t4 = 32'(a) + 32'(b) + 32'(c0);
      #1;
      checks += 3;
      if ({cm4, s4} !== 5'(t4)) begin
        failures++; $display("FAIL w4 a=%h b=%h c0=%b -> %b %h", a, b, c0, cm4, s4);
      end
      if ({cm3, s3} !== 4'(32'(a[2:0]) + 32'(b[2:0]) + 32'(c0))) begin
        failures++; $display("FAIL w3 a=%h b=%h c0=%b -> %b %h", a[2:0], b[2:0], c0, cm3, s3);
      end
      if ({cm2, s2} !== 3'(32'(a[1:0]) + 32'(b[1:0]) + 32'(c0))) begin
        failures++; $display("FAIL w2 a=%h b=%h c0=%b -> %b %h", a[1:0], b[1:0], c0, cm2, s2);
      end
      if ((a ^ b) == 4'hf && c0) n_carry_via_c0++;
      else if (t4 > 15) n_carry_generated++;
    end
    checks += 2;
    if (n_carry_via_c0 == 0) begin failures++; $display("FAIL carry via C0 path never exercised"); end
    if (n_carry_generated == 0) begin failures++; $display("FAIL generated carry never exercised"); end
    $display("carry via C0: %0d, generated: %0d", n_carry_via_c0, n_carry_generated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
