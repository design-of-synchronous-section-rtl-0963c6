// rca_tb: exhaustive self-checking test of the ripple carry adder at its
// default width of 2, and at widths 1 and 4. The expected {co, sum} is the
// integer a + b + ci.
module rca_tb;
  logic [3:0] a, b;
  logic       ci;
  logic [1:0] s2;
  logic       co2;
  logic [0:0] s1;
  logic       co1;
  logic [3:0] s4;
  logic       co4;
  int checks = 0;
  int failures = 0;

  rca              dut2 (.a(a[1:0]), .b(b[1:0]), .ci(ci), .sum(s2), .co(co2));
  rca #(.WIDTH(1)) dut1 (.a(a[0]),   .b(b[0]),   .ci(ci), .sum(s1), .co(co1));
  rca #(.WIDTH(4)) dut4 (.a(a),      .b(b),      .ci(ci), .sum(s4), .co(co4));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 512; i++) begin
      {a, b, ci} = 9'(i);
      #1;
      checks += 3;
      if ({co4, s4} !== 5'(32'(a) + 32'(b) + 32'(ci))) begin
        failures++; $display("FAIL w4 a=%h b=%h ci=%b -> %b %h", a, b, ci, co4, s4);
      end
      if ({co2, s2} !== 3'(32'(a[1:0]) + 32'(b[1:0]) + 32'(ci))) begin
        failures++; $display("FAIL w2 a=%h b=%h ci=%b -> %b %h", a[1:0], b[1:0], ci, co2, s2);
      end
      if ({co1, s1} !== 2'(32'(a[0]) + 32'(b[0]) + 32'(ci))) begin
        failures++; $display("FAIL w1 a=%b b=%b ci=%b -> %b %b", a[0], b[0], ci, co1, s1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
