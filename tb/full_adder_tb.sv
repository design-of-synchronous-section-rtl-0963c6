// full_adder_tb: exhaustive self-checking test of the one-bit full adder.
// For all eight inputs the expected {co, s} is the integer sum a + b + ci.
module full_adder_tb;
  logic a, b, ci, s, co;
  int checks = 0;
  int failures = 0;

  full_adder dut (.a(a), .b(b), .ci(ci), .s(s), .co(co));

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      int total;
      {a, b, ci} = 3'(i);
      total = int'(a) + int'(b) + int'(ci);
      #1;
      checks++;
      if ({co, s} !== 2'(total)) begin
        failures++;
        $display("FAIL a=%b b=%b ci=%b -> co=%b s=%b expected %0d", a, b, ci, co, s, total);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
