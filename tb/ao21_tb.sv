// ao21_tb: exhaustive self-checking test of the AO21 gate.
// Applies all eight input combinations and compares v with the truth table
// of x*y + z worked out from the loop index. A watchdog ends the run with a
// failure if it does not finish in time.
module ao21_tb;
  logic x, y, z, v;
  int checks = 0;
  int failures = 0;

  ao21 dut (.x(x), .y(y), .z(z), .v(v));

  initial begin : watchdog
    #10000;
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      logic exp_v;
      {x, y, z} = 3'(i);
      // truth table: output is 1 for z=1 or x=y=1
      exp_v = (i == 1) || (i == 3) || (i == 5) || (i >= 6);
      #1;
      checks++;
      if (v !== exp_v) begin
        failures++;
        $display("FAIL x=%b y=%b z=%b v=%b expected %b", x, y, z, v, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
