// scb_sum_logic_tb: exhaustive self-checking test of the SCBCLA sum logic
// at widths 4 (the default), 3 and 2. The expected sums are the low bits of
// the integer a + b + c0.
module scb_sum_logic_tb;
  logic [3:0] a, b;
  logic       c0;
  logic [3:0] s4;
  logic [2:0] s3;
  logic [1:0] s2;
  int checks = 0;
  int failures = 0;

  scb_sum_logic              dut4 (.a(a),      .b(b),      .c0(c0), .sum(s4));
  scb_sum_logic #(.WIDTH(3)) dut3 (.a(a[2:0]), .b(b[2:0]), .c0(c0), .sum(s3));
  scb_sum_logic #(.WIDTH(2)) dut2 (.a(a[1:0]), .b(b[1:0]), .c0(c0), .sum(s2));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 512; i++) begin
      int unsigned total;
      {a, b, c0} = 9'(i);
      total = 32'(a) + 32'(b) + 32'(c0);
      #1;
      checks += 3;
      if (s4 !== 4'(total)) begin failures++; $display("FAIL w4 a=%h b=%h c0=%b s=%h", a, b, c0, s4); end
      if (s3 !== 3'(32'(a[2:0]) + 32'(b[2:0]) + 32'(c0))) begin
        failures++; $display("FAIL w3 a=%h b=%h c0=%b s=%h", a[2:0], b[2:0], c0, s3);
      end
      if (s2 !== 2'(32'(a[1:0]) + 32'(b[1:0]) + 32'(c0))) begin
        failures++; $display("FAIL w2 a=%h b=%h c0=%b s=%h", a[1:0], b[1:0], c0, s2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
