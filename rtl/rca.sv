// rca: ripple carry adder section.
//
// A chain of WIDTH full adders; the carry passes from each full adder to the
// next, and the last one's carry is the section's carry output. In the
// hybrid adder a 2-bit RCA sits at each end of the chain. Purely
// combinational; the carry path is WIDTH full-adder carry stages.
module rca #(
  parameter int unsigned WIDTH = 2
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             ci,
  output logic [WIDTH-1:0] sum,
  output logic             co
);
  // c[i] is the carry into bit i
  logic [WIDTH:0] c;

  assign c[0] = ci;

  for (genvar i = 0; i < WIDTH; i++) begin : g_fa
    full_adder u_fa (
      .a (a[i]),
      .b (b[i]),
      .ci(c[i]),
      .s (sum[i]),
      .co(c[i+1])
    );
  end

  assign co = c[WIDTH];
endmodule
