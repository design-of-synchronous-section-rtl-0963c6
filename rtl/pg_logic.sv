// pg_logic: propagate-generate logic of one adder section.
//
// For every bit i it forms the generate signal G_i = A_i & B_i (a 2-input
// AND) and the propagate signal P_i = A_i ^ B_i (a 2-input XOR), exactly as
// the paper defines them. The two are mutually exclusive per bit. Purely
// combinational; WIDTH is the section width (4 in most sections of the
// adder, 2 in the two narrow ones).
module pg_logic #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] p,
  output logic [WIDTH-1:0] g
);
  assign p = a ^ b;
  assign g = a & b;
endmodule
