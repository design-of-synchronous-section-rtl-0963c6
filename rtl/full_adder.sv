// full_adder: one-bit binary full adder.
//
// s = a ^ b ^ ci and co = a&b + (a^b)&ci, i.e. the paper's equations
// Sum = P xor C and C_out = G + P*C with G = a&b and P = a^b. The paper gives
// only the function of the full adder, not its gates; this sum-of-products
// form is this design's choice. Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic ci,
  output logic s,
  output logic co
);
  logic p;
  logic g;

  assign p  = a ^ b;
  assign g  = a & b;
  assign s  = p ^ ci;
  assign co = g | (p & ci);
endmodule
