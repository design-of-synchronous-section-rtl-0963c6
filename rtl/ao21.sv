// ao21: AND-OR complex gate, v = (x & y) | z.
//
// This is the standard-cell gate the design uses as the last stage of every
// lookahead carry: with x = M (product of the section's propagate signals),
// y = C0 (section carry input) and z = N (the OR of the generate terms), its
// output is the section carry C_m = M*C0 + N. Using one complex gate here,
// instead of separate 2-input AND and OR gates, is the paper's optimisation;
// it leaves a single gate between a section's carry input and its carry
// output. Pin names follow the paper's drawing of the gate. Purely
// combinational.
module ao21 (
  input  logic x,
  input  logic y,
  input  logic z,
  output logic v
);
  assign v = (x & y) | z;
endmodule
