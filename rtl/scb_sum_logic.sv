// scb_sum_logic: sum producing logic of an m-bit SCBCLA section.
//
// The sums of a section-carry based CLA do not use lookahead carries: the
// section carry input C0 ripples through the section as in a ripple carry
// adder. Bits 0 to m-2 are full adders fed by the operand bits; the most
// significant bit needs no carry out (the lookahead generator supplies the
// section's carry), so it is a 3-input XOR of A_{m-1}, B_{m-1} and the
// rippled carry C_{m-1}. This follows the paper's drawing of the SCBCLA.
// Purely combinational.
module scb_sum_logic #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             c0,
  output logic [WIDTH-1:0] sum
);
  // c[i] is the carry into bit i, rippled from c0
  logic [WIDTH-1:0] c;

  assign c[0] = c0;

  for (genvar i = 0; i < WIDTH - 1; i++) begin : g_fa
    full_adder u_fa (
      .a (a[i]),
      .b (b[i]),
      .ci(c[i]),
      .s (sum[i]),
      .co(c[i+1])
    );
  end

  assign sum[WIDTH-1] = a[WIDTH-1] ^ b[WIDTH-1] ^ c[WIDTH-1];
endmodule
