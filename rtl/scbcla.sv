// scbcla: m-bit section-carry based carry lookahead adder section.
//
// Three parts, as in the paper's microarchitecture of the SCBCLA:
//  - pg_logic forms the propagate and generate signals of the section;
//  - scb_clg turns them and the carry input c0 into the one lookahead carry
//    cm that goes to the next, higher-order section;
//  - scb_sum_logic forms the sums by rippling c0 through the section.
// The carry to the next section so never waits for the sums' ripple: from c0
// to cm it passes one AO21 gate. Purely combinational; WIDTH is 4 for most
// sections and 2 for the narrow ones of the hybrid adder.
module scbcla #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             c0,
  output logic [WIDTH-1:0] sum,
  output logic             cm
);
  logic [WIDTH-1:0] p;
  logic [WIDTH-1:0] g;

  pg_logic #(.WIDTH(WIDTH)) u_pg (
    .a(a),
    .b(b),
    .p(p),
    .g(g)
  );

  scb_clg #(.WIDTH(WIDTH)) u_clg (
    .p (p),
    .g (g),
    .c0(c0),
    .cm(cm)
  );

  scb_sum_logic #(.WIDTH(WIDTH)) u_sum (
    .a  (a),
    .b  (b),
    .c0 (c0),
    .sum(sum)
  );
endmodule
