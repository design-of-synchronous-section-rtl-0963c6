// scb_clg: decomposed section-carry based carry lookahead generator.
//
// Unlike a conventional lookahead generator, which produces a carry for every
// bit, this one produces only the single carry out of the section,
//   C_m = G_{m-1} + P_{m-1}G_{m-2} + ... + P_{m-1}...P_1G_0 + P_{m-1}...P_0C_0.
// It is decomposed as the paper does it: the part that does not depend on
// the carry input,
//   N = G_{m-1} + P_{m-1}G_{m-2} + ... + P_{m-1}...P_1G_0   (AND terms, one OR)
//   M = P_{m-1}...P_0                                       (one AND)
// is formed from P and G alone, and the carry input enters only at the final
// AO21 gate, C_m = M*C0 + N. A carry that ripples from section to section
// therefore passes one AO21 per section. For the 4-bit section this is the
// paper's decomposed generator: AND2, AND3 and AND4 terms and G3 into a
// 4-input OR for N, a 4-input AND for M, then the AO21.
// The paper keeps gate fan-in at 4 or less, so WIDTH above 4 would need its
// wide AND/OR terms split further; this RTL writes them as reductions and
// leaves that to synthesis. Purely combinational.
module scb_clg #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] p,
  input  logic [WIDTH-1:0] g,
  input  logic             c0,
  output logic             cm
);
  // term[j] = G_j & P_{m-1} & ... & P_{j+1}
  logic [WIDTH-1:0] term;
  logic             n_sig;
  logic             m_sig;

  for (genvar j = 0; j < WIDTH; j++) begin : g_term
    if (j == WIDTH - 1) begin : g_top
      assign term[j] = g[j];
    end else begin : g_and
      assign term[j] = g[j] & (&p[WIDTH-1:j+1]);
    end
  end

  assign n_sig = |term;
  assign m_sig = &p;

  ao21 u_ao21 (
    .x(m_sig),
    .y(c0),
    .z(n_sig),
    .v(cm)
  );
endmodule
