// hybrid_scbcla4: 32-bit Hybrid SCBCLA_4 adder, sum/cout = a + b + cin.
//
// The 32 bits are split into ten sections chained through their carries
// (least significant first): a 2-bit ripple carry adder, a 2-bit SCBCLA, six
// 4-bit SCBCLAs, a 2-bit SCBCLA and a 2-bit ripple carry adder. The table of
// sections is HYBRID4_SEGS in scbcla_pkg, and a generate loop places one rca
// or scbcla per entry. Short RCAs at the ends cost less area and power than
// lookahead logic there: at the low end the first carry is ready early
// anyway, and at the high end only the final sums and cout wait for it. This
// topology is the one the paper reports with the best power-delay-area figure
// of merit among its 32-bit adders.
//
// The adder is purely combinational; in use, a, b and cin come from
// registers and sum and cout go to registers of the surrounding synchronous
// logic (the paper characterises it with a new operand pair every 5 ns).
// Those registers are not part of this module. cin and cout are the chain's
// carry input and output as drawn in the paper; tie cin to 0 for a plain
// two-operand add.
module hybrid_scbcla4
  import scbcla_pkg::*;
(
  input  logic [ADD_WIDTH-1:0] a,
  input  logic [ADD_WIDTH-1:0] b,
  input  logic                 cin,
  output logic [ADD_WIDTH-1:0] sum,
  output logic                 cout
);
  // carry[k] is the carry into section k; carry[NUM_SEGS] is cout
  logic [NUM_SEGS:0] carry;

  if (segs_total() != ADD_WIDTH) begin : g_bad_table
    $error("hybrid_scbcla4: section widths do not add up to ADD_WIDTH");
  end

  assign carry[0] = cin;

  for (genvar k = 0; k < NUM_SEGS; k++) begin : g_seg
    localparam int unsigned LSB = seg_lsb(k);
    localparam int unsigned W   = int'(HYBRID4_SEGS[k].width);

    if (HYBRID4_SEGS[k].kind == SEG_RCA) begin : g_rca
      rca #(.WIDTH(W)) u_rca (
        .a  (a[LSB +: W]),
        .b  (b[LSB +: W]),
        .ci (carry[k]),
        .sum(sum[LSB +: W]),
        .co (carry[k+1])
      );
    end else begin : g_scb
      scbcla #(.WIDTH(W)) u_scb (
        .a  (a[LSB +: W]),
        .b  (b[LSB +: W]),
        .c0 (carry[k]),
        .sum(sum[LSB +: W]),
        .cm (carry[k+1])
      );
    end
  end

  assign cout = carry[NUM_SEGS];
endmodule
