// scbcla_pkg: shared types and the segment table of the 32-bit Hybrid
// SCBCLA_4 adder.
//
// The adder is a chain of sections, each of which is either a ripple carry
// adder (RCA) or a section-carry based carry lookahead adder (SCBCLA). The
// table below lists the sections from the least significant end, as they
// are drawn (right to left) in the paper's Hybrid SCBCLA_4 topology:
//   2-bit RCA, 2-bit SCBCLA, six 4-bit SCBCLAs, 2-bit SCBCLA, 2-bit RCA.
// seg_lsb() gives the bit position of a section's least significant bit, so
// the top level can place every section with a generate loop.
package scbcla_pkg;

  typedef enum logic [0:0] {
    SEG_RCA    = 1'b0,   // chain of full adders, carry out is rippled
    SEG_SCBCLA = 1'b1    // section-carry based CLA, carry out is looked ahead
  } seg_kind_e;

  typedef struct packed {
    seg_kind_e   kind;
    logic [3:0]  width;  // section width in bits (1 to 4 in this design)
  } seg_t;

  localparam int unsigned ADD_WIDTH = 32;  // operand width of the adder
  localparam int unsigned NUM_SEGS  = 10;  // sections in Hybrid SCBCLA_4

  // Section 0 is the least significant one.
  localparam seg_t HYBRID4_SEGS [NUM_SEGS] = '{
    '{kind: SEG_RCA,    width: 4'd2},
    '{kind: SEG_SCBCLA, width: 4'd2},
    '{kind: SEG_SCBCLA, width: 4'd4},
    '{kind: SEG_SCBCLA, width: 4'd4},
    '{kind: SEG_SCBCLA, width: 4'd4},
    '{kind: SEG_SCBCLA, width: 4'd4},
    '{kind: SEG_SCBCLA, width: 4'd4},
    '{kind: SEG_SCBCLA, width: 4'd4},
    '{kind: SEG_SCBCLA, width: 4'd2},
    '{kind: SEG_RCA,    width: 4'd2}
  };

  // Bit position of the least significant bit of section idx.
  function automatic int unsigned seg_lsb(int unsigned idx);
    int unsigned pos = 0;
    for (int unsigned k = 0; k < idx; k++) pos += int'(HYBRID4_SEGS[k].width);
    return pos;
  endfunction

  // Total width covered by the table; must equal ADD_WIDTH.
  function automatic int unsigned segs_total();
    return seg_lsb(NUM_SEGS);
  endfunction

endpackage
