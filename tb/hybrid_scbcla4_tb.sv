// hybrid_scbcla4_tb: end-to-end self-checking test of the 32-bit Hybrid
// SCBCLA_4 adder at its default (and only) size.
//
// Like the characterisation the adder was designed for, it applies a new
// operand pair every 5 ns (200 MHz) and samples the result just before the
// next pair. 4000 vectors are applied: directed corner cases, uniformly
// random operands, and random operands biased to long propagate chains
// (b close to ~a). The expected {cout, sum} is the 33-bit integer
// a + b + cin; the carry into every section is also compared with the carry
// worked out from the operands.
//
// It counts, and requires at least once each: a carry passing a 2-bit and a
// 4-bit SCBCLA section through the C0 path of its lookahead generator
// (every bit of the section propagating); a carry generated inside a
// 2-bit and a 4-bit SCBCLA section; a carry rippling out of the low RCA and
// out of the high RCA (cout); a carry propagating through all 32 bits.
module hybrid_scbcla4_tb;
  import scbcla_pkg::*;

  localparam int unsigned NVEC      = 4000;
  localparam time         PERIOD_NS = 5;

  logic [ADD_WIDTH-1:0] a, b, sum;
  logic                 cin, cout;

  int checks = 0;
  int failures = 0;
  int n_c0_path_w2 = 0;
  int n_c0_path_w4 = 0;
  int n_gen_w2 = 0;
  int n_gen_w4 = 0;
  int n_rca_low_co = 0;
  int n_cout = 0;
  int n_full_propagate = 0;
  int n_vec = 0;

  hybrid_scbcla4 dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin : watchdog
    #(PERIOD_NS * (NVEC + 100) * 1ns);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // carry into bit position pos of a + b + cin, computed with integers
  function automatic logic carry_into(logic [31:0] x, logic [31:0] y, logic c, int unsigned pos);
    logic [32:0] t;
    logic [32:0] mask;
    mask = (33'd1 << pos) - 33'd1;
    t = (33'(x) & mask) + (33'(y) & mask) + 33'(c);
    return t[pos];
  endfunction

  task automatic apply(input logic [31:0] x, input logic [31:0] y, input logic c);
    logic [32:0] expected;
    a   = x;
    b   = y;
    cin = c;
    #(PERIOD_NS * 1ns - 1ns);
    expected = 33'(x) + 33'(y) + 33'(c);
    n_vec++;
    checks++;
    if ({cout, sum} !== expected) begin
      failures++;
      $display("FAIL a=%h b=%h cin=%b -> cout=%b sum=%h expected %h", x, y, c, cout, sum, expected);
    end
    // carry at every section boundary, and mechanism counts
    for (int unsigned k = 0; k <= NUM_SEGS; k++) begin
      logic exp_c;
      exp_c = carry_into(x, y, c, seg_lsb(k));
      checks++;
      if (dut.carry[k] !== exp_c) begin
        failures++;
        $display("FAIL a=%h b=%h cin=%b carry into section %0d = %b expected %b",
                 x, y, c, k, dut.carry[k], exp_c);
      end
    end
    for (int unsigned k = 0; k < NUM_SEGS; k++) begin
      int unsigned lsb = seg_lsb(k);
      int unsigned w   = int'(HYBRID4_SEGS[k].width);
      logic [31:0] pmask = ((32'd1 << w) - 32'd1) << lsb;
      logic c_in  = carry_into(x, y, c, lsb);
      logic c_out = carry_into(x, y, c, lsb + w);
      logic all_p = (((x ^ y) & pmask) == pmask);
      if (HYBRID4_SEGS[k].kind == SEG_SCBCLA) begin
        if (all_p && c_in) begin
          if (w == 2) n_c0_path_w2++; else n_c0_path_w4++;
        end else if (c_out) begin
          if (w == 2) n_gen_w2++; else n_gen_w4++;
        end
      end
    end
    if (carry_into(x, y, c, 2)) n_rca_low_co++;
    if (expected[32]) n_cout++;
    if ((x ^ y) == 32'hffff_ffff && c) n_full_propagate++;
    #1ns;
  endtask

  initial begin
    // directed corners
    apply(32'h0000_0000, 32'h0000_0000, 1'b0);
    apply(32'hffff_ffff, 32'h0000_0001, 1'b0);
    apply(32'hffff_ffff, 32'h0000_0000, 1'b1);
    apply(32'haaaa_aaaa, 32'h5555_5555, 1'b1);
    apply(32'hffff_ffff, 32'hffff_ffff, 1'b1);
    apply(32'h8000_0000, 32'h8000_0000, 1'b0);
    apply(32'h7fff_ffff, 32'h0000_0001, 1'b0);
    apply(32'h0000_000f, 32'h0000_0001, 1'b0);
    for (int unsigned k = 0; k < NUM_SEGS; k++) begin
      // carry generated at the bottom of section k, propagated to the top
      int unsigned lsb = seg_lsb(k);
      apply(32'hffff_ffff >> (31 - lsb), 32'd1 << lsb, 1'b0);
    end
    while (n_vec < int'(NVEC)) begin
      logic [31:0] x, y;
      x = $urandom;
      if (n_vec % 2 == 0) y = $urandom;
      else y = ~x ^ ($urandom & $urandom & $urandom);  // mostly propagate
      apply(x, y, 1'($urandom));
    end

    $display("vectors=%0d c0_path_w2=%0d c0_path_w4=%0d gen_w2=%0d gen_w4=%0d rca_low_co=%0d cout=%0d full_propagate=%0d",
             n_vec, n_c0_path_w2, n_c0_path_w4, n_gen_w2, n_gen_w4, n_rca_low_co, n_cout, n_full_propagate);
    checks += 7;
    if (n_c0_path_w2 == 0)     begin failures++; $display("FAIL never: carry through C0 path of a 2-bit SCBCLA"); end
    if (n_c0_path_w4 == 0)     begin failures++; $display("FAIL never: carry through C0 path of a 4-bit SCBCLA"); end
    if (n_gen_w2 == 0)         begin failures++; $display("FAIL never: carry generated in a 2-bit SCBCLA"); end
    if (n_gen_w4 == 0)         begin failures++; $display("FAIL never: carry generated in a 4-bit SCBCLA"); end
    if (n_rca_low_co == 0)     begin failures++; $display("FAIL never: carry out of the low RCA"); end
    if (n_cout == 0)           begin failures++; $display("FAIL never: carry out of the adder"); end
    if (n_full_propagate == 0) begin failures++; $display("FAIL never: carry through all 32 bits"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
