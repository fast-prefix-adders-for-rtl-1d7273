// tb_prefix_gate -- exhaustive check of the prefix operator.
//
// Drives all 16 combinations of (g_l, p_l, g_r, p_r) and compares the
// output with the operator's truth table, written out here as
//   g = g_l OR (p_l AND g_r),  p = p_l AND p_r.
// Also checks associativity through a chain of two gates against a
// ripple evaluation. Combinational: one time unit per vector.
module tb_prefix_gate;
  import pfx_pkg::*;

  int checks = 0;
  int failures = 0;

  gp_t zl, zr, y;
  gp_t z3, y2;

  prefix_gate dut (.zl(zl), .zr(zr), .y(y));
  // second gate: z3 o (zl o zr)
  prefix_gate u_chain (.zl(z3), .zr(y), .y(y2));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic eg, ep, cg;
    for (int v = 0; v < 64; v++) begin
      {z3.g, z3.p, zl.g, zl.p, zr.g, zr.p} = 6'(v);
      #1;
      eg = zl.g | (zl.p & zr.g);
      ep = zl.p & zr.p;
      checks++;
      if (y.g !== eg || y.p !== ep) begin
        failures++;
        $display("FAIL gate v=%0d y=%b%b exp=%b%b", v, y.g, y.p, eg, ep);
      end
      // ripple: carry out of three positions with carry-in 0
      cg = zr.g;
      cg = zl.g | (zl.p & cg);
      cg = z3.g | (z3.p & cg);
      checks++;
      if (y2.g !== cg || y2.p !== (z3.p & zl.p & zr.p)) begin
        failures++;
        $display("FAIL chain v=%0d", v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
