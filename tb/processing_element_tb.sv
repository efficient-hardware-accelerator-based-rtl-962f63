// processing_element_tb: checks both PE modes against the reference
// arithmetic: ct=1 psum + L*x (multiply, round, add, round) and
// ct=0 (b - psum) * L (subtract, round, multiply, round).
//
// The PE is combinational (ct, psum, xb, lij in; out out); each case is
// applied for 1 ns. Random operands are used for both modes, with directed
// cases for exact results. The two equations follow the published PE; the
// rounding after each unit is this design's choice.
module processing_element_tb;
  import fp_ref_pkg::*;
  logic        ct;
  logic [31:0] psum, xb, lij, out, e;
  int checks = 0, failures = 0;

  processing_element dut (.ct, .psum, .xb, .lij, .out);

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: 1 + 2*3 = 7 ; (10 - 4) * 0.5 = 3
    ct = 1; psum = 32'h3F80_0000; lij = 32'h4000_0000; xb = 32'h4040_0000; #1;
    checks++; if (out !== 32'h40E0_0000) begin failures++; $display("MAC wrong %h", out); end
    ct = 0; psum = 32'h4080_0000; xb = 32'h4120_0000; lij = 32'h3F00_0000; #1;
    checks++; if (out !== 32'h4040_0000) begin failures++; $display("FIN wrong %h", out); end
    for (int i = 0; i < 20000; i++) begin
      ct   = 1'($urandom);
      psum = rand_f(10);
      xb   = rand_f(10);
      lij  = rand_f(10);
      #1;
      e = ct ? f_add(psum, f_mul(lij, xb))
             : f_mul(f_add(xb, {~psum[31], psum[30:0]}), lij);
      checks++;
      if (out !== e) begin
        failures++;
        if (failures < 10) $display("MISMATCH ct=%0d psum=%h xb=%h l=%h out=%h exp=%h", ct, psum, xb, lij, out, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
