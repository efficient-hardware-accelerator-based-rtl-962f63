// fp32_multiplier_tb: self-checking test of fp32_multiplier, the
// single-precision multiplier inside each processing element.
//
// The multiplier is combinational (inputs a, b; output y): the test applies
// an operand pair, waits 1 ns and compares y with the reference product from
// fp_ref_pkg (double-precision product rounded once to single precision,
// round-to-nearest-even, flush-to-zero). Directed cases cover exact
// products, signs, zero, infinity times zero (the canonical NaN 7FC00000),
// overflow to infinity and underflow flushed to zero; random operand pairs
// follow. The rounding, NaN and subnormal rules are this design's choices;
// the published design only says the multiplier is 32-bit floating point.
module fp32_multiplier_tb;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_multiplier dut (.a, .b, .y);

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] e);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h * %h = %h expected %h", ta, tb_, y, e);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ra, rb;
    check(32'h4000_0000, 32'h4040_0000, 32'h40C0_0000);  // 2 * 3 = 6
    check(32'hBF80_0000, 32'h3F00_0000, 32'hBF00_0000);  // -1 * 0.5
    check(32'h0000_0000, 32'h4040_0000, 32'h0000_0000);  // 0 * 3
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000);  // inf * 0 = NaN
    check(32'h7F00_0000, 32'h7F00_0000, 32'h7F80_0000);  // overflow
    check(32'h0080_0000, 32'h3E80_0000, 32'h0000_0000);  // underflow flushes
    for (int i = 0; i < 20000; i++) begin
      ra = rand_f(40);
      rb = rand_f(40);
      check(ra, rb, f_mul(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
