// fp32_adder_tb: self-checking test of fp32_adder, the single-precision
// adder inside each processing element.
//
// The adder is combinational (inputs a, b; output y), so the test applies an
// operand pair, waits 1 ns and compares y with the reference sum from
// fp_ref_pkg, which adds in double precision and rounds once to single
// precision with round-to-nearest-even and flush-to-zero. Directed cases
// cover exact sums, exact cancellation to +0, ties that must round to even,
// an infinite operand and overflow to infinity. 20,000 random pairs follow,
// a quarter of them of opposite sign and nearly equal magnitude to exercise
// massive cancellation and renormalisation. The rounding and subnormal rules
// checked here are this design's choices; the published design only says the
// adder is 32-bit floating point.
module fp32_adder_tb;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  fp32_adder dut (.a, .b, .y);

  task automatic check(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] e);
    a = ta; b = tb_;
    #1;
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h + %h = %h expected %h", ta, tb_, y, e);
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
    // directed
    check(32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000);  // 1 + 1 = 2
    check(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000);  // 1 - 1 = +0
    check(32'h4040_0000, 32'hBF80_0000, 32'h4000_0000);  // 3 - 1 = 2
    check(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000);  // 1 + 2^-24 ties to even
    check(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002);  // tie rounds up to even
    check(32'h0000_0000, 32'hC120_0000, 32'hC120_0000);  // 0 + -10
    check(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);  // inf + 1
    check(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000);  // overflow
    for (int i = 0; i < 20000; i++) begin
      ra = rand_f(20);
      rb = (i % 4 == 0) ? {~ra[31], ra[30:8], 8'($urandom)} : rand_f(20);
      check(ra, rb, f_add(ra, rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
