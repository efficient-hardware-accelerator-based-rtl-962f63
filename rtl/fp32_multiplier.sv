// fp32_multiplier: IEEE-754 single-precision multiplier of the processing
// element.
//
// Combinational. The 24x24-bit significand product is normalised by at most
// one position and rounded to nearest, ties to even. The accelerator uses
// this unit in series with the adder inside one clock cycle, so it has no
// internal register.
//
// Number handling is this design's choice (the source only names a 32-bit
// floating-point multiplier): subnormal inputs are read as zero and results
// below the normal range are flushed to a signed zero; overflow gives
// infinity; NaN inputs and infinity times zero give the quiet NaN 0x7FC00000.
module fp32_multiplier (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic [47:0] prod;
  logic [23:0] mant;          // hidden bit + 23 fraction bits before rounding
  logic        guard, sticky;
  logic [24:0] mant_rnd;
  logic signed [10:0] exp_y;

  always_comb begin
    sa = a[31]; ea = a[30:23]; fa = a[22:0];
    sb = b[31]; eb = b[30:23]; fb = b[22:0];
    sy = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == '0);
    b_inf  = (eb == 8'hFF) && (fb == '0);
    a_nan  = (ea == 8'hFF) && (fa != '0);
    b_nan  = (eb == 8'hFF) && (fb != '0);

    prod  = {1'b1, fa} * {1'b1, fb};
    exp_y = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_y  = exp_y + 11'sd1;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    mant_rnd = {1'b0, mant} + 25'(guard && (sticky || mant[0]));
    if (mant_rnd[24]) begin
      mant_rnd = mant_rnd >> 1;
      exp_y    = exp_y + 11'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = 32'h7FC0_0000;
    end else if (a_inf || b_inf) begin
      y = {sy, 8'hFF, 23'd0};
    end else if (a_zero || b_zero || exp_y <= 11'sd0) begin
      y = {sy, 31'd0};
    end else if (exp_y >= 11'sd255) begin
      y = {sy, 8'hFF, 23'd0};
    end else begin
      y = {sy, exp_y[7:0], mant_rnd[22:0]};
    end
  end

endmodule
