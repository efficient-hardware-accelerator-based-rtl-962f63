// fp32_adder: IEEE-754 single-precision adder of the processing element.
//
// Combinational. Operands are ordered by magnitude, the smaller significand
// is aligned with guard, round and sticky bits, added or subtracted, the
// result normalised with a leading-zero count and rounded to nearest, ties to
// even. Used in series with the multiplier in one clock cycle.
//
// Number handling is this design's choice (the source only names a 32-bit
// floating-point adder): subnormal inputs are read as zero, results below the
// normal range are flushed to zero, overflow gives infinity, an exact
// cancellation gives +0, NaN or (+inf)+(-inf) gives 0x7FC00000.
module fp32_adder (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic [31:0] op_big, op_small;
  logic        sb_big, sb_small;
  logic [7:0]  e_big, e_small, ediff;
  logic [26:0] m_big, m_small, m_shift;  // 1.23 significand + 3 GRS bits
  logic [27:0] sum;
  logic [26:0] norm;
  logic [4:0]  lzc;
  logic signed [9:0] exp_y;
  logic        sticky_out;
  logic [24:0] mant_rnd;
  logic        a_nan, b_nan, a_inf, b_inf;

  always_comb begin
    a_nan = (a[30:23] == 8'hFF) && (a[22:0] != '0);
    b_nan = (b[30:23] == 8'hFF) && (b[22:0] != '0);
    a_inf = (a[30:23] == 8'hFF) && (a[22:0] == '0);
    b_inf = (b[30:23] == 8'hFF) && (b[22:0] == '0);

    // Order by magnitude; subnormals count as zero.
    if ({a[30:23] == 8'd0 ? 31'd0 : a[30:0]} >= {b[30:23] == 8'd0 ? 31'd0 : b[30:0]}) begin
      op_big = a; op_small = b;
    end else begin
      op_big = b; op_small = a;
    end
    sb_big   = op_big[31];
    sb_small = op_small[31];
    e_big    = op_big[30:23];
    e_small  = op_small[30:23];
    m_big    = (e_big   == 8'd0) ? 27'd0 : {1'b1, op_big[22:0], 3'b000};
    m_small  = (e_small == 8'd0) ? 27'd0 : {1'b1, op_small[22:0], 3'b000};
    ediff    = e_big - e_small;

    // Align with sticky.
    if (e_small == 8'd0) begin
      m_shift = 27'd0;
    end else if (ediff >= 8'd27) begin
      m_shift = 27'd1;
    end else begin
      m_shift = m_small >> ediff;
      if ((m_small & ((27'd1 << ediff) - 27'd1)) != 27'd0) m_shift[0] = 1'b1;
    end

    if (sb_big == sb_small) sum = {1'b0, m_big} + {1'b0, m_shift};
    else                    sum = {1'b0, m_big} - {1'b0, m_shift};

    exp_y = 10'(signed'({2'b0, e_big}));
    if (sum[27]) begin
      norm  = sum[27:1];
      norm[0] = sum[1] | sum[0];
      exp_y = exp_y + 10'sd1;
      lzc   = '0;
    end else begin
      lzc = 5'd0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lzc = lzc + 5'd1;
      end
      norm  = sum[26:0] << lzc;
      exp_y = exp_y - 10'(signed'({5'b0, lzc}));
    end

    sticky_out = norm[1] | norm[0];
    mant_rnd   = {1'b0, norm[26:3]} + 25'(norm[2] && (sticky_out || norm[3]));
    if (mant_rnd[24]) begin
      mant_rnd = mant_rnd >> 1;
      exp_y    = exp_y + 10'sd1;
    end

    if (a_nan || b_nan || (a_inf && b_inf && (a[31] != b[31]))) begin
      y = 32'h7FC0_0000;
    end else if (a_inf) begin
      y = a;
    end else if (b_inf) begin
      y = b;
    end else if (sum == 28'd0) begin
      // Exact zero: -0 only when both operands are negative zeros.
      y = {(sb_big && sb_small), 31'd0};
    end else if (exp_y <= 10'sd0) begin
      y = {sb_big, 31'd0};
    end else if (exp_y >= 10'sd255) begin
      y = {sb_big, 8'hFF, 23'd0};
    end else begin
      y = {sb_big, exp_y[7:0], mant_rnd[22:0]};
    end
  end

endmodule
