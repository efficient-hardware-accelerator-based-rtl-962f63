// processing_element: the PE of a compute unit, a 32-bit floating-point
// adder and multiplier connected in series.
//
// One control bit ct selects between the two operations SpTRSV needs:
//   ct = 1 : out = psum + lij * xb        (edge: accumulate L_ij * x_j)
//   ct = 0 : out = (xb - psum) * lij      (node finish: (b_i - sum) * 1/L_ii)
// The division by the diagonal is replaced by a multiplication with its
// reciprocal, computed off-line. The "Inv" stage negates psum so that the
// adder forms b_i - psum. Operand and result multiplexers route the adder and
// multiplier in either order. These two equations and the block structure
// (Inv, adder, multiplier, multiplexers) follow the source; the multiplexer
// wiring is derived from the equations.
//
// The adder output feeds the multiplier input and the multiplier output feeds
// the adder input, through multiplexers whose selects are exclusive (ct picks
// one order). Lint tools report this as a combinational loop; it is a false
// path, since for either value of ct the data passes each unit only once. It
// is kept because sharing one adder and one multiplier between both orders is
// what the PE is.
//
// Combinational: the compute unit registers the operands in its pipeline
// register (DFF) and the result is used in the following cycle.
module processing_element (
  input  logic        ct,
  input  logic [31:0] psum,
  input  logic [31:0] xb,
  input  logic [31:0] lij,
  output logic [31:0] out
);

  logic [31:0] psum_inv;
  logic [31:0] add_a, add_b, add_y;
  logic [31:0] mul_a, mul_b, mul_y;

  always_comb begin
    psum_inv = {~psum[31], psum[30:0]};
    if (ct) begin
      mul_a = lij;   mul_b = xb;
      add_a = psum;  add_b = mul_y;
      out   = add_y;
    end else begin
      add_a = xb;    add_b = psum_inv;
      mul_a = add_y; mul_b = lij;
      out   = mul_y;
    end
  end

  fp32_adder      u_add (.a(add_a), .b(add_b), .y(add_y));
  fp32_multiplier u_mul (.a(mul_a), .b(mul_b), .y(mul_y));

endmodule
