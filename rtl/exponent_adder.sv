// exponent_adder -- biased exponent of a floating point product.
//
// Adding two biased exponents counts the bias twice, so the bias is taken off
// once: exp_p = exp_a + exp_b - BIAS. The addition is a ripple carry chain of
// EW full adders; the subtraction is a ripple borrow chain of EW+2 full
// subtracters working on the (EW+1)-bit sum with the constant BIAS. The result
// is a two's complement number of EW+2 bits, because it can fall below zero
// (underflow) or above the largest exponent (overflow); the normalizer sorts
// those cases out.
//
// Interface: exp_a, exp_b (EW bits) in; exp_p (EW+2 bits, signed) out.
// Combinational. Follows the paper: ripple carry addition and ripple borrow
// subtraction of the bias. EW = 11 and BIAS = 1023 are the double-precision
// values this design uses for every mode (see the top-level description).
module exponent_adder #(
  parameter int unsigned EW   = 11,
  parameter int unsigned BIAS = 1023
) (
  input  logic [EW-1:0]        exp_a,
  input  logic [EW-1:0]        exp_b,
  output logic signed [EW+1:0] exp_p
);

  localparam logic [EW+1:0] BIAS_V = (EW + 2)'(BIAS);

  logic [EW:0]   carry;   // carry into each full adder
  logic [EW:0]   sum;     // exp_a + exp_b
  logic [EW+1:0] borrow;  // borrow into each full subtracter
  logic [EW+1:0] sum_x;   // sum widened to the subtracter's width

  // Ripple carry adder.
  assign carry[0] = 1'b0;
  for (genvar i = 0; i < EW; i++) begin : g_add
    assign sum[i]     = exp_a[i] ^ exp_b[i] ^ carry[i];
    assign carry[i+1] = (exp_a[i] & exp_b[i]) | (carry[i] & (exp_a[i] ^ exp_b[i]));
  end
  assign sum[EW] = carry[EW];

  // Ripple borrow subtracter.
  assign sum_x     = {1'b0, sum};
  assign borrow[0] = 1'b0;
  for (genvar i = 0; i < EW + 2; i++) begin : g_sub
    assign exp_p[i] = sum_x[i] ^ BIAS_V[i] ^ borrow[i];
    if (i < EW + 1) begin : g_borrow  // the borrow out of the top bit is the sign, not needed
      assign borrow[i+1] = (~sum_x[i] & BIAS_V[i]) | (~(sum_x[i] ^ BIAS_V[i]) & borrow[i]);
    end
  end

endmodule
