// fp_multiplier -- floating point multiplier with an MW-bit mantissa.
//
// Datapath: the sign is the XOR of the operand signs (sign_calc); the
// exponents are added and the bias taken off (exponent_adder); the two
// (MW+1)-bit significands, hidden bit included, are multiplied by the
// Karatsuba / Urdhva-Tiryagbhyam multiplier (karatsuba_mult); the normalizer
// places the leading 1 of the product and fixes the exponent; exception_flags
// classifies the result as Zero, Infinity, NaN or Denormal.
//
// Special operands bypass the arithmetic: a NaN operand, or infinity times
// zero, gives a NaN (exponent all ones, top mantissa bit set); infinity times
// anything else gives infinity. A denormal operand (exponent 0) has hidden bit
// 0 and counts with exponent 1.
//
// Interface: the operands as sign, EW-bit exponent and MW-bit mantissa; the
// result in the same form plus the four flags. Combinational: the paper
// measures this unit as a single combinational path.
//
// Follows the paper: the block structure (sign, exponent adder, bias
// subtraction, mantissa multiplier, normalizer, exception outputs). This
// design's choices: the handling of special operands and denormal inputs.
module fp_multiplier
  import fpmul_pkg::*;
#(
  parameter int unsigned MW   = 52,
  parameter int unsigned EW   = 11,
  parameter int unsigned BIAS = 1023
) (
  input  logic          a_sign,
  input  logic [EW-1:0] a_exp,
  input  logic [MW-1:0] a_man,
  input  logic          b_sign,
  input  logic [EW-1:0] b_exp,
  input  logic [MW-1:0] b_man,
  output logic          p_sign,
  output logic [EW-1:0] p_exp,
  output logic [MW-1:0] p_man,
  output fp_flags_t     flags
);

  localparam int unsigned SW = MW + 1;  // significand width

  logic [SW-1:0]        a_sig, b_sig;
  logic [EW-1:0]        a_exp_eff, b_exp_eff;
  logic [2*SW-1:0]      prod;
  logic signed [EW+1:0] exp_sum;
  logic [EW-1:0]        n_exp;
  logic [MW-1:0]        n_man;
  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    a_zero    = (a_exp == '0) && (a_man == '0);
    b_zero    = (b_exp == '0) && (b_man == '0);
    a_inf     = (a_exp == '1) && (a_man == '0);
    b_inf     = (b_exp == '1) && (b_man == '0);
    a_nan     = (a_exp == '1) && (a_man != '0);
    b_nan     = (b_exp == '1) && (b_man != '0);
    a_sig     = {a_exp != '0, a_man};
    b_sig     = {b_exp != '0, b_man};
    a_exp_eff = (a_exp == '0) ? EW'(1) : a_exp;
    b_exp_eff = (b_exp == '0) ? EW'(1) : b_exp;
  end

  sign_calc u_sign (.sign_a(a_sign), .sign_b(b_sign), .sign_p(p_sign));

  exponent_adder #(.EW(EW), .BIAS(BIAS)) u_exp (
    .exp_a(a_exp_eff),
    .exp_b(b_exp_eff),
    .exp_p(exp_sum)
  );

  karatsuba_mult #(.N(SW)) u_mant (.x(a_sig), .y(b_sig), .p(prod));

  normalizer #(.MW(MW), .EW(EW)) u_norm (
    .prod   (prod),
    .exp_in (exp_sum),
    .exp_out(n_exp),
    .man_out(n_man)
  );

  always_comb begin
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      p_exp = '1;
      p_man = MW'(1) << (MW - 1);
    end else if (a_inf || b_inf) begin
      p_exp = '1;
      p_man = '0;
    end else begin
      p_exp = n_exp;
      p_man = n_man;
    end
  end

  exception_flags #(.EW(EW), .MW(MW)) u_flags (.exp(p_exp), .man(p_man), .flags(flags));

endmodule
