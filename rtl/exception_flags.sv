// exception_flags -- classifies a floating point result.
//
// With E the biased exponent field and S the stored significand (mantissa)
// field of the result:
//   Zero      E == 0          and S == 0
//   Denormal  E == 0          and S != 0
//   Infinity  E == all ones   and S == 0
//   NaN       E == all ones   and S != 0
// At most one flag is set; an ordinary normal number sets none.
//
// Interface: exp (EW bits), man (MW bits) in; flags out. Combinational.
// Follows the paper's four exception outputs and their conditions; the paper
// states them for an 8-bit exponent (all ones = 255), this module for any EW.
module exception_flags
  import fpmul_pkg::*;
#(
  parameter int unsigned EW = 11,
  parameter int unsigned MW = 52
) (
  input  logic [EW-1:0] exp,
  input  logic [MW-1:0] man,
  output fp_flags_t     flags
);

  logic exp_zero, exp_ones, man_zero;

  always_comb begin
    exp_zero       = (exp == '0);
    exp_ones       = (exp == '1);
    man_zero       = (man == '0);
    flags.zero     = exp_zero & man_zero;
    flags.denormal = exp_zero & ~man_zero;
    flags.infinity = exp_ones & man_zero;
    flags.nan      = exp_ones & ~man_zero;
  end

endmodule
