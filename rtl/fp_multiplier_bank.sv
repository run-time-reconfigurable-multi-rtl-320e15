// fp_multiplier_bank -- the five fixed-precision floating point multipliers.
//
// One fp_multiplier per fixed mode, with 8, 16, 23, 36 and 52-bit mantissas
// (modes 2..6). Each unit takes the top MW bits of the rounded operands'
// mantissas. Only the unit whose unit_en bit is set receives the operands;
// the inputs of every other unit are held at zero (operand isolation), so
// their logic does not switch and they draw no dynamic power. The enabled
// unit's result is widened back to the 64-bit layout (its mantissa in the top
// MW bits, zeros below) and passed out with its flags. With no unit enabled
// the outputs are zero.
//
// Interface: word_a, word_b (rounded operands), unit_en (one-hot) in;
// product, flags out. Combinational.
// Follows the paper: separate multipliers per mode of which only the selected
// one is on. Operand isolation as the way to keep the others off is this
// design's choice (the paper does not say how they are switched off).
module fp_multiplier_bank
  import fpmul_pkg::*;
(
  input  fp_word_t             word_a,
  input  fp_word_t             word_b,
  input  logic [NUM_UNITS-1:0] unit_en,
  output fp_word_t             product,
  output fp_flags_t            flags
);

  fp_word_t  unit_p [NUM_UNITS];
  fp_flags_t unit_f [NUM_UNITS];

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    localparam int unsigned MW = unit_man_w(u);

    logic          a_sign, b_sign, p_sign;
    logic [EXP_W-1:0] a_exp, b_exp, p_exp;
    logic [MW-1:0] a_man, b_man, p_man;

    // Operand isolation: a disabled unit sees constant zeros.
    always_comb begin
      a_sign = unit_en[u] & word_a.sign;
      b_sign = unit_en[u] & word_b.sign;
      a_exp  = unit_en[u] ? word_a.exp : '0;
      b_exp  = unit_en[u] ? word_b.exp : '0;
      a_man  = unit_en[u] ? word_a.man[MAN_W-1 -: MW] : '0;
      b_man  = unit_en[u] ? word_b.man[MAN_W-1 -: MW] : '0;
    end

    fp_multiplier #(.MW(MW), .EW(EXP_W), .BIAS(DP_BIAS)) u_fpm (
      .a_sign(a_sign), .a_exp(a_exp), .a_man(a_man),
      .b_sign(b_sign), .b_exp(b_exp), .b_man(b_man),
      .p_sign(p_sign), .p_exp(p_exp), .p_man(p_man),
      .flags (unit_f[u])
    );

    assign unit_p[u] = '{sign: p_sign, exp: p_exp, man: MAN_W'(p_man) << (MAN_W - MW)};
  end

  always_comb begin
    product = '0;
    flags   = '0;
    for (int u = 0; u < NUM_UNITS; u++) begin
      if (unit_en[u]) begin
        product = unit_p[u];
        flags   = unit_f[u];
      end
    end
  end

endmodule
