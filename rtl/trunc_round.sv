// trunc_round -- rounds both operands to the mantissa width of the selected
// mode before they reach the multipliers.
//
// For modes 2..5 the 52-bit mantissa of each operand is cut to its top MW bits
// (MW = 8, 16, 23 or 36) and rounded to nearest, ties away from zero: the
// first dropped bit is added to the kept part. When the kept part is all ones
// and rounds up, it wraps to zero and the exponent goes up by one, which is
// the exact rounded value (and turns into infinity at the top of the range).
// An operand whose exponent is all ones (infinity or NaN) is only truncated,
// and a NaN whose kept bits would all be zero keeps its lowest kept bit set,
// so that it stays a NaN. Mode 6 passes the operands through unchanged.
// The rounded operand keeps the 64-bit layout: its mantissa sits in the top MW
// bits of the field and the bits below are zero.
//
// Interface: mode (a fixed mode, MODE_M8 .. MODE_M52), word_a, word_b in;
// rnd_a, rnd_b out. Combinational.
// Follows the paper: rounding before multiplication in every mode but mode 6.
// This design's choices: round-to-nearest with ties away from zero, and the
// special-value rules.
module trunc_round
  import fpmul_pkg::*;
(
  input  mode_e    mode,
  input  fp_word_t word_a,
  input  fp_word_t word_b,
  output fp_word_t rnd_a,
  output fp_word_t rnd_b
);

  // Round word w to its top mw mantissa bits.
  function automatic fp_word_t round_word(fp_word_t w, int unsigned mw);
    fp_word_t         r;
    logic [MAN_W-1:0] keep_mask;  // ones on the kept bits
    logic [MAN_W-1:0] ulp;        // one unit in the last kept place
    logic [MAN_W:0]   sum;
    logic             round_bit;

    keep_mask = ~((MAN_W'(1) << (MAN_W - mw)) - MAN_W'(1));
    ulp       = MAN_W'(1) << (MAN_W - mw);
    round_bit = w.man[MAN_W-1-mw];
    r         = w;
    if (w.exp == '1) begin
      r.man = w.man & keep_mask;
      if (w.man != '0 && r.man == '0) r.man = ulp;
    end else begin
      sum   = {1'b0, w.man & keep_mask} + ((MAN_W + 1)'(round_bit) << (MAN_W - mw));
      r.man = sum[MAN_W-1:0];
      if (sum[MAN_W]) r.exp = w.exp + 1'b1;
    end
    return r;
  endfunction

  always_comb begin
    if (mode == MODE_M52 || mode == MODE_AUTO) begin
      rnd_a = word_a;
      rnd_b = word_b;
    end else begin
      rnd_a = round_word(word_a, unit_man_w(mode_unit(mode)));
      rnd_b = round_word(word_b, unit_man_w(mode_unit(mode)));
    end
  end

endmodule
